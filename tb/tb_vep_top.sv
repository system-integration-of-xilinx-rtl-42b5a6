// tb_vep_top: end-to-end testbench of the video enhancement pipeline.
//
// Two pipelines at a reduced maximum frame (32 x 32) are run side by side,
// each with its own vep_env driving the AXI-GPIO word and the video streams:
// the published configuration with one histogram equaliser, and a daisy chain
// of two, whose second stage equalises the first stage's output with the
// same GPIO settings. Each run covers a 6 x 10 segment with random flow
// control (noise, dark noise, dark runs, a flat frame), a resolution change
// through the GPIO reset bit, and a 32 x 24 segment at full rate.
module tb_vep_top;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int unsigned MAXR = 32, MAXC = 32;

  logic        rst_n [2];
  logic [31:0] gpio  [2];
  logic [23:0] s_tdata [2], m_tdata [2];
  logic        s_tvalid [2], s_tready [2], s_tuser [2], s_tlast [2];
  logic        m_tvalid [2], m_tready [2], m_tuser [2], m_tlast [2];
  logic        done [2];
  int          checks_i [2], failures_i [2];

  for (genvar i = 0; i < 2; i++) begin : g_run
    vep_top #(.N_ENH(i + 1), .MAX_ROWS(MAXR), .MAX_COLS(MAXC)) dut (
      .clk, .rst_n(rst_n[i]), .gpio_o(gpio[i]),
      .s_axis_tdata(s_tdata[i]), .s_axis_tvalid(s_tvalid[i]), .s_axis_tready(s_tready[i]),
      .s_axis_tuser(s_tuser[i]), .s_axis_tlast(s_tlast[i]),
      .m_axis_tdata(m_tdata[i]), .m_axis_tvalid(m_tvalid[i]), .m_axis_tready(m_tready[i]),
      .m_axis_tuser(m_tuser[i]), .m_axis_tlast(m_tlast[i]));

    vep_env #(.N_ENH(i + 1), .R1(6), .C1(10), .NF1(6), .KINDS1(32'h0012_3210),
              .R2(24), .C2(32), .NF2(4), .KINDS2(32'h0000_4141), .RANDOM_FLOW(1'b1)) env (
      .clk, .rst_n(rst_n[i]), .gpio_o(gpio[i]),
      .s_tdata(s_tdata[i]), .s_tvalid(s_tvalid[i]), .s_tready(s_tready[i]),
      .s_tuser(s_tuser[i]), .s_tlast(s_tlast[i]),
      .m_tdata(m_tdata[i]), .m_tvalid(m_tvalid[i]), .m_tready(m_tready[i]),
      .m_tuser(m_tuser[i]), .m_tlast(m_tlast[i]),
      .done(done[i]), .checks(checks_i[i]), .failures(failures_i[i]));
  end

  initial begin
    wait (done[0] && done[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks_i[0] + checks_i[1],
             failures_i[0] + failures_i[1]);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks_i[0] + checks_i[1],
             failures_i[0] + failures_i[1] + 1);
    $finish;
  end
endmodule
