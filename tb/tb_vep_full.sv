// tb_vep_full: the video enhancement pipeline at its full size, 1080p.
//
// vep_top is built with its defaults (one histogram equaliser, 1920 x 1080
// maximum frame) and programmed over the GPIO word for 1080 rows of 1920
// pixels. Three frames stream at full rate: a dim gradient picture, dim
// noise, and the dim picture again. The first passes through the identity
// table set up at reset; each later one is equalised with the table of the
// frame before. Every output pixel is checked, as are the rate (2,073,600
// pixels in as many clocks) and the exact stall between frames.
module tb_vep_full;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic        rst_n;
  logic [31:0] gpio;
  logic [23:0] s_tdata, m_tdata;
  logic        s_tvalid, s_tready, s_tuser, s_tlast;
  logic        m_tvalid, m_tready, m_tuser, m_tlast;
  logic        done;
  int          checks, failures;

  vep_top dut (
    .clk, .rst_n, .gpio_o(gpio),
    .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready),
    .s_axis_tuser(s_tuser), .s_axis_tlast(s_tlast),
    .m_axis_tdata(m_tdata), .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready),
    .m_axis_tuser(m_tuser), .m_axis_tlast(m_tlast));

  vep_env #(.N_ENH(1), .R1(1080), .C1(1920), .NF1(3), .KINDS1(32'h0000_0414),
            .NF2(0), .RANDOM_FLOW(1'b0)) env (
    .clk, .rst_n, .gpio_o(gpio),
    .s_tdata, .s_tvalid, .s_tready, .s_tuser, .s_tlast,
    .m_tdata, .m_tvalid, .m_tready, .m_tuser, .m_tlast,
    .done, .checks, .failures);

  initial begin
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (7_000_000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
