// tb_vep_images: dimmed still pictures through the enhancement pipeline.
//
// Mirrors the accuracy experiment the pipeline was built for: validation
// pictures are darkened by a factor of 8 and equalised before the CNN sees
// them. vep_top runs at its defaults. It is programmed first for a
// 640 x 480 picture (the size of a typical COCO detection image), then,
// through the GPIO reset bit, for 500 x 375 (a typical ImageNet
// classification image). Each picture is a dimmed textured gradient sent
// twice: the second pass is remapped with the table built from the first,
// i.e. the picture is equalised with its own histogram, and every output
// pixel is checked against that. The first picture runs with random input
// gaps and output back-pressure, the second at full rate.
module tb_vep_images;
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

  vep_env #(.N_ENH(1), .R1(480), .C1(640), .NF1(2), .KINDS1(32'h0000_0055),
            .R2(375), .C2(500), .NF2(2), .KINDS2(32'h0000_0055), .RANDOM_FLOW(1'b1)) env (
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
    repeat (3_000_000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
