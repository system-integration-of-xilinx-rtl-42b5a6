// vep_top: the Video Enhancement Pipeline, the programmable-logic block that
// sits between the read (MM2S) and write (S2MM) streams of its own video DMA
// engine and enhances every frame on its way from one DDR frame buffer to
// another.
//
// The pipeline is a daisy chain of N_ENH enhancement IPs joined by
// AXI4-Stream links; the published system has one, the histogram equaliser
// (histeq). A single 32-bit AXI-GPIO output word configures every IP of the
// chain at once: rows in bits [11:0], columns in [23:12], reset in [24]
// (histeq_pkg::gpio_ctrl_t). To change the resolution, set the reset bit,
// write the new size, then clear the reset bit.
//
// Interface
//   clk, rst_n   enhancement clock (150 MHz in the published system) and its
//                reset. The video DMA's stream ports are assumed to run on this
//                clock (the DMA engine crosses to its 300 MHz memory side).
//   gpio_o       the AXI-GPIO output word; only its reset bit is synchronised,
//                the size fields must be steady while the reset bit is set
//   s_axis_*     24-bit video from the DMA read channel (tuser = start of
//                frame, tlast = end of line)
//   m_axis_*     enhanced video to the DMA write channel
// Timing: N_ENH clocks of latency; each IP stalls its input between frames
// while it rebuilds its table (see histeq).
//
// The chain, its shared GPIO control and the 25-of-32 bit budget follow the
// paper; the bit positions and the reset sense are this design's choice.
module vep_top #(
  parameter int unsigned N_ENH    = 1,                     // enhancement IPs in the chain
  parameter int unsigned MAX_ROWS = histeq_pkg::MAX_ROWS,  // 1080
  parameter int unsigned MAX_COLS = histeq_pkg::MAX_COLS,  // 1920
  localparam int unsigned DATA_W  = histeq_pkg::DATA_W,
  localparam int unsigned GPIO_W  = histeq_pkg::GPIO_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [GPIO_W-1:0] gpio_o,
  // from the VDMA read channel
  input  logic [DATA_W-1:0] s_axis_tdata,
  input  logic              s_axis_tvalid,
  output logic              s_axis_tready,
  input  logic              s_axis_tuser,
  input  logic              s_axis_tlast,
  // to the VDMA write channel
  output logic [DATA_W-1:0] m_axis_tdata,
  output logic              m_axis_tvalid,
  input  logic              m_axis_tready,
  output logic              m_axis_tuser,
  output logic              m_axis_tlast
);

  histeq_pkg::gpio_ctrl_t ctrl;
  assign ctrl = histeq_pkg::gpio_ctrl_t'(gpio_o);

  // link k feeds IP k; link N_ENH is the chain's output
  logic [DATA_W-1:0] tdata  [N_ENH+1];
  logic              tvalid [N_ENH+1];
  logic              tready [N_ENH+1];
  logic              tuser  [N_ENH+1];
  logic              tlast  [N_ENH+1];

  assign tdata[0]      = s_axis_tdata;
  assign tvalid[0]     = s_axis_tvalid;
  assign s_axis_tready = tready[0];
  assign tuser[0]      = s_axis_tuser;
  assign tlast[0]      = s_axis_tlast;

  for (genvar k = 0; k < N_ENH; k++) begin : g_enh
    histeq #(
      .ROW_W    (histeq_pkg::ROW_W),
      .COL_W    (histeq_pkg::COL_W),
      .MAX_ROWS (MAX_ROWS),
      .MAX_COLS (MAX_COLS),
      .PIX_W    (histeq_pkg::PIX_W),
      .CHANNELS (histeq_pkg::CHANNELS)
    ) u_histeq (
      .clk           (clk),
      .rst_n         (rst_n),
      .soft_rst      (ctrl.reset),
      .rows          (ctrl.rows),
      .cols          (ctrl.cols),
      .s_axis_tdata  (tdata[k]),
      .s_axis_tvalid (tvalid[k]),
      .s_axis_tready (tready[k]),
      .s_axis_tuser  (tuser[k]),
      .s_axis_tlast  (tlast[k]),
      .m_axis_tdata  (tdata[k+1]),
      .m_axis_tvalid (tvalid[k+1]),
      .m_axis_tready (tready[k+1]),
      .m_axis_tuser  (tuser[k+1]),
      .m_axis_tlast  (tlast[k+1])
    );
  end

  assign m_axis_tdata      = tdata[N_ENH];
  assign m_axis_tvalid     = tvalid[N_ENH];
  assign tready[N_ENH]     = m_axis_tready;
  assign m_axis_tuser      = tuser[N_ENH];
  assign m_axis_tlast      = tlast[N_ENH];

  // the input stream must hold a beat until it is taken
  a_in_hold : assert property (@(posedge clk) disable iff (!rst_n)
    s_axis_tvalid && !s_axis_tready |=> s_axis_tvalid && $stable(s_axis_tdata));

endmodule
