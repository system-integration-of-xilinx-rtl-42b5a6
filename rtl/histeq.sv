// histeq: histogram-equalisation IP for a 24-bit AXI4-Stream video stream.
//
// Pixels stream through at one per clock. Each colour channel is remapped
// through a table (histeq_channel) while the same pixels are counted into that
// channel's histogram. After the last pixel of a frame (rows x cols pixels,
// counted here, not taken from tlast/tuser) the IP drops s_axis_tready for
// one flush clock plus the table build, at most 2^PIX_W*(3+PIX_W) clocks
// (2816 for 8-bit channels), and the new table remaps the next frame. Frame n
// is therefore equalised with the histogram of frame n-1: the usual choice for
// a streaming equaliser with no frame buffer, accurate when consecutive frames
// are alike. The first frame after reset passes through unchanged (identity
// table).
//
// Interface
//   clk, rst_n      IP clock (150 MHz in the published system), async reset
//   soft_rst        reset bit from the AXI-GPIO word, active high; it is
//                   synchronised here, so it may come from another clock
//   rows, cols      frame size, sampled while soft_rst is held and on the clock
//                   it is released; keep them steady until then. 1..MAX_ROWS
//                   and 1..MAX_COLS.
//   s_axis_*        pixel stream in (tuser = start of frame, tlast = end of
//                   line, both carried through unchanged)
//   m_axis_*        remapped pixel stream out
// Timing: one clock from input handshake to output valid; full rate when
// m_axis_tready stays high; after reset release, 2^PIX_W clocks of table
// initialisation before s_axis_tready rises.
//
// Follows the paper: the function, the 12-bit row and column inputs, the
// reset bit that must be held while the size changes, the 1080p maximum,
// AXI-Stream in and out. This design's own choices: the per-channel
// equalisation, previous-frame statistics, the stall between frames and the
// table arithmetic (see histeq_channel).
module histeq #(
  parameter int unsigned ROW_W    = histeq_pkg::ROW_W,     // 12
  parameter int unsigned COL_W    = histeq_pkg::COL_W,     // 12
  parameter int unsigned MAX_ROWS = histeq_pkg::MAX_ROWS,  // 1080
  parameter int unsigned MAX_COLS = histeq_pkg::MAX_COLS,  // 1920
  parameter int unsigned PIX_W    = histeq_pkg::PIX_W,     // 8
  parameter int unsigned CHANNELS = histeq_pkg::CHANNELS,  // 3
  localparam int unsigned DATA_W  = PIX_W * CHANNELS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              soft_rst,
  input  logic [ROW_W-1:0]  rows,
  input  logic [COL_W-1:0]  cols,
  // AXI4-Stream slave
  input  logic [DATA_W-1:0] s_axis_tdata,
  input  logic              s_axis_tvalid,
  output logic              s_axis_tready,
  input  logic              s_axis_tuser,
  input  logic              s_axis_tlast,
  // AXI4-Stream master
  output logic [DATA_W-1:0] m_axis_tdata,
  output logic              m_axis_tvalid,
  input  logic              m_axis_tready,
  output logic              m_axis_tuser,
  output logic              m_axis_tlast
);

  localparam int unsigned COUNT_W = histeq_pkg::count_width(MAX_ROWS, MAX_COLS);  // 21

  typedef enum logic [2:0] {H_RESET, H_INIT, H_RUN, H_FLUSH, H_BUILD} hstate_t;

  hstate_t            state;
  logic [1:0]         rst_sync;
  logic               soft_rst_s;
  logic [ROW_W-1:0]   rows_q, row;
  logic [COL_W-1:0]   cols_q, col;
  logic [COUNT_W-1:0] npix;
  logic               adv, acc, last_pix;
  logic               init_start, build_start;
  logic [CHANNELS-1:0] busy;

  // soft reset crosses from the GPIO clock
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rst_sync <= 2'b11;
    else        rst_sync <= {rst_sync[0], soft_rst};
  end
  assign soft_rst_s = rst_sync[1];

  assign adv           = !m_axis_tvalid || m_axis_tready;
  assign s_axis_tready = (state == H_RUN) && adv;
  assign acc           = s_axis_tvalid && s_axis_tready;
  assign last_pix      = (col == cols_q - 1'b1) && (row == rows_q - 1'b1);
  assign init_start    = (state == H_RESET) && !soft_rst_s;
  assign build_start   = (state == H_FLUSH);

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= H_RESET;
      rows_q <= '0;
      cols_q <= '0;
      npix   <= '0;
      row    <= '0;
      col    <= '0;
    end else if (soft_rst_s) begin
      state  <= H_RESET;
      rows_q <= rows;
      cols_q <= cols;
      row    <= '0;
      col    <= '0;
    end else begin
      unique case (state)
        H_RESET: begin
          rows_q <= rows;
          cols_q <= cols;
          state  <= H_INIT;
        end
        H_INIT: begin
          npix <= COUNT_W'(rows_q * cols_q);
          if (busy == '0) state <= H_RUN;
        end
        H_RUN: begin
          if (acc) begin
            if (col == cols_q - 1'b1) begin
              col <= '0;
              row <= (row == rows_q - 1'b1) ? '0 : row + 1'b1;
            end else begin
              col <= col + 1'b1;
            end
            if (last_pix) state <= H_FLUSH;
          end
        end
        H_FLUSH: state <= H_BUILD;    // last write-back lands
        H_BUILD: if (busy == '0) state <= H_RUN;
        default: state <= H_RESET;
      endcase
    end
  end

  // ---------------------------------------------------------------- channels
  logic [DATA_W-1:0] lut_data;

  for (genvar c = 0; c < CHANNELS; c++) begin : g_ch
    histeq_channel #(.PIX_W(PIX_W), .COUNT_W(COUNT_W)) u_ch (
      .clk         (clk),
      .rst_n       (rst_n),
      .init_start  (init_start),
      .build_start (build_start),
      .npix        (npix),
      .busy        (busy[c]),
      .acc_en      (acc),
      .acc_bin     (s_axis_tdata[c*PIX_W +: PIX_W]),
      .lut_rd_en   (acc),
      .lut_rd_addr (s_axis_tdata[c*PIX_W +: PIX_W]),
      .lut_rd_data (lut_data[c*PIX_W +: PIX_W])
    );
  end

  // ---------------------------------------------------------------- output
  assign m_axis_tdata = lut_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_axis_tvalid <= 1'b0;
      m_axis_tuser  <= 1'b0;
      m_axis_tlast  <= 1'b0;
    end else if (soft_rst_s) begin
      m_axis_tvalid <= 1'b0;
    end else if (adv) begin
      m_axis_tvalid <= acc;
      if (acc) begin
        m_axis_tuser <= s_axis_tuser;
        m_axis_tlast <= s_axis_tlast;
      end
    end
  end

  // AXI4-Stream: a presented beat stays until it is taken
  a_hold : assert property (@(posedge clk) disable iff (!rst_n || soft_rst_s)
    m_axis_tvalid && !m_axis_tready |=> m_axis_tvalid && $stable(m_axis_tdata)
                                        && $stable(m_axis_tlast) && $stable(m_axis_tuser));

endmodule
