// histeq_channel: histogram, cumulative-distribution builder and remap table
// for one colour channel of the histogram-equalisation IP.
//
// Three jobs share one 2^PIX_W-entry histogram memory and one remap table
// (LUT) memory, both single-write, registered-read arrays that map onto block
// RAM:
//   * Accumulate. While the frame streams, acc_en/acc_bin count one pixel
//     per clock. The count is a read-modify-write spread over two cycles: the
//     bin is read on the accept cycle and written back +1 on the next. When
//     the same bin arrives on two consecutive cycles, the write-back of the
//     first is forwarded into the second, so runs of equal pixels count right.
//   * Remap. lut_rd_en/lut_rd_addr read the LUT; lut_rd_data is valid on the
//     next clock and holds until the next read.
//   * Build (build_start). Between frames the bins are walked from 0 up,
//     keeping the running sum cdf. The first non-zero cdf is cdf_min. Each
//     entry becomes
//         lut[v] = round( (cdf[v] - cdf_min) * (2^PIX_W - 1) / (npix - cdf_min) )
//     (halves round up), which is the textbook histogram-equalisation map. A
//     bin below cdf_min maps to 0; when every pixel had the same value
//     (npix == cdf_min) the map is the identity. The quotient always fits in
//     PIX_W bits, so a restoring divider needs only PIX_W steps. Every bin is
//     cleared as it is read, so the histogram is empty for the next frame.
//     A bin costs 3 + PIX_W clocks (read, sum, PIX_W divide steps, write),
//     2 when its cdf is still 0; the whole build at most 2^PIX_W*(3+PIX_W)
//     clocks (2816 for 8-bit channels). busy is high throughout.
//   * Initialise (init_start). 2^PIX_W clocks that clear the histogram and
//     load the identity map. init_start overrides a build in progress.
// Accumulation and lookups must not be issued while busy, and a build must
// not start on the clock after the last accumulate (the caller waits one
// clock so that the last write-back has landed).
//
// The histogram-equalisation function follows the published IP. The paper
// does not describe its insides: the per-channel histogram, the rounding, the
// identity map for a flat frame and the serial divider are this design's.
module histeq_channel #(
  parameter int unsigned PIX_W   = 8,
  parameter int unsigned COUNT_W = 21  // holds the pixel count of a full frame
) (
  input  logic               clk,
  input  logic               rst_n,
  // sequencing
  input  logic               init_start,
  input  logic               build_start,
  input  logic [COUNT_W-1:0] npix,        // pixels per frame, held during a build
  output logic               busy,
  // histogram accumulation
  input  logic               acc_en,
  input  logic [PIX_W-1:0]   acc_bin,
  // remap
  input  logic               lut_rd_en,
  input  logic [PIX_W-1:0]   lut_rd_addr,
  output logic [PIX_W-1:0]   lut_rd_data
);

  localparam int unsigned BINS  = 1 << PIX_W;
  localparam int unsigned NUM_W = COUNT_W + PIX_W + 2;  // 2*(cdf-cmin)*(BINS-1) + den
  localparam logic [PIX_W-1:0] LAST_BIN = PIX_W'(BINS - 1);

  typedef enum logic [2:0] {C_IDLE, C_INIT, C_READ, C_CALC, C_DIV, C_WRITE} cstate_t;

  logic [COUNT_W-1:0] hist [BINS];
  logic [PIX_W-1:0]   lut  [BINS];

  cstate_t            state;
  logic [PIX_W-1:0]   bin;       // bin being initialised or built
  logic [COUNT_W-1:0] cdf;       // running sum up to the previous bin
  logic [COUNT_W-1:0] cmin;      // first non-zero cdf (0 until found)
  logic [NUM_W-1:0]   rem;       // divider remainder
  logic [NUM_W-1:0]   dvs;       // divider divisor, shifted
  logic [PIX_W-1:0]   quo;       // divider quotient / LUT entry
  logic [$clog2(PIX_W)-1:0] step;

  // ---------------------------------------------------------------- histogram
  logic               acc_v1;    // a read for accumulation was issued last clock
  logic [PIX_W-1:0]   acc_bin1;
  logic [COUNT_W-1:0] hist_rd;
  logic               fwd_v;     // a write-back happened last clock ...
  logic [PIX_W-1:0]   fwd_bin;   // ... to this bin ...
  logic [COUNT_W-1:0] fwd_cnt;   // ... with this count

  logic               hist_re, hist_we;
  logic [PIX_W-1:0]   hist_raddr, hist_waddr;
  logic [COUNT_W-1:0] hist_wdata;

  always_comb begin
    hist_re    = acc_en;
    hist_raddr = acc_bin;
    if (state == C_READ) begin
      hist_re    = 1'b1;
      hist_raddr = bin;
    end
  end

  always_comb begin
    hist_we    = 1'b0;
    hist_waddr = bin;
    hist_wdata = '0;
    if (acc_v1) begin
      hist_we    = 1'b1;
      hist_waddr = acc_bin1;
      hist_wdata = ((fwd_v && fwd_bin == acc_bin1) ? fwd_cnt : hist_rd) + 1'b1;
    end else if (state == C_INIT || state == C_CALC) begin
      hist_we    = 1'b1;   // clear (init) or clear-after-read (build)
    end
  end

  always_ff @(posedge clk) begin
    if (hist_re) hist_rd <= hist[hist_raddr];
    if (hist_we) hist[hist_waddr] <= hist_wdata;
    acc_bin1 <= acc_bin;
    fwd_bin  <= acc_bin1;
    fwd_cnt  <= hist_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_v1 <= 1'b0;
      fwd_v  <= 1'b0;
    end else begin
      acc_v1 <= acc_en;
      fwd_v  <= acc_v1;
    end
  end

  // ---------------------------------------------------------------- remap table
  logic               lut_we;
  logic [PIX_W-1:0]   lut_wdata;

  assign lut_we    = (state == C_INIT) || (state == C_WRITE);
  assign lut_wdata = (state == C_INIT) ? bin : quo;

  always_ff @(posedge clk) begin
    if (lut_rd_en) lut_rd_data <= lut[lut_rd_addr];
    if (lut_we)    lut[bin] <= lut_wdata;
  end

  // ---------------------------------------------------------------- build
  logic [COUNT_W-1:0] cdf_n, cmin_n, den;
  logic [NUM_W-1:0]   numer;
  logic [NUM_W-1:0]   trial;

  always_comb begin
    cdf_n  = cdf + hist_rd;
    cmin_n = (cmin == '0) ? cdf_n : cmin;
    den    = npix - cmin_n;
    numer  = NUM_W'(cdf_n - cmin_n) * NUM_W'(2 * (BINS - 1)) + NUM_W'(den);
    trial  = rem - dvs;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE;
      bin   <= '0;
      cdf   <= '0;
      cmin  <= '0;
      rem   <= '0;
      dvs   <= '0;
      quo   <= '0;
      step  <= '0;
    end else if (init_start) begin
      state <= C_INIT;
      bin   <= '0;
    end else begin
      unique case (state)
        C_IDLE: begin
          if (build_start) begin
            state <= C_READ;
            bin   <= '0;
            cdf   <= '0;
            cmin  <= '0;
          end
        end
        C_INIT: begin
          bin <= bin + 1'b1;
          if (bin == LAST_BIN) state <= C_IDLE;
        end
        C_READ: state <= C_CALC;   // hist_rd valid next clock
        C_CALC: begin
          cdf  <= cdf_n;
          cmin <= cmin_n;
          if (cdf_n == '0) begin
            quo   <= '0;
            state <= C_WRITE;
          end else if (den == '0) begin
            quo   <= bin;          // flat frame: identity
            state <= C_WRITE;
          end else begin
            rem   <= numer;
            dvs   <= NUM_W'({den, 1'b0}) << (PIX_W - 1);
            quo   <= '0;
            step  <= '0;
            state <= C_DIV;
          end
        end
        C_DIV: begin
          // restoring division, quotient MSB first
          quo <= {quo[PIX_W-2:0], ~trial[NUM_W-1]};
          if (!trial[NUM_W-1]) rem <= trial;
          dvs  <= dvs >> 1;
          step <= step + 1'b1;
          if (step == ($clog2(PIX_W))'(PIX_W - 1)) state <= C_WRITE;
        end
        C_WRITE: begin
          bin <= bin + 1'b1;
          if (bin == LAST_BIN) state <= C_IDLE;
          else                 state <= C_READ;
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  assign busy = (state != C_IDLE);

endmodule
