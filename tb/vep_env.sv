// vep_env: stimulus and checker for the video enhancement pipeline (vep_top),
// shared by its end-to-end testbenches.
//
// It programs the AXI-GPIO word (reset bit, rows, columns), streams frames
// into the pipeline and checks every output beat. Pixels are produced by a
// generator rather than stored, so frames of any size cost no memory:
//   kind 0  full-range noise
//   kind 1  noise darkened by 8 (each channel >> 3)
//   kind 2  darkened noise in runs of repeated pixels
//   kind 3  flat frame (one colour)
//   kind 4  darkened smooth gradient, a stand-in for a dim camera picture
//   kind 5  darkened gradient with texture, the same for every frame of a
//           size, so sending it twice equalises a still image with its own
//           histogram
// A reference chain of N_ENH equalisers follows every pixel: stage k maps its
// input through its current table and counts that input into its histogram;
// at each frame end the stage rebuilds its table with the round-to-nearest
// equalisation formula. Segment 1 (R1 x C1, NF1 frames with kinds KINDS1, one
// hex digit each, first frame in the low digit) runs with random input gaps
// and output back-pressure when RANDOM_FLOW is set; then the reset bit is set,
// the size changed to R2 x C2 and segment 2 (NF2 frames, KINDS2) runs at full
// rate, where the one-pixel-per-clock rate is checked and, for a single IP,
// the exact length of the stall between frames.
module vep_env #(
  parameter int unsigned N_ENH       = 1,
  parameter int unsigned R1          = 6,
  parameter int unsigned C1          = 10,
  parameter int unsigned NF1         = 4,
  parameter logic [31:0] KINDS1      = 32'h0000_1230,
  parameter int unsigned R2          = 16,
  parameter int unsigned C2          = 16,
  parameter int unsigned NF2         = 3,
  parameter logic [31:0] KINDS2      = 32'h0000_0341,
  parameter bit          RANDOM_FLOW = 1'b1
) (
  input  logic        clk,
  output logic        rst_n,
  output logic [31:0] gpio_o,
  output logic [23:0] s_tdata,
  output logic        s_tvalid,
  input  logic        s_tready,
  output logic        s_tuser,
  output logic        s_tlast,
  input  logic [23:0] m_tdata,
  input  logic        m_tvalid,
  output logic        m_tready,
  input  logic        m_tuser,
  input  logic        m_tlast,
  output logic        done,
  output int          checks,
  output int          failures
);
  localparam int unsigned CH = 3, BINS = 256;
  typedef logic [23:0] pix_t;

  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  bit full_rate = 1'b0;
  int n_backpressure = 0, n_gap = 0, n_stall = 0, n_stall_exact = 0, n_flat = 0;
  int n_resize = 0, n_rate = 0, n_bright = 0, n_frames = 0;

  // reference state
  int          hist  [N_ENH][CH][BINS];
  logic [7:0]  lut   [N_ENH][CH][BINS];
  int          last_cost;

  pix_t exp_q[$];
  bit   exp_user_q[$], exp_last_q[$];

  initial begin
    checks = 0; failures = 0; done = 1'b0;
    rst_n = 1'b0; gpio_o = '0;
    s_tdata = '0; s_tvalid = 1'b0; s_tuser = 1'b0; s_tlast = 1'b0;
  end

  function automatic void ref_reset();
    for (int k = 0; k < N_ENH; k++)
      for (int c = 0; c < CH; c++)
        for (int v = 0; v < BINS; v++) begin
          hist[k][c][v] = 0;
          lut[k][c][v]  = 8'(v);
        end
  endfunction

  // rebuild every stage's table from its histogram; returns the largest
  // per-channel build cost of stage 0 in clocks
  function automatic int ref_build(input int n);
    longint cdf, cmin, den, num, q, r;
    int cost = 0, cc;
    for (int k = 0; k < N_ENH; k++)
      for (int c = 0; c < CH; c++) begin
        cdf = 0; cmin = -1; cc = 0;
        for (int v = 0; v < BINS; v++) begin
          cdf += hist[k][c][v];
          if (cmin < 0 && cdf > 0) cmin = cdf;
          den = n - cmin;
          if (cdf == 0) lut[k][c][v] = 8'd0;
          else if (den == 0) lut[k][c][v] = 8'(v);
          else begin
            num = (cdf - cmin) * 255;
            q = num / den; r = num % den;
            if (2 * r >= den) q++;
            lut[k][c][v] = 8'(q);
          end
          cc += (cdf == 0 || den == 0) ? 3 : 11;
          hist[k][c][v] = 0;
        end
        if (k == 0 && cc > cost) cost = cc;
      end
    return cost;
  endfunction

  function automatic pix_t dark(input pix_t p);
    for (int c = 0; c < CH; c++) p[c*8 +: 8] = p[c*8 +: 8] >> 3;
    return p;
  endfunction

  pix_t gen_prev;
  function automatic pix_t gen(input int kind, input int x, input int y, input int cols, input int rows);
    pix_t p;
    unique case (kind)
      0: p = pix_t'($urandom);
      1: p = dark(pix_t'($urandom));
      2: p = ($urandom_range(0, 3) == 0 || (x == 0 && y == 0)) ? dark(pix_t'($urandom)) : gen_prev;
      3: p = 24'h37_a0_05;
      5: begin
        logic [31:0] h;
        h = (32'(x) * 32'h9E37_79B1) ^ (32'(y) * 32'h85EB_CA77);
        h = h ^ (h >> 15);
        p[7:0]   = 8'((x * 190) / cols + int'(h[5:0]));
        p[15:8]  = 8'((y * 190) / rows + int'(h[13:8]));
        p[23:16] = 8'(((x + y) * 190) / (cols + rows) + int'(h[21:16]));
        p = dark(p);
      end
      default: begin
        p[7:0]   = 8'((x * 255) / cols);
        p[15:8]  = 8'((y * 255) / rows);
        p[23:16] = 8'(((x + y) * 255) / (cols + rows));
        p = dark(p);
      end
    endcase
    gen_prev = p;
    return p;
  endfunction

  // input handshakes
  bit acc_seen = 1'b0;
  longint last_acc_cyc = 0, first_acc_cyc;
  always @(posedge clk) begin
    acc_seen <= s_tvalid && s_tready;
    if (s_tvalid && s_tready) last_acc_cyc <= cyc;
    if (rst_n && s_tvalid && !s_tready) n_stall++;
  end

  // sink
  always @(negedge clk) m_tready = full_rate ? 1'b1 : ($urandom_range(0, 99) < 80);
  always @(posedge clk) begin
    if (rst_n) begin
      if (m_tvalid && !m_tready) n_backpressure++;
      if (m_tvalid && m_tready) begin
        pix_t e; bit u, l;
        checks++;
        if (exp_q.size() == 0) begin
          failures++; $display("FAIL: unexpected output beat %h", m_tdata);
        end else begin
          e = exp_q.pop_front(); u = exp_user_q.pop_front(); l = exp_last_q.pop_front();
          if (m_tdata !== e || m_tuser !== u || m_tlast !== l) begin
            failures++;
            if (failures < 10) $display("FAIL: out %h u%0d l%0d, expected %h u%0d l%0d",
                                        m_tdata, m_tuser, m_tlast, e, u, l);
          end
        end
      end
    end
  end

  // stall length after a frame at full rate, single IP
  int  stall_len = -1, stall_exp = 0;
  bit  stall_arm = 1'b0;
  always @(posedge clk) begin
    if (stall_len >= 0) begin
      if (s_tready) begin
        checks++; n_stall_exact++;
        if (stall_len != stall_exp) begin
          failures++; $display("FAIL: stall %0d clocks, expected %0d", stall_len, stall_exp);
        end
        stall_len = -1;
      end else stall_len++;
    end else if (stall_arm && s_tvalid && s_tready && s_tlast) begin
      stall_len = 0;
      stall_arm = 1'b0;
    end
  end

  task automatic send_frame(input int kind, input int rows, input int cols, input bit last_in_run);
    pix_t p, y, in_sum, out_sum;
    longint isum = 0, osum = 0;
    for (int r = 0; r < rows; r++)
      for (int c = 0; c < cols; c++) begin
        p = gen(kind, c, r, cols, rows);
        y = p;
        for (int k = 0; k < N_ENH; k++) begin
          pix_t z;
          for (int ch = 0; ch < CH; ch++) begin
            hist[k][ch][y[ch*8 +: 8]]++;
            z[ch*8 +: 8] = lut[k][ch][y[ch*8 +: 8]];
          end
          y = z;
        end
        for (int ch = 0; ch < CH; ch++) begin
          isum += p[ch*8 +: 8];
          osum += y[ch*8 +: 8];
        end
        exp_q.push_back(y);
        exp_user_q.push_back(r == 0 && c == 0);
        exp_last_q.push_back(c == cols - 1);
        while (!full_rate && $urandom_range(0, 99) >= 70) begin
          s_tvalid = 1'b0;
          n_gap++;
          @(negedge clk);
        end
        s_tdata  = p;
        s_tuser  = (r == 0 && c == 0);
        s_tlast  = (c == cols - 1);
        s_tvalid = 1'b1;
        if (full_rate && N_ENH == 1 && !last_in_run && r == rows - 1 && c == cols - 1)
          stall_arm = 1'b1;   // measure the stall that follows this frame
        @(negedge clk);
        while (!acc_seen) @(negedge clk);
        if (r == 0 && c == 0) first_acc_cyc = last_acc_cyc;
      end
    s_tvalid = 1'b0;
    // a dark frame equalised with a dark frame's table comes out brighter
    if (kind != 0 && kind != 3 && osum > 2 * isum) n_bright++;
    $display("frame %0d (%0d x %0d, kind %0d): mean level in %0.1f, out %0.1f", n_frames,
             cols, rows, kind, real'(isum) / real'(3 * rows * cols), real'(osum) / real'(3 * rows * cols));
    n_frames++;
  endtask

  task automatic run_segment(input int rows, input int cols, input int nf, input logic [31:0] kinds);
    int n = rows * cols;
    for (int f = 0; f < nf; f++) begin
      int kind = int'(kinds[4*f +: 4]);
      if (kind == 3) n_flat++;
      send_frame(kind, rows, cols, f == nf - 1);
      if (full_rate) begin
        checks++; n_rate++;
        if (last_acc_cyc - first_acc_cyc != longint'(n) - 1) begin
          failures++;
          $display("FAIL: %0d pixels took %0d clocks", n, last_acc_cyc - first_acc_cyc + 1);
        end
      end
      last_cost = ref_build(n);
      stall_exp = last_cost + 2;
    end
    while (exp_q.size() != 0) @(negedge clk);
  endtask

  function automatic logic [31:0] gpio_word(input bit rst, input int rows, input int cols);
    return {7'd0, rst, 12'(cols), 12'(rows)};
  endfunction

  initial begin
    ref_reset();
    gpio_o = gpio_word(1'b1, R1, C1);
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    repeat (4) @(negedge clk);
    gpio_o = gpio_word(1'b0, R1, C1);
    full_rate = !RANDOM_FLOW;
    run_segment(R1, C1, NF1, KINDS1);
    if (NF2 > 0) begin
      // change the resolution: reset bit first, then the size, then release
      gpio_o = gpio_word(1'b1, R1, C1);
      repeat (4) @(negedge clk);
      gpio_o = gpio_word(1'b1, R2, C2);
      repeat (4) @(negedge clk);
      gpio_o = gpio_word(1'b0, R2, C2);
      ref_reset();
      n_resize++;
      full_rate = 1'b1;
      run_segment(R2, C2, NF2, KINDS2);
    end
    repeat (10) @(negedge clk);
    checks += 5;
    if (n_stall == 0)   begin failures++; $display("FAIL: input never stalled"); end
    if (n_bright == 0)  begin failures++; $display("FAIL: no dark frame was brightened"); end
    if (n_rate == 0)    begin failures++; $display("FAIL: rate never checked"); end
    if (N_ENH == 1 && n_stall_exact == 0) begin failures++; $display("FAIL: stall length never checked"); end
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d beats missing", exp_q.size()); end
    if (RANDOM_FLOW) begin
      checks += 2;
      if (n_backpressure == 0) begin failures++; $display("FAIL: no back-pressure"); end
      if (n_gap == 0)          begin failures++; $display("FAIL: no input gap"); end
    end
    if (NF2 > 0) begin
      checks++;
      if (n_resize == 0) begin failures++; $display("FAIL: no resize"); end
    end
    $display("vep_env N_ENH=%0d: frames=%0d stalls=%0d exact_stalls=%0d backpressure=%0d gaps=%0d flat=%0d brightened=%0d resize=%0d rate=%0d",
             N_ENH, n_frames, n_stall, n_stall_exact, n_backpressure, n_gap, n_flat, n_bright, n_resize, n_rate);
    done = 1'b1;
  end
endmodule
