// tb_histeq: self-checking testbench for the histogram-equalisation IP.
//
// Runs the IP at a reduced maximum frame (16 x 16) through two configuration
// segments separated by a soft reset: a 6 x 10 frame with random input gaps
// and random output back-pressure, then a 16 x 16 frame at full rate. Frames
// are full-range noise, darkened noise (values divided by 8, as in the
// published accuracy experiment), runs of repeated values and flat frames.
// An independent reference computes each frame's equalisation table with the
// rounding-to-nearest formula and checks every output pixel of the next frame
// against it, with tuser/tlast. It also checks the stall between frames
// (flush clock + table build + 1, from the per-bin cost of 3 or 3+PIX_W
// clocks), the one-pixel-per-clock rate and one-clock latency at full rate,
// and that each mechanism (back-pressure, input gaps, soft reset with a size
// change, soft reset in the middle of a table build, flat frame, forwarding
// of repeated bins) happened. A third segment (5 x 7) follows a soft reset
// that lands while the table is being built.
module tb_histeq;
  localparam int unsigned PIX_W = 8, CH = 3, BINS = 256;
  localparam int unsigned MAXR = 16, MAXC = 16;
  localparam int unsigned DW = PIX_W * CH;

  logic clk = 1'b0, rst_n = 1'b0, soft_rst = 1'b1;
  logic [11:0] rows = 12'd6, cols = 12'd10;
  logic [DW-1:0] s_tdata = '0, m_tdata;
  logic s_tvalid = 1'b0, s_tready, s_tuser = 1'b0, s_tlast = 1'b0;
  logic m_tvalid, m_tready = 1'b0, m_tuser, m_tlast;

  always #5 clk = ~clk;

  histeq #(.MAX_ROWS(MAXR), .MAX_COLS(MAXC)) dut (
    .clk, .rst_n, .soft_rst, .rows, .cols,
    .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready),
    .s_axis_tuser(s_tuser), .s_axis_tlast(s_tlast),
    .m_axis_tdata(m_tdata), .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready),
    .m_axis_tuser(m_tuser), .m_axis_tlast(m_tlast));

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // mechanism counters
  int n_backpressure = 0, n_gap = 0, n_stall_checked = 0, n_flat = 0, n_repeat = 0;
  int n_reset_resize = 0, n_rate_checked = 0, n_abort = 0;

  int in_prob = 70, out_prob = 80;   // percent
  typedef logic [DW-1:0] pix_t;
  typedef logic [7:0] lut_t [CH][BINS];

  // expected output beats
  pix_t exp_q[$];
  bit   exp_user_q[$], exp_last_q[$];
  longint acc_cyc_q[$];
  longint last_acc_cyc, first_acc_cyc;
  int   exp_stall_q[$];   // expected stall length after each frame
  bit   full_rate;

  function automatic void ref_table(input pix_t fr[], input int n, output lut_t lut,
                                    output int cost);
    int h[BINS];
    longint cdf, cmin, den, num, q, r;
    int cc;
    cost = 0;
    for (int c = 0; c < CH; c++) begin
      foreach (h[v]) h[v] = 0;
      for (int i = 0; i < n; i++) h[fr[i][c*PIX_W +: PIX_W]]++;
      cdf = 0; cmin = -1; cc = 0;
      for (int v = 0; v < BINS; v++) begin
        cdf += h[v];
        if (cmin < 0 && cdf > 0) cmin = cdf;
        den = n - cmin;
        if (cdf == 0) lut[c][v] = 8'd0;
        else if (den == 0) lut[c][v] = 8'(v);
        else begin
          num = (cdf - cmin) * 255;
          q = num / den; r = num % den;
          if (2 * r >= den) q++;
          lut[c][v] = 8'(q);
        end
        // build clocks for this bin: read, sum, [PIX_W divide steps], write
        cc += (cdf == 0 || den == 0) ? 3 : 3 + PIX_W;
      end
      if (cc > cost) cost = cc;   // the IP waits for its slowest channel
    end
  endfunction

  // build a frame; kind 0 noise, 1 dark noise, 2 dark runs, 3 flat
  function automatic void make_frame(input int kind, input int n, ref pix_t fr[]);
    pix_t p;
    fr = new[n];
    p = pix_t'($urandom);
    for (int i = 0; i < n; i++) begin
      unique case (kind)
        0: p = pix_t'($urandom);
        1: begin p = pix_t'($urandom); for (int c = 0; c < CH; c++) p[c*8 +: 8] = p[c*8 +: 8] >> 3; end
        2: if ($urandom_range(0, 3) == 0) begin
             p = pix_t'($urandom); for (int c = 0; c < CH; c++) p[c*8 +: 8] = p[c*8 +: 8] >> 3;
           end
        default: p = 24'h37_a0_05;
      endcase
      fr[i] = p;
    end
  endfunction

  // drive one frame; queue expected output using table 'lut'
  task automatic send_frame(input pix_t fr[], input int r, input int c, input lut_t lut);
    int i = 0;
    for (int y = 0; y < r; y++)
      for (int x = 0; x < c; x++) begin
        pix_t e;
        for (int k = 0; k < CH; k++) e[k*8 +: 8] = lut[k][fr[i][k*8 +: 8]];
        exp_q.push_back(e);
        exp_user_q.push_back(i == 0);
        exp_last_q.push_back(x == c - 1);
        // optional gap (the task runs on falling edges)
        while (!full_rate && $urandom_range(0, 99) >= in_prob) begin
          s_tvalid = 1'b0;
          n_gap++;
          @(negedge clk);
        end
        s_tdata  = fr[i];
        s_tuser  = (i == 0);
        s_tlast  = (x == c - 1);
        s_tvalid = 1'b1;
        @(negedge clk);
        while (!acc_seen) @(negedge clk);
        if (i == 0) first_acc_cyc = last_acc_cyc;
        i++;
      end
    s_tvalid = 1'b0;
  endtask

  // sink: random ready, compare beats
  always @(posedge clk) begin
    if (rst_n) begin
      if (m_tvalid && !m_tready) n_backpressure++;
      if (m_tvalid && m_tready) begin
        pix_t e; bit u, l; longint ac;
        checks++;
        if (exp_q.size() == 0) begin
          failures++; $display("FAIL: unexpected output beat %h", m_tdata);
        end else begin
          e = exp_q.pop_front(); u = exp_user_q.pop_front(); l = exp_last_q.pop_front();
          ac = acc_cyc_q.pop_front();
          if (m_tdata !== e || m_tuser !== u || m_tlast !== l) begin
            failures++;
            if (failures < 10) $display("FAIL: out %h u%0d l%0d, expected %h u%0d l%0d",
                                        m_tdata, m_tuser, m_tlast, e, u, l);
          end
          if (full_rate) begin
            checks++;
            if (cyc != ac + 1) begin
              failures++; $display("FAIL: latency %0d clocks", cyc - ac);
            end
          end
        end
      end
    end
  end
  always @(negedge clk) m_tready = full_rate ? 1'b1 : ($urandom_range(0, 99) < out_prob);
  // input handshakes, seen on the rising edge
  bit acc_seen = 1'b0;
  always @(posedge clk) begin
    acc_seen <= s_tvalid && s_tready;
    if (s_tvalid && s_tready) begin acc_cyc_q.push_back(cyc); last_acc_cyc <= cyc; end
  end

  // stall monitor: after each frame's last accept, count clocks with tready low
  int stall_len = -1;
  always @(posedge clk) begin
    if (rst_n && !soft_rst) begin
      if (s_tvalid && s_tready && s_tlast && exp_stall_q.size() > 0 && stall_len < 0
          && acc_last_of_frame)
        stall_len = 0;
      else if (stall_len >= 0) begin
        if (s_tready) begin
          int e;
          e = exp_stall_q.pop_front();
          checks++; n_stall_checked++;
          if (stall_len != e) begin
            failures++; $display("FAIL: stall %0d clocks, expected %0d", stall_len, e);
          end
          stall_len = -1;
        end else stall_len++;
      end
    end
  end
  bit acc_last_of_frame;
  int pix_in_frame = 0, cur_n = 60;
  always @(posedge clk) if (s_tvalid && s_tready) pix_in_frame <= (pix_in_frame + 1 == cur_n) ? 0 : pix_in_frame + 1;
  assign acc_last_of_frame = (pix_in_frame + 1 == cur_n);

  task automatic wait_drain();
    int t = 0;
    while ((exp_q.size() != 0 || stall_len >= 0) && t < 20000) begin @(negedge clk); t++; end
    repeat (3500) @(negedge clk);   // let the last build finish
  endtask

  // abort_build: leave while the table build after the last frame is running
  task automatic run_segment(input int r, input int c, input int kinds[], input bit abort_build = 1'b0);
    lut_t lut, nxt;
    pix_t fr[];
    int cost, n = r * c;
    for (int k = 0; k < CH; k++) for (int v = 0; v < BINS; v++) lut[k][v] = 8'(v);
    cur_n = n;
    foreach (kinds[f]) begin
      make_frame(kinds[f], n, fr);
      if (kinds[f] == 3) n_flat++;
      for (int i = 1; i < n; i++) if (fr[i] == fr[i-1]) n_repeat++;
      ref_table(fr, n, nxt, cost);
      if (!(abort_build && f == kinds.size() - 1)) exp_stall_q.push_back(cost + 2);
      send_frame(fr, r, c, lut);
      if (full_rate) begin
        // n pixels in n clocks
        checks++; n_rate_checked++;
        if (last_acc_cyc - first_acc_cyc != n - 1) begin
          failures++; $display("FAIL: frame took %0d clocks for %0d pixels",
                               last_acc_cyc - first_acc_cyc + 1, n);
        end
      end
      lut = nxt;
    end
    if (abort_build) begin
      while (exp_q.size() != 0) @(negedge clk);
      repeat (20) @(negedge clk);
      if (s_tready) begin failures++; $display("FAIL: no build stall to abort"); end
      checks++;
    end else wait_drain();
  endtask

  initial begin
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    repeat (5) @(negedge clk);
    soft_rst = 1'b0;
    repeat (2) @(negedge clk);
    full_rate = 0;
    run_segment(6, 10, '{0, 1, 2, 3, 1, 0});
    // change resolution under soft reset
    soft_rst = 1'b1;
    repeat (4) @(negedge clk);
    rows = 12'd16; cols = 12'd16;
    repeat (4) @(negedge clk);
    soft_rst = 1'b0;
    n_reset_resize++;
    full_rate = 1;
    repeat (2) @(negedge clk);
    run_segment(16, 16, '{1, 2, 0, 3, 1}, 1'b1);
    // soft reset in the middle of a table build: the IP must restart with
    // an identity table at the new size
    soft_rst = 1'b1;
    repeat (3) @(negedge clk);
    rows = 12'd5; cols = 12'd7;
    repeat (3) @(negedge clk);
    soft_rst = 1'b0;
    n_abort++;
    repeat (2) @(negedge clk);
    full_rate = 0;
    run_segment(5, 7, '{2, 1, 0});
    // every mechanism must have happened
    checks += 8;
    if (n_abort == 0)        begin failures++; $display("FAIL: no reset during a build"); end
    if (n_backpressure == 0) begin failures++; $display("FAIL: no back-pressure"); end
    if (n_gap == 0)          begin failures++; $display("FAIL: no input gap"); end
    if (n_stall_checked < 8) begin failures++; $display("FAIL: %0d stalls checked", n_stall_checked); end
    if (n_flat == 0)         begin failures++; $display("FAIL: no flat frame"); end
    if (n_repeat == 0)       begin failures++; $display("FAIL: no repeated bins"); end
    if (n_reset_resize == 0) begin failures++; $display("FAIL: no resize"); end
    if (n_rate_checked == 0) begin failures++; $display("FAIL: rate never checked"); end
    if (exp_q.size() != 0)   begin failures++; $display("FAIL: %0d beats missing", exp_q.size()); end
    $display("mechanisms: backpressure=%0d gaps=%0d stalls=%0d flat=%0d repeats=%0d resize=%0d rate=%0d abort=%0d",
             n_backpressure, n_gap, n_stall_checked, n_flat, n_repeat, n_reset_resize, n_rate_checked, n_abort);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
