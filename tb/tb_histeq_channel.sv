// tb_histeq_channel: unit test of one colour channel of the equaliser
// (histogram, table builder, remap table) at its default 21-bit counts.
//
// Checks, against a reference written from the equalisation formula:
//   * init: busy for exactly 256 clocks, then the identity table;
//   * a 5000-pixel histogram with back-to-back repeats, repeats one clock
//     apart and random bins, then a build whose busy time must equal the sum
//     of the per-bin costs (3 clocks, or 11 when the bin divides) and whose
//     table must match entry by entry;
//   * a full 1080p histogram (2,073,600 pixels, counts near the 21-bit
//     limit) and its table;
//   * init issued in the middle of a build: 256 clocks later the table is the
//     identity again, and the next histogram starts from empty.
// Table entries are read back through the remap port, whose data arrive one
// clock after the address.
module tb_histeq_channel;
  localparam int unsigned PIX_W = 8, COUNT_W = 21, BINS = 256;

  logic clk = 1'b0, rst_n = 1'b0;
  logic init_start = 1'b0, build_start = 1'b0;
  logic [COUNT_W-1:0] npix = '0;
  logic busy;
  logic acc_en = 1'b0;
  logic [PIX_W-1:0] acc_bin = '0;
  logic lut_rd_en = 1'b0;
  logic [PIX_W-1:0] lut_rd_addr = '0, lut_rd_data;

  always #5 clk = ~clk;

  histeq_channel dut (.*);

  int checks = 0, failures = 0;
  int h[BINS];
  int n_fwd = 0, n_gap1 = 0;

  // busy length monitor
  int busy_len = 0;
  always @(posedge clk) if (busy) busy_len <= busy_len + 1;

  task automatic step(); @(negedge clk); endtask

  task automatic acc(input int b);
    acc_en = 1'b1; acc_bin = 8'(b); h[b]++;
    step();
    acc_en = 1'b0;
  endtask

  function automatic int ref_lut(input int v, input int n, output int cost);
    longint cdf = 0, cmin = -1, den, num, q, r;
    int res = 0;
    cost = 0;
    for (int u = 0; u < BINS; u++) begin
      cdf += h[u];
      if (cmin < 0 && cdf > 0) cmin = cdf;
      den = n - cmin;
      cost += (cdf == 0 || den == 0) ? 3 : 11;
      if (u == v) begin
        if (cdf == 0) res = 0;
        else if (den == 0) res = v;
        else begin
          num = (cdf - cmin) * 255; q = num / den; r = num % den;
          if (2 * r >= den) q++;
          res = int'(q);
        end
      end
    end
    return res;
  endfunction

  task automatic check_table(input string what, input int n, input bit identity);
    int e, cost, bad = 0;
    for (int v = 0; v < BINS; v++) begin
      lut_rd_en = 1'b1; lut_rd_addr = 8'(v);
      step();
      lut_rd_en = 1'b0;
      e = identity ? v : ref_lut(v, n, cost);
      checks++;
      if (lut_rd_data != 8'(e)) begin
        failures++; bad++;
        if (bad < 5) $display("FAIL: %s lut[%0d] = %0d, expected %0d", what, v, lut_rd_data, e);
      end
    end
  endtask

  task automatic run_init();
    init_start = 1'b1; step(); init_start = 1'b0;
    busy_len = 0;
    while (busy) step();
    checks++;
    if (busy_len != BINS) begin failures++; $display("FAIL: init busy %0d clocks", busy_len); end
    foreach (h[v]) h[v] = 0;
  endtask

  task automatic run_build(input string what, input int n);
    int cost;
    void'(ref_lut(0, n, cost));
    npix = COUNT_W'(n);
    step();                        // the last write-back lands
    build_start = 1'b1; step(); build_start = 1'b0;
    busy_len = 0;
    while (busy) step();
    checks++;
    if (busy_len != cost) begin failures++; $display("FAIL: %s build busy %0d, expected %0d", what, busy_len, cost); end
    check_table(what, n, 1'b0);
    foreach (h[v]) h[v] = 0;       // the build empties the histogram
  endtask

  initial begin
    int n, b, prev;
    repeat (3) step();
    rst_n = 1'b1;
    step();
    run_init();
    check_table("after init", 0, 1'b1);

    // 5000 pixels: runs, one-clock-apart repeats, random bins
    n = 0; prev = 0;
    while (n < 5000) begin
      int kind;
      kind = $urandom_range(0, 2);
      if (kind == 0) begin             // run of equal bins
        b = $urandom_range(40, 90);
        repeat ($urandom_range(2, 6)) begin acc(b); n++; n_fwd++; end
      end else if (kind == 1) begin    // same bin with a one-clock gap
        b = $urandom_range(40, 90);
        acc(b); step(); acc(b); n += 2; n_gap1++;
      end else begin
        acc($urandom_range(30, 200)); n++;
      end
    end
    run_build("5000-pixel", n);

    // a full 1080p frame
    n = 1920 * 1080;
    for (int i = 0; i < n; i++) begin
      acc_en = 1'b1;
      b = (i % 7 == 0) ? 17 : ((i % 3 == 0) ? 18 + (i % 40) : 200 + (i % 11));
      acc_bin = 8'(b); h[b]++;
      step();
    end
    acc_en = 1'b0;
    run_build("1080p", n);

    // init during a build
    for (int i = 0; i < 300; i++) acc($urandom_range(0, 255));
    npix = COUNT_W'(300);
    step();
    build_start = 1'b1; step(); build_start = 1'b0;
    repeat (500) step();
    run_init();
    check_table("init over build", 0, 1'b1);
    for (int i = 0; i < 100; i++) acc($urandom_range(100, 120));
    run_build("after aborted build", 100);

    checks += 2;
    if (n_fwd == 0)  begin failures++; $display("FAIL: no back-to-back repeats"); end
    if (n_gap1 == 0) begin failures++; $display("FAIL: no one-apart repeats"); end
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
