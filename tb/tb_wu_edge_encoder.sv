// tb_wu_edge_encoder: checks both sides of the edge encoder against a
// reference written with plain loops. For every test pattern the reference
// splits the taps into the interleaved combs and measures, per comb, the run
// of ones from tap 0 (ones side) or of zeros from the last tap (zeros side).
// The expected count is the sum of the runs. The expected cycle count is, per
// comb, the number of chunks up to and including the one holding the edge.
// Patterns include clean edges at every position, edges with bubbles,
// all-ones and all-zeros lines (the 40-cycle worst case), and random words.
`timescale 1ps/1ps
module tb_wu_edge_encoder;
  localparam int unsigned N = wu_tdc_pkg::N_TAPS, S = wu_tdc_pkg::SEGMENTS,
                          M = wu_tdc_pkg::CHUNKS, W = wu_tdc_pkg::CHUNK_W;
  localparam int unsigned CNT_W = $clog2(N + 1);

  logic clk = 1'b1, rst, start;
  logic [N-1:0] snap;
  logic b1, d1, b0, d0;
  logic [CNT_W-1:0] c1, c0;
  int checks = 0, failures = 0, worst = 0;

  wu_edge_encoder #(.COUNT_ONES(1'b1)) u_ones (
    .clk, .rst, .start, .snap, .busy(b1), .done(d1), .count(c1));
  wu_edge_encoder #(.COUNT_ONES(1'b0)) u_zeros (
    .clk, .rst, .start, .snap, .busy(b0), .done(d0), .count(c0));

  always #5000 clk = ~clk;

  // Reference: run length and chunk cycles for one side.
  task automatic ref_side(input logic ones, output int total, output int cycles);
    total = 0; cycles = 0;
    for (int s = 0; s < S; s++) begin
      int run = 0;
      bit stop = 0;
      for (int j = 0; j < N / S; j++) begin
        int tap = ones ? (S * j + s) : (N - 1 - (S * j + s));
        logic v = ones ? snap[tap] : ~snap[tap];
        if (!v) stop = 1;
        if (!stop) run++;
      end
      total += run;
      cycles += (run == N / S) ? M : (run / W + 1);
    end
  endtask

  task automatic run_one(input logic [N-1:0] pat, input string what);
    int e1, e0, y1, y0, n, got1, got0;
    snap = pat;
    ref_side(1'b1, e1, y1);
    ref_side(1'b0, e0, y0);
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    n = 0;   // edges since the one that accepted start
    got1 = -1; got0 = -1;
    while ((got1 < 0 || got0 < 0) && n < 200) begin
      if (d1 && got1 < 0) got1 = n;
      if (d0 && got0 < 0) got0 = n;
      if (got1 < 0 || got0 < 0) begin @(negedge clk); n++; end
    end
    checks += 4;
    if (c1 !== CNT_W'(e1)) begin failures++; $display("FAIL %s ones count %0d exp %0d", what, c1, e1); end
    if (c0 !== CNT_W'(e0)) begin failures++; $display("FAIL %s zeros count %0d exp %0d", what, c0, e0); end
    if (got1 != y1) begin failures++; $display("FAIL %s ones cycles %0d exp %0d", what, got1, y1); end
    if (got0 != y0) begin failures++; $display("FAIL %s zeros cycles %0d exp %0d", what, got0, y0); end
    if (y1 > worst) worst = y1;
    if (y0 > worst) worst = y0;
  endtask

  function automatic logic [N-1:0] thermo(int p);   // taps 0..p-1 high
    logic [N-1:0] v = '0;
    for (int i = 0; i < N; i++) v[i] = (i < p);
    return v;
  endfunction

  initial begin
    #100000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] v;
    rst = 1; start = 0; snap = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    // Clean single edges at every position.
    for (int p = 0; p <= N; p += 3) run_one(thermo(p), $sformatf("thermo %0d", p));
    run_one('1, "all ones");
    run_one('0, "all zeros");
    // Wave union shape: ones, gap, ones, zeros; with bubbles.
    for (int k = 0; k < 60; k++) begin
      automatic int a = $urandom % 200, g = 2 + $urandom % 20, b = $urandom % 100;
      v = '0;
      for (int i = 0; i < N; i++) v[i] = (i < a) || (i >= a + g && i < a + g + b);
      if (k % 2 == 1 && a > 2) v[a - 1] = 1'b0;          // bubble near an edge
      if (k % 3 == 1 && a + g + b < N - 2) v[a + g + b + 1] = 1'b1;
      run_one(v, $sformatf("wave %0d", k));
    end
    for (int k = 0; k < 20; k++) begin
      for (int i = 0; i < N; i += 32) v[i +: 32] = $urandom;
      run_one(v, $sformatf("random %0d", k));
    end
    checks++;
    if (worst != S * M) begin failures++; $display("FAIL worst case %0d not reached", S * M); end
    $display("worst case chunk cycles %0d (budget N*M = %0d)", worst, S * M);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
