// tb_wu_fine_encoder: checks the encoder controller with a modelled capture
// register. For each tap pattern the testbench raises frozen, waits for the
// event strobe, and checks the fine code against a loop reference: the ones
// run from tap 0 plus the zeros run from the last tap, each summed over the
// four interleaved combs. It also checks the coarse tag passed through, the
// latency (the larger side's chunk count plus 2 overhead cycles, never above
// 4*10+2 = 42, and exactly 42 for an all-ones line) and the re-arm handshake.
// arm must rise after the strobe and stay high until frozen has been cleared.
`timescale 1ps/1ps
module tb_wu_fine_encoder;
  localparam int unsigned N = wu_tdc_pkg::N_TAPS, S = wu_tdc_pkg::SEGMENTS,
                          M = wu_tdc_pkg::CHUNKS, W = wu_tdc_pkg::CHUNK_W,
                          K = wu_tdc_pkg::OVERHEAD_K;

  logic clk = 1'b1, rst, frozen, arm, ev_valid, busy;
  logic [N-1:0] snap;
  logic [wu_tdc_pkg::COARSE_W-1:0] coarse_tag;
  wu_tdc_pkg::tdc_event_t ev;
  int checks = 0, failures = 0, worst = 0;

  wu_fine_encoder dut (.clk, .rst, .frozen, .snap, .coarse_tag, .arm, .ev_valid, .ev, .busy);

  always #5000 clk = ~clk;
  // Capture register model: arm clears frozen asynchronously.
  always @(posedge arm) #300 frozen = 1'b0;

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

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic run_one(input logic [N-1:0] pat, input string what);
    int e1, e0, y1, y0, n, exp_lat;
    logic [wu_tdc_pkg::COARSE_W-1:0] ct;
    snap = pat;
    ct = $urandom;
    coarse_tag = ct;
    ref_side(1'b1, e1, y1);
    ref_side(1'b0, e0, y0);
    exp_lat = ((y1 > y0) ? y1 : y0) + K;
    #(1000 + $urandom % 7000);
    frozen = 1'b1;
    n = 0;
    while (!busy && n < 20) begin @(negedge clk); n++; end
    chk(busy, {what, ": started"});
    n = 0;
    while (!ev_valid && n < 100) begin @(negedge clk); n++; end
    chk(ev_valid, {what, ": event strobe"});
    chk(ev.fine === wu_tdc_pkg::FINE_W'(e1 + e0), $sformatf("%s: fine %0d exp %0d", what, ev.fine, e1 + e0));
    chk(ev.coarse === ct, {what, ": coarse tag"});
    chk(n + 1 == exp_lat, $sformatf("%s: latency %0d exp %0d", what, n + 1, exp_lat));
    chk(n + 1 <= S * M + K, {what, ": latency within N*M+K"});
    if (n + 1 > worst) worst = n + 1;
    @(negedge clk);
    chk(!ev_valid, {what, ": strobe lasts one cycle"});
    chk(arm, {what, ": arm after store"});
    n = 0;
    while (busy && n < 20) begin @(negedge clk); n++; chk(frozen ? arm : 1'b1, {what, ": arm held while frozen"}); end
    chk(!busy && !arm && !frozen, {what, ": re-armed and idle"});
  endtask

  initial begin
    #200000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] v;
    frozen = 0; snap = '0; coarse_tag = '0;
    rst = 1;
    repeat (4) @(negedge clk);
    rst = 0;
    repeat (6) @(negedge clk);
    chk(!arm && !busy, "idle after reset");
    run_one('1, "all ones");
    run_one('0, "all zeros");
    for (int k = 0; k < 80; k++) begin
      automatic int a = $urandom % 200, g = 2 + $urandom % 20, b = $urandom % 100;
      v = '0;
      for (int i = 0; i < N; i++) v[i] = (i < a) || (i >= a + g && i < a + g + b);
      if (k % 2 == 1 && a > 2) v[a - 1] = 1'b0;
      run_one(v, $sformatf("wave %0d", k));
    end
    chk(worst == S * M + K, $sformatf("worst-case latency %0d reached", worst));
    $display("worst-case latency %0d encoder cycles", worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
