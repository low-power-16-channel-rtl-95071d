// tb_wu_tdc_channel: one TDC channel end to end, with the behavioural delay
// line. Events arrive at chosen picosecond times. For each one the testbench
// works out the tap pattern the line must hold at the stopping edge (the first
// reference edge after the event): tap i shows the wave union (i+1)*TAP_PS
// late. From that pattern it derives the expected fine code: for each of the
// four interleaved combs, the run of ones from the start of the line plus the
// run of zeros from its end, all added. It also works out the expected coarse
// count, the counter value when the event arrived. Checked
// besides: calibration input through alt_clk, a second hit while the channel
// is busy (lost, one record only), FIFO overflow with a 2-deep FIFO (record
// dropped and counted), and dead time below 1 us (event rate above 1 MEPS).
`timescale 1ps/1ps
module tb_wu_tdc_channel;
  localparam int unsigned S = wu_tdc_pkg::SEGMENTS, N = wu_tdc_pkg::N_TAPS, TAP = 20, FALL = 200, RISE = 400;
  localparam int unsigned DEPTH = 2;
  localparam longint TREF = 5000;

  logic clk_ref = 1'b1, clk_enc = 1'b1, rst, hit_pad, alt_clk, cal_sel, rd_en;
  logic rd_empty, rd_full, busy;
  logic [$clog2(DEPTH+1)-1:0] rd_level;
  logic [15:0] drops;
  logic [wu_tdc_pkg::COARSE_W-1:0] coarse;
  wu_tdc_pkg::tdc_event_t rd_data;
  int checks = 0, failures = 0;
  longint max_dead = 0;

  wu_tdc_channel #(.FIFO_DEPTH(DEPTH), .TAP_PS(TAP), .WU_FALL_PS(FALL), .WU_RISE_PS(RISE)) dut (
    .clk_ref, .clk_enc, .rst, .hit_pad, .alt_clk, .cal_sel, .coarse, .rd_en,
    .rd_data, .rd_empty, .rd_full, .rd_level, .drops, .busy);

  always #2500 clk_ref = ~clk_ref;
  always #5000 clk_enc = ~clk_enc;
  always_ff @(posedge clk_ref) coarse <= coarse + 1'b1;

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // Expected fine code for an event dt ps before the stopping edge.
  function automatic int exp_fine(longint dt);
    logic [N-1:0] p;
    int ones = 0, zeros = 0;
    for (int i = 0; i < N; i++) begin
      longint tau = dt - longint'((i + 1) * TAP);
      p[i] = (tau >= 0) && ((tau < FALL) || (tau >= RISE));
    end
    // Runs are measured per comb (taps s, s+S, s+2S, ...), as the encoder does.
    for (int s = 0; s < S; s++) begin
      for (int i = s; i < N && p[i]; i += S) ones++;
      for (int i = N - 1 - s; i >= 0 && !p[i]; i -= S) zeros++;
    end
    return ones + zeros;
  endfunction

  // Event offset ps into a reference period; returns the expected record.
  task automatic fire(input int offset, input logic use_alt,
                      output wu_tdc_pkg::tdc_event_t exp);
    longint t_ev, dt;
    @(posedge clk_ref);
    #(offset);
    t_ev = $time;
    dt = TREF - offset;
    exp.coarse = coarse;
    exp.fine = wu_tdc_pkg::FINE_W'(exp_fine(dt));
    if (use_alt) alt_clk = 1'b1; else hit_pad = 1'b1;
    #1000;
    alt_clk = 1'b0; hit_pad = 1'b0;
    wait (busy);
    wait (!busy);
    if ($time - t_ev > max_dead) max_dead = $time - t_ev;
  endtask

  task automatic pop_check(input wu_tdc_pkg::tdc_event_t exp, input string what);
    @(negedge clk_enc);
    chk(!rd_empty, {what, ": record present"});
    chk(rd_data.coarse === exp.coarse, $sformatf("%s: coarse %0d exp %0d", what, rd_data.coarse, exp.coarse));
    chk(rd_data.fine === exp.fine, $sformatf("%s: fine %0d exp %0d", what, rd_data.fine, exp.fine));
    rd_en = 1'b1;
    @(negedge clk_enc);
    rd_en = 1'b0;
  endtask

  initial begin
    #200000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wu_tdc_pkg::tdc_event_t e, e2, e3;
    int offs[$] = '{7, 13, 190, 401, 1003, 2221, 2499, 3337, 4001, 4611, 4987, 4993};
    hit_pad = 0; alt_clk = 0; cal_sel = 0; rd_en = 0; coarse = '0;
    rst = 1;
    repeat (4) @(negedge clk_enc);
    rst = 0;
    repeat (10) @(negedge clk_enc);
    chk(!busy && rd_empty, "idle after reset");
    // Events at many offsets within the reference period.
    foreach (offs[k]) begin
      fire(offs[k], 1'b0, e);
      pop_check(e, $sformatf("pad offset %0d", offs[k]));
      #3000;
    end
    for (int k = 0; k < 20; k++) begin
      automatic int o = 1 + ($urandom % 4998);
      if (o % TAP == 0) o++;
      fire(o, 1'b0, e);
      pop_check(e, $sformatf("random offset %0d", o));
      #3000;
    end
    // Calibration input: pad ignored, alt_clk accepted.
    cal_sel = 1;
    #2000;
    hit_pad = 1; #500; hit_pad = 0;
    repeat (60) @(negedge clk_enc);
    chk(rd_empty && !busy, "pad ignored in calibration mode");
    fire(1777, 1'b1, e);
    pop_check(e, "calibration clock event");
    cal_sel = 0;
    #3000;
    // Second hit while busy: lost.
    @(posedge clk_ref); #1111;
    e.coarse = coarse; e.fine = wu_tdc_pkg::FINE_W'(exp_fine(TREF - 1111));
    hit_pad = 1; #500; hit_pad = 0;
    #100000;
    chk(busy, "still busy 100 ns after the first hit");
    hit_pad = 1; #500; hit_pad = 0;
    wait (!busy);
    repeat (3) @(negedge clk_enc);
    chk(int'(rd_level) == 1, "one record for two hits");
    pop_check(e, "first of two close hits");
    #3000;
    // Overflow: three events into a 2-deep FIFO.
    fire(2013, 1'b0, e);  #3000;
    fire(3031, 1'b0, e2); #3000;
    chk(rd_full, "FIFO full");
    fire(1201, 1'b0, e3); #3000;
    chk(drops == 16'd1, "third record dropped and counted");
    pop_check(e, "overflow: first kept");
    pop_check(e2, "overflow: second kept");
    chk(rd_empty, "overflow: nothing else stored");
    chk(max_dead < 1000000, $sformatf("dead time %0d ps below 1 us", max_dead));
    $display("max dead time %0d ps", max_dead);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
