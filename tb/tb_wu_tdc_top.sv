// tb_wu_tdc_top: the 16-channel TDC end to end, at its default size (320-tap
// lines, 16-deep FIFOs, 16 channels).
//
// Events are scheduled at picosecond times on the channel pads and on the
// shared calibration clock. For each event the testbench works out the
// expected record on its own: coarse is the shared counter value when the event
// arrives. fine is the sum, over the four interleaved combs, of the run of
// ones from tap 0 and the run of zeros from the last tap of the tap pattern.
// That pattern is the wave union delayed (i+1)*TAP_PS at tap i, seen at the
// first reference edge after the event.
// A reader process pops every channel's FIFO and compares each record, in
// order, with that channel's queue of expected records. A record nobody
// expected is a failure.
//
// Scenarios, each counted, and each a failure if it never happens: events on
// all 16 channels, several of them within one reference period;
// differential pairs between two channels at 0.22 ns, 333.46 ns and 666.68 ns;
// calibration through alt_clk on one channel while the others ignore it;
// a hit lost because its channel is still encoding; FIFO overflow with the
// reader held off; and the worst-case 42-cycle encode (event just before the
// edge, so the zeros side scans all 40 chunks).
`timescale 1ps/1ps
module tb_wu_tdc_top;
  localparam int unsigned NCH = wu_tdc_pkg::N_CHANNELS, N = wu_tdc_pkg::N_TAPS,
                          S = wu_tdc_pkg::SEGMENTS,
                          DEPTH = wu_tdc_pkg::FIFO_DEPTH;
  localparam int unsigned TAP = 20, FALL = 200, RISE = 400;  // top defaults
  localparam longint TREF = 5000;

  logic clk_ref = 1'b1, clk_enc = 1'b1, rst, alt_clk;
  logic [NCH-1:0] hit_pad, cal_sel, rd_en, rd_empty, rd_full, busy, hold;
  wu_tdc_pkg::tdc_event_t rd_data [NCH];
  logic [$clog2(DEPTH+1)-1:0] rd_level [NCH];
  logic [15:0] drops [NCH];
  logic [wu_tdc_pkg::COARSE_W-1:0] coarse_now;

  wu_tdc_pkg::tdc_event_t expq [NCH][$];
  int checks = 0, failures = 0;
  int n_rec = 0, n_cal = 0, n_lost = 0, n_ovf = 0, n_worst = 0, n_diff = 0, n_multi = 0;
  int ch_seen [NCH];
  int inflight = 0;   // scheduled hits not yet sent

  wu_tdc_top dut (
    .clk_ref, .clk_enc, .rst, .hit_pad, .alt_clk, .cal_sel, .rd_en,
    .rd_data, .rd_empty, .rd_full, .rd_level, .drops, .busy, .coarse_now);

  always #2500 clk_ref = ~clk_ref;
  always #5000 clk_enc = ~clk_enc;

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

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

  // Expected record for an event arriving now.
  function automatic wu_tdc_pkg::tdc_event_t record_now();
    wu_tdc_pkg::tdc_event_t r;
    longint dt = TREF - ($time % TREF);
    r.coarse = coarse_now;
    r.fine   = wu_tdc_pkg::FINE_W'(exp_fine(dt));
    return r;
  endfunction

  // Hit channel ch after delay ps; expect a record unless keep is 0.
  task automatic hit_after(input int ch, input longint delay, input logic keep);
    inflight++;
    fork begin
      #(delay);
      if (keep) expq[ch].push_back(record_now());
      hit_pad[ch] = 1'b1;
      #800;
      hit_pad[ch] = 1'b0;
      inflight--;
    end join_none
  endtask

  // Reader: pops every channel that is not held and checks the record.
  always @(negedge clk_enc) begin
    for (int c = 0; c < NCH; c++) begin
      rd_en[c] = 1'b0;
      if (!rst && !rd_empty[c] && !hold[c]) begin
        checks++;
        if (expq[c].size() == 0) begin
          failures++;
          $display("FAIL unexpected record on channel %0d at %0t", c, $time);
        end else begin
          automatic wu_tdc_pkg::tdc_event_t e = expq[c].pop_front();
          if (rd_data[c] !== e) begin
            failures++;
            $display("FAIL ch %0d at %0t: got coarse %0d fine %0d, expected coarse %0d fine %0d",
                     c, $time, rd_data[c].coarse, rd_data[c].fine, e.coarse, e.fine);
          end
          if (e.fine == wu_tdc_pkg::FINE_W'(N)) n_worst++;
        end
        n_rec++;
        ch_seen[c]++;
        rd_en[c] = 1'b1;
      end
    end
  end

  task automatic settle();
    // Wait until every channel is idle and every queue drained.
    int guard = 0;
    do begin
      @(negedge clk_enc);
      guard++;
    end while (guard < 20000 &&
               (inflight != 0 || busy != '0 || (rd_empty | hold) != '1 || pending() != 0));
    if (guard >= 20000) begin
      failures++;
      $display("FAIL settle timeout at %0t: busy %h pending %0d", $time, busy, pending());
      for (int c = 0; c < NCH; c++) if (expq[c].size() != 0) $display("  ch %0d waits for %0d", c, expq[c].size());
    end
    #10000;
  endtask

  function automatic int pending();
    int n = 0;
    for (int c = 0; c < NCH; c++) if (!hold[c]) n += expq[c].size();
    return n;
  endfunction

  initial begin
    #400000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint base;
    hit_pad = '0; cal_sel = '0; rd_en = '0; hold = '0; alt_clk = 0;
    foreach (ch_seen[c]) ch_seen[c] = 0;
    rst = 1;
    repeat (4) @(negedge clk_enc);
    rst = 0;
    repeat (10) @(negedge clk_enc);
    chk(busy == '0 && rd_empty == '1, "idle after reset");

    // 1. Every channel, all hit inside one reference period, then spread out.
    for (int round = 0; round < 3; round++) begin
      @(posedge clk_ref);
      for (int c = 0; c < NCH; c++) begin
        automatic longint off = 1 + ((c * 311 + round * 97) % 4990);
        if (off % TAP == 0) off++;
        hit_after(c, off, 1'b1);
      end
      n_multi++;
      settle();
    end
    for (int k = 0; k < 48; k++) begin
      automatic int c = $urandom % NCH;
      automatic longint d = 1 + $urandom % 20000;
      if (((d + $time) % TREF) == 0 || ((TREF - ((d + $time) % TREF)) % TAP) == 0) d++;
      hit_after(c, d, 1'b1);
      settle();
    end

    // 2. Differential pairs between channels 0 and 1.
    for (int i = 0; i < 3; i++) begin
      // Separations of the paper's differential measurement examples.
      automatic longint sep = (i == 0) ? 220 : (i == 1) ? 333460 : 666680;
      @(posedge clk_ref);
      base = 1237 + 100 * i;
      hit_after(0, base, 1'b1);
      hit_after(1, base + sep, 1'b1);
      settle();
      n_diff++;
    end

    // 3. Calibration: channel 5 takes alt_clk; nobody else may record it.
    cal_sel[5] = 1'b1;
    #3000;
    for (int k = 0; k < 4; k++) begin
      @(posedge clk_ref);
      #(1000 + 733 * k);
      expq[5].push_back(record_now());
      alt_clk = 1'b1; #900; alt_clk = 1'b0;
      settle();
      n_cal++;
    end
    cal_sel[5] = 1'b0;
    #3000;

    // 4. A second hit while channel 3 is encoding is lost.
    @(posedge clk_ref);
    hit_after(3, 2111, 1'b1);
    hit_after(3, 2111 + 150000, 1'b0);
    #100000;
    chk(busy[3], "channel 3 busy after first hit");
    settle();
    chk(ch_seen[3] > 0, "channel 3 recorded");
    n_lost++;

    // 5. Overflow: hold the reader of channel 7 and send DEPTH+2 events.
    hold[7] = 1'b1;
    for (int k = 0; k < DEPTH + 2; k++) begin
      @(posedge clk_ref);
      hit_after(7, 1500 + 37 * k, k < DEPTH);
      wait (busy[7]);
      wait (!busy[7]);
      #10000;
    end
    chk(rd_full[7], "channel 7 FIFO full");
    chk(drops[7] == 16'd2, $sformatf("channel 7 dropped %0d, expected 2", drops[7]));
    if (drops[7] != 0) n_ovf++;
    hold[7] = 1'b0;
    settle();

    // 6. Worst case: event 7 ps before the edge; no tap reached yet.
    @(posedge clk_ref);
    hit_after(9, TREF - 7, 1'b1);
    settle();

    for (int c = 0; c < NCH; c++) begin
      chk(expq[c].size() == 0, $sformatf("channel %0d: all expected records read", c));
      chk(ch_seen[c] > 0, $sformatf("channel %0d used", c));
    end
    chk(n_multi > 0, "same-period hits on all channels happened");
    chk(n_diff == 3, "differential pairs happened");
    chk(n_cal > 0, "calibration events happened");
    chk(n_lost > 0, "lost hit while busy happened");
    chk(n_ovf > 0, "FIFO overflow happened");
    chk(n_worst > 0, "worst-case encode happened");
    $display("records %0d, same-period rounds %0d, differential %0d, calibration %0d, lost-while-busy %0d, overflow %0d, worst-case %0d",
             n_rec, n_multi, n_diff, n_cal, n_lost, n_ovf, n_worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
