// tb_mupic_encoder -- end-to-end test of the strip encoder at its default
// size: 512 strips (256 anode, 256 cathode), two transfer lines, 22-bit time.
//
// The testbench plays the discriminators: it raises and lowers strip levels
// and remembers, per strip, every edge with the time stamp it must carry
// (the time since the last t0, counted independently, plus the two-clock
// synchronizer delay).  Two memory models take the words from the lines.
// Every received word must be the next not-yet-seen edge of its strip, on
// the right line; edges that never arrive must equal the encoder's lost-edge
// counters.  Phases:
//   1. one pulse on one strip: latency to the line, both words, width;
//   2. t0 restarts the time stamps;
//   3. proton-triton-like tracks (15-30 neighbouring strips on each plane,
//      start times rising along the track, pulse widths 5-25 clocks) with a
//      memory that is ready half the time;
//   4. overload: the memory stays busy while tracks keep coming, so the FIFOs
//      fill and edges are lost; then the full line rate while they drain;
//   5. a track across the roll-over of the time counter.
// It counts how often each mechanism occurred and fails any that never did.
module tb_mupic_encoder;
  import encoder_pkg::*;
  localparam int NS = N_STRIPS, NL = N_PORTS, G = NS / NL;

  logic clk = 1'b0, rst_n = 1'b0, t0 = 1'b0;
  logic [NS-1:0] asd = '0;
  logic [NL-1:0] line_slot, line_valid, line_ready, fifo_full;
  logic [NL-1:0][WORD_W-1:0] line_data;
  logic [NL-1:0][15:0] lost_count;
  logic time_wrap;

  int unsigned ready_pct [NL];
  logic        force_busy = 1'b0;
  logic        rx_stb  [NL];
  logic [WORD_W-1:0] rx_word [NL];
  int unsigned n_words [NL], n_stall [NL], n_rate_err [NL];

  mupic_encoder dut (.clk, .rst_n, .asd, .t0, .line_slot, .line_valid, .line_ready,
                     .line_data, .lost_count, .fifo_full, .time_wrap);

  for (genvar p = 0; p < NL; p++) begin : g_mem
    vme_memory_model #(.W(WORD_W)) mem (.clk, .rst_n, .line_slot(line_slot[p]),
        .line_valid(line_valid[p]), .line_ready(line_ready[p]), .line_data(line_data[p]),
        .ready_pct(ready_pct[p]), .force_busy, .rx_stb(rx_stb[p]), .rx_word(rx_word[p]),
        .n_words(n_words[p]), .n_stall(n_stall[p]), .n_rate_err(n_rate_err[p]));
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------------------------------------------------------- time
  longint cyc = 0;          // clock edges since reset
  tstamp_t ref_t = '0;      // independent copy of the encoder's time
  int n_t0 = 0, n_wrap = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (t0) ref_t <= '0; else ref_t <= ref_t + 1'b1;
      if (time_wrap) n_wrap++;
    end
  end

  // ---------------------------------------------------------------- stimulus
  typedef struct packed { edge_e e; tstamp_t t; } ev_t;
  ev_t     exp_q  [NS][$];
  longint  rise_at [NS], fall_at [NS];
  longint  busy_until [NS];
  int      n_pending_sched = 0;
  int      n_edges = 0, n_multi = 0;

  // Apply the strip changes due in this cycle; called once per cycle at the
  // falling clock edge.
  task automatic step();
    int per_line [NL];
    @(negedge clk);
    for (int p = 0; p < NL; p++) per_line[p] = 0;
    if (n_pending_sched > 0) begin
      for (int s = 0; s < NS; s++) begin
        if (rise_at[s] == cyc) begin
          asd[s] = 1'b1;
          exp_q[s].push_back('{EDGE_LEADING, tstamp_t'(ref_t + 2)});
          per_line[s / G]++; n_edges++; n_pending_sched--;
        end else if (fall_at[s] == cyc) begin
          asd[s] = 1'b0;
          exp_q[s].push_back('{EDGE_TRAILING, tstamp_t'(ref_t + 2)});
          per_line[s / G]++; n_edges++; n_pending_sched--;
        end
      end
    end
    for (int p = 0; p < NL; p++) if (per_line[p] > 1) n_multi++;
  endtask

  task automatic run(input int n);
    repeat (n) step();
  endtask

  task automatic pulse(input int s, input longint start, input int width);
    if (busy_until[s] < cyc) begin           // strip idle: one scheduled pulse at a time
      rise_at[s] = cyc + start;
      fall_at[s] = cyc + start + width;
      busy_until[s] = fall_at[s] + 2;
      n_pending_sched += 2;
    end
  endtask

  // A proton-triton-like track on both planes, starting `start` cycles ahead.
  task automatic track(input longint start);
    int la, lc, a, c;
    la = 15 + $urandom_range(15);
    lc = 15 + $urandom_range(15);
    a  = $urandom_range(G - 1 - la);
    c  = G + $urandom_range(G - 1 - lc);
    for (int j = 0; j < la; j++) pulse(a + j, start + j / 2 + $urandom_range(1), 5 + $urandom_range(20));
    for (int j = 0; j < lc; j++) pulse(c + j, start + j / 2 + $urandom_range(1), 5 + $urandom_range(20));
  endtask

  // ---------------------------------------------------------------- receive
  int skipped = 0, got = 0;
  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < NL; p++) if (rx_stb[p]) begin
      hit_word_t w;
      int s;
      w = hit_word_t'(rx_word[p]);
      s = int'(w.strip);
      got++;
      check(s / G == p, $sformatf("strip %0d arrived on line %0d", s, p));
      while (exp_q[s].size() > 0 && (exp_q[s][0].e != w.edge_bit || exp_q[s][0].t != w.tstamp)) begin
        void'(exp_q[s].pop_front());
        skipped++;
      end
      check(exp_q[s].size() > 0,
            $sformatf("unexpected word strip %0d edge %0d t %0d", s, w.edge_bit, w.tstamp));
      if (exp_q[s].size() > 0) void'(exp_q[s].pop_front());
    end
  end

  int n_full_cycles = 0;
  always @(posedge clk) if (|fifo_full) n_full_cycles++;

  function automatic int lost_total();
    int t = 0;
    for (int p = 0; p < NL; p++) t += int'(lost_count[p]);
    return t;
  endfunction

  function automatic int queued();
    int t = 0;
    for (int s = 0; s < NS; s++) t += exp_q[s].size();
    return t;
  endfunction

  // ---------------------------------------------------------------- main
  initial begin
    longint t_chg;
    int lat, w0, wrate;
    for (int s = 0; s < NS; s++) begin rise_at[s] = -1; fall_at[s] = -1; busy_until[s] = -1; end
    for (int p = 0; p < NL; p++) ready_pct[p] = 100;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    run(10);

    // 1. single pulse on strip 5, width 12 clocks
    pulse(5, 1, 12);
    step();                          // nothing due yet
    step();                          // strip 5 rises at this falling edge
    t_chg = cyc;
    lat = 0;
    while (!line_valid[0] && lat < 20) begin @(posedge clk); lat++; end
    check(lat == 4, $sformatf("latency %0d clock edges, expected 4", lat));
    run(40);
    check(got == 2 && queued() == 0, $sformatf("single pulse: %0d words", got));

    // 2. restart the time base, then another pulse
    @(negedge clk) t0 = 1'b1;
    @(negedge clk) t0 = 1'b0;
    n_t0++;
    pulse(300, 3, 7);
    run(40);
    check(got == 4 && queued() == 0, "pulse after t0");

    // 3. tracks with a half-speed memory
    for (int p = 0; p < NL; p++) ready_pct[p] = 50;
    for (int k = 0; k < 100; k++) begin
      track(2);
      run(250);
    end
    run(400);
    check(queued() == 0 && lost_total() == 0,
          $sformatf("tracks: %0d edges outstanding, %0d lost", queued(), lost_total()));

    // 4. overload: memory busy, tracks every 40 cycles
    force_busy = 1'b1;
    for (int k = 0; k < 80; k++) begin
      track(2);
      run(40);
    end
    run(100);
    force_busy = 1'b0;
    for (int p = 0; p < NL; p++) ready_pct[p] = 100;
    run(4);
    w0 = int'(n_words[0]);
    run(400);
    wrate = int'(n_words[0]) - w0;
    check(wrate >= 199 && wrate <= 201, $sformatf("drain rate %0d words / 400 cycles", wrate));
    run(1200);
    check(lost_total() > 0, "overload should lose edges");

    // 5. a track across the roll-over of the time stamp
    repeat ((1 << TIME_W) - int'(ref_t) - 20) @(posedge clk);
    track(2);
    run(300);

    // end: everything outstanding must be accounted for by the lost counters
    run(200);
    skipped += queued();
    check(skipped == lost_total(), $sformatf("missing edges %0d vs lost %0d", skipped, lost_total()));
    for (int p = 0; p < NL; p++) check(n_rate_err[p] == 0, "two words in consecutive cycles");

    $display("edges %0d words %0d lost %0d | multi-edge cycles %0d, stall cycles %0d/%0d, FIFO-full cycles %0d, t0 %0d, wraps %0d",
             n_edges, got, lost_total(), n_multi, n_stall[0], n_stall[1], n_full_cycles, n_t0, n_wrap);
    check(n_multi > 0, "no simultaneous edges occurred");
    check(n_stall[0] > 0 && n_stall[1] > 0, "memory never stalled a line");
    check(n_full_cycles > 0, "FIFO never full");
    check(lost_total() > 0, "no edge lost");
    check(n_t0 > 0, "no t0");
    check(n_wrap > 0, "time stamp never wrapped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4_400_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
