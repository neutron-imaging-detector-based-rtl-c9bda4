// tb_workload_rates -- the full-size encoder under the neutron rates of the
// imaging measurements it was built for.
//
// Each scenario is one beam frame: t0, then neutrons arriving at random (a
// Poisson process at the given rate) for the frame length.  Every neutron
// makes a proton-triton track on both strip planes, 10-20 neighbouring
// strips each with start times rising along the track and pulse widths of
// 5-25 clocks.  That is ~60 words per neutron, the ratio of the quoted 9 MHz
// data rate to ~1.5e5 neutrons/s.  Both memory ports accept a word in half
// of the line slots.
//   A. 42 kcps for 20 ms (Cd test-chart imaging rate)
//   B. 150 kcps for 5 ms (highest rate with linear response)
// Checks: every word is the next undelivered edge of its strip, with the
// exact time since t0; every edge that never arrives is counted by the
// encoder as lost, and fewer than 0.1 % are (only two tracks sharing strips
// within a few hundred ns can lose edges at these rates); words plus lost
// edges equal the edges generated; no two words cross a line in consecutive
// clocks.
module tb_workload_rates;
  import encoder_pkg::*;
  localparam int NS = N_STRIPS, NL = N_PORTS, G = NS / NL;

  logic clk = 1'b0, rst_n = 1'b0, t0 = 1'b0;
  logic [NS-1:0] asd = '0;
  logic [NL-1:0] line_slot, line_valid, line_ready, fifo_full;
  logic [NL-1:0][WORD_W-1:0] line_data;
  logic [NL-1:0][15:0] lost_count;
  logic time_wrap;

  int unsigned ready_pct [NL];
  logic        rx_stb  [NL];
  logic [WORD_W-1:0] rx_word [NL];
  int unsigned n_words [NL], n_stall [NL], n_rate_err [NL];

  mupic_encoder dut (.clk, .rst_n, .asd, .t0, .line_slot, .line_valid, .line_ready,
                     .line_data, .lost_count, .fifo_full, .time_wrap);

  for (genvar p = 0; p < NL; p++) begin : g_mem
    vme_memory_model #(.W(WORD_W)) mem (.clk, .rst_n, .line_slot(line_slot[p]),
        .line_valid(line_valid[p]), .line_ready(line_ready[p]), .line_data(line_data[p]),
        .ready_pct(ready_pct[p]), .force_busy(1'b0), .rx_stb(rx_stb[p]), .rx_word(rx_word[p]),
        .n_words(n_words[p]), .n_stall(n_stall[p]), .n_rate_err(n_rate_err[p]));
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  longint cyc = 0;
  tstamp_t ref_t = '0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (t0) ref_t <= '0; else ref_t <= ref_t + 1'b1;
    end
  end

  typedef struct packed { edge_e e; tstamp_t t; } ev_t;
  ev_t     exp_q  [NS][$];
  longint  rise_at [NS], fall_at [NS], busy_until [NS];
  int      n_sched = 0, n_edges = 0;

  task automatic step();
    @(negedge clk);
    if (n_sched > 0) begin
      for (int s = 0; s < NS; s++) begin
        if (rise_at[s] == cyc) begin
          asd[s] = 1'b1;
          exp_q[s].push_back('{EDGE_LEADING, tstamp_t'(ref_t + 2)});
          n_edges++; n_sched--;
        end else if (fall_at[s] == cyc) begin
          asd[s] = 1'b0;
          exp_q[s].push_back('{EDGE_TRAILING, tstamp_t'(ref_t + 2)});
          n_edges++; n_sched--;
        end
      end
    end
  endtask

  task automatic pulse(input int s, input longint start, input int width);
    if (busy_until[s] < cyc) begin           // strip idle: one scheduled pulse at a time
      rise_at[s] = cyc + start;
      fall_at[s] = cyc + start + width;
      busy_until[s] = fall_at[s] + 2;
      n_sched += 2;
    end
  endtask

  task automatic track();
    int la, lc, a, c;
    la = 10 + $urandom_range(10);
    lc = 10 + $urandom_range(10);
    a  = $urandom_range(G - 1 - la);
    c  = G + $urandom_range(G - 1 - lc);
    for (int j = 0; j < la; j++) pulse(a + j, 2 + j / 2 + $urandom_range(1), 5 + $urandom_range(20));
    for (int j = 0; j < lc; j++) pulse(c + j, 2 + j / 2 + $urandom_range(1), 5 + $urandom_range(20));
  endtask

  int skipped = 0, got = 0;
  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < NL; p++) if (rx_stb[p]) begin
      hit_word_t w;
      int s;
      w = hit_word_t'(rx_word[p]);
      s = int'(w.strip);
      got++;
      check(s / G == p, "word on the wrong line");
      while (exp_q[s].size() > 0 && (exp_q[s][0].e != w.edge_bit || exp_q[s][0].t != w.tstamp)) begin
        void'(exp_q[s].pop_front());
        skipped++;
      end
      check(exp_q[s].size() > 0, $sformatf("unexpected word strip %0d", s));
      if (exp_q[s].size() > 0) void'(exp_q[s].pop_front());
    end
  end

  function automatic int queued();
    int t = 0;
    for (int s = 0; s < NS; s++) t += exp_q[s].size();
    return t;
  endfunction

  // One beam frame at `rate_hz` neutrons/s for `frame_cycles` clocks.
  task automatic frame(input string name, input int unsigned rate_hz, input int frame_cycles);
    int n_neutrons = 0, e0, g0, lost0, sk0, lost;
    e0 = n_edges; g0 = got; sk0 = skipped; lost0 = int'(lost_count[0]) + int'(lost_count[1]);
    @(negedge clk) t0 = 1'b1;
    @(negedge clk) t0 = 1'b0;
    for (int c = 0; c < frame_cycles; c++) begin
      // probability per 10-ns clock = rate * 1e-8
      if (($urandom % 100_000_000) < rate_hz) begin
        track();
        n_neutrons++;
      end
      step();
    end
    repeat (2000) step();
    check(queued() == 0, $sformatf("%s: %0d edges undelivered", name, queued()));
    lost = int'(lost_count[0]) + int'(lost_count[1]) - lost0;
    // every edge that did not arrive is one the encoder counted as lost
    check(skipped - sk0 == lost, $sformatf("%s: %0d edges missing, %0d counted lost", name, skipped - sk0, lost));
    check(got - g0 + lost == n_edges - e0, $sformatf("%s: words %0d + lost %0d vs edges %0d", name, got - g0, lost, n_edges - e0));
    // pile-up of two tracks on the same strips within a few hundred ns is
    // the only loss expected at these rates: well under 0.1 %
    check(lost * 1000 < n_edges - e0, $sformatf("%s: %0d of %0d edges lost", name, lost, n_edges - e0));
    check(n_neutrons > 0, $sformatf("%s: no neutrons", name));
    $display("%s: %0d neutrons in %0d us (%0d /s), %0d words, %0d lost, %0d words/neutron, %0d Mwords/s",
             name, n_neutrons, frame_cycles / 100, longint'(n_neutrons) * 100_000_000 / frame_cycles,
             got - g0, lost, (got - g0) / (n_neutrons > 0 ? n_neutrons : 1),
             (got - g0) * 100 / frame_cycles);
  endtask

  initial begin
    for (int s = 0; s < NS; s++) begin rise_at[s] = -1; fall_at[s] = -1; busy_until[s] = -1; end
    for (int p = 0; p < NL; p++) ready_pct[p] = 50;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    frame("A 42 kcps", 42_000, 2_000_000);
    frame("B 150 kcps", 150_000, 500_000);
    for (int p = 0; p < NL; p++) check(n_rate_err[p] == 0, "two words in consecutive cycles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
