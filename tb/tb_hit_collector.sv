// tb_hit_collector -- self-checking test of hit_collector (8 strips, strip
// numbers 8..15).
// 1. Eight simultaneous edges leave in strip order, one word per cycle.
// 2. Both edges of a strip are held in arrival order; a third edge that
//    finds its register occupied is lost and counted.
// 3. Random edges and random back-pressure: every word must match, in order,
//    an edge the testbench generated for that strip (edge bit and time), the
//    edges that never appear must equal lost_count, and offered words must
//    hold while not accepted.
module tb_hit_collector;
  import encoder_pkg::*;
  localparam int N = 8, BASE = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0] lead = '0, trail = '0;
  tstamp_t tstamp = '0;
  logic out_valid, out_ready = 1'b0;
  hit_word_t out_word;
  logic [15:0] lost_count;
  int checks = 0, failures = 0;

  hit_collector #(.N(N), .BASE(BASE)) dut (.clk, .rst_n, .lead, .trail, .tstamp,
                                           .out_valid, .out_ready, .out_word, .lost_count);

  always #5 clk = ~clk;
  always @(posedge clk) tstamp <= tstamp + 1'b1;

  typedef struct packed { edge_e e; tstamp_t t; } ev_t;
  ev_t exp_q [N][$];
  logic [N-1:0] level = '0;
  int skipped = 0, got = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // Collect accepted words and match them against the generated edges.
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int s;
    s = int'(out_word.strip) - BASE;
    got++;
    if (s < 0 || s >= N) check(0, $sformatf("strip %0d out of range", out_word.strip));
    else begin
      while (exp_q[s].size() > 0 &&
             (exp_q[s][0].e != out_word.edge_bit || exp_q[s][0].t != out_word.tstamp)) begin
        void'(exp_q[s].pop_front());
        skipped++;
      end
      check(exp_q[s].size() > 0, $sformatf("unexpected word strip %0d", out_word.strip));
      if (exp_q[s].size() > 0) void'(exp_q[s].pop_front());
    end
  end

  // Drive one cycle of edges: vector v of strips that toggle.
  task automatic drive(input logic [N-1:0] v);
    @(negedge clk);
    for (int i = 0; i < N; i++) begin
      lead[i]  = v[i] & ~level[i];
      trail[i] = v[i] &  level[i];
      if (v[i]) exp_q[i].push_back('{level[i] ? EDGE_TRAILING : EDGE_LEADING, tstamp});
      level[i] = level[i] ^ v[i];
    end
  endtask

  initial begin
    int first;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;

    // 1. eight simultaneous leading edges, consumer ready
    out_ready = 1'b1;
    drive('1);
    for (int k = 0; k < N; k++) begin
      @(negedge clk);
      lead = '0;
      trail = '0;
      check(out_valid && out_word.strip == strip_t'(BASE + k) && out_word.edge_bit == EDGE_LEADING,
            $sformatf("burst word %0d: valid %b strip %0d", k, out_valid, out_word.strip));
      // the same against the word's fixed bit positions: 31 edge, 30..22 strip
      check(out_word[31] == 1'b0 && out_word[30:22] == 9'(BASE + k), "raw word layout");
      @(posedge clk);
    end
    @(negedge clk);
    check(!out_valid, "burst should be drained after 8 cycles");

    // 2. consumer stalled: trailing, leading, then a second trailing edge
    //    on strip 0; the second trailing edge finds its register full
    out_ready = 1'b0;
    drive(8'h01);            // trailing edge of strip 0 held
    drive(8'h00);
    drive(8'h01);            // leading edge held in the other register
    drive(8'h00);
    drive(8'h01);            // trailing edge again: lost
    drive(8'h00);
    check(lost_count == 16'd1, $sformatf("lost_count %0d, expected 1", lost_count));
    check(out_valid && out_word.edge_bit == EDGE_TRAILING && out_word.strip == strip_t'(BASE),
          "held word must be the older (trailing) edge");
    void'(exp_q[0].pop_back());   // the lost edge
    out_ready = 1'b1;
    @(negedge clk);
    check(out_valid && out_word.edge_bit == EDGE_LEADING && out_word.strip == strip_t'(BASE),
          "then the leading edge");
    out_ready = 1'b1;
    repeat (2) drive('0);
    check(!out_valid, "strip 0 word drained");
    check(skipped == 0, "no word skipped so far");

    // 3. random traffic
    first = int'(lost_count);
    for (int c = 0; c < 20000; c++) begin
      logic [N-1:0] v;
      v = '0;
      for (int i = 0; i < N; i++) v[i] = ($urandom_range(6) == 0);
      drive(v);
      out_ready = ($urandom_range(99) < ((c / 2000) % 2 ? 90 : 40));
    end
    out_ready = 1'b1;
    repeat (N + 2) drive('0);
    for (int i = 0; i < N; i++) begin
      skipped += exp_q[i].size();
      exp_q[i].delete();
    end
    check(skipped == int'(lost_count) - first,
          $sformatf("edges missing %0d vs lost_count %0d", skipped, int'(lost_count) - first));
    check(skipped > 0, "random traffic should lose some edges");
    check(!out_valid, "all drained");
    $display("words %0d lost %0d", got, skipped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Offered word holds while not accepted.
  hit_word_t prev_word;
  logic prev_stall = 1'b0;
  always @(posedge clk) begin
    if (rst_n && prev_stall) check(out_valid && out_word == prev_word, "word changed while stalled");
    prev_stall <= rst_n && out_valid && !out_ready;
    prev_word  <= out_word;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
