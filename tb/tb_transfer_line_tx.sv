// tb_transfer_line_tx -- self-checking test of transfer_line_tx with an
// 8-word FIFO.  A source offers numbered words at random; a memory model
// takes them with random readiness and a long busy period.  Checks: words
// arrive complete and in order, never two in consecutive cycles, only on
// line_slot cycles, line_slot alternates, the FIFO reports full during the
// busy period and the input is refused then, and with the memory always
// ready the line sustains one word per two cycles.
module tb_transfer_line_tx;
  localparam int W = 32, DEPTH = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_ready;
  logic [W-1:0] in_data = '0;
  logic line_slot, line_valid, line_ready, fifo_full;
  logic [W-1:0] line_data;
  int unsigned ready_pct = 100;
  logic force_busy = 1'b0;
  logic rx_stb;
  logic [W-1:0] rx_word;
  int unsigned n_words, n_stall, n_rate_err;
  int checks = 0, failures = 0;
  int next_in = 0, next_out = 0, n_full = 0, n_refused = 0;

  transfer_line_tx #(.W(W), .DEPTH(DEPTH)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data,
      .line_slot, .line_valid, .line_ready, .line_data, .fifo_full);
  vme_memory_model #(.W(W)) mem (.clk, .rst_n, .line_slot, .line_valid, .line_ready,
      .line_data, .ready_pct, .force_busy, .rx_stb, .rx_word, .n_words, .n_stall, .n_rate_err);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic prev_slot = 1'b0;
  bit acc = 1'b0;
  always @(posedge clk) if (rst_n) begin
    if (rx_stb) begin
      check(rx_word == W'(next_out), $sformatf("got %0d expected %0d", rx_word, next_out));
      next_out++;
    end
    acc = in_valid && in_ready;
    if (acc) next_in++;
    if (fifo_full) n_full++;
    if (in_valid && !in_ready) n_refused++;
    check(line_slot != prev_slot, "line_slot must alternate");
    prev_slot <= line_slot;
  end

  initial begin
    int t_start, w_start;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    prev_slot = 1'b0;
    // phase 1: random source, random memory
    ready_pct = 60;
    for (int c = 0; c < 6000; c++) begin
      @(negedge clk);
      // a new offer only once the previous one was taken
      if (!in_valid || acc) begin
        in_valid = ($urandom_range(2) == 0);
        in_data  = W'(next_in);
      end
      force_busy = (c >= 2000 && c < 2300);
    end
    // phase 2: saturate the line with the memory always ready
    ready_pct = 100;
    @(negedge clk);
    in_valid = 1'b1;
    in_data  = W'(next_in);
    repeat (20) @(negedge clk) in_data = W'(next_in);
    t_start = 0; w_start = int'(n_words);
    for (int c = 0; c < 1000; c++) begin
      @(negedge clk);
      in_data = W'(next_in);
    end
    w_start = int'(n_words) - w_start;
    check(w_start >= 498 && w_start <= 501, $sformatf("saturated rate %0d words in 1000 cycles", w_start));
    in_valid = 1'b0;
    repeat (40) @(negedge clk);
    check(next_out == next_in, $sformatf("received %0d of %0d", next_out, next_in));
    check(n_rate_err == 0, "two words in consecutive cycles");
    check(n_full > 0 && n_refused > 0, "FIFO never filled");
    check(n_stall > 0, "memory never stalled the line");
    $display("words %0d stall cycles %0d full cycles %0d", next_out, n_stall, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
