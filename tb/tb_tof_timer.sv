// tb_tof_timer -- self-checking test of tof_timer with a 6-bit counter:
// counting from reset, restart at zero after t0, roll-over with its wrap
// pulse, all against an independent integer count.
module tb_tof_timer;
  localparam int W = 6;
  logic clk = 1'b0, rst_n = 1'b0, t0 = 1'b0;
  logic [W-1:0] tstamp;
  logic wrap;
  int checks = 0, failures = 0;
  int ticks, n_wrap = 0, n_t0 = 0;

  tof_timer #(.W(W)) dut (.clk, .rst_n, .t0, .tstamp, .wrap);

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    ticks = 0;
    for (int c = 0; c < 1000; c++) begin
      @(negedge clk);
      checks++;
      if (tstamp != W'(ticks % (1 << W))) begin
        failures++;
        $display("cycle %0d: tstamp %0d expected %0d", c, tstamp, ticks % (1 << W));
      end
      checks++;
      // wrap is high for one cycle when the count has just rolled to zero
      if (wrap != (ticks != 0 && ticks % (1 << W) == 0)) failures++;
      if (wrap) n_wrap++;
      t0 = ($urandom_range(150) == 0);
      @(posedge clk);
      if (t0) begin ticks = 0; n_t0++; end
      else ticks++;
      #1 t0 = 1'b0;
    end
    checks++;
    if (n_wrap == 0 || n_t0 == 0) failures++;
    $display("wraps %0d, t0 restarts %0d", n_wrap, n_t0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
