// tb_strip_sync -- self-checking test of strip_sync.
// Drives random discriminator levels on 8 strips (changed between clock
// edges) in both polarities and compares lead/trail with edges found on a
// copy of the inputs delayed by two clocks, the synchronizer depth.
module tb_strip_sync;
  localparam int N = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0] asd, lead, trail, lead_n, trail_n;
  int checks = 0, failures = 0;

  strip_sync #(.N(N))                     dut   (.clk, .rst_n, .asd_in(asd),  .lead,        .trail);
  strip_sync #(.N(N), .ACTIVE_LOW(1'b1))  dut_n (.clk, .rst_n, .asd_in(~asd), .lead(lead_n), .trail(trail_n));

  always #5 clk = ~clk;

  // Input history: h[0] is the level sampled at the latest clock edge.
  logic [N-1:0] h [4];
  int n_edges = 0;

  initial begin
    asd = '0;
    for (int i = 0; i < 4; i++) h[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      if (c > 3) begin
        // level two samples ago (sync) against three samples ago (prev)
        logic [N-1:0] exp_lead, exp_trail;
        exp_lead  = h[1] & ~h[2];
        exp_trail = ~h[1] & h[2];
        checks++;
        if (lead !== exp_lead || trail !== exp_trail) begin
          failures++;
          $display("cycle %0d: lead %b/%b trail %b/%b", c, lead, exp_lead, trail, exp_trail);
        end
        checks++;
        if (lead_n !== exp_lead || trail_n !== exp_trail) failures++;
        n_edges += $countones(exp_lead | exp_trail);
      end
      if ($urandom_range(3) == 0) asd = N'($urandom);
      @(posedge clk);
      #1;
      h[3] = h[2]; h[2] = h[1]; h[1] = h[0]; h[0] = asd;
    end
    checks++;
    if (n_edges < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
