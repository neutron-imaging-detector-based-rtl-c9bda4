// tof_timer -- the encoder's time base: a free-running counter of 100-MHz
// clock ticks (10 ns per count) whose value is stamped into every hit word.
//
// The paper says the words carry "the time relative to the internal clock of
// the encoder" and that neutron energy is found from the time of flight since
// the start of each beam pulse; how the encoder learns of the beam pulse is
// not described.  This design therefore offers a synchronous t0 input that
// restarts the count at zero on the next clock edge, and lets the counter run
// and wrap (modulo 2^W) when no t0 arrives.  A one-cycle wrap pulse marks each
// roll-over.  With W = 22 a count spans 41.9 ms.
//
// Interface: t0 is a one-cycle pulse, synchronous to clk.
// Timing: tstamp is 0 in the cycle after t0 is sampled high.
module tof_timer #(
  parameter int unsigned W = 22
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         t0,
  output logic [W-1:0] tstamp,
  output logic         wrap
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tstamp <= '0;
      wrap   <= 1'b0;
    end else if (t0) begin
      tstamp <= '0;
      wrap   <= 1'b0;
    end else begin
      tstamp <= tstamp + 1'b1;
      wrap   <= &tstamp;
    end
  end

endmodule
