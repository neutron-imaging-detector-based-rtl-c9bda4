// strip_sync -- brings the asynchronous discriminator levels of a set of
// strips into the encoder clock domain and finds their edges.
//
// Each strip passes through a two-flip-flop synchronizer; a third register
// holds the previous synchronized level, and a change between the two marks
// a leading edge (level went to "over threshold") or a trailing edge (level
// went back).  Synchronizing to the 100-MHz encoder clock is what the paper
// describes; the two-stage synchronizer and the polarity parameter are this
// design's choice.  The paper's oscilloscope picture draws the discriminator
// output dropping while the signal is over threshold, but the polarity of the
// LVDS level is not stated, so ACTIVE_LOW selects it (default: active high).
//
// Interface: asd_in[i] is strip i's discriminator level (asynchronous).
// lead[i] / trail[i] are one-cycle pulses.
// Timing: an edge of asd_in appears on lead/trail 3 clock rising edges after it
// is first sampled, the same for every strip, so pulse widths are unaffected.
module strip_sync #(
  parameter int unsigned N          = 512,
  parameter bit          ACTIVE_LOW = 1'b0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] asd_in,
  output logic [N-1:0] lead,
  output logic [N-1:0] trail
);

  logic [N-1:0] meta, sync, prev;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      meta <= '0;
      sync <= '0;
      prev <= '0;
    end else begin
      meta <= ACTIVE_LOW ? ~asd_in : asd_in;
      sync <= meta;
      prev <= sync;
    end
  end

  always_comb begin
    lead  = sync & ~prev;
    trail = ~sync & prev;
  end

endmodule
