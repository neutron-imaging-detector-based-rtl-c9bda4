// transfer_line_tx -- sending end of one 50-MHz parallel transfer line from
// the encoder to the memory module.
//
// Hit words arrive at up to one per 100-MHz clock from the hit collector and
// wait in a FIFO.  The line itself runs at half the encoder clock: line_slot
// is high on every second cycle, and a word crosses the line only on a cycle
// where line_slot, line_valid and line_ready are all high, giving at most one
// word per 20 ns (50 Mwords/s).  The memory holds line_ready low when it
// cannot take a word; the FIFO then fills, and once it is full in_ready
// drops and the hit collector keeps its words in its holding registers.
//
// The paper gives the two 50-MHz parallel lines and the memory's port count;
// the FIFO, its depth, the slot strobe and the ready signal are this design's
// choice (the paper does not describe the line protocol).
//
// Timing: line_slot is high in the first cycle after reset and on every
// second cycle after that.  line_data is the FIFO head and holds while
// line_valid is high and the word has not crossed.
// The assertion below is disabled during reset through rst_n, which Verilator
// reports as rst_n being used both asynchronously and synchronously; the
// logic itself uses rst_n only as an asynchronous reset.
module transfer_line_tx #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  // from the hit collector
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  // the parallel line
  output logic         line_slot,
  output logic         line_valid,
  input  logic         line_ready,
  output logic [W-1:0] line_data,
  output logic         fifo_full
);

  logic take;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) line_slot <= 1'b1;
    else        line_slot <= ~line_slot;
  end

  assign take = line_slot && line_ready;

  sync_fifo #(.W(W), .DEPTH(DEPTH)) u_fifo (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (in_valid),
    .in_ready  (in_ready),
    .in_data   (in_data),
    .out_valid (line_valid),
    .out_ready (take),
    .out_data  (line_data),
    .full      (fifo_full)
  );

  // A word offered on the line stays until it crosses.
  a_line_hold: assert property (@(posedge clk) disable iff (!rst_n)
      line_valid && !(line_slot && line_ready) |=> line_valid && $stable(line_data));

endmodule
