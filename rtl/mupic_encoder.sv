// mupic_encoder -- trigger-less strip encoder for a micro-pixel chamber
// neutron imager: every threshold crossing of every strip becomes one 32-bit
// word {edge, strip, time}, streamed to memory over two parallel lines.
//
// Data path, per clock of the 100-MHz encoder clock:
//   strip_sync   synchronizes the N_STRIPS discriminator levels and finds
//                leading and trailing edges;
//   tof_timer    counts clock ticks since the last beam-pulse start (t0);
//   hit_collector (one per line) stamps each edge with the time, holds it
//                per strip and emits one word per cycle;
//   transfer_line_tx (one per line) buffers the words in a FIFO_DEPTH-word
//                FIFO and sends one per 20 ns on its 50-MHz line while the
//                memory is ready.
// Strips are split evenly between the lines: strips 0..N_STRIPS/N_PORTS-1 go
// to line 0 and so on.  With the defaults, line 0 carries the 256 anode
// strips (numbers 0-255) and line 1 the 256 cathode strips (256-511); bit 30
// of line 0's words (strip bit 8) is therefore always 0.
//
// From the paper: the 100-MHz synchronizing clock, the 32-bit word with strip
// number, time and edge bit (0 leading, 1 trailing), one word per edge with
// no trigger, and two 50-MHz transfer lines to a two-port memory.  This
// design's choice: field widths and order, the t0 input, the anode/cathode
// split between the lines, the per-strip holding registers with lost-edge
// counting, the FIFOs and the valid/ready line protocol.
//
// Interface: asd[i] is strip i's discriminator output (asynchronous).  t0 is
// a synchronous one-cycle pulse.  Line p crosses a word on a clock edge where
// line_slot[p], line_valid[p] and line_ready[p] are all high.
// lost_count[p] counts edges dropped by line p's collector (saturating).
// Timing: a lone edge reaches line_valid on the 4th clock edge after asd changes; its
// time stamp is the tof_timer value present 2 clock edges after the change.
module mupic_encoder
  import encoder_pkg::*;
#(
  parameter int unsigned N_STR      = encoder_pkg::N_STRIPS,
  parameter int unsigned N_LINES    = encoder_pkg::N_PORTS,
  parameter int unsigned FIFO_DEPTH = 512,
  parameter bit          ACTIVE_LOW = 1'b0
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [N_STR-1:0]         asd,
  input  logic                     t0,
  output logic [N_LINES-1:0]       line_slot,
  output logic [N_LINES-1:0]       line_valid,
  input  logic [N_LINES-1:0]       line_ready,
  output logic [N_LINES-1:0][WORD_W-1:0] line_data,
  output logic [N_LINES-1:0][15:0] lost_count,
  output logic [N_LINES-1:0]       fifo_full,
  output logic                     time_wrap
);

  localparam int unsigned G = N_STR / N_LINES;   // strips per line

  logic [N_STR-1:0] lead, trail;
  tstamp_t          tstamp;

  strip_sync #(.N(N_STR), .ACTIVE_LOW(ACTIVE_LOW)) u_sync (
    .clk    (clk),
    .rst_n  (rst_n),
    .asd_in (asd),
    .lead   (lead),
    .trail  (trail)
  );

  tof_timer #(.W(TIME_W)) u_timer (
    .clk    (clk),
    .rst_n  (rst_n),
    .t0     (t0),
    .tstamp (tstamp),
    .wrap   (time_wrap)
  );

  for (genvar p = 0; p < N_LINES; p++) begin : g_line
    logic      c_valid, c_ready;
    hit_word_t c_word;

    hit_collector #(.N(G), .BASE(p * G), .LOST_W(16)) u_coll (
      .clk        (clk),
      .rst_n      (rst_n),
      .lead       (lead[p*G +: G]),
      .trail      (trail[p*G +: G]),
      .tstamp     (tstamp),
      .out_valid  (c_valid),
      .out_ready  (c_ready),
      .out_word   (c_word),
      .lost_count (lost_count[p])
    );

    transfer_line_tx #(.W(WORD_W), .DEPTH(FIFO_DEPTH)) u_tx (
      .clk        (clk),
      .rst_n      (rst_n),
      .in_valid   (c_valid),
      .in_ready   (c_ready),
      .in_data    (c_word),
      .line_slot  (line_slot[p]),
      .line_valid (line_valid[p]),
      .line_ready (line_ready[p]),
      .line_data  (line_data[p]),
      .fifo_full  (fifo_full[p])
    );
  end

  initial assert (N_STR % N_LINES == 0 && N_STR <= 2**STRIP_W)
    else $error("mupic_encoder: N_STR must divide evenly and fit the strip field");

endmodule
