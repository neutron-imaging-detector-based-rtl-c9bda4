// vme_memory_model -- behavioural stand-in for one write port of the VME
// memory module that receives the encoder's words (not synthesizable logic;
// testbench use only).
//
// It takes a word on a clock edge where line_slot, line_valid and its own
// line_ready are high, and reports it on rx_stb/rx_word in the following
// cycle.  line_ready is high with probability READY_PCT percent each cycle,
// and held low while force_busy is high, to imitate a memory that cannot keep
// up with the line.  It counts the words received and the cycles in which a
// word waited for ready, and flags two takes in consecutive cycles, which a
// 50-MHz line fed by a 100-MHz clock must never show.
module vme_memory_model #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         line_slot,
  input  logic         line_valid,
  output logic         line_ready,
  input  logic [W-1:0] line_data,
  input  int unsigned  ready_pct,
  input  logic         force_busy,
  output logic         rx_stb,
  output logic [W-1:0] rx_word,
  output int unsigned  n_words,
  output int unsigned  n_stall,
  output int unsigned  n_rate_err
);
  logic last_take;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      line_ready <= 1'b0;
      rx_stb     <= 1'b0;
      rx_word    <= '0;
      n_words    <= 0;
      n_stall    <= 0;
      n_rate_err <= 0;
      last_take  <= 1'b0;
    end else begin
      rx_stb    <= line_slot && line_valid && line_ready;
      rx_word   <= line_data;
      last_take <= line_slot && line_valid && line_ready;
      if (line_slot && line_valid && line_ready) begin
        n_words <= n_words + 1;
        if (last_take) n_rate_err <= n_rate_err + 1;
      end
      if (line_valid && !line_ready) n_stall <= n_stall + 1;
      line_ready <= !force_busy && ($urandom_range(99) < ready_pct);
    end
  end
endmodule
