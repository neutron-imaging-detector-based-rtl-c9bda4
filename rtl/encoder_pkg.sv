// encoder_pkg -- shared types and constants of the strip encoder.
//
// The encoder turns every threshold crossing of a strip discriminator into
// one 32-bit word holding the strip number, a time stamp in 10-ns clock ticks
// and an edge bit (0 = leading edge, the signal rises above threshold;
// 1 = trailing edge, it falls back).  The 32-bit word, the three fields, the
// edge-bit meaning and the 100-MHz time base follow the paper; the field
// widths and their order in the word are this design's choice: 9 bits cover
// the 512 strips of a 256 x 256 strip detector, and the remaining 22 bits of
// time span 41.9 ms at 10 ns per tick.
package encoder_pkg;

  localparam int unsigned WORD_W    = 32;   // data word width (paper)
  localparam int unsigned STRIP_W   = 9;    // strip number field
  localparam int unsigned TIME_W    = WORD_W - 1 - STRIP_W;  // 22-bit time stamp
  localparam int unsigned N_STRIPS  = 512;  // 256 anode + 256 cathode strips
  localparam int unsigned N_PORTS   = 2;    // parallel transfer lines (paper)

  typedef enum logic {
    EDGE_LEADING  = 1'b0,   // start of the discriminator pulse, "0" in the paper
    EDGE_TRAILING = 1'b1    // end of the discriminator pulse, "1" in the paper
  } edge_e;

  typedef logic [STRIP_W-1:0] strip_t;
  typedef logic [TIME_W-1:0]  tstamp_t;

  // Bit 31: edge, bits 30..22: strip number, bits 21..0: time stamp.
  typedef struct packed {
    edge_e   edge_bit;
    strip_t  strip;
    tstamp_t tstamp;
  } hit_word_t;

endpackage
