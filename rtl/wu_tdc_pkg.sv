// Package wu_tdc_pkg: sizes and the readout word shared by the wave union
// TDC blocks.
//
// The delay line has RAW_W = 276 taps, so the encoder sees a 276-bit
// non-thermometer code; it is padded to ENC_N = 2**ENC_LOG2 = 512 bits for the
// fat tree, which yields a 9-bit fine time. After a hit the channel records the
// fine times of K_CYCLES = 16 consecutive clock cycles. These four numbers are
// the published ones. The coarse counter width and the 32-bit readout word
// layout are this design's own choice.
package wu_tdc_pkg;

  localparam int RAW_W    = 276;  // taps of the delay line (raw code width)
  localparam int ENC_LOG2 = 9;    // n: binary code width
  localparam int ENC_N    = 512;  // N = 2**n: one-out-of-N code width
  localparam int K_CYCLES = 16;   // cycles recorded after each hit
  localparam int FINE_W   = ENC_LOG2;
  localparam int COARSE_W = 21;   // own choice: 21 bits of 8.33 ns = 17.5 ms
  localparam int NUM_CH   = 2;    // channels on the evaluation board

  // Readout word, one per recorded clock cycle (32 bits).
  //   first : set on the first word of a hit (the cycle the first edge is seen)
  //   valid : the encoder found a 1-0 transition (or the no-edge flag) this cycle
  //   coarse: coarse counter at the time the word is written
  //   fine  : 9-bit encoder output; RAW_W-1 flags a sample with no edge
  typedef struct packed {
    logic                first;
    logic                valid;
    logic [COARSE_W-1:0] coarse;
    logic [FINE_W-1:0]   fine;
  } tdc_word_t;

  localparam int WORD_W = $bits(tdc_word_t);

endpackage
