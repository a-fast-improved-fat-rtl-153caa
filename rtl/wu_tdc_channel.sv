// wu_tdc_channel: one wave union TDC channel.
//
// The hit starts the wave union launcher at the foot of the tapped delay line
// (wu_delay_line, a behavioural model of the FPGA carry chain). On every
// rising clock edge a bank of N_TAPS flip-flops samples all taps; this raw
// non-thermometer code goes through the improved fat tree encoder (ifte),
// which returns the tap index of the 1-0 edge as a 9-bit fine time NLOG
// clocks later. The hit recorder writes the fine times of K consecutive
// cycles after a hit, each with the coarse count, into the readout FIFO.
//
// Timing: a tap sample taken at clock edge S is written to the FIFO at edge
// S + 1 + ENC_LOG2, so the word's coarse value is that of edge S plus 10.
// The time of the launcher edge seen at S is then
//   t = (coarse - 10) * T_CLK - fine * T_TAP.
//
// Interface: clk, rst (synchronous, active high), hit (asynchronous input of
// the delay line), coarse from the shared counter, and the FIFO read side.
// The structure (delay line, sampling registers, encoder, FIFO with coarse
// time) follows the paper's block diagram; the recorder's arming rule, the
// FIFO size and word layout are this design's choices.
module wu_tdc_channel
  import wu_tdc_pkg::*;
#(
  parameter int N_TAPS     = RAW_W,
  parameter int K          = K_CYCLES,
  parameter int FIFO_DEPTH = 256,
  parameter int TAP_PS     = 31,
  parameter int TOSC_PS    = 9491,
  parameter int BUBBLE_PCT = 10
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic                          hit,
  input  logic [COARSE_W-1:0]           coarse,
  input  logic                          rd_en,
  output tdc_word_t                     rd_data,
  output logic                          empty,
  output logic [$clog2(FIFO_DEPTH):0]   count,
  output logic                          busy,
  output logic                          overflow
);

  logic [N_TAPS-1:0]  taps;
  logic [N_TAPS-1:0]  raw_q;
  logic [FINE_W-1:0] fine;
  logic              valid;
  logic              wr_en, full;
  tdc_word_t         wr_data;

  wu_delay_line #(
    .N_TAPS     (N_TAPS),
    .TAP_PS     (TAP_PS),
    .TOSC_PS    (TOSC_PS),
    .STEP_PS    (TAP_PS),
    .BUBBLE_PCT (BUBBLE_PCT)
  ) u_line (
    .hit  (hit),
    .taps (taps)
  );

  // sampling registers following the delay line
  always_ff @(posedge clk) raw_q <= taps;

  ifte #(.RAW_W(N_TAPS), .NLOG(ENC_LOG2)) u_ifte (
    .clk   (clk),
    .raw   (raw_q),
    .fine  (fine),
    .valid (valid)
  );

  hit_recorder #(.K(K)) u_rec (
    .clk       (clk),
    .rst       (rst),
    .valid     (valid),
    .fine      (fine),
    .coarse    (coarse),
    .fifo_full (full),
    .wr_en     (wr_en),
    .wr_data   (wr_data),
    .busy      (busy),
    .overflow  (overflow)
  );

  sync_fifo #(.WIDTH(WORD_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk     (clk),
    .rst     (rst),
    .wr_en   (wr_en),
    .wr_data (wr_data),
    .full    (full),
    .rd_en   (rd_en),
    .rd_data (rd_data),
    .empty   (empty),
    .count   (count)
  );

endmodule
