// wu_tdc: two-channel wave union TDC built around the improved fat tree
// encoder.
//
// Each channel (wu_tdc_channel) has its own delay line with wave union
// launcher, sampling registers, encoder, hit recorder and readout FIFO; one
// coarse counter, clocked by the 120 MHz system clock, gives all channels the
// same coarse time. A hit is measured as the coarse count of a sample minus
// the fine time of the launcher edge it caught (see wu_tdc_channel); the K
// words per hit let the readout average several wave union edges.
//
// Interface: clk (8.33 ns in the published design), rst (synchronous, active
// high), hit[c] per channel, and per channel a first-word-fall-through FIFO
// read port (rd_en, rd_data, empty, count) with busy and a sticky overflow
// flag. The readout of the evaluation board is not part of this design; the
// FIFO ports take its place. Two channels, 276 taps, a 9-bit fine time and
// K = 16 follow the paper; the delay line is a behavioural model (see
// wu_delay_line), so this top simulates but does not synthesize as a whole.
module wu_tdc
  import wu_tdc_pkg::*;
#(
  parameter int NCH        = NUM_CH,
  parameter int K          = K_CYCLES,
  parameter int FIFO_DEPTH = 256,
  parameter int TAP_PS     = 31,
  parameter int TOSC_PS    = 9491,
  parameter int BUBBLE_PCT = 10
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic [NCH-1:0]              hit,
  input  logic [NCH-1:0]              rd_en,
  output tdc_word_t                   rd_data  [NCH],
  output logic [NCH-1:0]              empty,
  output logic [$clog2(FIFO_DEPTH):0] count    [NCH],
  output logic [NCH-1:0]              busy,
  output logic [NCH-1:0]              overflow
);

  logic [COARSE_W-1:0] coarse;

  coarse_counter #(.W(COARSE_W)) u_coarse (
    .clk   (clk),
    .rst   (rst),
    .count (coarse)
  );

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    wu_tdc_channel #(
      .N_TAPS     (RAW_W),
      .K          (K),
      .FIFO_DEPTH (FIFO_DEPTH),
      .TAP_PS     (TAP_PS),
      .TOSC_PS    (TOSC_PS),
      .BUBBLE_PCT (BUBBLE_PCT)
    ) u_ch (
      .clk      (clk),
      .rst      (rst),
      .hit      (hit[c]),
      .coarse   (coarse),
      .rd_en    (rd_en[c]),
      .rd_data  (rd_data[c]),
      .empty    (empty[c]),
      .count    (count[c]),
      .busy     (busy[c]),
      .overflow (overflow[c])
    );
  end

endmodule
