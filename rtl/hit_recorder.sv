// hit_recorder: turns the encoder's stream of fine times into readout words.
//
// A wave union launcher started by a hit oscillates, so the delay line shows
// one edge in (almost) every following clock cycle. When the recorder is
// armed and the encoder reports valid, it writes that cycle's fine time as
// the first word of a hit and then the fine times of the next K-1 cycles, K
// words in all, each with the coarse time. It then waits for QUIET
// consecutive cycles with valid low (launcher stopped, delay line empty)
// before it arms again; it also starts in this waiting state after reset, so
// the unreset encoder pipeline is flushed before anything is recorded.
// A word that meets a full FIFO is dropped and sets the sticky overflow flag.
//
// Interface: valid/fine from the encoder, coarse from the coarse counter,
// fifo_full from the FIFO; wr_en/wr_data to the FIFO (one word per clock at
// most); busy while recording; overflow until reset. The valid, coarse and
// fine fields of wr_data are the inputs of the same cycle, unregistered; the
// FIFO registers them. Recording K = 16 cycles
// after a valid hit follows the paper; the arming rule, the word layout and
// the overflow handling are this design's choices.
module hit_recorder
  import wu_tdc_pkg::*;
#(
  parameter int K     = K_CYCLES,
  parameter int QUIET = ENC_LOG2 + 2
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                valid,
  input  logic [FINE_W-1:0]   fine,
  input  logic [COARSE_W-1:0] coarse,
  input  logic                fifo_full,
  output logic                wr_en,
  output tdc_word_t           wr_data,
  output logic                busy,
  output logic                overflow
);

  typedef enum logic [1:0] {S_QUIET, S_IDLE, S_REC} state_t;

  state_t state;
  int unsigned rec_cnt;    // words of this hit written so far
  int unsigned quiet_cnt;  // consecutive cycles with valid low

  logic want_write;

  assign want_write = (state == S_IDLE && valid) || (state == S_REC);
  assign wr_en      = want_write && !fifo_full;
  assign busy       = (state == S_REC);

  always_comb begin
    wr_data.first  = (state == S_IDLE);
    wr_data.valid  = valid;
    wr_data.coarse = coarse;
    wr_data.fine   = fine;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_QUIET;
      rec_cnt   <= 0;
      quiet_cnt <= 0;
      overflow  <= 1'b0;
    end else begin
      if (want_write && fifo_full) overflow <= 1'b1;
      case (state)
        S_QUIET: begin
          if (valid) quiet_cnt <= 0;
          else if (quiet_cnt + 1 >= QUIET) begin
            quiet_cnt <= 0;
            state     <= S_IDLE;
          end else quiet_cnt <= quiet_cnt + 1;
        end
        S_IDLE: begin
          if (valid) begin
            rec_cnt <= 1;
            state   <= (K > 1) ? S_REC : S_QUIET;
          end
        end
        default: begin
          rec_cnt <= rec_cnt + 1;
          if (rec_cnt + 1 >= K) state <= S_QUIET;
        end
      endcase
    end
  end

  a_no_write_when_full: assert property (@(posedge clk) disable iff (rst) !(wr_en && fifo_full))
    else $error("hit_recorder: write while FIFO full");

endmodule
