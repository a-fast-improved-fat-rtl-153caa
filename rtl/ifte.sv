// ifte: improved fat tree encoder, the non-thermometer code to binary code
// converter of the wave union TDC.
//
// Stage 1 (nt2onc) turns the RAW_W-bit sampled delay line into a one-out-of-
// RAW_W code, suppressing bubbles; the code is widened with zeros to
// N = 2**NLOG bits (H[N-1:RAW_W] = 0) and stage 2 (on2bcc) encodes it into an
// NLOG-bit fine time. fine is the tap index of the valid 1-0 edge;
// fine = RAW_W-1 flags a sample with no edge; valid = 0 means the sample had
// no 1 in the one-out-of-N code (delay line idle).
//
// Interface: raw in (from the tap sampling registers), fine and valid out
// LAT = NLOG clocks later (1 for stage 1, NLOG-1 for stage 2); a new code is
// accepted every clock. Default sizes (276-bit input, N = 512, n = 9) are the
// published ones.
module ifte #(
  parameter int RAW_W = 276,
  parameter int NLOG  = 9,
  localparam int N    = 1 << NLOG,
  localparam int LAT  = NLOG
) (
  input  logic             clk,
  input  logic [RAW_W-1:0] raw,
  output logic [NLOG-1:0]  fine,
  output logic             valid
);

  logic [RAW_W-1:0] h;
  logic [N-1:0]     h_full;

  nt2onc #(.N(RAW_W)) u_stage1 (
    .clk    (clk),
    .raw    (raw),
    .onehot (h)
  );

  always_comb begin
    h_full            = '0;
    h_full[RAW_W-1:0] = h;
  end

  on2bcc #(.NLOG(NLOG)) u_stage2 (
    .clk    (clk),
    .onehot (h_full),
    .bin    (fine),
    .valid  (valid)
  );

  initial begin
    assert (RAW_W <= N && RAW_W >= 4)
      else $error("ifte: RAW_W=%0d does not fit N=%0d", RAW_W, N);
  end

endmodule
