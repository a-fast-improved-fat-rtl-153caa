// nt2onc: non-thermometer code to one-out-of-N code converter (stage 1 of the
// improved fat tree encoder).
//
// A "valid edge" in the sampled delay line is a 1 at tap i with 0 at the taps
// above it. Each output bit H[i] is a 4-input AND of I[i] and the inverted
// I[i+1], I[i+2], I[i+3], the indices wrapping round to I[0..2] at the top of
// the code, and is registered. Requiring the pattern 0001 rather than 01
// removes one- and two-bit bubbles just below the edge (0000101111 and
// 0000100111 both give a single 1). When the code has no edge
// (11..1100..00) only H[N-1] is set, which the next stage turns into the
// code N-1, a "no edge" flag.
//
// Interface: raw I[N-1:0] in, H[N-1:0] out, one clock of latency.
// The gate equations and the register after each gate follow the published
// design; the registers have no reset, as in its gate diagram, and flush
// after one clock.
module nt2onc #(
  parameter int N = 276
) (
  input  logic         clk,
  input  logic [N-1:0] raw,
  output logic [N-1:0] onehot
);

  logic [N-1:0] h_d;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      h_d[i] = raw[i] & ~raw[(i + 1) % N] & ~raw[(i + 2) % N] & ~raw[(i + 3) % N];
    end
  end

  always_ff @(posedge clk) onehot <= h_d;

endmodule
