// on2bcc: one-out-of-N code to binary code converter (stage 2 of the improved
// fat tree encoder).
//
// A fat tree finds the index of the single 1 in H[N-1:0], N = 2**n.
// Basic tree: TP(0,i) = H[i] and TP(k,i) = TP(k-1,2i) | TP(k-1,2i+1) for
// k = 1..n-1, each 2-input OR followed by a register. The odd nodes of each
// level, OR(k,i) = TP(k,2i+1), are the signals whose k-th index bit is 1.
// Output bit trees: B[k] = OR of all OR(k,i), i < N/2**(k+1), reduced with
// pipelined 4-input ORs (or_tree_pipe). Bit k is ready k + ceil(log4(N/2**(k+1)))
// clocks after H; padding registers bring every bit to the latency of the MSB,
// B[n-1] = TP(n-1,1), which is n-1 clocks.
//
// valid is TP(n-1,0) | TP(n-1,1), the final OR of the basic tree: it is 1
// when H holds a 1, and tells "index 0" apart from "no 1 at all".
//
// Interface: onehot in, bin and valid out, LAT = n-1 clocks later, one new
// code every clock. If H holds several 1s, bin is the OR of their indices.
// The tree equations, the registers after every basic-tree OR and the 4-input
// output trees follow the published design; where the padding registers sit
// (all after the last level of each tree) and the valid output are this
// design's choices.
module on2bcc #(
  parameter int NLOG = 9,
  localparam int N   = 1 << NLOG,
  localparam int LAT = NLOG - 1
) (
  input  logic            clk,
  input  logic [N-1:0]    onehot,
  output logic [NLOG-1:0] bin,
  output logic            valid
);

  function automatic int levels4(input int w);
    int l = 0;
    int r = w;
    while (r > 1) begin
      r = (r + 3) / 4;
      l++;
    end
    return l;
  endfunction

  // ---------------- basic tree ----------------
  // tp[k] holds TP(k,i) in its low N>>k bits
  logic [N-1:0] tp [NLOG];

  assign tp[0] = onehot;

  for (genvar k = 1; k < NLOG; k++) begin : g_basic
    localparam int W = N >> k;
    logic [W-1:0] nxt;
    always_comb begin
      for (int i = 0; i < W; i++) nxt[i] = tp[k-1][2*i] | tp[k-1][2*i+1];
    end
    always_ff @(posedge clk) begin
      tp[k]        <= '0;
      tp[k][W-1:0] <= nxt;
    end
  end

  // ---------------- output bit trees ----------------
  for (genvar k = 0; k < NLOG; k++) begin : g_bit
    localparam int M   = N >> (k + 1);           // number of OR(k,i) nodes
    localparam int PAD = LAT - k - levels4(M);   // registers to equalise latency
    logic [M-1:0] or_k;
    always_comb begin
      for (int i = 0; i < M; i++) or_k[i] = tp[k][2*i+1];
    end
    or_tree_pipe #(.IN_W(M), .PAD(PAD)) u_tree (
      .clk (clk),
      .in  (or_k),
      .out (bin[k])
    );
  end

  assign valid = tp[NLOG-1][0] | tp[NLOG-1][1];

endmodule
