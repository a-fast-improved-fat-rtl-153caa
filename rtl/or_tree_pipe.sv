// or_tree_pipe: pipelined OR reduction built from 4-input OR gates, used for
// the output bit trees of the fat tree encoder.
//
// The IN_W inputs are ORed four at a time (one FPGA look-up table each) and a
// register follows every level, so the result appears after
// ceil(log4(IN_W)) clocks. PAD further registers follow the last level to
// line this tree up with the slowest output bit. With IN_W = 1 and PAD = 0 the
// module is a wire and clk is unused (the MSB tree of on2bcc). Using 4-input gates with a register after each level
// follows the published structure; grouping the inputs from bit 0 upward is
// this design's choice.
module or_tree_pipe #(
  parameter int IN_W = 8,
  parameter int PAD  = 0
) (
  input  logic            clk,
  input  logic [IN_W-1:0] in,
  output logic            out
);

  // number of 4-input levels needed to reduce w inputs to one
  function automatic int levels4(input int w);
    int l = 0;
    int r = w;
    while (r > 1) begin
      r = (r + 3) / 4;
      l++;
    end
    return l;
  endfunction

  // width left after l levels
  function automatic int width_at(input int w, input int l);
    int r = w;
    for (int j = 0; j < l; j++) r = (r + 3) / 4;
    return r;
  endfunction

  localparam int LEV = levels4(IN_W);

  // lvl[l] holds the width_at(IN_W, l) signals after level l
  logic [IN_W-1:0] lvl [LEV+1];

  assign lvl[0] = in;

  for (genvar l = 1; l <= LEV; l++) begin : g_lev
    localparam int WI = width_at(IN_W, l - 1);
    localparam int WO = width_at(IN_W, l);
    logic [WO-1:0] nxt;
    always_comb begin
      nxt = '0;
      for (int i = 0; i < WI; i++) nxt[i / 4] = nxt[i / 4] | lvl[l-1][i];
    end
    always_ff @(posedge clk) begin
      lvl[l]         <= '0;
      lvl[l][WO-1:0] <= nxt;
    end
  end

  logic pipe [PAD+1];
  assign pipe[0] = lvl[LEV][0];
  for (genvar p = 1; p <= PAD; p++) begin : g_pad
    always_ff @(posedge clk) pipe[p] <= pipe[p-1];
  end
  assign out = pipe[PAD];

endmodule
