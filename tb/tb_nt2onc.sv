// tb_nt2onc: self-checking test of the stage-1 converter at its full width
// (276 taps). Every clock a random pattern of the four kinds, with and without
// one- or two-bit bubbles, is applied; one clock later the one-hot output must
// hold exactly one 1, at the tap the pattern was built with (W-1 for the
// no-edge pattern). An all-zero input must give an all-zero output.
module tb_nt2onc;
  import tb_pattern_pkg::*;

  localparam int W = 276;

  logic         clk = 1'b0;
  logic [W-1:0] raw;
  logic [W-1:0] onehot;
  int           checks = 0, failures = 0;
  int           kinds_seen [5];
  int           bubbles_seen = 0;

  nt2onc #(.N(W)) dut (.clk(clk), .raw(raw), .onehot(onehot));

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pattern_t p;
    logic [W-1:0] exp_v;
    raw = '0;
    @(negedge clk);
    for (int t = 0; t < 4000; t++) begin
      p = make_pattern(W, 1 + (t % 4), $urandom_range(2, 0));
      raw = p.bits[W-1:0];
      kinds_seen[p.kind]++;
      if (p.bubbles > 0) bubbles_seen++;
      @(negedge clk);
      exp_v = '0;
      exp_v[p.expect_idx] = 1'b1;
      checks++;
      if (onehot !== exp_v) begin
        failures++;
        if (failures < 10)
          $display("FAIL kind=%0d bubbles=%0d exp idx %0d got %b", p.kind, p.bubbles,
                   p.expect_idx, onehot);
      end
    end
    raw = '0;
    @(negedge clk);
    checks++;
    if (onehot !== '0) begin
      failures++;
      $display("FAIL idle input gave %b", onehot);
    end
    for (int k = 1; k <= 4; k++) begin
      checks++;
      if (kinds_seen[k] == 0) failures++;
    end
    checks++;
    if (bubbles_seen == 0) failures++;
    $display("patterns 1..4: %0d %0d %0d %0d, with bubbles: %0d", kinds_seen[1], kinds_seen[2],
             kinds_seen[3], kinds_seen[4], bubbles_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
