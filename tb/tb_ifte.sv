// tb_ifte: end-to-end test of the two-stage encoder at the published size,
// 276-bit raw code to 9-bit fine time. Every clock a random delay line pattern
// (the four kinds, with and without bubbles) is applied; exactly 9 clocks
// later the fine time must equal the tap index of its edge (275 for the
// no-edge pattern) with valid set. Idle (all-zero) samples must give valid=0.
module tb_ifte;
  import tb_pattern_pkg::*;

  localparam int W    = 276;
  localparam int NLOG = 9;
  localparam int LAT  = NLOG;

  logic            clk = 1'b0;
  logic [W-1:0]    raw;
  logic [NLOG-1:0] fine;
  logic            valid;
  int              checks = 0, failures = 0;
  int              exp_idx [0:9999];

  ifte #(.RAW_W(W), .NLOG(NLOG)) dut (.clk(clk), .raw(raw), .fine(fine), .valid(valid));

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
    int nin = 4000;
    int s;
    raw = '0;
    @(negedge clk);
    for (int t = 0; t < nin + LAT; t++) begin
      if (t < nin && (t % 16) != 15) begin
        p = make_pattern(W, 1 + (t % 4), $urandom_range(2, 0));
        raw = p.bits[W-1:0];
        exp_idx[t] = p.expect_idx;
      end else begin
        raw = '0;
        exp_idx[t] = -1;
      end
      @(negedge clk);
      s = t - LAT + 1;
      if (s >= 0 && s < nin) begin
        checks++;
        if (exp_idx[s] < 0 ? valid !== 1'b0
                           : (valid !== 1'b1 || fine !== NLOG'(exp_idx[s]))) begin
          failures++;
          if (failures < 10)
            $display("FAIL sample %0d: expected %0d, got fine %0d valid %0b", s, exp_idx[s],
                     fine, valid);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
