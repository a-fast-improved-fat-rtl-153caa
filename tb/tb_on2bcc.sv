// tb_on2bcc: self-checking test of the pipelined fat tree at its full size
// (N = 512, n = 9). A new one-hot code (or, now and then, an all-zero code)
// enters every clock; exactly NLOG-1 clocks later bin must equal its index and
// valid must be set, so both the value and the 8-clock latency and the
// one-code-per-clock rate are checked.
module tb_on2bcc;

  localparam int NLOG = 9;
  localparam int N    = 1 << NLOG;
  localparam int LAT  = NLOG - 1;

  logic            clk = 1'b0;
  logic [N-1:0]    onehot;
  logic [NLOG-1:0] bin;
  logic            valid;
  int              checks = 0, failures = 0;

  // expected outputs, indexed by the clock the input was applied
  int              exp_idx [0:9999];
  logic            exp_vld [0:9999];

  on2bcc #(.NLOG(NLOG)) dut (.clk(clk), .onehot(onehot), .bin(bin), .valid(valid));

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nin = 3000;
    onehot = '0;
    @(negedge clk);
    for (int t = 0; t < nin + LAT + 1; t++) begin
      if (t < nin) begin
        exp_idx[t] = (t < N) ? t : int'($urandom_range(N - 1, 0));
        exp_vld[t] = ($urandom_range(9, 0) != 0);
        onehot = '0;
        if (exp_vld[t]) onehot[exp_idx[t]] = 1'b1;
      end else begin
        onehot = '0;
      end
      @(negedge clk);
      // output now belongs to the input applied LAT clocks before this one
      if (t - LAT + 1 >= 0 && t - LAT + 1 < nin) begin
        int s;
        s = t - LAT + 1;
        checks++;
        if (valid !== exp_vld[s] || (exp_vld[s] && bin !== NLOG'(exp_idx[s]))) begin
          failures++;
          if (failures < 10)
            $display("FAIL input %0d: idx %0d vld %0b, got bin %0d valid %0b", s,
                     exp_idx[s], exp_vld[s], bin, valid);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
