// tb_coarse_counter: checks reset, the +1 per clock and the wrap of a
// reduced-width (6-bit) coarse counter against a counter kept by the test.
module tb_coarse_counter;

  localparam int W = 6;

  logic         clk = 1'b0;
  logic         rst;
  logic [W-1:0] count;
  int           checks = 0, failures = 0;
  int           model;
  int           wraps = 0;

  coarse_counter #(.W(W)) dut (.clk(clk), .rst(rst), .count(count));

  always #5 clk = ~clk;

  initial begin
    #100_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1'b1;
    @(negedge clk);
    @(negedge clk);
    checks++;
    if (count !== '0) failures++;
    rst = 1'b0;
    model = 0;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      model = (model + 1) % (1 << W);
      if (model == 0) wraps++;
      checks++;
      if (count !== W'(model)) begin
        failures++;
        $display("FAIL cycle %0d: expected %0d got %0d", t, model, count);
      end
      if (t == 150) begin
        rst = 1'b1;
        @(negedge clk);
        rst = 1'b0;
        model = 0;
        checks++;
        if (count !== '0) failures++;
      end
    end
    checks++;
    if (wraps == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
