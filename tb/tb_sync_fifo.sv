// tb_sync_fifo: checks the readout FIFO (reduced to 8 words) against a queue
// model: random writes and reads that respect full and empty, a run that
// fills it up (full seen), a run that drains it (empty seen), data order and
// the count output.
module tb_sync_fifo;

  localparam int WIDTH = 32;
  localparam int DEPTH = 8;

  logic             clk = 1'b0;
  logic             rst;
  logic             wr_en, rd_en;
  logic [WIDTH-1:0] wr_data, rd_data;
  logic             full, empty;
  logic [3:0]       count;
  int               checks = 0, failures = 0;
  int               full_seen = 0, empty_seen = 0;
  logic [WIDTH-1:0] model [$];

  sync_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (
    .clk(clk), .rst(rst), .wr_en(wr_en), .wr_data(wr_data), .full(full),
    .rd_en(rd_en), .rd_data(rd_data), .empty(empty), .count(count));

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int wp;
    rst = 1'b1; wr_en = 1'b0; rd_en = 1'b0; wr_data = '0;
    @(negedge clk); @(negedge clk);
    rst = 1'b0;
    for (int t = 0; t < 3000; t++) begin
      // phases: fill-biased, drain-biased, balanced
      wp = (t % 600 < 200) ? 85 : (t % 600 < 400) ? 15 : 50;
      // compare the visible state with the model before the edge
      checks++;
      if (empty !== (model.size() == 0) || full !== (model.size() == DEPTH) ||
          count !== 4'(model.size()) || (model.size() > 0 && rd_data !== model[0])) begin
        failures++;
        if (failures < 10)
          $display("FAIL t=%0d size %0d: empty %0b full %0b count %0d data %h", t,
                   model.size(), empty, full, count, rd_data);
      end
      if (full)  full_seen++;
      if (empty) empty_seen++;
      wr_en   = !full && ($urandom_range(99, 0) < wp);
      rd_en   = !empty && ($urandom_range(99, 0) < 100 - wp);
      wr_data = $urandom;
      @(posedge clk);
      if (rd_en) void'(model.pop_front());
      if (wr_en) model.push_back(wr_data);
      @(negedge clk);
    end
    checks += 2;
    if (full_seen == 0) failures++;
    if (empty_seen == 0) failures++;
    $display("full seen %0d, empty seen %0d", full_seen, empty_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
