// tb_hit_recorder: drives the recorder with hand-made encoder streams and
// compares the words it writes with the words expected from the stream:
//  - activity right after reset is ignored (the recorder first waits for a
//    quiet delay line);
//  - a long burst gives exactly K words, the first flagged, taken from the
//    first K cycles of the burst, written in the same cycles (one per clock);
//  - the rest of that burst is ignored;
//  - a short burst still gives K words, the tail ones with valid = 0;
//  - a full FIFO blocks writes and sets the sticky overflow flag.
module tb_hit_recorder;
  import wu_tdc_pkg::*;

  localparam int K     = 16;
  localparam int QUIET = 11;

  logic                clk = 1'b0;
  logic                rst;
  logic                valid;
  logic [FINE_W-1:0]   fine;
  logic [COARSE_W-1:0] coarse;
  logic                fifo_full;
  logic                wr_en;
  tdc_word_t           wr_data;
  logic                busy, overflow;
  int                  checks = 0, failures = 0;
  int                  cycle = 0;

  tdc_word_t got [$];
  int        got_cycle [$];
  tdc_word_t exp_q [$];
  int        exp_cycle [$];

  hit_recorder #(.K(K), .QUIET(QUIET)) dut (
    .clk(clk), .rst(rst), .valid(valid), .fine(fine), .coarse(coarse),
    .fifo_full(fifo_full), .wr_en(wr_en), .wr_data(wr_data), .busy(busy),
    .overflow(overflow));

  always #5 clk = ~clk;

  always @(posedge clk) begin
    cycle++;
    coarse <= coarse + 1'b1;
    if (wr_en) begin
      got.push_back(wr_data);
      got_cycle.push_back(cycle);
    end
  end

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic idle(int n);
    for (int i = 0; i < n; i++) begin
      valid = 1'b0; fine = FINE_W'($urandom);
      @(negedge clk);
    end
  endtask

  // burst of n valid cycles; the first nrec cycles of the stream starting here
  // are expected as words (the tail of the K words comes from idle cycles)
  task automatic burst(int n, bit expect_rec);
    for (int i = 0; i < n; i++) begin
      tdc_word_t w;
      valid = 1'b1; fine = FINE_W'($urandom);
      w.first = (i == 0); w.valid = 1'b1; w.coarse = coarse; w.fine = fine;
      if (expect_rec && i < K) begin
        exp_q.push_back(w);
        exp_cycle.push_back(cycle + 1);
      end
      @(negedge clk);
    end
    for (int i = n; expect_rec && i < K; i++) begin
      tdc_word_t w;
      valid = 1'b0; fine = FINE_W'($urandom);
      w.first = 1'b0; w.valid = 1'b0; w.coarse = coarse; w.fine = fine;
      exp_q.push_back(w);
      exp_cycle.push_back(cycle + 1);
      @(negedge clk);
    end
  endtask

  initial begin
    rst = 1'b1; valid = 1'b0; fine = '0; coarse = '0; fifo_full = 1'b0;
    @(negedge clk); @(negedge clk);
    rst = 1'b0;
    burst(5, 0);            // garbage while not armed
    idle(QUIET + 3);
    burst(25, 1);           // long burst: K words, rest ignored
    idle(QUIET + 3);
    burst(5, 1);            // short burst: padded with idle cycles
    idle(QUIET + 3);
    burst(3, 1);
    idle(QUIET + 3);
    checks++;
    if (overflow) failures++;
    fifo_full = 1'b1;
    burst(4, 0);            // FIFO full: nothing written, overflow set
    idle(K);                // the whole K-cycle window stays blocked
    fifo_full = 1'b0;
    idle(QUIET + 3);
    checks++;
    if (!overflow) begin
      failures++;
      $display("FAIL overflow not flagged");
    end
    burst(20, 1);           // records again after the blocked hit
    idle(QUIET + 3);

    checks++;
    if (got.size() != exp_q.size()) begin
      failures++;
      $display("FAIL %0d words written, %0d expected", got.size(), exp_q.size());
    end
    for (int i = 0; i < exp_q.size() && i < got.size(); i++) begin
      checks++;
      if (got[i] !== exp_q[i] || got_cycle[i] != exp_cycle[i]) begin
        failures++;
        if (failures < 10)
          $display("FAIL word %0d: got %h at %0d, expected %h at %0d", i, got[i], got_cycle[i],
                   exp_q[i], exp_cycle[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
