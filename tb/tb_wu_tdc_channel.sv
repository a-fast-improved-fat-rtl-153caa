// tb_wu_tdc_channel: test of one TDC channel with a coarse count driven by
// the test and a heavy bubble rate (30 %). For each of several hits at random
// times it reads the K words back and checks: the count of words, the first
// flag, each fine time exactly against a reference scan of the tap sample it
// came from, each fine time within 2 taps of where the launcher edge must be,
// and the hit time rebuilt from the first word.
module tb_wu_tdc_channel;
  import wu_tdc_pkg::*;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int TCLK  = 8333;
  localparam int TAP   = 31;
  localparam int TOSC  = 9491;
  localparam int N     = RAW_W;
  localparam int NHITS = 10;
  localparam int PIPE  = 1 + ENC_LOG2;

  logic                clk = 1'b0;
  logic                rst;
  logic                hit;
  logic [COARSE_W-1:0] coarse;
  logic                rd_en;
  tdc_word_t           rd_data;
  logic                empty, busy, overflow;
  logic [8:0]          count;
  int                  checks = 0, failures = 0;
  longint              edge_t [int];
  logic [N-1:0]        raw_at [int];
  int                  bubbles = 0;

  wu_tdc_channel #(.BUBBLE_PCT(30)) dut (
    .clk(clk), .rst(rst), .hit(hit), .coarse(coarse), .rd_en(rd_en), .rd_data(rd_data),
    .empty(empty), .count(count), .busy(busy), .overflow(overflow));

  always begin
    #4166 clk = 1'b1;
    #4167 clk = 1'b0;
  end

  always @(posedge clk) begin
    edge_t[int'(coarse)] = longint'($time);
    raw_at[int'(coarse) - 1] = dut.raw_q;
    coarse <= rst ? '0 : coarse + 1'b1;
  end

  initial begin
    #100_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_code(logic [N-1:0] r, output bit v);
    int code = 0;
    v = 1'b0;
    for (int i = 0; i < N; i++)
      if (r[i] && !r[(i+1)%N] && !r[(i+2)%N] && !r[(i+3)%N]) begin
        code |= i;
        v = 1'b1;
      end
    return code;
  endfunction

  initial begin
    longint th;
    hit = 1'b0; rd_en = 1'b0; coarse = '0;
    rst = 1'b1;
    repeat (5) @(negedge clk);
    rst = 1'b0;
    repeat (20) @(negedge clk);
    for (int h = 0; h < NHITS; h++) begin
      int nw;
      #($urandom_range(20_000, 0));
      th  = longint'($time);
      hit = 1'b1;
      #180_000;
      hit = 1'b0;
      #200_000;
      @(negedge clk);
      nw = 0;
      while (!empty) begin
        tdc_word_t w;
        int s, code, e;
        bit v;
        longint d;
        w = rd_data;
        s = int'(w.coarse) - PIPE;
        code = ref_code(raw_at[s], v);
        for (int i = 1; i < N - 2; i++)
          if (raw_at[s][i-1] && !raw_at[s][i] && (raw_at[s][i+1] || raw_at[s][i+2])) bubbles++;
        checks++;
        if (w.valid !== v || int'(w.fine) != code || w.first != (nw == 0)) begin
          failures++;
          $display("FAIL hit %0d word %0d: fine %0d valid %0b first %0b, reference %0d %0b",
                   h, nw, w.fine, w.valid, w.first, code, v);
        end
        d = (edge_t[s] - th) % TOSC;
        e = int'(d / TAP);
        checks++;
        if (e > 1 && e < N - 4 && (int'(w.fine) - e > 2 || e - int'(w.fine) > 2)) begin
          failures++;
          $display("FAIL hit %0d word %0d: fine %0d, launcher edge at tap %0d", h, nw, w.fine, e);
        end
        if (e >= N && int'(w.fine) != N - 1) begin
          failures++;
          $display("FAIL hit %0d word %0d: fine %0d, expected the no-edge flag", h, nw, w.fine);
        end
        if (nw == 0 && int'(w.fine) < N - 4) begin
          longint est;
          est = edge_t[s] - longint'(w.fine) * TAP;
          checks++;
          if (est - th > 3 * TAP || th - est > 3 * TAP) begin
            failures++;
            $display("FAIL hit %0d: rebuilt hit time off by %0d ps", h, est - th);
          end
        end
        rd_en = 1'b1;
        @(negedge clk);
        rd_en = 1'b0;
        nw++;
      end
      checks++;
      if (nw != K_CYCLES) begin
        failures++;
        $display("FAIL hit %0d: %0d words", h, nw);
      end
    end
    checks += 2;
    if (bubbles == 0) begin failures++; $display("FAIL no bubbles"); end
    if (overflow)     begin failures++; $display("FAIL unexpected overflow"); end
    $display("samples with bubbles: %0d", bubbles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
