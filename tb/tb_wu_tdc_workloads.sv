// tb_wu_tdc_workloads: the two measurements of the published evaluation, run
// on the two-channel TDC at its default parameters.
//
// 1. Launcher period: from each pair of successive words of a hit that caught
//    two successive launcher edges, T_OSC = (fine_i - fine_(i+1))*T_TAP + T_CLK.
//    Mean and standard deviation are printed; every single value must lie
//    within 2 taps of the model's 9491 ps ("no error values").
// 2. Cable delay test: the same hit reaches channel 1 CABLE_PS after channel
//    0, at a random phase to the clock. Each channel's hit time is rebuilt
//    from the first M distinct launcher edges of its 16 words,
//    t = edge_time - fine*T_TAP - m*T_OSC, averaged over m = 0..M-1, for
//    M = 1, 4 and 8. The interval between channels is compared with CABLE_PS;
//    its spread over all hits divided by sqrt(2) is the single-channel RMS.
//    The mean must be within 10 ps and the RMS must fall as M grows (here the
//    only error is the bin quantisation of an ideal, uniform delay line, so
//    absolute values are much smaller than on silicon).
module tb_wu_tdc_workloads;
  import wu_tdc_pkg::*;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int TCLK     = 8333;
  localparam int TAP      = 31;
  localparam int TOSC     = 9491;
  localparam int N        = RAW_W;
  localparam int NHITS    = 200;
  localparam int CABLE_PS = 5123;
  localparam int PIPE     = 1 + ENC_LOG2;
  localparam int NM       = 3;

  logic       clk = 1'b0;
  logic       rst;
  logic [1:0] hit;
  logic [1:0] rd_en = '0;
  tdc_word_t  rd_data [2];
  logic [1:0] empty, busy, overflow;
  logic [8:0] count [2];

  int         checks = 0, failures = 0;
  longint     edge_t [int];

  // per channel, per hit: words in order
  tdc_word_t  words [2][NHITS][$];
  int         hit_idx [2] = '{-1, -1};

  wu_tdc dut (
    .clk(clk), .rst(rst), .hit(hit), .rd_en(rd_en), .rd_data(rd_data), .empty(empty),
    .count(count), .busy(busy), .overflow(overflow));

  always begin
    #4166 clk = 1'b1;
    #4167 clk = 1'b0;
  end

  initial begin
    #400_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) edge_t[int'(dut.u_coarse.count)] = longint'($time);

  always @(negedge clk) rd_en = rst ? 2'b00 : ~empty;

  always @(posedge clk) begin
    for (int ch = 0; ch < 2; ch++) begin
      if (!rst && rd_en[ch]) begin
        if (rd_data[ch].first) hit_idx[ch]++;
        if (hit_idx[ch] >= 0 && hit_idx[ch] < NHITS) words[ch][hit_idx[ch]].push_back(rd_data[ch]);
      end
    end
  end

  // hit time from the first m_max distinct launcher edges of one hit's words
  function automatic real hit_time(int ch, int h, int m_max, output bit ok);
    real    sum = 0.0;
    int     m = 0, used = 0, prev = -1;
    ok = 1'b0;
    foreach (words[ch][h][j]) begin
      tdc_word_t w = words[ch][h][j];
      int f = int'(w.fine);
      longint ts = edge_t[int'(w.coarse) - PIPE];
      if (j > 0) begin
        if (f >= N - 4 || prev < 0) begin
          // no edge in this sample, or none before: edge number unknown here
          if (f < N - 4) m++;
        end else if (f < prev) m++;
        else if (f >= prev + 200) begin
          prev = f;
          continue;           // the same edge seen once more, further along
        end
      end
      prev = (f < N - 4) ? f : -1;
      if (f < N - 4 && m < m_max) begin
        sum += real'(ts - longint'(f) * TAP - longint'(m) * TOSC);
        used++;
      end
    end
    ok = (used == m_max);
    return ok ? sum / used : 0.0;
  endfunction

  initial begin
    int     mlist [NM] = '{1, 4, 8};
    real    rms [NM];
    longint tsum = 0, tsq = 0;
    int     tn = 0, tbad = 0;
    hit = '0;
    rst = 1'b1;
    repeat (5) @(negedge clk);
    rst = 1'b0;
    repeat (20) @(negedge clk);
    for (int i = 0; i < NHITS; i++) begin
      #(400_000 + $urandom_range(TCLK, 0));
      hit[0] = 1'b1;
      #(CABLE_PS);
      hit[1] = 1'b1;
      #(180_000 - CABLE_PS);
      hit[0] = 1'b0;
      #(CABLE_PS);
      hit[1] = 1'b0;
    end
    #1_000_000;

    // ---- 1: launcher period from successive fine times
    for (int ch = 0; ch < 2; ch++)
      for (int h = 0; h < NHITS; h++)
        for (int j = 1; j < words[ch][h].size(); j++) begin
          int a, b;
          a = int'(words[ch][h][j-1].fine);
          b = int'(words[ch][h][j].fine);
          if (a < N - 4 && b < N - 4 && b < a) begin
            int t;
            t = (a - b) * TAP + TCLK;
            tsum += t;
            tsq  += longint'(t) * t;
            tn++;
            if (t - TOSC > 2 * TAP || TOSC - t > 2 * TAP) tbad++;
          end
        end
    checks += 2;
    if (tn < NHITS) failures++;
    if (tbad != 0) begin
      failures++;
      $display("FAIL %0d launcher period values off by more than 2 taps", tbad);
    end
    $display("launcher period: %0d values, mean %0.1f ps, std %0.1f ps", tn,
             real'(tsum) / tn, $sqrt(real'(tsq) / tn - (real'(tsum) / tn) ** 2));

    // ---- 2: cable delay test with 1, 4 and 8 edges
    for (int k = 0; k < NM; k++) begin
      real s, sq, mean;
      int  n;
      s = 0.0; sq = 0.0; n = 0;
      for (int h = 0; h < NHITS; h++) begin
        bit ok0, ok1;
        real t0, t1;
        t0 = hit_time(0, h, mlist[k], ok0);
        t1 = hit_time(1, h, mlist[k], ok1);
        if (ok0 && ok1) begin
          s  += t1 - t0;
          sq += (t1 - t0) ** 2;
          n++;
        end
      end
      mean   = s / n;
      rms[k] = $sqrt(sq / n - mean ** 2) / $sqrt(2.0);
      $display("cable delay, %0d edge(s): %0d hits, mean %0.1f ps (cable %0d), RMS per channel %0.2f ps",
               mlist[k], n, mean, CABLE_PS, rms[k]);
      checks += 2;
      if (n < NHITS * 9 / 10) begin
        failures++;
        $display("FAIL only %0d of %0d hits usable", n, NHITS);
      end
      if (mean - CABLE_PS > 10.0 || CABLE_PS - mean > 10.0) begin
        failures++;
        $display("FAIL mean interval %0.1f ps", mean);
      end
    end
    checks += 2;
    if (!(rms[2] < rms[0] * 0.7)) begin
      failures++;
      $display("FAIL RMS with 8 edges (%0.2f) not below 0.7 x RMS with 1 (%0.2f)", rms[2], rms[0]);
    end
    if (!(rms[1] < rms[0])) begin
      failures++;
      $display("FAIL RMS with 4 edges not below RMS with 1");
    end
    checks++;
    if (overflow != 2'b00) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
