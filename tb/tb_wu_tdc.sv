// tb_wu_tdc: end-to-end test of the two-channel wave union TDC at its default
// parameters (276 taps, N = 512, K = 16, 256-word FIFOs, 31 ps taps, 9491 ps
// launcher period, 8333 ps clock).
//
// The same hit reaches channel 0 and, CABLE_PS later, channel 1 (the cable
// delay test). Every word read from a FIFO is checked twice:
//  - exactly, against a reference scan of the raw tap sample it came from
//    (the sample of clock edge coarse-10, watched inside the channel);
//  - loosely (within 2 taps), against where the launcher edge must be given
//    the hit time, the clock edge time and the tap delay.
// Per hit it checks that K words arrive (for hits not hit by the overflow),
// that the first one is flagged, that the hit time rebuilt as
// edge_time - fine*T_TAP is right and that the two channels differ by
// CABLE_PS. From pairs of successive words it rebuilds the launcher period,
// t_i - t_(i+1) + T_CLK, and compares its mean with TOSC_PS.
// Reading is stalled for a while so that the FIFOs overflow. The run must see
// all four tap patterns, bubbles, the no-edge flag, edges ignored after the K
// recorded cycles, and the overflow; a mechanism never seen counts a failure.
module tb_wu_tdc;
  import wu_tdc_pkg::*;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int TCLK     = 8333;
  localparam int TAP      = 31;
  localparam int TOSC     = 9491;
  localparam int N        = RAW_W;
  localparam int NHITS    = 40;
  localparam int CABLE_PS = 3217;
  localparam int PIPE     = 1 + ENC_LOG2;  // sample edge to FIFO write edge

  logic            clk = 1'b0;
  logic            rst;
  logic [1:0]      hit;
  logic [1:0]      rd_en = '0;
  tdc_word_t       rd_data [2];
  logic [1:0]      empty, busy, overflow;
  logic [8:0]      count [2];

  int              checks = 0, failures = 0;
  bit              stall = 1'b0;
  bit              done_hits = 1'b0;

  // tap samples and edge times indexed by the coarse count of the edge
  longint          edge_t [int];
  logic [N-1:0]    raw_at [2][int];
  longint          hit_t [2][$];
  int              words_of_hit [2][NHITS];
  longint          hit_est [2][NHITS];
  bit              have_est [2][NHITS];

  // mechanism counters
  int pat_seen [5];
  int bubble_words = 0, flag_words = 0, first_words = 0, ignored_edges = 0;
  int overflow_seen = 0;
  longint tosc_sum = 0;
  int     tosc_n = 0;

  wu_tdc dut (
    .clk(clk), .rst(rst), .hit(hit), .rd_en(rd_en), .rd_data(rd_data), .empty(empty),
    .count(count), .busy(busy), .overflow(overflow));

  always begin
    #4166 clk = 1'b1;
    #4167 clk = 1'b0;
  end

  initial begin
    #200_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // watch the edges, the tap samples and the recorders
  always @(posedge clk) begin
    int c;
    c = int'(dut.u_coarse.count);
    edge_t[c] = longint'($time);
    raw_at[0][c-1] = dut.g_ch[0].u_ch.raw_q;
    raw_at[1][c-1] = dut.g_ch[1].u_ch.raw_q;
    if (!rst && dut.g_ch[0].u_ch.u_rec.state == 2'd0 &&  // S_QUIET
        dut.g_ch[0].u_ch.valid)
      ignored_edges++;
  end

  always @(negedge clk) rd_en = rst ? 2'b00 : ~empty & {2{~stall}};

  // reference encoder: scan for the 0001 pattern, wrapping at the top
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

  function automatic int pattern_of(logic [N-1:0] r, int code, bit v);
    if (!v) return 0;
    if (code == N - 1 && r[N-1] && !r[0]) return 3;
    if (r[0] && r[N-1]) return 4;
    if (r[0]) return 1;
    return 2;
  endfunction

  function automatic bit has_bubble(logic [N-1:0] r);
    for (int i = 1; i < N - 2; i++) begin
      if (r[i-1] && !r[i] && r[i+1]) return 1'b1;
      if (r[i-1] && !r[i] && !r[i+1] && r[i+2]) return 1'b1;
    end
    return 1'b0;
  endfunction

  // check every word read
  int        prev_fine [2];
  int        prev_hit [2];
  always @(posedge clk) begin
    for (int ch = 0; ch < 2; ch++) begin
      if (!rst && rd_en[ch]) begin
        tdc_word_t w;
        int s, code, h, e, pat;
        bit v;
        longint ts, th, d;
        w  = rd_data[ch];
        s  = int'(w.coarse) - PIPE;
        ts = edge_t[s];
        code = ref_code(raw_at[ch][s], v);
        // exact check against the sampled taps
        checks++;
        if (w.valid !== v || (v && int'(w.fine) != code)) begin
          failures++;
          if (failures < 20)
            $display("FAIL ch%0d word at coarse %0d: fine %0d valid %0b, reference %0d %0b",
                     ch, w.coarse, w.fine, w.valid, code, v);
        end
        // which hit this sample belongs to
        h = -1;
        foreach (hit_t[ch][i]) if (hit_t[ch][i] <= ts) h = i;
        if (h < 0) begin
          failures++;
          $display("FAIL ch%0d word before any hit", ch);
          continue;
        end
        words_of_hit[ch][h]++;
        th = hit_t[ch][h];
        d  = (ts - th) % TOSC;
        e  = int'(d / TAP);
        checks++;
        // an edge at tap 0 or 1 may not have reached the taps yet: the
        // sample then still shows the previous no-edge pattern
        if (e <= 1 && int'(w.fine) == N - 1) begin
        end else if (e < N - 4 ? (int'(w.fine) - e > 2 || e - int'(w.fine) > 2)
                      : (e >= N ? int'(w.fine) != N - 1
                                : !(int'(w.fine) == N - 1 || int'(w.fine) >= e - 2))) begin
          failures++;
          if (failures < 20)
            $display("FAIL ch%0d hit %0d: fine %0d, launcher edge at tap %0d", ch, h, w.fine, e);
        end
        pat = pattern_of(raw_at[ch][s], code, v);
        pat_seen[pat]++;
        if (has_bubble(raw_at[ch][s])) bubble_words++;
        if (int'(w.fine) == N - 1) flag_words++;
        if (w.first) begin
          first_words++;
          checks++;
          // first word: the first clock edge after the hit reached tap 1
          if (ts - th > TCLK + 2 * TAP) begin
            failures++;
            $display("FAIL ch%0d hit %0d: first word %0d ps after the hit", ch, h, ts - th);
          end
          if (int'(w.fine) < N - 4) begin
            hit_est[ch][h]  = ts - longint'(w.fine) * TAP;
            have_est[ch][h] = 1'b1;
            checks++;
            if (hit_est[ch][h] - th > 3 * TAP || th - hit_est[ch][h] > 3 * TAP) begin
              failures++;
              $display("FAIL ch%0d hit %0d: rebuilt hit time off by %0d ps", ch, h,
                       hit_est[ch][h] - th);
            end
          end
        end else if (prev_hit[ch] == h && prev_fine[ch] < N - 4 && int'(w.fine) < N - 4 &&
                     int'(w.fine) < prev_fine[ch]) begin
          // a new launcher edge: period from two successive fine times
          tosc_sum += longint'(prev_fine[ch] - int'(w.fine)) * TAP + TCLK;
          tosc_n++;
        end
        prev_fine[ch] = int'(w.fine);
        prev_hit[ch]  = h;
      end
    end
    if (overflow != 2'b00) overflow_seen++;
  end

  task automatic fire(int gap);
    #(gap);
    hit_t[0].push_back(longint'($time));
    hit[0] = 1'b1;
    #(CABLE_PS);
    hit_t[1].push_back(longint'($time));
    hit[1] = 1'b1;
    #(180_000 - CABLE_PS);
    hit[0] = 1'b0;
    #(CABLE_PS);
    hit[1] = 1'b0;
  endtask

  initial begin
    hit = '0;
    rst = 1'b1;
    repeat (5) @(negedge clk);
    rst = 1'b0;
    repeat (20) @(negedge clk);
    for (int i = 0; i < NHITS; i++) begin
      stall = (i >= 12 && i < 34);
      fire(400_000 + $urandom_range(50_000, 0));
    end
    stall = 1'b0;
    #1_000_000;
    done_hits = 1'b1;

    // per-hit results
    for (int ch = 0; ch < 2; ch++)
      for (int h = 0; h < NHITS; h++) begin
        if (h < 12 || h >= 36) begin
          checks++;
          if (words_of_hit[ch][h] != K_CYCLES) begin
            failures++;
            $display("FAIL ch%0d hit %0d: %0d words", ch, h, words_of_hit[ch][h]);
          end
        end
      end
    for (int h = 0; h < NHITS; h++) begin
      if (have_est[0][h] && have_est[1][h]) begin
        checks++;
        if (hit_est[1][h] - hit_est[0][h] - CABLE_PS > 4 * TAP ||
            CABLE_PS - (hit_est[1][h] - hit_est[0][h]) > 4 * TAP) begin
          failures++;
          $display("FAIL hit %0d: interval %0d ps, cable %0d ps", h,
                   hit_est[1][h] - hit_est[0][h], CABLE_PS);
        end
      end
    end
    checks++;
    if (tosc_n == 0 || (tosc_sum / tosc_n) - TOSC > 40 || TOSC - (tosc_sum / tosc_n) > 40) begin
      failures++;
      $display("FAIL launcher period from codes: %0d samples, mean %0d ps", tosc_n,
               tosc_n ? tosc_sum / tosc_n : 0);
    end
    // mechanisms
    for (int p = 1; p <= 4; p++) begin
      checks++;
      if (pat_seen[p] == 0) begin failures++; $display("FAIL pattern %0d never seen", p); end
    end
    checks += 5;
    if (bubble_words == 0)  begin failures++; $display("FAIL no bubble seen"); end
    if (flag_words == 0)    begin failures++; $display("FAIL no-edge flag never seen"); end
    if (ignored_edges == 0) begin failures++; $display("FAIL no edge ignored"); end
    if (overflow_seen == 0) begin failures++; $display("FAIL no overflow"); end
    if (first_words == 0)   begin failures++; $display("FAIL no hit recorded"); end
    $display("patterns 1..4: %0d %0d %0d %0d; bubbles %0d; no-edge flags %0d", pat_seen[1],
             pat_seen[2], pat_seen[3], pat_seen[4], bubble_words, flag_words);
    $display("hits recorded %0d; edges ignored %0d; overflow cycles %0d", first_words,
             ignored_edges, overflow_seen);
    $display("launcher period from codes: mean %0d ps over %0d pairs", tosc_n ? tosc_sum / tosc_n : 0,
             tosc_n);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
