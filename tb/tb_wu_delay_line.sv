// tb_wu_delay_line: checks the delay line model against the closed-form
// picture of a square wave travelling along the taps. A hit is applied at a
// random time; at many later instants every tap i must equal the launcher
// waveform at (now - i*TAP_PS), except for taps within two of a transition
// (the model updates in steps). After the hit falls and the wave has left the
// line, all taps must be 0. A second run with bubbles enabled must show
// bubbles below the rising front.
module tb_wu_delay_line;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int N   = 276;
  localparam int TAP = 31;
  localparam int OSC = 9491;

  logic         hit, hit_b;
  logic [N-1:0] taps, taps_b;
  int           checks = 0, failures = 0;
  longint       t0;
  int           bubbles = 0;

  wu_delay_line #(.N_TAPS(N), .TAP_PS(TAP), .TOSC_PS(OSC)) dut (.hit(hit), .taps(taps));
  wu_delay_line #(.N_TAPS(N), .TAP_PS(TAP), .TOSC_PS(OSC), .BUBBLE_PCT(50)) dut_b (
    .hit(hit_b), .taps(taps_b));

  initial begin
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic ref_wave(longint t);
    if (t < t0) return 1'b0;
    return ((t - t0) % OSC) < OSC / 2;
  endfunction

  initial begin
    hit = 1'b0; hit_b = 1'b0;
    #(1000 + $urandom_range(5000, 0));
    t0 = longint'($time);
    hit = 1'b1;
    hit_b = 1'b1;
    for (int s = 0; s < 60; s++) begin
      int bad;
      #(2000 + $urandom_range(3000, 0));
      bad = 0;
      for (int i = 0; i < N; i++) begin
        longint t;
        logic e;
        t = longint'($time) - longint'(i) * TAP;
        e = ref_wave(t);
        // skip taps whose reference value changes within two taps of time
        if (ref_wave(t - 2 * TAP) == e && ref_wave(t + 2 * TAP) == e && taps[i] !== e) bad++;
      end
      checks++;
      if (bad != 0) begin
        failures++;
        $display("FAIL at %0t: %0d taps differ from the travelling wave", $time, bad);
      end
      for (int i = 2; i < N - 1; i++)
        if (!taps_b[i-1] && taps_b[i] && !taps_b[i+1] && taps_b[i-2]) bubbles++;
        else if (!taps_b[i-1] && !taps_b[i-2] && taps_b[i] && !taps_b[i+1]) bubbles++;
    end
    hit = 1'b0;
    hit_b = 1'b0;
    #(N * TAP + 500);
    checks++;
    if (taps !== '0) begin
      failures++;
      $display("FAIL line not empty after the launcher stopped");
    end
    checks++;
    if (bubbles == 0) begin
      failures++;
      $display("FAIL no bubble produced");
    end
    $display("bubbles seen: %0d", bubbles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
