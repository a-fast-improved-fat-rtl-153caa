// wu_delay_line: BEHAVIOURAL MODEL (not synthesizable) of the tapped delay
// line with its embedded wave union launcher.
//
// In the FPGA this is a chain of carry cells whose outputs are the taps; the
// launcher at its input is a ring oscillator started by the hit. The model
// reproduces what the sampling registers see: while hit is high the launcher
// output is a square wave of period TOSC_PS that starts with a rising edge
// when hit rises; tap i shows the launcher output delayed by i*TAP_PS. Tap 0
// is nearest the launcher, so a rising edge that has reached tap e reads as
// ...000111... with the 1-0 transition at e. When hit falls the launcher
// stops at 0 and the line empties. The tap values are recomputed every
// STEP_PS, which quantises edge positions to about one tap.
//
// With BUBBLE_PCT > 0 the model imitates metastable or uneven cells: in that
// percentage of updates it clears one or two taps right below each rising
// front (1111 -> 1101 or 1001), the bubble the encoder has to suppress.
//
// Defaults: 276 taps, 31 ps per tap (8333 ps / 268 bins) and a 9491 ps
// period are the published figures; the 50 % duty cycle, the uniform tap
// delay, the gating by hit and the bubble model are this model's own choices.
module wu_delay_line #(
  parameter int N_TAPS     = 276,
  parameter int TAP_PS     = 31,
  parameter int TOSC_PS    = 9491,
  parameter int STEP_PS    = 31,
  parameter int BUBBLE_PCT = 0
) (
  input  logic              hit,
  output logic [N_TAPS-1:0] taps
);
  timeunit 1ps;
  timeprecision 1ps;

  longint t_start;  // time of the last rising edge of hit, -1 before the first
  longint t_stop;   // time of the last falling edge of hit, -1 while high

  // Record when the hit rose and fell. Blocking assignments on purpose: the
  // update task must see the new times in the same time step (a model, not
  // flip-flops).
  always @(posedge hit) begin
    t_start = longint'($time);
    t_stop  = -1;
  end

  always @(negedge hit) t_stop = longint'($time);

  function automatic logic launcher(longint t);
    if (t_start < 0 || t < t_start) return 1'b0;
    if (t_stop >= 0 && t >= t_stop) return 1'b0;
    return ((t - t_start) % longint'(TOSC_PS)) < longint'(TOSC_PS) / 2;
  endfunction

  task automatic update();
    longint now;
    logic [N_TAPS-1:0] v;
    now = longint'($time);
    // nothing moves once the line has emptied after the launcher stopped
    if (taps == '0 && (t_start < 0 ||
        (t_stop >= 0 && now - t_stop > longint'(N_TAPS) * TAP_PS))) return;
    for (int i = 0; i < N_TAPS; i++) v[i] = launcher(now - longint'(i) * TAP_PS);
    if (BUBBLE_PCT > 0) begin
      for (int i = N_TAPS - 2; i >= 2; i--) begin
        if (v[i] && !v[i+1] && v[i-1] && v[i-2] &&
            int'($urandom_range(99, 0)) < BUBBLE_PCT) begin
          v[i-1] = 1'b0;
          if ($urandom_range(1, 0) == 1) v[i-2] = 1'b0;
        end
      end
    end
    taps = v;
  endtask

  initial begin
    t_start = -1;
    t_stop  = -1;
    taps    = '0;
    forever begin
      #(STEP_PS);
      update();
    end
  end

endmodule
