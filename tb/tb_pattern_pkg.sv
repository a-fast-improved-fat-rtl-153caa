// tb_pattern_pkg: stimulus for the encoder testbenches.
//
// make_pattern() builds one of the four bit patterns a wave union delay line
// can hold when it is sampled (bit 0 is the tap nearest the launcher):
//   1: 00..0011..11   ones at [0..e]                edge at e
//   2: 0..01..10..0   ones at [a..e]                edge at e
//   3: 11..1100..00   ones at [a..W-1], no edge     expected code W-1
//   4: 1..10..01..1   ones at [0..e] and [b..W-1]   edge at e
// and may put a one- or two-bit bubble (zeros) right below the edge. The
// expected tap index is known from how the pattern was built, not from the
// encoder equations.
package tb_pattern_pkg;

  localparam int MAXW = 512;

  typedef struct {
    logic [MAXW-1:0] bits;
    int              expect_idx;  // -1: no bit expected in the one-hot code
    int              kind;        // 1..4
    int              bubbles;     // 0, 1 or 2
  } pattern_t;

  function automatic pattern_t make_pattern(int w, int kind, int bubble_req);
    pattern_t p;
    int e, a, b;
    p.bits    = '0;
    p.kind    = kind;
    p.bubbles = 0;
    case (kind)
      1: begin
        e = $urandom_range(w - 4, 0);
        for (int i = 0; i <= e; i++) p.bits[i] = 1'b1;
        p.expect_idx = e;
      end
      2: begin
        e = $urandom_range(w - 4, 1);
        a = $urandom_range(e, 1);
        for (int i = a; i <= e; i++) p.bits[i] = 1'b1;
        p.expect_idx = e;
      end
      3: begin
        a = $urandom_range(w - 1, 3);
        for (int i = a; i < w; i++) p.bits[i] = 1'b1;
        p.expect_idx = w - 1;
      end
      default: begin
        e = $urandom_range(w - 6, 0);
        b = $urandom_range(w - 1, e + 4);
        for (int i = 0; i <= e; i++) p.bits[i] = 1'b1;
        for (int i = b; i < w; i++) p.bits[i] = 1'b1;
        p.expect_idx = e;
      end
    endcase
    // bubbles just below a real edge, inside its run of ones
    if (kind != 3 && bubble_req > 0) begin
      for (int j = 1; j <= bubble_req; j++) begin
        if (p.expect_idx - j >= 0 && p.bits[p.expect_idx - j]) begin
          p.bits[p.expect_idx - j] = 1'b0;
          p.bubbles++;
        end
      end
    end
    return p;
  endfunction

endpackage
