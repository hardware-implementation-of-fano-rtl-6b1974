// pac_pkg: constants, types and LLR arithmetic shared by the PAC Fano decoder.
//
// The code parameters are those of the evaluated configuration: block length
// N = 128 (n = 7 polar stages), Q = 7-bit LLRs, convolution generator
// c = (1,0,1,1,0,1,1) with memory h = 6.  MW (signed width of branch metrics
// and of the relative threshold T) and CCW (cycle-counter width, enough for a
// maximum cycle budget MC = 2^18) are this design's own choices.
//
// The LLR helpers implement the successive-cancellation node operations used
// by the polar demapper: f is the min-sum approximation, g adds or subtracts
// the upper LLR according to the partial sum.  Every result is saturated to the
// symmetric range [-(2^(Q-1)-1), 2^(Q-1)-1] so that |x| always fits in Q bits.
package pac_pkg;
  localparam int unsigned N_DEF = 128;
  localparam int unsigned Q_DEF = 7;
  localparam int unsigned H_DEF = 6;
  // c[j] is the generator coefficient of v_{i-j}; c[0] = 1.
  localparam logic [6:0] C_POLY = 7'b1101101;  // c6..c0 = 1,1,0,1,1,0,1
  localparam int unsigned MW = 16;
  localparam int unsigned CCW = 20;

  // Rule applied by the Fano control unit in one iteration.
  typedef enum logic [2:0] {
    RULE0 = 3'd0,  // forward to a new node, threshold tightened
    RULE1 = 3'd1,  // forward, threshold kept
    RULE2 = 3'd2,  // no move, threshold lowered by Delta
    RULE3 = 3'd3,  // back to N4, examine the lateral node next
    RULE4 = 3'd4   // back to N4, backward check next
  } rule_e;

  // Saturate a wide signed value to the symmetric Q-bit range.
  function automatic logic signed [15:0] sat_q(input logic signed [15:0] x, input int unsigned q);
    logic signed [15:0] lim;
    lim = 16'sd1 <<< (q - 1);
    lim = lim - 16'sd1;
    if (x > lim) return lim;
    if (x < -lim) return -lim;
    return x;
  endfunction

  function automatic logic signed [15:0] abs16(input logic signed [15:0] x);
    return (x < 0) ? -x : x;
  endfunction

  // Min-sum f: sign(a)sign(b)min(|a|,|b|).
  function automatic logic signed [15:0] llr_f(input logic signed [15:0] a, input logic signed [15:0] b);
    logic signed [15:0] m;
    m = (abs16(a) < abs16(b)) ? abs16(a) : abs16(b);
    return ((a < 0) != (b < 0)) ? -m : m;
  endfunction

  // g: b + (1-2*beta)*a.
  function automatic logic signed [15:0] llr_g(input logic signed [15:0] a, input logic signed [15:0] b,
                                               input logic beta);
    return beta ? (b - a) : (b + a);
  endfunction
endpackage
