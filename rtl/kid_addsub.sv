// kid_addsub: shared modular adder/subtractor for Kyber and Dilithium.
//
// One 26-bit carry chain computes either two independent 12-bit Kyber
// additions/subtractions or one 24-bit Dilithium addition/subtraction. The
// operands are laid out as {0, hi[11:0], sel, lo[11:0]}: a separator bit is
// inserted at position 12. With the paper's settings
//   Kyber add / Dilithium sub : sel1 = 0, sel2 = 0
//   Kyber sub / Dilithium add : sel1 = 1, sel2 = 0
// (the whole b vector, separator included, is inverted for subtraction) the
// separator either absorbs the low half's carry (Kyber: lanes independent)
// or passes carry/borrow on (Dilithium: one wide operation).
//
// Per lane the raw result is then corrected into [0, q):
//   add, half=0: s >= q ? s - q : s
//   add, half=1: (a+b)/2 mod q, choosing s - q, s or s + q so the value is
//                even before the right shift (the paper's four M1 cases)
//   sub        : d < 0 ? d + q : d
// The paper writes the adder conditions with a strict "> 3329"; this design
// uses ">= q" so that a+b = q also reduces to 0.
// Purely combinational; operands must be reduced (< q per lane).
module kid_addsub
  import kid_pkg::*;
(
  input  scheme_e     scheme_i,
  input  logic        sub_i,    // 1: a - b, 0: a + b
  input  logic        half_i,   // additions only: divide the sum by 2 mod q
  input  logic [23:0] a_i,
  input  logic [23:0] b_i,
  output logic [23:0] r_o
);
  logic        sel1, sel2;
  logic [25:0] ea, eb, raw;
  logic [13:0] k_lo, k_hi;      // Kyber lanes, signed 14-bit
  logic [25:0] d_val;           // Dilithium, signed 26-bit

  function automatic logic [11:0] k_fix(logic [13:0] v, logic sub, logic half);
    logic signed [14:0] s;
    s = 15'(signed'(v));
    if (sub)                      s = (s < 0) ? s + 15'sd3329 : s;
    else if (!half)               s = (s >= 15'sd3329) ? s - 15'sd3329 : s;
    else if (s >= 15'sd3329)      s = s[0] ? (s - 15'sd3329) >>> 1 : s >>> 1;
    else                          s = s[0] ? (s + 15'sd3329) >>> 1 : s >>> 1;
    return s[11:0];
  endfunction

  function automatic logic [22:0] d_fix(logic [25:0] v, logic sub, logic half);
    logic signed [26:0] s;
    s = 27'(signed'(v));
    if (sub)                      s = (s < 0) ? s + 27'sd8380417 : s;
    else if (!half)               s = (s >= 27'sd8380417) ? s - 27'sd8380417 : s;
    else if (s >= 27'sd8380417)   s = s[0] ? (s - 27'sd8380417) >>> 1 : s >>> 1;
    else                          s = s[0] ? (s + 27'sd8380417) >>> 1 : s >>> 1;
    return s[22:0];
  endfunction

  always_comb begin
    sel1 = (scheme_i == KYBER) ? sub_i : ~sub_i;
    sel2 = 1'b0;
    ea   = {1'b0, a_i[23:12], sel1, a_i[11:0]};
    eb   = {1'b0, b_i[23:12], sel2, b_i[11:0]};
    raw  = sub_i ? (ea + ~eb + 26'd1) : (ea + eb);
    // Kyber: low lane value with its carry (add) or sign (sub) from bit 12.
    k_lo = sub_i ? {raw[12] ? 2'b00 : 2'b11, raw[11:0]} : {1'b0, raw[12:0]};
    k_hi = sub_i ? {raw[25], raw[25:13]} : {1'b0, raw[25:13]};
    // Dilithium: drop the separator bit.
    d_val = {raw[25], raw[25:13], raw[11:0]};
    if (scheme_i == KYBER)
      r_o = {k_fix(k_hi, sub_i, half_i), k_fix(k_lo, sub_i, half_i)};
    else
      r_o = {1'b0, d_fix(d_val, sub_i, half_i)};
  end
endmodule
