// kid_mont_red_kyber: Montgomery reduction for Kyber (q = 3329, R = 2^12).
//
// Given a product T = a*b of two residues (a, b < q), returns T * R^-1 mod q
// in [0, q). It follows the multiplier-free structure of the paper's Kyber
// coefficient multiplier: both constant multiplications are shift-and-add
// networks because q = 2^11 + 2^10 + 2^8 + 1 and q' = 3327 with
// q * q' = -1 mod R.
//   stage 1: res  = T * q' mod R = (T<<11) + (T<<10) + (T<<8) - T   (12 bits)
//   stage 2: res1 = (T + res*q) / R  (exact division, res1 < 2q)
//            out  = res1 >= q ? res1 - q : res1
// Two register stages, one result per clock, no stalls.
//
// The paper draws the second sum as 24 bits and takes bits [23:12]; T + res*q
// can reach 25 bits for T up to (q-1)^2, so this design keeps bit 24 to stay
// exact. The direction of the first subtraction (sum minus T) is chosen so
// that the result is T*3327 as the text states.
module kid_mont_red_kyber (
  input  logic        clk,
  input  logic [23:0] t_i,     // product, < q^2
  output logic [11:0] r_o      // t_i * 2^-12 mod q, two cycles later
);
  localparam logic [24:0] Q = 25'd3329;

  logic [11:0] res_q;
  logic [23:0] t_q;
  logic [24:0] sum;
  logic [12:0] res1;

  always_ff @(posedge clk) begin
    res_q <= 12'({t_i[11:0], 11'b0} + 23'({t_i[11:0], 10'b0}) + 23'({t_i[11:0], 8'b0}) - 23'(t_i[11:0]));
    t_q   <= t_i;
  end

  always_comb begin
    sum  = 25'(t_q) + 25'({res_q, 11'b0}) + 25'({res_q, 10'b0}) + 25'({res_q, 8'b0}) + 25'(res_q);
    res1 = sum[24:12];
  end

  always_ff @(posedge clk)
    r_o <= (25'(res1) >= Q) ? 12'(res1 - 13'(Q)) : res1[11:0];
endmodule
