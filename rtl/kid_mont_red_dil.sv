// kid_mont_red_dil: Montgomery reduction for Dilithium (q = 8380417, R = 2^23).
//
// Given a product T = a*b of two residues, returns T * R^-1 mod q in [0, q).
// The paper states only that the Dilithium multiplier is a Montgomery
// multiplier that exploits q = 2^23 - 2^13 + 1; the insides here are this
// design's own, built in the same shift-and-add style as the Kyber unit:
//   q' = -q^-1 mod 2^23 = 2^23 - 2^13 - 1, so
//   stage 1: m   = T*q' mod R = -(T + (T<<13)) mod 2^23
//   stage 2: r   = (T + (m<<23) - (m<<13) + m) >> 23  (< 2q)
//            out = r >= q ? r - q : r
// Two register stages, one result per clock.
module kid_mont_red_dil (
  input  logic        clk,
  input  logic [45:0] t_i,     // product, < q^2
  output logic [22:0] r_o      // t_i * 2^-23 mod q, two cycles later
);
  localparam logic [23:0] Q = 24'd8380417;

  logic [22:0] m_q;
  logic [45:0] t_q;
  logic [47:0] sum;
  logic [23:0] r;

  always_ff @(posedge clk) begin
    m_q <= 23'(23'd0 - t_i[22:0] - {t_i[9:0], 13'b0});
    t_q <= t_i;
  end

  always_comb begin
    sum = 48'(t_q) + {2'b0, m_q, 23'b0} - {12'b0, m_q, 13'b0} + 48'(m_q);
    r   = sum[46:23];
  end

  always_ff @(posedge clk)
    r_o <= (r >= Q) ? 23'(r - Q) : r[22:0];
endmodule
