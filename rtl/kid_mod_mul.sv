// kid_mod_mul: unified modular multiplier, two Kyber lanes or one Dilithium lane.
//
// Two 23x12-bit multipliers (the paper's two DSP blocks) form the partial
// products. For Kyber each multiplies one 12-bit lane of x by the same lane
// of y and feeds its own Montgomery reducer. For Dilithium they multiply the
// low 12 bits and the high 11 bits of x by the whole 23-bit y, and the two
// partial products are added (p0 + p1<<12) before the Dilithium Montgomery
// reducer. This split follows the paper; the register placement is this
// design's own.
//
// Result: Kyber   r[11:0] = x[11:0]*y[11:0]*2^-12 mod 3329,
//                 r[23:12] = x[23:12]*y[23:12]*2^-12 mod 3329
//         Dilithium r = x[22:0]*y[22:0]*2^-23 mod 8380417
// Operands must be reduced (< q). Latency 3 cycles (partial products, then
// the two reducer stages), fully pipelined. scheme_i travels with the data.
module kid_mod_mul
  import kid_pkg::*;
(
  input  logic        clk,
  input  scheme_e     scheme_i,
  input  logic [23:0] x_i,
  input  logic [23:0] y_i,
  output logic [23:0] r_o
);
  logic [22:0] dsp0_a, dsp1_a;
  logic [11:0] dsp0_b, dsp1_b;
  logic [34:0] p0_q, p1_q;
  scheme_e     sch_q [3];
  logic [45:0] t_dil;
  logic [11:0] rk0, rk1;
  logic [22:0] rd;

  always_comb begin
    dsp0_b = x_i[11:0];
    if (scheme_i == KYBER) begin
      dsp0_a = {11'b0, y_i[11:0]};
      dsp1_a = {11'b0, y_i[23:12]};
      dsp1_b = x_i[23:12];
    end else begin
      dsp0_a = y_i[22:0];
      dsp1_a = y_i[22:0];
      dsp1_b = {1'b0, x_i[22:12]};
    end
  end

  always_ff @(posedge clk) begin
    p0_q     <= 35'(dsp0_a) * 35'(dsp0_b);
    p1_q     <= 35'(dsp1_a) * 35'(dsp1_b);
    sch_q[0] <= scheme_i;
    sch_q[1] <= sch_q[0];
    sch_q[2] <= sch_q[1];
  end

  assign t_dil = 46'(p0_q) + {p1_q[33:0], 12'b0};

  kid_mont_red_kyber u_red_k0 (.clk(clk), .t_i(p0_q[23:0]), .r_o(rk0));
  kid_mont_red_kyber u_red_k1 (.clk(clk), .t_i(p1_q[23:0]), .r_o(rk1));
  kid_mont_red_dil   u_red_d  (.clk(clk), .t_i(t_dil),      .r_o(rd));

  assign r_o = (sch_q[2] == KYBER) ? {rk1, rk0} : {1'b0, rd};
endmodule
