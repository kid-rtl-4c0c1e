// kid_twiddle_rom: single-port twiddle-factor ROM shared by Kyber and Dilithium.
//
// Contents (all values in Montgomery form, i.e. times R mod q, so that a
// Montgomery product with a coefficient gives the plain product):
//   [  0..127] Kyber NTT       zeta_k = 17^brv7(k)                (both lanes)
//   [128..255] Kyber INTT      -zeta_k * 2^-1                     (both lanes)
//   [256..383] Kyber PWM       psi_w = +zeta_(64+w/2) for even w, - for odd w
//   [512..767] Dilithium NTT   zeta_k = 1753^brv8(k)
//   [768..1023] Dilithium INTT -zeta_k * 2^-1
// Kyber words hold the 12-bit value in both halves so each butterfly lane
// sees it. The factor 1/2 in the inverse twiddles implements the paper's
// "multiply each twiddle factor by 2^-1" for the Gentleman-Sande subtract
// path. The table is computed at initialisation from these formulas rather
// than loaded from a file. Read data appears one cycle after re_i.
module kid_twiddle_rom
  import kid_pkg::*;
(
  input  logic             clk,
  input  logic             re_i,
  input  logic [TW_AW-1:0] addr_i,
  output logic [23:0]      data_o
);
  logic [23:0] rom [TW_DEPTH];

  localparam longint unsigned LKQ = 64'(KQ), LDQ = 64'(DQ), LKZ = 64'(KZETA), LDZ = 64'(DZETA);

  function automatic logic [11:0] kmont(longint unsigned v);
    return 12'((v * 4096) % KQ);
  endfunction
  function automatic logic [22:0] dmont(longint unsigned v);
    return 23'((v * 8388608) % DQ);
  endfunction

  initial begin
    longint unsigned z, t;
    for (int i = 0; i < int'(TW_DEPTH); i++) rom[i] = '0;
    for (int k = 0; k < 128; k++) begin
      z = powmod(LKZ, longint'(bitrev(k, 7)), LKQ);
      rom[TW_K_NTT + k]  = {kmont(z), kmont(z)};
      t = ((LKQ - z) * ((LKQ + 1) / 2)) % LKQ;
      rom[TW_K_INTT + k] = {kmont(t), kmont(t)};
    end
    for (int w = 0; w < 128; w++) begin
      z = powmod(LKZ, longint'(bitrev(64 + w / 2, 7)), LKQ);
      t = (w % 2 == 0) ? z : (LKQ - z) % LKQ;
      rom[TW_K_PWM + w] = {kmont(t), kmont(t)};
    end
    for (int k = 0; k < 256; k++) begin
      z = powmod(LDZ, longint'(bitrev(k, 8)), LDQ);
      rom[TW_D_NTT + k]  = {1'b0, dmont(z)};
      t = ((LDQ - z) * ((LDQ + 1) / 2)) % LDQ;
      rom[TW_D_INTT + k] = {1'b0, dmont(t)};
    end
  end

  always_ff @(posedge clk)
    if (re_i) data_o <= rom[addr_i];
endmodule
