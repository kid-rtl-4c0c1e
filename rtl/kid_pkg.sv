// kid_pkg: constants, types and helper functions shared by the unified
// Kyber/Dilithium NTT multiplication core.
//
// Both schemes work on 256-coefficient polynomials. Kyber uses q = 3329
// (12-bit coefficients), Dilithium q = 8380417 (23-bit coefficients). One
// 24-bit memory word holds two Kyber coefficients {odd, even} or one
// Dilithium coefficient, which is what lets one datapath serve both schemes.
// Multiplications are Montgomery multiplications: Kyber with R = 2^12,
// Dilithium with R = 2^23. The moduli and the 24-bit word follow the paper;
// the choice of R for Dilithium, the enums and the ROM entry layout are this
// design's own.
package kid_pkg;

  localparam int unsigned WORD_W = 24;          // coefficient memory word
  localparam int unsigned KQ     = 3329;        // Kyber modulus
  localparam int unsigned DQ     = 8380417;     // Dilithium modulus
  localparam int unsigned KR_LOG = 12;          // Kyber Montgomery R = 2^12
  localparam int unsigned DR_LOG = 23;          // Dilithium Montgomery R = 2^23
  localparam int unsigned KZETA  = 17;          // primitive 256th root mod KQ
  localparam int unsigned DZETA  = 1753;        // primitive 512th root mod DQ

  // Memory geometry: each coefficient RAM holds half of two polynomials.
  // Polynomial p lives at addresses {p, 7-bit offset}.
  localparam int unsigned RAM_AW = 8;
  localparam int unsigned OFS_W  = 7;

  // Address ROM regions (entry index), one per operation and scheme.
  localparam int unsigned ROM_AW      = 12;
  localparam int unsigned TW_AW       = 10;
  localparam int unsigned K_NTT_BASE  = 0;      // 448 entries
  localparam int unsigned K_INTT_BASE = 448;    // 448 entries
  localparam int unsigned K_PWM_BASE  = 896;    //  64 entries
  localparam int unsigned D_NTT_BASE  = 1024;   // 1024 entries
  localparam int unsigned D_INTT_BASE = 2048;   // 1024 entries
  localparam int unsigned D_PWM_BASE  = 3072;   // 128 entries
  localparam int unsigned ROM_DEPTH   = 3200;

  // Twiddle ROM regions.
  localparam int unsigned TW_K_NTT  = 0;        // zeta_k * R
  localparam int unsigned TW_K_INTT = 128;      // -zeta_k / 2 * R
  localparam int unsigned TW_K_PWM  = 256;      // +-zeta_(64+w/2) * R, per word w
  localparam int unsigned TW_D_NTT  = 512;
  localparam int unsigned TW_D_INTT = 768;
  localparam int unsigned TW_DEPTH  = 1024;

  typedef enum logic {KYBER = 1'b0, DILITHIUM = 1'b1} scheme_e;
  typedef enum logic [1:0] {OP_NTT = 2'd0, OP_INTT = 2'd1, OP_PWM = 2'd2} op_e;
  // Butterfly modes. PWM0/PWM1 are the two Kyber point-wise passes; DPWM is the
  // Dilithium point-wise product.
  typedef enum logic [2:0] {
    BM_NTT = 3'd0, BM_INTT = 3'd1, BM_PWM0 = 3'd2, BM_PWM1 = 3'd3, BM_DPWM = 3'd4
  } bfu_mode_e;

  // One address ROM word: addresses of the butterfly's two operands in Mem_A
  // and Mem_B, the two order flags, twiddle indices and the last-step flag.
  typedef struct packed {
    logic             last;     // final step of the operation
    logic             rd_lowb;  // lower-index operand is in Mem_B
    logic             wr_lowb;  // lower-index result is written to Mem_B
    logic [OFS_W-1:0] addr_a;
    logic [OFS_W-1:0] addr_b;
    logic [TW_AW-1:0] tw_a;     // twiddle index (NTT/INTT, PWM word in Mem_A)
    logic [TW_AW-1:0] tw_b;     // twiddle index of the PWM word in Mem_B
  } rom_entry_t;

  localparam int unsigned ENTRY_W = $bits(rom_entry_t);

  function automatic longint unsigned powmod(longint unsigned b, longint unsigned e,
                                             longint unsigned m);
    longint unsigned r = 1;
    longint unsigned x = b % m;
    for (int i = 0; i < 16; i++) begin
      if (e[i]) r = (r * x) % m;
      x = (x * x) % m;
    end
    return r;
  endfunction

  function automatic int unsigned bitrev(int unsigned v, int unsigned bits);
    int unsigned r = 0;
    for (int i = 0; i < 8; i++) if (i < int'(bits)) r[bits-1-i] = v[i];
    return r;
  endfunction

endpackage
