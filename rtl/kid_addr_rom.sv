// kid_addr_rom: single-port "address ROM" that replaces an address generator.
//
// Each entry is one step of an operation (rom_entry_t): the Mem_A and Mem_B
// offsets read and later written by the butterfly, the two order flags
// (which memory holds the lower-index operand, which memory receives the
// lower-index result), the twiddle indices and a flag on the last step.
//
// Memory mapping (conflict-free, after the paper's Algorithm 1 and its
// 32-coefficient example). With W words per polynomial (Kyber 128 words of
// two coefficients, Dilithium 256 words of one) and d = W/2 words per
// memory, word w starts in Mem_A at offset w (w < d) or in Mem_B at offset
// W-1-w. Stage s (s = 1..log2 W) pairs words w and w + W/2^s. With the block
// size p = d/2^(s-1), step a of the stage reads Mem_A[a] and Mem_B[b] with
//   b = 2*j + p - 1 - a,   j = a rounded down to a multiple of p,
// which always holds a butterfly pair. The results go back to the same two
// addresses; in the second half of every block (a - j >= p/2) they are
// exchanged between the memories, except after the last stage. This
// reproduces the paper's stage-by-stage layout exactly and keeps the stage
// in the paper's order of blocks. Mem_A is walked linearly and Mem_B in a
// mirrored order; a result read in one stage is needed again at least
// d - p/2 cycles later, so any pipeline depth below d/2 runs without stalls
// (the paper's condition: depth <= memory depth / 2). The paper lists the
// steps of a block interleaved from both ends; this design walks each block
// from one end, which keeps the same pairs and needs no special reversal.
// The inverse NTT runs the stages in reverse order on the same address
// pairs and un-does the exchanges, so its output is in natural order.
// Point-wise multiplication walks offsets 0..d-1 of both memories.
//
// Twiddle index for the pair whose lower word is w (block number
// blk = w / (2*W/2^s)): NTT zeta index 2^(s-1) + blk, INTT 2^s - 1 - blk
// (the Kyber/Dilithium reference ordering). The table is computed at
// initialisation by running this schedule; read data appears one cycle after
// re_i.
module kid_addr_rom
  import kid_pkg::*;
(
  input  logic              clk,
  input  logic              re_i,
  input  logic [ROM_AW-1:0] addr_i,
  output rom_entry_t        data_o
);
  typedef rom_entry_t rom_t [ROM_DEPTH];

  // Returns r_in with the entries of one scheme (W words per polynomial) filled in.
  function automatic rom_t gen(input rom_t r_in, input bit dil, input int unsigned W,
                              input int unsigned nbase, input int unsigned ibase,
                              input int unsigned pbase, input int unsigned tn,
                              input int unsigned ti, input int unsigned tp);
    int unsigned d, S, p, j, b, wa, wb, lo, dstw, blk, e;
    int          at [2][128];
    int          cb [256];
    int          ca [256];
    int          lbank [10][256];   // bank of word w at the start of stage s
    int          laddr [10][256];   // offset of word w at the start of stage s
    bit          rdb, sw;
    rom_entry_t  ent;
    rom_t        r;
    r = r_in;
    d = W / 2;
    S = $clog2(W);
    for (int w = 0; w < int'(W); w++) begin
      cb[w] = (w < int'(d)) ? 0 : 1;
      ca[w] = (w < int'(d)) ? w : int'(W) - 1 - w;
    end
    e = nbase;
    // forward transform
    for (int s = 1; s <= int'(S); s++) begin
      for (int w = 0; w < int'(W); w++) begin
        lbank[s][w] = cb[w]; laddr[s][w] = ca[w]; at[cb[w]][ca[w]] = w;
      end
      p = d >> (s - 1);
      for (int unsigned a = 0; a < d; a++) begin
        j    = a & ~(p - 1);
        b    = 2 * j + p - 1 - a;
        wa   = at[0][a];
        wb   = at[1][b];
        lo   = (wa < wb) ? wa : wb;
        rdb  = (wb < wa);
        sw   = (s < int'(S)) && ((a - j) >= p / 2);
        dstw = W >> s;
        blk  = lo / (2 * dstw);
        ent  = '0;
        ent.rd_lowb = rdb;
        ent.wr_lowb = rdb ^ sw;
        ent.addr_a  = OFS_W'(a);
        ent.addr_b  = OFS_W'(b);
        ent.tw_a    = TW_AW'(tn + (1 << (s - 1)) + blk);
        ent.last    = (s == int'(S)) && (a == d - 1);
        r[e] = ent; e++;
        if (sw) begin
          cb[wa] = 1; ca[wa] = b;
          cb[wb] = 0; ca[wb] = a;
        end
      end
    end
    for (int w = 0; w < int'(W); w++) at[cb[w]][ca[w]] = w;
    // point-wise multiplication on the transformed layout
    e = pbase;
    for (int unsigned k = 0; k < d; k++) begin
      ent = '0;
      ent.addr_a = OFS_W'(k);
      ent.addr_b = OFS_W'(k);
      ent.tw_a   = dil ? '0 : TW_AW'(tp + at[0][k]);
      ent.tw_b   = dil ? '0 : TW_AW'(tp + at[1][k]);
      ent.last   = (k == d - 1);
      r[e] = ent; e++;
    end
    // inverse transform: stages S..1, restoring the layout of stage s
    e = ibase;
    for (int s = int'(S); s >= 1; s--) begin
      p = d >> (s - 1);
      for (int unsigned a = 0; a < d; a++) begin
        j    = a & ~(p - 1);
        b    = 2 * j + p - 1 - a;
        wa   = at[0][a];
        wb   = at[1][b];
        lo   = (wa < wb) ? wa : wb;
        dstw = W >> s;
        blk  = lo / (2 * dstw);
        ent  = '0;
        ent.rd_lowb = (wb < wa);
        ent.wr_lowb = (lbank[s][lo] == 1);
        ent.addr_a  = OFS_W'(a);
        ent.addr_b  = OFS_W'(b);
        ent.tw_a    = TW_AW'(ti + (1 << s) - 1 - blk);
        ent.last    = (s == 1) && (a == d - 1);
        r[e] = ent; e++;
      end
      for (int w = 0; w < int'(W); w++) at[lbank[s][w]][laddr[s][w]] = w;
    end
    return r;
  endfunction

  function automatic rom_t build();
    rom_t r;
    for (int i = 0; i < int'(ROM_DEPTH); i++) r[i] = '0;
    r = gen(r, 1'b0, 128, K_NTT_BASE, K_INTT_BASE, K_PWM_BASE, TW_K_NTT, TW_K_INTT, TW_K_PWM);
    r = gen(r, 1'b1, 256, D_NTT_BASE, D_INTT_BASE, D_PWM_BASE, TW_D_NTT, TW_D_INTT, 0);
    return r;
  endfunction

  rom_t rom;
  initial rom = build();

  always_ff @(posedge clk)
    if (re_i) data_o <= rom[addr_i];
endmodule
