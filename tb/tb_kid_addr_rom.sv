// tb_kid_addr_rom: replays every address-ROM program (Kyber and Dilithium
// NTT, point-wise multiplication and inverse NTT) on a model of the two
// coefficient memories that tracks which coefficient word sits at each
// address. For every step it checks that
//   - the two words read form a butterfly pair of the current stage
//     (distance W/2^s, each word used exactly once per stage),
//   - rd_lowb tells which memory holds the lower-index word,
//   - the twiddle index is the reference-ordering zeta index of the pair,
//   - no address is read within d/2 steps of being written (d = words per
//     polynomial in one memory: 32 steps for Kyber, 64 for Dilithium), so a
//     pipeline shallower than d/2 clocks never reads a stale word,
//   - the last flag is set on the final step only.
// The memory model is then updated using wr_lowb. Point-wise steps must
// visit every offset once and carry the index of the word in each memory.
// After the inverse NTT every word must be back at its starting address.
// The read latency of one clock is used for every access.
module tb_kid_addr_rom;
  import kid_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic              re;
  logic [ROM_AW-1:0] addr;
  rom_entry_t        data;
  int checks = 0, failures = 0;

  kid_addr_rom dut (.clk, .re_i(re), .addr_i(addr), .data_o(data));

  int mem   [2][128];   // word index held at {bank, offset}
  int wstep [2][128];   // step that last wrote {bank, offset}
  int seen  [256];
  int step;
  int min_gap;

  task automatic check(string what, int a, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s at entry %0d: got %0d exp %0d", what, a, got, exp);
    end
  endtask

  task automatic rd(int a, output rom_entry_t e);
    @(negedge clk);
    re = 1'b1; addr = ROM_AW'(a);
    @(negedge clk);
    re = 1'b0;
    e = data;
  endtask

  // one butterfly step: checks, then updates the memory model
  task automatic bfly(int a, rom_entry_t e, int W, int s, bit inv, int tbase, bit last);
    int wa, wb, lo, hi, dst, blk;
    wa = mem[0][e.addr_a];
    wb = mem[1][e.addr_b];
    lo = (wa < wb) ? wa : wb;
    hi = (wa < wb) ? wb : wa;
    dst = W >> s;
    blk = lo / (2 * dst);
    check("pair distance", a, hi - lo, dst);
    check("pair alignment", a, lo % (2 * dst) < dst, 1);
    check("lower word used once", a, seen[lo], 0);
    check("upper word used once", a, seen[hi], 0);
    seen[lo] = 1; seen[hi] = 1;
    check("rd_lowb", a, e.rd_lowb, wb < wa);
    check("twiddle", a, e.tw_a, inv ? tbase + (1 << s) - 1 - blk : tbase + (1 << (s - 1)) + blk);
    check("last flag", a, e.last, last);
    if (step - wstep[0][e.addr_a] < min_gap) min_gap = step - wstep[0][e.addr_a];
    if (step - wstep[1][e.addr_b] < min_gap) min_gap = step - wstep[1][e.addr_b];
    if (e.wr_lowb) begin mem[1][e.addr_b] = lo; mem[0][e.addr_a] = hi; end
    else           begin mem[0][e.addr_a] = lo; mem[1][e.addr_b] = hi; end
    wstep[0][e.addr_a] = step;
    wstep[1][e.addr_b] = step;
    step++;
  endtask

  task automatic run_scheme(bit dil, int W, int nbase, int ibase, int pbase,
                            int tn, int ti, int tp);
    int d, S;
    rom_entry_t e;
    int vis [128];
    d = W / 2;
    S = $clog2(W);
    for (int w = 0; w < W; w++)
      if (w < d) mem[0][w] = w; else mem[1][W - 1 - w] = w;
    // forward transform
    for (int b = 0; b < 2; b++) for (int o = 0; o < 128; o++) wstep[b][o] = -1000;
    step = 0; min_gap = 1000;
    for (int s = 1; s <= S; s++) begin
      for (int w = 0; w < W; w++) seen[w] = 0;
      for (int i = 0; i < d; i++) begin
        int a = nbase + (s - 1) * d + i;
        rd(a, e);
        bfly(a, e, W, s, 1'b0, tn, s == S && i == d - 1);
      end
    end
    check("NTT read-after-write gap >= d/2", nbase, min_gap >= d / 2, 1);
    // point-wise multiplication
    for (int o = 0; o < d; o++) vis[o] = 0;
    for (int k = 0; k < d; k++) begin
      int a = pbase + k;
      rd(a, e);
      check("pwm same offset", a, e.addr_a, e.addr_b);
      vis[e.addr_a]++;
      check("pwm tw_a", a, e.tw_a, dil ? 0 : tp + mem[0][e.addr_a]);
      check("pwm tw_b", a, e.tw_b, dil ? 0 : tp + mem[1][e.addr_b]);
      check("pwm last flag", a, e.last, k == d - 1);
    end
    for (int o = 0; o < d; o++) check("pwm offset visited once", pbase + o, vis[o], 1);
    // inverse transform
    for (int b = 0; b < 2; b++) for (int o = 0; o < 128; o++) wstep[b][o] = -1000;
    step = 0; min_gap = 1000;
    for (int s = S; s >= 1; s--) begin
      for (int w = 0; w < W; w++) seen[w] = 0;
      for (int i = 0; i < d; i++) begin
        int a = ibase + (S - s) * d + i;
        rd(a, e);
        bfly(a, e, W, s, 1'b1, ti, s == 1 && i == d - 1);
      end
    end
    check("INTT read-after-write gap >= d/2", ibase, min_gap >= d / 2, 1);
    for (int w = 0; w < W; w++)
      if (w < d) check("INTT natural order (Mem_A)", w, mem[0][w], w);
      else       check("INTT natural order (Mem_B)", w, mem[1][W - 1 - w], w);
  endtask

  initial begin
    re = 1'b0; addr = '0;
    run_scheme(1'b0, 128, K_NTT_BASE, K_INTT_BASE, K_PWM_BASE, TW_K_NTT, TW_K_INTT, TW_K_PWM);
    run_scheme(1'b1, 256, D_NTT_BASE, D_INTT_BASE, D_PWM_BASE, TW_D_NTT, TW_D_INTT, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
