// tb_kid_twiddle_rom: reads all 1024 twiddle ROM words and checks them
// against values computed here independently: powers of the roots of unity
// are built by repeated multiplication (not by the ROM's exponentiation),
// indices are bit-reversed by a local routine, and each word is converted
// out of Montgomery form before comparing. Also checks the two published
// anchors zeta_1 = 1729 (Kyber) and zeta_1 = 4808194 (Dilithium), that both
// Kyber halves hold the same value, that inverse twiddles t satisfy
// 2t + zeta = 0 mod q, that unused words are zero, and the one-clock read
// latency (the output must not change while the read enable is low).
module tb_kid_twiddle_rom;
  import kid_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic        re;
  logic [9:0]  addr;
  logic [23:0] data;
  int checks = 0, failures = 0;

  kid_twiddle_rom dut (.clk, .re_i(re), .addr_i(addr), .data_o(data));

  longint unsigned kpow [256];
  longint unsigned dpow [512];
  longint unsigned krinv, drinv;

  function automatic int brv(int v, int bits);
    int r = 0;
    for (int i = 0; i < bits; i++) if (v & (1 << i)) r |= 1 << (bits - 1 - i);
    return r;
  endfunction

  function automatic longint unsigned inv(longint unsigned a, longint unsigned m);
    // extended Euclid
    longint t = 0, nt = 1, r = longint'(m), nr = longint'(a), qq, tmp;
    while (nr != 0) begin
      qq = r / nr;
      tmp = t - qq * nt; t = nt; nt = tmp;
      tmp = r - qq * nr; r = nr; nr = tmp;
    end
    if (t < 0) t += longint'(m);
    return longint'(t);
  endfunction

  task automatic check(string what, int a, longint unsigned got, longint unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0d: got %0d exp %0d", what, a, got, exp);
    end
  endtask

  // expected plain (non-Montgomery) value of ROM word a, or -1 for unused
  function automatic longint expected(int a);
    if (a < 128)  return longint'(kpow[brv(a, 7)]);
    if (a < 256)  return longint'(((KQ - kpow[brv(a - 128, 7)]) * inv(2, KQ)) % KQ);
    if (a < 384) begin
      longint unsigned z = kpow[brv(64 + (a - 256) / 2, 7)];
      return ((a - 256) % 2 == 0) ? longint'(z) : longint'((KQ - z) % KQ);
    end
    if (a < 512)  return -1;
    if (a < 768)  return longint'(dpow[brv(a - 512, 8)]);
    return longint'(((DQ - dpow[brv(a - 768, 8)]) * inv(2, DQ)) % DQ);
  endfunction

  initial begin
    kpow[0] = 1;
    for (int i = 1; i < 256; i++) kpow[i] = (kpow[i-1] * KZETA) % KQ;
    dpow[0] = 1;
    for (int i = 1; i < 512; i++) dpow[i] = (dpow[i-1] * DZETA) % DQ;
    krinv = inv(4096, KQ);
    drinv = inv(64'd1 << 23, DQ);
    check("kyber anchor", 1, kpow[brv(1, 7)], 1729);
    check("dilithium anchor", 1, dpow[brv(1, 8)], 4808194);
    check("kyber root order", 0, kpow[128], KQ - 1);
    check("dilithium root order", 0, dpow[256], DQ - 1);

    re = 1'b0; addr = '0;
    for (int a = 0; a < 1024; a++) begin
      longint e;
      logic [23:0] held;
      @(negedge clk);
      re = 1'b1; addr = 10'(a);
      @(negedge clk);
      re = 1'b0; addr = 10'($urandom);
      e = expected(a);
      held = data;
      if (e < 0) check("unused", a, data, 0);
      else if (a < 512) begin
        check("kyber halves", a, data[23:12], data[11:0]);
        check("kyber value", a, (longint'(data[11:0]) * krinv) % KQ, e);
      end else begin
        check("dilithium msb", a, data[23], 0);
        check("dilithium value", a, (longint'(data[22:0]) * drinv) % DQ, e);
      end
      // the output holds while re is low
      @(negedge clk);
      check("hold", a, data, held);
    end
    // INTT relation 2t + zeta = 0 on the stored (Montgomery) values
    for (int k = 0; k < 128; k++) begin
      longint unsigned zt, tt;
      zt = expected(k); tt = expected(128 + k);
      check("kyber intt relation", k, (2 * tt + zt) % KQ, 0);
    end
    for (int k = 0; k < 256; k++) begin
      longint unsigned zt, tt;
      zt = expected(512 + k); tt = expected(768 + k);
      check("dilithium intt relation", k, (2 * tt + zt) % DQ, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
