// tb_kid_mod_mul: checks the unified Montgomery multiplier. Random operands
// are fed every clock with the scheme changing at random; each result is
// compared, three clocks later, with x*y*R^-1 mod q computed in plain
// integer arithmetic (two lanes for Kyber, one for Dilithium).
module tb_kid_mod_mul;
  import kid_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  scheme_e     sch;
  logic [23:0] x, y, r;
  int checks = 0, failures = 0;

  kid_mod_mul dut (.clk, .scheme_i(sch), .x_i(x), .y_i(y), .r_o(r));

  function automatic longint unsigned pw(longint unsigned b, longint unsigned e, longint unsigned m);
    longint unsigned res = 1;
    b = b % m;
    while (e > 0) begin
      if (e & 1) res = (res * b) % m;
      b = (b * b) % m;
      e >>= 1;
    end
    return res;
  endfunction

  logic [23:0] expq [$];
  longint unsigned kri, dri;

  initial begin
    kri = pw(4096, KQ - 2, KQ);
    dri = pw(64'd1 << 23, DQ - 2, DQ);
    sch = KYBER; x = '0; y = '0;
    for (int i = 0; i < 20000; i++) begin
      longint unsigned a0, a1, b0, b1;
      @(negedge clk);
      if ($urandom % 2) begin
        sch = KYBER;
        a0 = $urandom % KQ; a1 = $urandom % KQ; b0 = $urandom % KQ; b1 = $urandom % KQ;
        if (i < 4) begin a0 = KQ - 1; a1 = KQ - 1; b0 = KQ - 1; b1 = 0; end
        x = {12'(a1), 12'(a0)}; y = {12'(b1), 12'(b0)};
        expq.push_back({12'((a1 * b1 % KQ) * kri % KQ), 12'((a0 * b0 % KQ) * kri % KQ)});
      end else begin
        sch = DILITHIUM;
        a0 = $urandom % DQ; b0 = $urandom % DQ;
        if (i < 8) begin a0 = DQ - 1; b0 = DQ - 1 - i; end
        x = 24'(a0); y = 24'(b0);
        expq.push_back(24'((a0 * b0 % DQ) * dri % DQ));
      end
    end
    repeat (4) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // results appear three clocks after the operands
  int n_in = 0;
  always @(posedge clk) begin
    n_in <= n_in + 1;
    if (n_in >= 4 && expq.size() > 0 && n_in < 20004) begin
      logic [23:0] e;
      e = expq.pop_front();
      checks++;
      if (r !== e) begin
        failures++;
        if (failures < 10) $display("FAIL result %0d: got %h exp %h", checks, r, e);
      end
    end
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
