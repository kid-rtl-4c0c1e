// tb_kid_addsub: random and corner-case test of the shared modular
// adder/subtractor in all six configurations (Kyber/Dilithium x add, halving
// add, subtract) against plain integer arithmetic.
module tb_kid_addsub;
  import kid_pkg::*;

  scheme_e     sch;
  logic        sub, half;
  logic [23:0] a, b, r;
  int checks = 0, failures = 0;

  kid_addsub dut (.scheme_i(sch), .sub_i(sub), .half_i(half), .a_i(a), .b_i(b), .r_o(r));

  function automatic longint unsigned ref1(longint unsigned x, longint unsigned y, bit s, bit h,
                                           longint unsigned q);
    longint unsigned v;
    if (s) return (x + q - y) % q;
    v = (x + y) % q;
    if (h) v = (v % 2 == 0) ? v / 2 : (v + q) / 2;
    return v;
  endfunction

  task automatic check_one(scheme_e s, bit sb, bit hf, longint unsigned x0, longint unsigned x1,
                           longint unsigned y0, longint unsigned y1);
    logic [23:0] exp;
    sch = s; sub = sb; half = hf;
    if (s == KYBER) begin
      a = {12'(x1), 12'(x0)}; b = {12'(y1), 12'(y0)};
      exp = {12'(ref1(x1, y1, sb, hf, KQ)), 12'(ref1(x0, y0, sb, hf, KQ))};
    end else begin
      a = 24'(x0); b = 24'(y0);
      exp = 24'(ref1(x0, y0, sb, hf, DQ));
    end
    #1;
    checks++;
    if (r !== exp) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s sub=%0b half=%0b a=%h b=%h got %h exp %h", s.name(), sb, hf, a, b, r, exp);
    end
  endtask

  initial begin
    for (int m = 0; m < 3; m++) begin
      bit sb, hf;
      sb = (m == 2); hf = (m == 1);
      // corners
      check_one(KYBER, sb, hf, 0, KQ - 1, KQ - 1, 0);
      check_one(KYBER, sb, hf, KQ - 1, KQ - 1, KQ - 1, KQ - 1);
      check_one(KYBER, sb, hf, 1664, 1665, 1665, 1664);
      check_one(DILITHIUM, sb, hf, DQ - 1, 0, DQ - 1, 0);
      check_one(DILITHIUM, sb, hf, 0, 0, DQ - 1, 0);
      check_one(DILITHIUM, sb, hf, 4190208, 0, 4190209, 0);
      check_one(DILITHIUM, sb, hf, 4095, 0, 1, 0);      // carry across bit 12
      check_one(DILITHIUM, sb, hf, 4096, 0, 1, 0);      // borrow across bit 12
      for (int i = 0; i < 3000; i++) begin
        check_one(KYBER, sb, hf, $urandom % KQ, $urandom % KQ, $urandom % KQ, $urandom % KQ);
        check_one(DILITHIUM, sb, hf, $urandom % DQ, 0, $urandom % DQ, 0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
