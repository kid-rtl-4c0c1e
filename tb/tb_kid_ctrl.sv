// tb_kid_ctrl: checks the control counter for all six operations (NTT, INTT
// and point-wise multiplication for Kyber and Dilithium), in random order.
// For each operation it checks
//   - the number of step clocks: 448 / 1024 for the transforms and 256 for
//     point-wise multiplication of either scheme (the paper's latencies),
//   - that steps start the clock after start_i and run without gaps,
//   - the address sequence: base + i for transforms; for point-wise
//     multiplication each entry twice, phase 0 then phase 1, and for Kyber
//     the whole region twice, first in mode PWM0 then PWM1,
//   - mode, scheme and polynomial outputs,
//   - that a start_i pulse while busy is ignored,
//   - that done_o pulses exactly one clock after the last expected
//     last_wr_i pulse (two for Kyber point-wise multiplication, one
//     otherwise), not earlier, and busy_o falls with it.
module tb_kid_ctrl;
  import kid_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic              rst_n, start, poly, last_wr;
  op_e               op;
  scheme_e           sch;
  logic              busy, done, sv, sph, spoly;
  logic [ROM_AW-1:0] saddr;
  bfu_mode_e         smode;
  scheme_e           ssch;
  int checks = 0, failures = 0;

  kid_ctrl dut (.clk, .rst_n, .start_i(start), .op_i(op), .scheme_i(sch), .poly_i(poly),
                .last_wr_i(last_wr), .busy_o(busy), .done_o(done), .step_valid_o(sv),
                .step_addr_o(saddr), .step_phase_o(sph), .step_mode_o(smode),
                .step_scheme_o(ssch), .step_poly_o(spoly));

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  function automatic int base_of(op_e o, scheme_e s);
    if (o == OP_NTT)  return (s == KYBER) ? K_NTT_BASE  : D_NTT_BASE;
    if (o == OP_INTT) return (s == KYBER) ? K_INTT_BASE : D_INTT_BASE;
    return (s == KYBER) ? K_PWM_BASE : D_PWM_BASE;
  endfunction

  task automatic run(op_e o, scheme_e s, logic p);
    int n, nexp, entries, passes, base, lasts, k, ent, ph, pass;
    bfu_mode_e m;
    base    = base_of(o, s);
    entries = (o == OP_PWM) ? ((s == KYBER) ? 64 : 128) : ((s == KYBER) ? 448 : 1024);
    passes  = (o == OP_PWM && s == KYBER) ? 2 : 1;
    nexp    = (o == OP_PWM) ? 256 : entries;
    lasts   = passes;
    @(negedge clk);
    check("idle before start", busy, 0);
    start = 1'b1; op = o; sch = s; poly = p;
    @(negedge clk);
    start = 1'b0;
    n = 0;
    while (sv) begin
      // expected position of step n
      if (o == OP_PWM) begin
        pass = n / (2 * entries); ent = (n / 2) % entries; ph = n % 2;
        m = (s == DILITHIUM) ? BM_DPWM : (pass == 0 ? BM_PWM0 : BM_PWM1);
      end else begin
        pass = 0; ent = n; ph = 0;
        m = (o == OP_NTT) ? BM_NTT : BM_INTT;
      end
      check("step address", saddr, base + ent);
      check("step phase", sph, ph);
      check("step mode", smode, m);
      check("step scheme", ssch, s);
      if (o != OP_PWM) check("step polynomial", spoly, p);
      check("busy while running", busy, 1);
      // a second start while busy must change nothing
      start = (n == 5);
      op = OP_INTT; sch = (s == KYBER) ? DILITHIUM : KYBER;
      // for Kyber PWM the first last_wr comes back during the second pass
      last_wr = (lasts == 2 && n == nexp / 2 + 20);
      @(negedge clk);
      start = 1'b0; last_wr = 1'b0;
      n++;
      if (n > 5000) break;
    end
    check("step clocks", n, nexp);
    // the final result write returns a few clocks later
    repeat ($urandom_range(1, 20)) begin
      @(negedge clk);
      check("busy while draining", busy, 1);
      check("no early done", done, 0);
    end
    last_wr = 1'b1;
    @(negedge clk);
    last_wr = 1'b0;
    check("done one clock after the last write", done, 1);
    check("idle after done", busy, 0);
    @(negedge clk);
    check("done is one pulse", done, 0);
  endtask

  initial begin
    rst_n = 1'b0; start = 1'b0; last_wr = 1'b0; op = OP_NTT; sch = KYBER; poly = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    check("idle after reset", busy, 0);
    for (int i = 0; i < 24; i++) begin
      op_e o;
      scheme_e s;
      o = (i < 6) ? op_e'(i % 3) : op_e'($urandom % 3);
      s = (i < 6) ? scheme_e'(i / 3) : scheme_e'($urandom % 2);
      run(o, s, 1'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
