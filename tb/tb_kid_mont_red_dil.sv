// tb_kid_mont_red_dil: checks the Dilithium Montgomery reduction
// (q = 8380417, R = 2^23). A new product T = a*b with a, b < q enters every
// clock (random values plus the corner cases 0 and (q-1)^2); two clocks later
// the output must equal T * 2^-23 mod q, computed here with plain integer arithmetic,
// and must lie in [0, q). The two-clock latency is checked implicitly by the
// alignment of the expected-value queue.
module tb_kid_mont_red_dil;
  import kid_pkg::*;

  localparam int N = 20000;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [45:0] t;
  logic [22:0] r;
  int checks = 0, failures = 0;
  longint unsigned rinv;

  kid_mont_red_dil dut (.clk, .t_i(t), .r_o(r));

  logic [22:0] expq [$];
  int n_in = 0;

  initial begin
    rinv = 0;
    // 2^-23 mod q by Fermat: 2^(q-1-23)
    rinv = 1;
    for (longint unsigned i = 0; i < DQ - 1 - 23; i++) rinv = (rinv * 2) % DQ;
    t = '0;
    for (int i = 0; i < N; i++) begin
      longint unsigned a, b;
      @(negedge clk);
      a = {$urandom, $urandom} % DQ;
      b = {$urandom, $urandom} % DQ;
      if (i == 0) begin a = 0; b = 0; end
      if (i == 1) begin a = DQ - 1; b = DQ - 1; end
      if (i == 2) begin a = DQ - 1; b = 1; end
      t = 46'(a * b);
      expq.push_back(23'(((a * b) % DQ) * rinv % DQ));
    end
    repeat (4) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    n_in <= n_in + 1;
    // the first operand is applied after the first posedge; its result is
    // visible after the third
    if (n_in >= 3 && expq.size() > 0) begin
      logic [22:0] e;
      e = expq.pop_front();
      checks++;
      if (r != e || r >= 23'(DQ)) begin
        failures++;
        if (failures < 10) $display("FAIL %0d: got %0d exp %0d", checks, r, e);
      end
    end
  end

  initial begin
    repeat (N + 1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
