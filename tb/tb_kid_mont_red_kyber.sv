// tb_kid_mont_red_kyber: checks the Kyber Montgomery reduction (q = 3329,
// R = 2^12). A new product T = a*b with a, b < q enters every clock (random
// values plus the corner cases 0 and (q-1)^2); two clocks later the output
// must equal T * 2^-12 mod q, computed here with plain integer arithmetic,
// and must lie in [0, q). The two-clock latency is checked implicitly by the
// alignment of the expected-value queue.
module tb_kid_mont_red_kyber;
  import kid_pkg::*;

  localparam int N = 20000;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [23:0] t;
  logic [11:0] r;
  int checks = 0, failures = 0;
  longint unsigned rinv;

  kid_mont_red_kyber dut (.clk, .t_i(t), .r_o(r));

  logic [11:0] expq [$];
  int n_in = 0;

  initial begin
    rinv = 0;
    for (longint unsigned i = 1; i < KQ; i++) if ((i * 4096) % KQ == 1) rinv = i;
    t = '0;
    for (int i = 0; i < N; i++) begin
      longint unsigned a, b;
      @(negedge clk);
      a = $urandom % KQ;
      b = $urandom % KQ;
      if (i == 0) begin a = 0; b = 0; end
      if (i == 1) begin a = KQ - 1; b = KQ - 1; end
      if (i == 2) begin a = KQ - 1; b = 1; end
      t = 24'(a * b);
      expq.push_back(12'(((a * b) % KQ) * rinv % KQ));
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
      logic [11:0] e;
      e = expq.pop_front();
      checks++;
      if (r != e || r >= 12'(KQ)) begin
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
