// tb_kid_coef_ram: checks the simple dual-port coefficient RAM against a
// reference array. Every clock it issues a random write and a random read
// (each enabled at random) and checks that read data appears exactly one
// clock after the read enable, that a read of the address being written in
// the same clock returns the old word, and that the output holds its value
// while the read enable is low. The whole memory is written first so every
// compared word is known.
module tb_kid_coef_ram;
  localparam int DEPTH = 256;
  localparam int N     = 20000;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic        we, re;
  logic [7:0]  waddr, raddr;
  logic [23:0] wdata, rdata;
  int checks = 0, failures = 0;

  kid_coef_ram dut (.clk, .we_i(we), .waddr_i(waddr), .wdata_i(wdata),
                    .re_i(re), .raddr_i(raddr), .rdata_o(rdata));

  logic [23:0] model [DEPTH];
  logic [23:0] exp_q;
  logic        exp_v;

  initial begin
    we = 1'b0; re = 1'b0; waddr = '0; raddr = '0; wdata = '0; exp_v = 1'b0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1'b1; waddr = 8'(i); wdata = 24'($urandom); model[i] = wdata;
    end
    @(negedge clk);
    we = 1'b0;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      // check the word requested in the previous clock
      if (exp_v) begin
        checks++;
        if (rdata != exp_q) begin
          failures++;
          if (failures < 10) $display("FAIL read %0d: got %h exp %h", i, rdata, exp_q);
        end
      end
      we    = ($urandom % 3) != 0;
      re    = ($urandom % 4) != 0;
      waddr = 8'($urandom);
      raddr = (i % 7 == 0) ? waddr : 8'($urandom);
      wdata = 24'($urandom);
      // a read sees the contents before this clock's write; with re low the
      // output keeps the previous value
      if (re) begin
        exp_q = model[raddr];
        exp_v = 1'b1;
      end
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (N + DEPTH + 1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
