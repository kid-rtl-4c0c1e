// tb_kid_top_depth: the end-to-end test of tb_kid_top run on a core built
// with the deepest pipeline the memory schedule allows (PIPE_DEPTH = 31,
// one less than half the Kyber memory depth of 64 words per polynomial).
// It loads two random polynomials per scheme, runs NTT, NTT, PWM and INTT,
// and checks the forward transform against a reference NTT, the product
// against the schoolbook negacyclic product times R^-1, the issue clocks and
// the start-to-done latency for this depth, and that no step reads a word
// whose update is still in the pipeline. Mechanism counters as in
// tb_kid_top.
module tb_kid_top_depth;
  import kid_pkg::*;

  localparam int PD = 31;   // deepest conflict-free pipeline

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              start, busy, done, poly;
  op_e               op;
  scheme_e           sch;
  logic              hwe, hwbank, hre, hrbank;
  logic [7:0]        hwaddr, hraddr;
  logic [23:0]       hwdata, hrdata;

  kid_top #(.PIPE_DEPTH(PD)) dut (
    .clk, .rst_n, .start_i(start), .op_i(op), .scheme_i(sch), .poly_i(poly),
    .busy_o(busy), .done_o(done),
    .host_we_i(hwe), .host_wbank_i(hwbank), .host_waddr_i(hwaddr), .host_wdata_i(hwdata),
    .host_re_i(hre), .host_rbank_i(hrbank), .host_raddr_i(hraddr), .host_rdata_o(hrdata)
  );

  int checks = 0, failures = 0;
  int n_rdswap = 0, n_wrswap = 0, n_pwm0 = 0, n_pwm1 = 0, n_dpwm = 0, n_ntt = 0, n_intt = 0;
  int n_hazard = 0;

  // ---------------------------------------------------------------- helpers
  function automatic longint unsigned pw(longint unsigned b, longint unsigned e, longint unsigned m);
    longint unsigned r = 1;
    b = b % m;
    while (e > 0) begin
      if (e & 1) r = (r * b) % m;
      b = (b * b) % m;
      e >>= 1;
    end
    return r;
  endfunction
  function automatic int brv(int v, int bits);
    int r = 0;
    for (int i = 0; i < bits; i++) if ((v >> i) & 1) r |= 1 << (bits - 1 - i);
    return r;
  endfunction

  // word position after the forward transform, per scheme: bank and offset
  int fbank [256], faddr [256];
  task automatic final_layout(int W);
    int d = W / 2, S = $clog2(W);
    int at [2][128];
    for (int k = 0; k < d; k++) begin at[0][k] = k; at[1][k] = W - 1 - k; end
    for (int s = 1; s < S; s++) begin
      int p = d >> (s - 1);
      for (int a = 0; a < d; a++) begin
        int j = a & ~(p - 1);
        int b = 2 * j + p - 1 - a;
        if (a - j >= p / 2) begin
          int t = at[0][a]; at[0][a] = at[1][b]; at[1][b] = t;
        end
      end
    end
    for (int k = 0; k < d; k++) begin
      fbank[at[0][k]] = 0; faddr[at[0][k]] = k;
      fbank[at[1][k]] = 1; faddr[at[1][k]] = k;
    end
  endtask

  task automatic host_write(bit bank, int addr, logic [23:0] data);
    @(negedge clk);
    hwe = 1'b1; hwbank = bank; hwaddr = 8'(addr); hwdata = data;
    @(negedge clk);
    hwe = 1'b0;
  endtask
  task automatic host_read(bit bank, int addr, output logic [23:0] data);
    @(negedge clk);
    hre = 1'b1; hrbank = bank; hraddr = 8'(addr);
    @(negedge clk);
    hre = 1'b0;
    data = hrdata;
  endtask

  // natural position of word w of polynomial p
  function automatic bit nbank(int W, int w); return w >= W / 2; endfunction
  function automatic int naddr(int p, int W, int w);
    return p * 128 + ((w < W / 2) ? w : W - 1 - w);
  endfunction

  task automatic load_poly(bit dil, int p, int c []);
    int W = dil ? 256 : 128;
    for (int w = 0; w < W; w++)
      host_write(nbank(W, w), naddr(p, W, w),
                 dil ? 24'(c[w]) : {12'(c[2*w+1]), 12'(c[2*w])});
  endtask

  task automatic read_poly(bit dil, int p, bit transformed, output int c [256]);
    int W = dil ? 256 : 128;
    logic [23:0] d;
    for (int w = 0; w < W; w++) begin
      if (transformed) host_read(fbank[w] != 0, p * 128 + faddr[w], d);
      else             host_read(nbank(W, w), naddr(p, W, w), d);
      if (dil) c[w] = int'(d[22:0]);
      else begin c[2*w] = int'(d[11:0]); c[2*w+1] = int'(d[23:12]); end
    end
  endtask

  // issue one command, count its issue clocks and its start-to-done time
  task automatic run(op_e o, scheme_e s, bit pl, int exp_steps);
    int steps = 0, cyc = 0, exp_lat;
    @(negedge clk);
    op = o; sch = s; poly = pl; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin
      if (dut.st_valid) steps++;
      @(negedge clk);
      cyc++;
    end
    exp_lat = exp_steps + PD + ((o == OP_PWM) ? 3 : 2);
    checks += 2;
    if (steps != exp_steps) begin
      failures++; $display("FAIL %s %s: %0d issue clocks, expected %0d", s.name(), o.name(), steps, exp_steps);
    end
    if (cyc != exp_lat) begin
      failures++; $display("FAIL %s %s: latency %0d, expected %0d", s.name(), o.name(), cyc, exp_lat);
    end
    $display("%s %s: %0d issue clocks, %0d clocks start to done", s.name(), o.name(), steps, cyc);
  endtask

  // ------------------------------------------------------ run-time monitors
  bit pend [2][256];
  always @(posedge clk) if (rst_n) begin
    // a transform step must never read a word whose new value is in flight
    if (dut.s1.vld && (dut.s1.mode == BM_NTT || dut.s1.mode == BM_INTT)) begin
      if (pend[0][dut.ra_addr] || pend[1][dut.rb_addr]) n_hazard++;
      pend[0][dut.ra_addr] <= 1'b1;
      pend[1][dut.rb_addr] <= 1'b1;
      if (dut.ent.rd_lowb) n_rdswap++;
      if (dut.ent.rd_lowb != dut.ent.wr_lowb) n_wrswap++;
    end
    if (dut.wa_we) pend[0][dut.wa_addr] <= 1'b0;
    if (dut.wb_we) pend[1][dut.wb_addr] <= 1'b0;
    if (dut.bf_valid) begin
      if (dut.bf_mode == BM_PWM0) n_pwm0++;
      if (dut.bf_mode == BM_PWM1) n_pwm1++;
      if (dut.bf_mode == BM_DPWM) n_dpwm++;
      if (dut.bf_mode == BM_NTT)  n_ntt++;
      if (dut.bf_mode == BM_INTT) n_intt++;
    end
  end

  // --------------------------------------------------------------- the test
  task automatic one_scheme(bit dil);
    int q    = dil ? DQ : KQ;
    int W    = dil ? 256 : 128;
    longint unsigned rinv = pw(dil ? (64'd1 << 23) : 64'd4096, q - 2, q);
    int a [] = new[256];
    int b [] = new[256];
    int ref_ntt [256], prod [256], got [256];
    scheme_e s = dil ? DILITHIUM : KYBER;
    longint unsigned acc;

    for (int i = 0; i < 256; i++) begin
      a[i] = int'($urandom % q);
      b[i] = int'($urandom % q);
    end
    // a few extreme values
    a[0] = q - 1; b[0] = q - 1; a[255] = 0; b[1] = 1;

    // reference forward transform of a (plain arithmetic)
    for (int i = 0; i < 256; i++) ref_ntt[i] = a[i];
    begin
      int k = 1;
      for (int len = 128; len >= (dil ? 1 : 2); len >>= 1)
        for (int st = 0; st < 256; st += 2 * len) begin
          longint unsigned z = pw(dil ? 1753 : 17, brv(k, dil ? 8 : 7), q);
          k++;
          for (int j = st; j < st + len; j++) begin
            longint unsigned t = (z * longint'(ref_ntt[j + len])) % q;
            ref_ntt[j + len] = int'((longint'(ref_ntt[j]) + q - t) % q);
            ref_ntt[j]       = int'((longint'(ref_ntt[j]) + t) % q);
          end
        end
    end
    // reference product: negacyclic schoolbook, times R^-1
    for (int i = 0; i < 256; i++) begin
      acc = 0;
      for (int j = 0; j < 256; j++) begin
        longint unsigned pr = (longint'(a[j]) * longint'(b[(i - j + 256) % 256])) % q;
        if (j <= i) acc = (acc + pr) % q;
        else        acc = (acc + q - pr) % q;
      end
      prod[i] = int'((acc * rinv) % q);
    end

    final_layout(W);
    load_poly(dil, 0, a);
    load_poly(dil, 1, b);
    run(OP_NTT, s, 1'b0, dil ? 1024 : 448);
    read_poly(dil, 0, 1'b1, got);
    begin
      int bad = 0;
      for (int i = 0; i < 256; i++) if (got[i] != ref_ntt[i]) bad++;
      checks++;
      if (bad != 0) begin
        failures++; $display("FAIL %s NTT: %0d of 256 coefficients differ (c0 %0d vs %0d)",
                             s.name(), bad, got[0], ref_ntt[0]);
      end
    end
    run(OP_NTT, s, 1'b1, dil ? 1024 : 448);
    run(OP_PWM, s, 1'b0, 256);
    run(OP_INTT, s, 1'b0, dil ? 1024 : 448);
    read_poly(dil, 0, 1'b0, got);
    begin
      int bad = 0;
      for (int i = 0; i < 256; i++) if (got[i] != prod[i]) bad++;
      checks++;
      if (bad != 0) begin
        failures++; $display("FAIL %s product: %0d of 256 coefficients differ (c0 %0d vs %0d)",
                             s.name(), bad, got[0], prod[0]);
      end else $display("%s: polynomial product matches the schoolbook reference", s.name());
    end
  endtask

  initial begin
    start = 1'b0; op = OP_NTT; sch = KYBER; poly = 1'b0;
    hwe = 1'b0; hwbank = 1'b0; hwaddr = '0; hwdata = '0;
    hre = 1'b0; hrbank = 1'b0; hraddr = '0;
    for (int i = 0; i < 256; i++) begin pend[0][i] = 1'b0; pend[1][i] = 1'b0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    one_scheme(1'b0);
    one_scheme(1'b1);
    // mechanisms
    checks += 8;
    if (n_hazard != 0) begin failures++; $display("FAIL: %0d read-before-write hazards", n_hazard); end
    if (n_rdswap == 0) begin failures++; $display("FAIL: read exchange never used"); end
    if (n_wrswap == 0) begin failures++; $display("FAIL: write exchange never used"); end
    if (n_pwm0 != 128) begin failures++; $display("FAIL: PWM0 ops %0d", n_pwm0); end
    if (n_pwm1 != 128) begin failures++; $display("FAIL: PWM1 ops %0d", n_pwm1); end
    if (n_dpwm != 256) begin failures++; $display("FAIL: Dilithium PWM ops %0d", n_dpwm); end
    if (n_ntt != 2 * 448 + 2 * 1024) begin failures++; $display("FAIL: NTT ops %0d", n_ntt); end
    if (n_intt != 448 + 1024) begin failures++; $display("FAIL: INTT ops %0d", n_intt); end
    $display("mechanisms: read exchanges %0d, write exchanges %0d, PWM0 %0d, PWM1 %0d, DPWM %0d, NTT %0d, INTT %0d, hazards %0d",
             n_rdswap, n_wrswap, n_pwm0, n_pwm1, n_dpwm, n_ntt, n_intt, n_hazard);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
