// tb_kid_bfu: checks the reconfigurable butterfly pair in every mode. Random
// operations (mode and scheme chosen at random each clock) are issued back to
// back; each result is compared LAT clocks later with a plain-arithmetic
// model of the mode (Montgomery products include the R^-1 factor). The
// latency is checked by requiring valid_o exactly LAT clocks after valid_i.
module tb_kid_bfu;
  import kid_pkg::*;

  localparam int LAT = 14;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        vin, vout;
  bfu_mode_e   mode;
  scheme_e     sch;
  logic [23:0] x, y, tw, u, v;
  int checks = 0, failures = 0;

  kid_bfu #(.LAT(LAT)) dut (.clk, .rst_n, .valid_i(vin), .mode_i(mode), .scheme_i(sch),
                           .x_i(x), .y_i(y), .tw_i(tw), .valid_o(vout), .u_o(u), .v_o(v));

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

  longint unsigned kri, dri;
  // plain-arithmetic model of one lane
  function automatic longint unsigned mm(longint unsigned a, longint unsigned b, bit dil);
    return dil ? (a * b % DQ) * dri % DQ : (a * b % KQ) * kri % KQ;
  endfunction

  typedef struct { bit vld; bfu_mode_e m; logic [23:0] u, v; bit chk_v; } exp_t;
  exp_t pipe [$];

  task automatic issue(bfu_mode_e m, scheme_e s);
    longint unsigned q = (s == KYBER) ? KQ : DQ;
    longint unsigned xs [2], ys [2], ws [2], us [2], vs [2];
    exp_t e;
    bit dil = (s == DILITHIUM);
    int nl = dil ? 1 : 2;
    for (int l = 0; l < 2; l++) begin
      xs[l] = $urandom % q; ys[l] = $urandom % q; ws[l] = $urandom % q;
      us[l] = 0; vs[l] = 0;
    end
    if (!dil) ws[1] = ws[0];
    e.vld = 1; e.m = m; e.chk_v = 1;
    unique case (m)
      BM_NTT: for (int l = 0; l < nl; l++) begin
        longint unsigned t = mm(ys[l], ws[l], dil);
        us[l] = (xs[l] + t) % q; vs[l] = (xs[l] + q - t) % q;
      end
      BM_INTT: for (int l = 0; l < nl; l++) begin
        longint unsigned sm = (xs[l] + ys[l]) % q;
        us[l] = (sm % 2 == 0) ? sm / 2 : (sm + q) / 2;
        vs[l] = mm((xs[l] + q - ys[l]) % q, ws[l], dil);
      end
      BM_PWM0: begin
        us[0] = mm(xs[0], ys[0], 0); us[1] = mm(xs[1], ys[1], 0);
        vs[0] = (xs[0] + xs[1]) % q; vs[1] = (ys[0] + ys[1]) % q;
      end
      BM_PWM1: begin
        // x = {m2, m1}, y = {sb, sa}, w = psi
        us[0] = (xs[0] + mm(xs[1], ws[0], 0)) % q;
        us[1] = (mm(ys[0], ys[1], 0) + 2 * q - xs[0] - xs[1]) % q;
        e.chk_v = 0;
      end
      default: begin
        us[0] = mm(xs[0], ys[0], 1); e.chk_v = 0;
      end
    endcase
    mode = m; sch = s; vin = 1'b1;
    if (dil) begin
      x = 24'(xs[0]); y = 24'(ys[0]); tw = 24'(ws[0]);
      e.u = 24'(us[0]); e.v = 24'(vs[0]);
    end else begin
      x = {12'(xs[1]), 12'(xs[0])}; y = {12'(ys[1]), 12'(ys[0])}; tw = {12'(ws[1]), 12'(ws[0])};
      e.u = {12'(us[1]), 12'(us[0])}; e.v = {12'(vs[1]), 12'(vs[0])};
    end
    pipe.push_back(e);
  endtask

  int n_mode [5];
  initial begin
    kri = pw(4096, KQ - 2, KQ);
    dri = pw(64'd1 << 23, DQ - 2, DQ);
    vin = 1'b0; mode = BM_NTT; sch = KYBER; x = '0; y = '0; tw = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      if ($urandom % 8 == 0) begin
        vin = 1'b0;
        pipe.push_back('{vld: 0, m: BM_NTT, u: '0, v: '0, chk_v: 0});
      end else begin
        int r;
        r = $urandom % 7;
        if (r < 2)       begin issue(BM_NTT,  ($urandom % 2) ? KYBER : DILITHIUM); n_mode[0]++; end
        else if (r < 4)  begin issue(BM_INTT, ($urandom % 2) ? KYBER : DILITHIUM); n_mode[1]++; end
        else if (r == 4) begin issue(BM_PWM0, KYBER); n_mode[2]++; end
        else if (r == 5) begin issue(BM_PWM1, KYBER); n_mode[3]++; end
        else             begin issue(BM_DPWM, DILITHIUM); n_mode[4]++; end
      end
    end
    @(negedge clk);
    vin = 1'b0;
    repeat (LAT + 2) @(negedge clk);
    $display("issued: NTT %0d, INTT %0d, PWM0 %0d, PWM1 %0d, DPWM %0d",
             n_mode[0], n_mode[1], n_mode[2], n_mode[3], n_mode[4]);
    for (int k = 0; k < 5; k++) begin
      checks++;
      if (n_mode[k] < 100) begin
        failures++;
        $display("FAIL: mode %0d issued only %0d times", k, n_mode[k]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output side: the k-th issued slot must come out LAT clocks after it went in
  int cyc = 0;
  always @(posedge clk) if (rst_n) cyc <= cyc + 1;
  int slot = 0;
  always @(negedge clk) if (rst_n) begin
    // the slot driven at the negedge before clock edge k is visible after edge k+LAT
    if (slot < 5000 && cyc >= LAT + 1) begin
      exp_t e;
      e = pipe[slot];
      slot++;
      checks++;
      if (vout !== e.vld) begin
        failures++;
        if (failures < 10) $display("FAIL slot %0d: valid %0b exp %0b", slot, vout, e.vld);
      end else if (e.vld && (u !== e.u || (e.chk_v && v !== e.v))) begin
        failures++;
        if (failures < 10) $display("FAIL slot %0d %s: u=%h v=%h exp u=%h v=%h", slot, e.m.name(), u, v, e.u, e.v);
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
