// kid_top: unified NTT polynomial-multiplication core for Kyber and Dilithium
// (two Kyber butterflies / one Dilithium butterfly per clock).
//
// Blocks: two simple dual-port coefficient RAMs (Mem_A, Mem_B), the address
// ROM holding the conflict-free read/write schedule, the twiddle ROM, the
// control counter and the reconfigurable butterfly pair. Every clock the
// schedule reads one word from each RAM; a read crossbar puts the
// lower-index word on the butterfly's x input, and a write crossbar returns
// the two results to the same two addresses, possibly exchanged, PIPE_DEPTH
// clocks after the read. This is the structure of the paper's unified core.
//
// Operations (start_i with op_i, scheme_i, poly_i; done_o pulses when the
// last result is written):
//   OP_NTT / OP_INTT on polynomial poly_i: 448 (Kyber) or 1024 (Dilithium)
//     issue clocks. The forward transform leaves the coefficients in the
//     schedule's scrambled layout; the inverse transform takes that layout
//     and returns natural order, already divided by n (1/128 for Kyber's
//     7-stage transform, 1/256 for Dilithium).
//   OP_PWM: point-wise product of polynomials 0 and 1, 256 issue clocks for
//     both schemes; the product overwrites polynomial 0, polynomial 1 is
//     used as scratch. Because the multiplier is a Montgomery multiplier the
//     result carries a factor R^-1 (2^-12 Kyber, 2^-23 Dilithium); load one
//     operand pre-multiplied by R mod q to get the plain product.
//
// Host port (used while busy_o is low): word address {poly, offset[6:0]} and
// bank (0 = Mem_A, 1 = Mem_B). Natural layout of polynomial p: word w (Kyber
// coefficients {2w+1, 2w}; Dilithium coefficient w in bits [22:0]) lies in
// Mem_A at offset w for w < d, otherwise in Mem_B at offset W-1-w (W words,
// d = W/2: Kyber 128/64, Dilithium 256/128). Read data is valid one clock
// after host_re_i.
//
// The host port, the done handshake and the PWM operand placement are this
// design's own; the paper does not say how coefficients enter the core.
module kid_top
  import kid_pkg::*;
#(
  parameter int unsigned PIPE_DEPTH = 15     // RAM read to RAM write, < 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // command
  input  logic              start_i,
  input  op_e               op_i,
  input  scheme_e           scheme_i,
  input  logic              poly_i,
  output logic              busy_o,
  output logic              done_o,
  // host access to the coefficient RAMs
  input  logic              host_we_i,
  input  logic              host_wbank_i,
  input  logic [RAM_AW-1:0] host_waddr_i,
  input  logic [WORD_W-1:0] host_wdata_i,
  input  logic              host_re_i,
  input  logic              host_rbank_i,
  input  logic [RAM_AW-1:0] host_raddr_i,
  output logic [WORD_W-1:0] host_rdata_o
);
  localparam int unsigned LAT = PIPE_DEPTH - 1;   // butterfly latency

  // ------------------------------------------------------------------ control
  logic              st_valid, st_phase, st_poly, last_wr;
  logic [ROM_AW-1:0] st_addr;
  bfu_mode_e         st_mode;
  scheme_e           st_sch;

  kid_ctrl u_ctrl (
    .clk, .rst_n, .start_i, .op_i, .scheme_i, .poly_i, .last_wr_i(last_wr),
    .busy_o, .done_o,
    .step_valid_o(st_valid), .step_addr_o(st_addr), .step_phase_o(st_phase),
    .step_mode_o(st_mode), .step_scheme_o(st_sch), .step_poly_o(st_poly)
  );

  rom_entry_t ent;
  kid_addr_rom u_addr_rom (.clk, .re_i(st_valid), .addr_i(st_addr), .data_o(ent));

  // step attributes, one clock later (aligned with the ROM data)
  typedef struct packed {
    logic      vld;
    logic      phase;
    logic      poly;
    bfu_mode_e mode;
    scheme_e   sch;
  } step_t;
  step_t s1, s2;
  rom_entry_t ent2;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      s1 <= '{vld: 1'b0, phase: 1'b0, poly: 1'b0, mode: BM_NTT, sch: KYBER};
      s2 <= '{vld: 1'b0, phase: 1'b0, poly: 1'b0, mode: BM_NTT, sch: KYBER};
    end else begin
      s1 <= '{vld: st_valid, phase: st_phase, poly: st_poly, mode: st_mode, sch: st_sch};
      s2 <= s1;
    end
  always_ff @(posedge clk) ent2 <= ent;

  logic s1_pwm, s2_pwm;
  assign s1_pwm = (s1.mode == BM_PWM0) || (s1.mode == BM_PWM1) || (s1.mode == BM_DPWM);
  assign s2_pwm = (s2.mode == BM_PWM0) || (s2.mode == BM_PWM1) || (s2.mode == BM_DPWM);

  // ---------------------------------------------------------- read addresses
  logic              ra_re, rb_re;
  logic [RAM_AW-1:0] ra_addr, rb_addr;
  logic [WORD_W-1:0] ra_data, rb_data;
  logic              rd_poly;
  always_comb begin
    rd_poly = s1_pwm ? s1.phase : s1.poly;
    if (s1.vld) begin
      ra_re = 1'b1; ra_addr = {rd_poly, ent.addr_a};
      rb_re = 1'b1; rb_addr = {rd_poly, ent.addr_b};
    end else begin
      ra_re = host_re_i && !host_rbank_i; ra_addr = host_raddr_i;
      rb_re = host_re_i &&  host_rbank_i; rb_addr = host_raddr_i;
    end
  end

  logic [WORD_W-1:0] tw_data;
  kid_twiddle_rom u_tw_rom (
    .clk, .re_i(s1.vld),
    .addr_i((s1_pwm && s1.phase) ? ent.tw_b : ent.tw_a),
    .data_o(tw_data)
  );

  // ------------------------------------------- read crossbar and PWM gather
  typedef enum logic [1:0] {K_BFLY, K_PWM_A, K_PWM_B} wkind_e;
  typedef struct packed {
    logic              vld;
    wkind_e            kind;
    logic              last;
    logic              wr_lowb;
    logic              write_v;
    logic [RAM_AW-1:0] addr_a;
    logic [RAM_AW-1:0] addr_b;
  } meta_t;

  logic [WORD_W-1:0] p0a_q, p0b_q, twa_q;
  logic              opb_pend;
  logic [WORD_W-1:0] opb_x, opb_y, opb_tw;
  meta_t             opb_meta;
  bfu_mode_e         opb_mode;

  logic              bf_valid;
  bfu_mode_e         bf_mode;
  scheme_e           bf_sch;
  logic [WORD_W-1:0] bf_x, bf_y, bf_tw;
  meta_t             bf_meta;

  always_comb begin
    bf_valid = 1'b0;
    bf_mode  = s2.mode;
    bf_sch   = s2.sch;
    bf_x     = ent2.rd_lowb ? rb_data : ra_data;
    bf_y     = ent2.rd_lowb ? ra_data : rb_data;
    bf_tw    = tw_data;
    bf_meta  = '{vld: 1'b0, kind: K_BFLY, last: ent2.last, wr_lowb: ent2.wr_lowb,
                 write_v: 1'b0, addr_a: {s2.poly, ent2.addr_a}, addr_b: {s2.poly, ent2.addr_b}};
    if (opb_pend) begin
      bf_valid = 1'b1;
      bf_mode  = opb_mode;
      bf_x     = opb_x;
      bf_y     = opb_y;
      bf_tw    = opb_tw;
      bf_meta  = opb_meta;
    end else if (s2.vld && !s2_pwm) begin
      bf_valid = 1'b1;
      bf_meta.vld = 1'b1;
    end else if (s2.vld && s2.phase) begin
      // PWM, polynomial-1 words arriving: issue the Mem_A word's product now
      bf_valid = 1'b1;
      bf_x     = p0a_q;
      bf_y     = ra_data;
      bf_tw    = twa_q;
      bf_meta  = '{vld: 1'b1, kind: K_PWM_A, last: 1'b0, wr_lowb: 1'b0,
                   write_v: (s2.mode == BM_PWM0), addr_a: {1'b0, ent2.addr_a},
                   addr_b: {1'b0, ent2.addr_b}};
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) opb_pend <= 1'b0;
    else        opb_pend <= s2.vld && s2_pwm && s2.phase;

  always_ff @(posedge clk) begin
    if (s2.vld && s2_pwm && !s2.phase) begin
      p0a_q <= ra_data;
      p0b_q <= rb_data;
      twa_q <= tw_data;
    end
    if (s2.vld && s2_pwm && s2.phase) begin
      opb_x    <= p0b_q;
      opb_y    <= rb_data;
      opb_tw   <= tw_data;
      opb_mode <= s2.mode;
      opb_meta <= '{vld: 1'b1, kind: K_PWM_B, last: ent2.last, wr_lowb: 1'b0,
                    write_v: (s2.mode == BM_PWM0), addr_a: {1'b0, ent2.addr_a},
                    addr_b: {1'b0, ent2.addr_b}};
    end
  end

  // ------------------------------------------------------------- butterfly
  logic              bo_valid;
  logic [WORD_W-1:0] bo_u, bo_v;
  kid_bfu #(.LAT(LAT)) u_bfu (
    .clk, .rst_n, .valid_i(bf_valid), .mode_i(bf_mode), .scheme_i(bf_sch),
    .x_i(bf_x), .y_i(bf_y), .tw_i(bf_tw),
    .valid_o(bo_valid), .u_o(bo_u), .v_o(bo_v)
  );

  meta_t md [LAT];
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) for (int i = 0; i < int'(LAT); i++) md[i] <= '0;
    else begin
      md[0] <= bf_meta;
      for (int i = 1; i < int'(LAT); i++) md[i] <= md[i-1];
    end
  meta_t mo;
  assign mo = md[LAT-1];

  // ------------------------------------------------------- write crossbar
  logic              wa_we, wb_we;
  logic [RAM_AW-1:0] wa_addr, wb_addr;
  logic [WORD_W-1:0] wa_data, wb_data;
  logic              pva, pvb;                 // PWM0: second word pending
  logic [RAM_AW-1:0] pva_addr, pvb_addr;
  logic [WORD_W-1:0] pva_data, pvb_data;

  always_comb begin
    wa_we = 1'b0; wa_addr = host_waddr_i; wa_data = host_wdata_i;
    wb_we = 1'b0; wb_addr = host_waddr_i; wb_data = host_wdata_i;
    last_wr = 1'b0;
    if (mo.vld && mo.kind == K_BFLY) begin
      wa_we = 1'b1; wa_addr = mo.addr_a; wa_data = mo.wr_lowb ? bo_v : bo_u;
      wb_we = 1'b1; wb_addr = mo.addr_b; wb_data = mo.wr_lowb ? bo_u : bo_v;
      last_wr = mo.last;
    end else begin
      if (mo.vld && mo.kind == K_PWM_A) begin
        wa_we = 1'b1; wa_addr = mo.addr_a; wa_data = bo_u;
      end else if (pva) begin
        wa_we = 1'b1; wa_addr = pva_addr; wa_data = pva_data;
      end else if (!busy_o && host_we_i && !host_wbank_i) begin
        wa_we = 1'b1;
      end
      if (mo.vld && mo.kind == K_PWM_B) begin
        wb_we = 1'b1; wb_addr = mo.addr_b; wb_data = bo_u;
        last_wr = mo.last;
      end else if (pvb) begin
        wb_we = 1'b1; wb_addr = pvb_addr; wb_data = pvb_data;
      end else if (!busy_o && host_we_i && host_wbank_i) begin
        wb_we = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      pva <= 1'b0; pvb <= 1'b0;
    end else begin
      pva <= mo.vld && mo.kind == K_PWM_A && mo.write_v;
      pvb <= mo.vld && mo.kind == K_PWM_B && mo.write_v;
    end
  always_ff @(posedge clk) begin
    pva_addr <= {1'b1, mo.addr_a[RAM_AW-2:0]};  pva_data <= bo_v;
    pvb_addr <= {1'b1, mo.addr_b[RAM_AW-2:0]};  pvb_data <= bo_v;
  end

  kid_coef_ram u_mem_a (.clk, .we_i(wa_we), .waddr_i(wa_addr), .wdata_i(wa_data),
                        .re_i(ra_re), .raddr_i(ra_addr), .rdata_o(ra_data));
  kid_coef_ram u_mem_b (.clk, .we_i(wb_we), .waddr_i(wb_addr), .wdata_i(wb_data),
                        .re_i(rb_re), .raddr_i(rb_addr), .rdata_o(rb_data));

  // host reads return whichever RAM was addressed
  logic host_rbank_q;
  always_ff @(posedge clk) host_rbank_q <= host_rbank_i;
  assign host_rdata_o = host_rbank_q ? rb_data : ra_data;

  // the schedule never needs a PWM result write and a pending second word on
  // the same RAM in one clock, and the butterfly's valid flag must line up
  // with the metadata pipeline
  logic chk_en;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) chk_en <= 1'b0;
    else begin
      chk_en <= 1'b1;
      if (chk_en) begin
        assert (!(mo.vld && mo.kind == K_PWM_A && pva)) else $error("Mem_A write collision");
        assert (!(mo.vld && mo.kind == K_PWM_B && pvb)) else $error("Mem_B write collision");
        assert (bo_valid == mo.vld) else $error("butterfly and metadata pipelines out of step");
      end
    end
  initial assert (PIPE_DEPTH >= 7 && PIPE_DEPTH < 32)
    else $error("kid_top: PIPE_DEPTH must be in 7..31 for conflict-free scheduling");
endmodule
