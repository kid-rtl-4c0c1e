// kid_bfu: reconfigurable butterfly pair of the unified core.
//
// In Kyber mode the unit is two 12-bit butterflies working on the two lanes
// of a 24-bit word ({odd coefficient, even coefficient}); in Dilithium mode it
// is one 23-bit butterfly. Per mode (all lanes share the twiddle):
//   BM_NTT  (Cooley-Tukey)     t = y*w;      u = x + t;   v = x - t
//   BM_INTT (Gentleman-Sande)  u = (x+y)/2;  v = (x - y)*w   (w holds w/2)
//   BM_PWM0 (Kyber pass 1)     x={a1,a0}, y={b1,b0}:
//                              u = {a1*b1, a0*b0},  v = {b0+b1, a0+a1}
//   BM_PWM1 (Kyber pass 2)     x={m2,m1}, y={sb,sa}, w=psi:
//                              u = {sa*sb - (m1+m2), m1 + m2*psi}
//   BM_DPWM (Dilithium)        u = x*y
// where * is the Montgomery product (an extra factor R^-1). The two Kyber
// passes together are the Karatsuba base multiplication
//   res0 = a0*b0 + psi*a1*b1,  res1 = (a0+a1)(b0+b1) - a0*b0 - a1*b1,
// four multiplications on two multipliers, as the paper describes.
//
// Datapath, in pipeline order: input registers, a "pre" add/sub pair (used by
// INTT and PWM), the unified multiplier (3 cycles), a "post" add/sub pair
// (used by NTT and PWM1), output registers, then LAT-6 padding registers so
// that every mode has the same latency LAT. The paper shares one adder and
// one subtractor per butterfly between the pre- and post-multiplier positions
// through multiplexers M1-M7 and gives their select words (Table I) without
// saying which input each select value picks; this design instead places one
// shared Kyber/Dilithium add/sub pair on each side of the multiplier, which
// computes the same values. Pipeline depth, padding and the PWM operand
// routing are this design's choices.
//
// Interface: one operation per clock when valid_i is high; results appear
// LAT cycles later with valid_o. mode_i and scheme_i may change every cycle.
module kid_bfu
  import kid_pkg::*;
#(
  parameter int unsigned LAT = 14          // total latency, >= 6
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        valid_i,
  input  bfu_mode_e   mode_i,
  input  scheme_e     scheme_i,
  input  logic [23:0] x_i,
  input  logic [23:0] y_i,
  input  logic [23:0] tw_i,
  output logic        valid_o,
  output logic [23:0] u_o,
  output logic [23:0] v_o
);
  localparam int unsigned MUL_LAT = 3;

  typedef struct packed {
    logic        vld;
    bfu_mode_e   mode;
    scheme_e     sch;
  } ctl_t;

  // ---- stage 0: input registers
  ctl_t        c0;
  logic [23:0] x0, y0, tw0;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) c0 <= '{vld: 1'b0, mode: BM_NTT, sch: KYBER};
    else        c0 <= '{vld: valid_i, mode: mode_i, sch: scheme_i};
  always_ff @(posedge clk) begin
    x0 <= x_i; y0 <= y_i; tw0 <= tw_i;
  end

  // ---- pre add/sub (INTT butterfly front, PWM lane sums)
  logic [23:0] pa_a, pa_b, pre_add, pre_sub;
  always_comb begin
    if (c0.mode == BM_PWM0 || c0.mode == BM_PWM1) begin
      pa_a = {y0[11:0],  x0[11:0]};
      pa_b = {y0[23:12], x0[23:12]};
    end else begin
      pa_a = x0;
      pa_b = y0;
    end
  end
  kid_addsub u_pre_add (.scheme_i(c0.sch), .sub_i(1'b0), .half_i(c0.mode == BM_INTT),
                        .a_i(pa_a), .b_i(pa_b), .r_o(pre_add));
  kid_addsub u_pre_sub (.scheme_i(c0.sch), .sub_i(1'b1), .half_i(1'b0),
                        .a_i(x0), .b_i(y0), .r_o(pre_sub));

  // ---- stage 1
  ctl_t        c1;
  logic [23:0] x1, y1, tw1, pa1, ps1;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) c1 <= '{vld: 1'b0, mode: BM_NTT, sch: KYBER};
    else        c1 <= c0;
  always_ff @(posedge clk) begin
    x1 <= x0; y1 <= y0; tw1 <= tw0; pa1 <= pre_add; ps1 <= pre_sub;
  end

  // ---- multiplier operand selection
  logic [23:0] mx, my, mo;
  always_comb begin
    unique case (c1.mode)
      BM_NTT:  begin mx = y1;  my = tw1; end
      BM_INTT: begin mx = ps1; my = tw1; end
      BM_PWM1: begin mx = {y1[11:0], x1[23:12]}; my = {y1[23:12], tw1[11:0]}; end
      default: begin mx = x1;  my = y1;  end   // BM_PWM0, BM_DPWM
    endcase
  end
  kid_mod_mul u_mul (.clk(clk), .scheme_i(c1.sch), .x_i(mx), .y_i(my), .r_o(mo));

  // side values travel alongside the multiplier
  ctl_t        cd [MUL_LAT];
  logic [23:0] xd [MUL_LAT];
  logic [23:0] pd [MUL_LAT];
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) for (int i = 0; i < MUL_LAT; i++) cd[i] <= '{vld: 1'b0, mode: BM_NTT, sch: KYBER};
    else begin
      cd[0] <= c1;
      for (int i = 1; i < MUL_LAT; i++) cd[i] <= cd[i-1];
    end
  always_ff @(posedge clk) begin
    xd[0] <= x1; pd[0] <= pa1;
    for (int i = 1; i < MUL_LAT; i++) begin
      xd[i] <= xd[i-1]; pd[i] <= pd[i-1];
    end
  end

  ctl_t        c4;
  logic [23:0] x4, p4;
  assign c4 = cd[MUL_LAT-1];
  assign x4 = xd[MUL_LAT-1];
  assign p4 = pd[MUL_LAT-1];

  // ---- post add/sub (NTT butterfly back, PWM1 final sums)
  logic [23:0] qa_a, qa_b, qs_a, qs_b, post_add, post_sub;
  always_comb begin
    if (c4.mode == BM_PWM1) begin
      qa_a = x4;  qa_b = mo;                          // lane 0: m1 + m3
      qs_a = mo;  qs_b = {p4[11:0], p4[11:0]};        // lane 1: m4 - (m1+m2)
    end else begin
      qa_a = x4;  qa_b = mo;
      qs_a = x4;  qs_b = mo;
    end
  end
  kid_addsub u_post_add (.scheme_i(c4.sch), .sub_i(1'b0), .half_i(1'b0),
                         .a_i(qa_a), .b_i(qa_b), .r_o(post_add));
  kid_addsub u_post_sub (.scheme_i(c4.sch), .sub_i(1'b1), .half_i(1'b0),
                         .a_i(qs_a), .b_i(qs_b), .r_o(post_sub));

  // ---- stage 5: result selection
  logic        v5;
  logic [23:0] u5, w5;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) v5 <= 1'b0;
    else        v5 <= c4.vld;
  always_ff @(posedge clk) begin
    unique case (c4.mode)
      BM_NTT:  begin u5 <= post_add; w5 <= post_sub; end
      BM_INTT: begin u5 <= p4;       w5 <= mo;       end
      BM_PWM0: begin u5 <= mo;       w5 <= p4;       end
      BM_PWM1: begin u5 <= {post_sub[23:12], post_add[11:0]}; w5 <= x4; end
      default: begin u5 <= mo;       w5 <= x4;       end   // BM_DPWM
    endcase
  end

  // ---- padding up to the configured pipeline depth
  localparam int unsigned PAD = LAT - 6;
  generate
    if (PAD == 0) begin : g_nopad
      assign valid_o = v5;
      assign u_o     = u5;
      assign v_o     = w5;
    end else begin : g_pad
      logic        pv [PAD];
      logic [23:0] pu [PAD];
      logic [23:0] pw [PAD];
      always_ff @(posedge clk or negedge rst_n)
        if (!rst_n) for (int i = 0; i < PAD; i++) pv[i] <= 1'b0;
        else begin
          pv[0] <= v5;
          for (int i = 1; i < PAD; i++) pv[i] <= pv[i-1];
        end
      always_ff @(posedge clk) begin
        pu[0] <= u5; pw[0] <= w5;
        for (int i = 1; i < PAD; i++) begin
          pu[i] <= pu[i-1]; pw[i] <= pw[i-1];
        end
      end
      assign valid_o = pv[PAD-1];
      assign u_o     = pu[PAD-1];
      assign v_o     = pw[PAD-1];
    end
  endgenerate

  initial assert (LAT >= 6) else $error("kid_bfu: LAT must be at least 6");
endmodule
