// kid_ctrl: control counter of the unified core.
//
// On start_i it latches the operation (NTT, INTT or PWM), the scheme and, for
// transforms, the polynomial slot (0 or 1), and then walks the address-ROM
// region of that operation, one entry per clock:
//   NTT / INTT : Kyber 448 steps (7 stages x 64), Dilithium 1024 (8 x 128)
//   PWM        : two clocks per entry (first the polynomial-0 words, then the
//                polynomial-1 words at the same offsets). Kyber runs the 64
//                entries twice, pass PWM0 then pass PWM1 (256 clocks);
//                Dilithium runs its 128 entries once (256 clocks).
// These step counts are the paper's latencies. Each step is presented on
// step_* one clock before the address-ROM data for it appears. The ROM's
// last-step flag comes back through the datapath as last_wr_i when the
// final result is written; after the expected number of them (two for Kyber
// PWM, one otherwise) done_o pulses for one clock and the unit is idle again.
// start_i is ignored while busy_o is high. The state encoding and the
// handshake are this design's own; the paper names the counter only.
module kid_ctrl
  import kid_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start_i,
  input  op_e               op_i,
  input  scheme_e           scheme_i,
  input  logic              poly_i,
  input  logic              last_wr_i,
  output logic              busy_o,
  output logic              done_o,
  // step stream towards the address ROM and the datapath
  output logic              step_valid_o,
  output logic [ROM_AW-1:0] step_addr_o,
  output logic              step_phase_o,   // PWM: 0 = polynomial 0, 1 = polynomial 1
  output bfu_mode_e         step_mode_o,
  output scheme_e           step_scheme_o,
  output logic              step_poly_o
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;

  state_e            state;
  op_e               op_q;
  scheme_e           sch_q;
  logic              poly_q, phase_q, pass_q;
  logic [ROM_AW-1:0] cnt_q;
  logic [10:0]       left_q;
  logic [1:0]        lasts_q;
  logic [1:0]        lasts_need;
  bfu_mode_e         mode;

  function automatic logic [ROM_AW-1:0] base_of(op_e op, scheme_e sch);
    unique case (op)
      OP_NTT:  return (sch == KYBER) ? ROM_AW'(K_NTT_BASE)  : ROM_AW'(D_NTT_BASE);
      OP_INTT: return (sch == KYBER) ? ROM_AW'(K_INTT_BASE) : ROM_AW'(D_INTT_BASE);
      default: return (sch == KYBER) ? ROM_AW'(K_PWM_BASE)  : ROM_AW'(D_PWM_BASE);
    endcase
  endfunction

  function automatic logic [10:0] count_of(op_e op, scheme_e sch);
    if (op == OP_PWM) return (sch == KYBER) ? 11'd64 : 11'd128;
    return (sch == KYBER) ? 11'd448 : 11'd1024;
  endfunction

  always_comb begin
    unique case (op_q)
      OP_NTT:  mode = BM_NTT;
      OP_INTT: mode = BM_INTT;
      default: mode = (sch_q == DILITHIUM) ? BM_DPWM : (pass_q ? BM_PWM1 : BM_PWM0);
    endcase
    lasts_need = (op_q == OP_PWM && sch_q == KYBER) ? 2'd2 : 2'd1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      op_q    <= OP_NTT;
      sch_q   <= KYBER;
      poly_q  <= 1'b0;
      phase_q <= 1'b0;
      pass_q  <= 1'b0;
      cnt_q   <= '0;
      left_q  <= '0;
      lasts_q <= '0;
      done_o  <= 1'b0;
    end else begin
      done_o <= 1'b0;
      unique case (state)
        S_IDLE: if (start_i) begin
          state   <= S_RUN;
          op_q    <= op_i;
          sch_q   <= scheme_i;
          poly_q  <= poly_i;
          phase_q <= 1'b0;
          pass_q  <= 1'b0;
          cnt_q   <= base_of(op_i, scheme_i);
          left_q  <= count_of(op_i, scheme_i);
          lasts_q <= '0;
        end
        S_RUN: begin
          if (op_q == OP_PWM && !phase_q) begin
            phase_q <= 1'b1;
          end else begin
            phase_q <= 1'b0;
            cnt_q   <= cnt_q + 1'b1;
            left_q  <= left_q - 1'b1;
            if (left_q == 11'd1) begin
              if (op_q == OP_PWM && sch_q == KYBER && !pass_q) begin
                pass_q <= 1'b1;
                cnt_q  <= base_of(op_q, sch_q);
                left_q <= count_of(op_q, sch_q);
              end else begin
                state <= S_DRAIN;
              end
            end
          end
        end
        default: ;
      endcase
      if (state != S_IDLE && last_wr_i) begin
        if (lasts_q + 2'd1 == lasts_need) begin
          state  <= S_IDLE;
          done_o <= 1'b1;
        end
        lasts_q <= lasts_q + 2'd1;
      end
    end
  end

  assign busy_o        = (state != S_IDLE);
  assign step_valid_o  = (state == S_RUN);
  assign step_addr_o   = cnt_q;
  assign step_phase_o  = phase_q;
  assign step_mode_o   = mode;
  assign step_scheme_o = sch_q;
  assign step_poly_o   = poly_q;
endmodule
