// gipps_accel -- one processing element evaluating the Gipps car-following
// speed update
//
//     Va = V + 2.5 * a * T * (1 - V/V*) * sqrt(0.025 + V/V*)
//
// for one vehicle, with V the current speed, V* the desired speed, a the
// maximum acceleration and T the reaction time (the simulation step).
//
// How it works. The four operands are captured into operand registers when a
// start pulse is accepted. One multiplier, one divider (shared with the
// square-root logic) and a few adders then compute the result in four clock
// cycles, all intermediate values held in two working registers:
//
//   C1  r  <= V / V*                     m <= a * T
//   C2  x  <= (x0 + S/x0) / 2            m <= m * (1 - r)    S = 0.025 + r
//   C3  x  <= (x  + S/x ) / 2            m <= 2m + m/2       (the factor 2.5)
//   C4  Va <= V + m * x
//
// x0 is the leading-one estimate of sqrt(S) (see sqrt_logic). The result
// register holds Va until the next evaluation ends; done pulses with it.
//
// Interface: start/ready/done handshake from gipps_ctrl; operands and result
// are unsigned Q8.6 words (8 integer, 6 fraction bits). sat is a sticky flag
// for the evaluation just finished: some step saturated or divided by zero.
//
// What follows the paper: the equation, the 14-bit 8.6 word, the single
// combinational multiplier and divider, the square root by two Babylonian
// iterations from a leading-one estimate using the divider, and the four-cycle
// evaluation. This design's own choices: the schedule above, truncation and
// saturation, 0.025 rounded to 2/64, and the treatment of V >= V*. The paper
// prints the radicand as (0.025 - V/V*), which is negative for any V above
// 2.5 % of V*; this design uses the standard Gipps form (0.025 + V/V*).
// Because the numbers are unsigned, 1 - V/V* is clamped at zero, so a vehicle
// at or above its desired speed keeps its speed (the paper does not treat
// this case; it models only the acceleration branch of the Gipps model).
module gipps_accel
  import gipps_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,      // evaluate with the operands below
  input  fix_t accel,      // a(n), maximum acceleration
  input  fix_t tstep,      // T, reaction time / simulation step
  input  fix_t v_des,      // V*(n), desired speed
  input  fix_t v_cur,      // V(n,t), current speed
  output logic ready,      // idle, start will be accepted
  output logic done,       // one-cycle pulse, result valid from now on
  output fix_t v_next,     // Va(n, t+T)
  output logic sat         // a step of the last evaluation saturated
);

  step_t step;
  logic  load;

  gipps_ctrl u_ctrl (
    .clk, .rst_n, .start, .ready, .load, .step, .done
  );

  // Operand and working registers.
  fix_t a_r, t_r, vd_r, v_r;
  fix_t r_r;       // V / V*
  fix_t m_r;       // product chain a*T*(1-r)*2.5
  fix_t x_r;       // square-root estimate
  fix_t res_r;
  logic sat_r;

  // Shared arithmetic.
  fix_t mul_a, mul_b, mul_p;
  logic mul_ovf;
  fix_t sq_q, sq_x_next, s_val, one_m_r, m_x25, va;
  logic sq_ovf, sq_mode, sq_first;
  logic [W+1:0] m25_sum;

  array_multiplier #(.W(W), .FRAC(FRAC)) u_mul (
    .a(mul_a), .b(mul_b), .p(mul_p), .ovf(mul_ovf)
  );

  sqrt_unit #(.W(W), .FRAC(FRAC)) u_sqrt (
    .sqrt_mode(sq_mode), .first(sq_first),
    .n(v_r), .d(vd_r), .s(s_val), .x(x_r),
    .q(sq_q), .ovf(sq_ovf), .x_next(sq_x_next)
  );

  // Small adders ("other" logic).
  assign s_val   = sat_add(r_r, FIX_C0025);
  assign one_m_r = (r_r >= FIX_ONE) ? '0 : FIX_ONE - r_r;
  assign m25_sum = {m_r, 1'b0} + {2'b00, m_r >> 1};
  assign m_x25   = (|m25_sum[W+1:W]) ? FIX_MAX : m25_sum[W-1:0];
  assign va      = sat_add(v_r, mul_p);

  // Operand selection per cycle.
  always_comb begin
    mul_a    = m_r;
    mul_b    = x_r;
    sq_mode  = 1'b1;
    sq_first = 1'b0;
    unique case (step)
      ST_C1: begin mul_a = a_r; mul_b = t_r; sq_mode = 1'b0; end
      ST_C2: begin mul_b = one_m_r; sq_first = 1'b1; end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_r   <= '0;
      t_r   <= '0;
      vd_r  <= '0;
      v_r   <= '0;
      r_r   <= '0;
      m_r   <= '0;
      x_r   <= '0;
      res_r <= '0;
      sat_r <= 1'b0;
    end else begin
      unique case (step)
        ST_IDLE: if (load) begin
          a_r   <= accel;
          t_r   <= tstep;
          vd_r  <= v_des;
          v_r   <= v_cur;
          sat_r <= 1'b0;
        end
        ST_C1: begin
          r_r   <= sq_q;
          m_r   <= mul_p;
          sat_r <= sat_r | sq_ovf | mul_ovf;
        end
        ST_C2: begin
          x_r   <= sq_x_next;
          m_r   <= mul_p;
          sat_r <= sat_r | mul_ovf;
        end
        ST_C3: begin
          x_r   <= sq_x_next;
          m_r   <= m_x25;
          sat_r <= sat_r | (|m25_sum[W+1:W]);
        end
        ST_C4: begin
          res_r <= va;
          sat_r <= sat_r | mul_ovf | ({1'b0, v_r} + {1'b0, mul_p} > (W+1)'(FIX_MAX));
        end
        default: ;
      endcase
    end
  end

  assign v_next = res_r;
  assign sat    = sat_r;

endmodule
