// bpm_pos_core: beam position from the two (corrected) ratios, the 52-clock
// operator chain of the pipeline schematic.
//
// The ratios Q_x, Q_y of a cylindrical monitor with four small electrodes are
// the components of a vector whose modulus Q = 2*rho/(rho^2+1) depends only
// on the normalised radius rho = r/a of a pencil beam, and whose direction is
// the beam's. Inverting that relation gives
//
//   rho = 1/Q - sqrt(1/Q^2 - 1),   X = a * rho * Q_x/Q,   Y = a * rho * Q_y/Q
//
// (the paper's Eqs. 10, 12-14, or 19-22 with the corrected ratios and the
// corrected radius a(1+eps)). The chain evaluates this in seven columns of
// IEEE-754 single-precision operators; the clocks of each column are the
// ones printed in the schematic:
//
//   col clk  operation
//    1   3   Q_x^2, Q_y^2                          (multiply)
//    2   6   Q^2 = Q_x^2 + Q_y^2                   (add)
//    3  14   1/Q^2 (reciprocal), Q = sqrt(Q^2)     (divide, square root)
//    4   6   1/Q^2 - 1                             (subtract)
//    5  14   sqrt(1/Q^2 - 1), 1/Q, Q_x/Q, Q_y/Q    (square root, divides)
//    6   6   rho = 1/Q - sqrt(..) (subtract), a*Q_x/Q, a*Q_y/Q (multiply)
//    7   3   X = rho * (a*Q_x/Q), Y = rho * (a*Q_y/Q)  (multiply)
//
// Near the axis 1/Q - sqrt(1/Q^2 - 1) is a difference of two nearly equal
// large numbers and loses most of its single-precision digits (Q = 0 even
// gives inf - inf). There the paper's paraxial form X = a*Q_x/2,
// Y = a*Q_y/2 (its Eqs. 15, 16) is exact to first order, and the last
// multiplier uses it instead: when Q^2 < 2^PARAXIAL_Q2_LOG2 its operands
// become (a/2, Q_x) and (a/2, Q_y). The paper gives the paraxial formula but
// not where the pipeline switches to it; the threshold 2^-10 (Q < 1/32) is
// this design's choice, near where the single-precision rounding error of the
// exact form (about 2^-22/Q^2 relative) meets the truncation error of the
// linear form (Q^2/4 relative).
//
// Interface: a_eff is the effective radius a(1+eps) in the unit wanted for
// X and Y; it must be held stable while samples are in flight. A ratio
// vector with Q >= 1 (beam outside the pipe) gives NaN positions.
//
// Timing: latency 52 clocks from in_valid to out_valid; one sample every 14
// clocks at most, set by the iterative divide and square-root units (their
// assertions check it).
module bpm_pos_core
  import fp_pkg::*;
#(
  parameter int PARAXIAL_Q2_LOG2 = -10
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp32_t qx,
  input  fp32_t qy,
  input  fp32_t a_eff,
  output logic  out_valid,
  output fp32_t x_pos,
  output fp32_t y_pos,
  output logic  paraxial
);

  // Column start times relative to in_valid.
  localparam int unsigned T2 = MUL_LAT;               //  3
  localparam int unsigned T3 = T2 + ADD_LAT;          //  9
  localparam int unsigned T4 = T3 + DIV_LAT;          // 23
  localparam int unsigned T5 = T4 + ADD_LAT;          // 29
  localparam int unsigned T6 = T5 + DIV_LAT;          // 43
  localparam int unsigned T7 = T6 + ADD_LAT;          // 49

  // Column 1: squares
  logic  v_sq, v_sqy;
  fp32_t qx2, qy2;
  fp_mul u_qx2 (.clk, .rst_n, .in_valid, .a(qx), .b(qx), .out_valid(v_sq),  .y(qx2));
  fp_mul u_qy2 (.clk, .rst_n, .in_valid, .a(qy), .b(qy), .out_valid(v_sqy), .y(qy2));

  // Column 2: Q^2
  logic  v_q2;
  fp32_t q2;
  fp_addsub u_q2 (.clk, .rst_n, .in_valid(v_sq), .a(qx2), .b(qy2), .sub(1'b0),
                  .out_valid(v_q2), .y(q2));

  // Paraxial decision, taken on Q^2 and carried to column 7.
  logic small_t3, small_t7, small_t8;
  always_comb small_t3 = fp_is_zero(q2) ||
                         (int'(q2[30:23]) - 127 < PARAXIAL_Q2_LOG2);
  delay_line #(.WIDTH(1), .DEPTH(T7 - T3)) u_dsmall1 (.clk, .d(small_t3), .q(small_t7));
  delay_line #(.WIDTH(1), .DEPTH(MUL_LAT)) u_dsmall2 (.clk, .d(small_t7), .q(small_t8));

  // Column 3: 1/Q^2 and Q
  logic  v_iq2, v_qm, r_iq2, r_qm;
  fp32_t inv_q2, qmag;
  fp_div  u_iq2 (.clk, .rst_n, .in_valid(v_q2), .in_ready(r_iq2), .a(FP_ONE), .b(q2),
                 .out_valid(v_iq2), .y(inv_q2));
  fp_sqrt u_qm  (.clk, .rst_n, .in_valid(v_q2), .in_ready(r_qm), .a(q2),
                 .out_valid(v_qm), .y(qmag));

  // Column 4: 1/Q^2 - 1
  logic  v_t1;
  fp32_t t1;
  fp_addsub u_t1 (.clk, .rst_n, .in_valid(v_iq2), .a(inv_q2), .b(FP_ONE), .sub(1'b1),
                  .out_valid(v_t1), .y(t1));

  // Column 5: sqrt(1/Q^2 - 1), 1/Q, Q_x/Q, Q_y/Q
  fp32_t qmag_d, qx_d5, qy_d5;
  delay_line #(.WIDTH(32), .DEPTH(ADD_LAT)) u_dqm (.clk, .d(qmag), .q(qmag_d));
  delay_line #(.WIDTH(32), .DEPTH(T5))      u_dx5 (.clk, .d(qx),   .q(qx_d5));
  delay_line #(.WIDTH(32), .DEPTH(T5))      u_dy5 (.clk, .d(qy),   .q(qy_d5));

  logic  v_s, v_iq, v_ux, v_uy, r_s, r_iq, r_ux, r_uy;
  fp32_t s, inv_q, ux, uy;
  fp_sqrt u_s   (.clk, .rst_n, .in_valid(v_t1), .in_ready(r_s), .a(t1),
                 .out_valid(v_s), .y(s));
  fp_div  u_iq  (.clk, .rst_n, .in_valid(v_t1), .in_ready(r_iq), .a(FP_ONE), .b(qmag_d),
                 .out_valid(v_iq), .y(inv_q));
  fp_div  u_ux  (.clk, .rst_n, .in_valid(v_t1), .in_ready(r_ux), .a(qx_d5), .b(qmag_d),
                 .out_valid(v_ux), .y(ux));
  fp_div  u_uy  (.clk, .rst_n, .in_valid(v_t1), .in_ready(r_uy), .a(qy_d5), .b(qmag_d),
                 .out_valid(v_uy), .y(uy));

  // Column 6: rho, a*Q_x/Q, a*Q_y/Q (the 3-clock products wait 3 clocks)
  logic  v_rho, v_ax, v_ay;
  fp32_t rho, ax, ay, ax_d, ay_d;
  fp_addsub u_rho (.clk, .rst_n, .in_valid(v_iq), .a(inv_q), .b(s), .sub(1'b1),
                   .out_valid(v_rho), .y(rho));
  fp_mul u_ax (.clk, .rst_n, .in_valid(v_ux), .a(a_eff), .b(ux), .out_valid(v_ax), .y(ax));
  fp_mul u_ay (.clk, .rst_n, .in_valid(v_uy), .a(a_eff), .b(uy), .out_valid(v_ay), .y(ay));
  delay_line #(.WIDTH(32), .DEPTH(ADD_LAT - MUL_LAT)) u_dax (.clk, .d(ax), .q(ax_d));
  delay_line #(.WIDTH(32), .DEPTH(ADD_LAT - MUL_LAT)) u_day (.clk, .d(ay), .q(ay_d));

  // Column 7: X, Y (exact form, or paraxial form near the axis)
  fp32_t qx_d7, qy_d7, half_a;
  delay_line #(.WIDTH(32), .DEPTH(T7 - T5)) u_dx7 (.clk, .d(qx_d5), .q(qx_d7));
  delay_line #(.WIDTH(32), .DEPTH(T7 - T5)) u_dy7 (.clk, .d(qy_d5), .q(qy_d7));
  always_comb half_a = fp_half(a_eff);

  logic v_y;
  fp_mul u_x (.clk, .rst_n, .in_valid(v_rho),
              .a(small_t7 ? half_a : rho), .b(small_t7 ? qx_d7 : ax_d),
              .out_valid, .y(x_pos));
  fp_mul u_y (.clk, .rst_n, .in_valid(v_rho),
              .a(small_t7 ? half_a : rho), .b(small_t7 ? qy_d7 : ay_d),
              .out_valid(v_y), .y(y_pos));

  assign paraxial = small_t8;

  // Every operand of a column must arrive in the same clock.
  a_col1: assert property (@(posedge clk) disable iff (!rst_n) v_sq == v_sqy);
  a_col3: assert property (@(posedge clk) disable iff (!rst_n) v_iq2 == v_qm);
  a_col5: assert property (@(posedge clk) disable iff (!rst_n)
                           (v_s == v_iq) && (v_iq == v_ux) && (v_ux == v_uy));
  a_col6: assert property (@(posedge clk) disable iff (!rst_n) v_ax == v_ay);
  a_col7: assert property (@(posedge clk) disable iff (!rst_n) out_valid == v_y);
  // The 14-clock units of a column are free together, and free whenever
  // the column before them delivers (samples no closer than 14 clocks).
  a_col3_free: assert property (@(posedge clk) disable iff (!rst_n)
                                (r_iq2 == r_qm) && (v_q2 -> r_iq2))
    else $error("bpm_pos_core: samples closer than 14 clocks");
  a_col5_free: assert property (@(posedge clk) disable iff (!rst_n)
                                (r_s == r_iq) && (r_iq == r_ux) && (r_ux == r_uy) &&
                                (v_t1 -> r_s))
    else $error("bpm_pos_core: samples closer than 14 clocks");

endmodule
