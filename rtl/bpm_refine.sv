// bpm_refine: empirical correction of the two ratios (the paper's Eqs. 17, 18).
//
//   Q'_x = Q_x + b * Q_x * |Q_y|
//   Q'_y = Q_y + b * |Q_x| * Q_y
//
// b is a calibration constant (the paper quotes values between -0.0125 and
// -0.1 for its examples); b = 0 leaves the ratios unchanged. The correction
// pulls in positions far from both axes, where a real monitor with electrodes
// of finite size departs most from the ideal response.
//
// Each plane uses two 3-clock multipliers and one 6-clock adder in series:
// first b * Q_x, then (b * Q_x) * |Q_y|, then Q_x + that product. Delay lines
// carry Q_x, Q_y to the stages that need them.
//
// Timing: latency 12 clocks from in_valid to out_valid, fully pipelined. The
// paper gives the 12 clocks for this refinement but not its inner structure;
// the multiply-multiply-add order is this design's choice, the one that adds
// up to 12 with the paper's operator latencies. b is only read in the
// clock in which the ratios are presented.
module bpm_refine
  import fp_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp32_t qx,
  input  fp32_t qy,
  input  fp32_t b_coef,
  output logic  out_valid,
  output fp32_t qx_c,
  output fp32_t qy_c
);

  fp32_t bqx, bqy, px, py;
  fp32_t qx_d3, qy_d3, qx_d6, qy_d6;
  logic  v1, v1y, v2, v2y, v3y;

  // Stage 1: b * Q
  fp_mul u_bqx (.clk, .rst_n, .in_valid, .a(b_coef), .b(qx), .out_valid(v1),  .y(bqx));
  fp_mul u_bqy (.clk, .rst_n, .in_valid, .a(b_coef), .b(qy), .out_valid(v1y), .y(bqy));

  delay_line #(.WIDTH(32), .DEPTH(MUL_LAT)) u_dx1 (.clk, .d(qx),    .q(qx_d3));
  delay_line #(.WIDTH(32), .DEPTH(MUL_LAT)) u_dy1 (.clk, .d(qy),    .q(qy_d3));
  delay_line #(.WIDTH(32), .DEPTH(MUL_LAT)) u_dx2 (.clk, .d(qx_d3), .q(qx_d6));
  delay_line #(.WIDTH(32), .DEPTH(MUL_LAT)) u_dy2 (.clk, .d(qy_d3), .q(qy_d6));

  // Stage 2: (b * Q_x) * |Q_y| and (b * Q_y) * |Q_x|
  fp_mul u_px (.clk, .rst_n, .in_valid(v1),  .a(bqx), .b(fp_abs(qy_d3)), .out_valid(v2),  .y(px));
  fp_mul u_py (.clk, .rst_n, .in_valid(v1y), .a(bqy), .b(fp_abs(qx_d3)), .out_valid(v2y), .y(py));

  // Stage 3: Q + correction
  fp_addsub u_ax (.clk, .rst_n, .in_valid(v2),  .a(qx_d6), .b(px), .sub(1'b0),
                  .out_valid, .y(qx_c));
  fp_addsub u_ay (.clk, .rst_n, .in_valid(v2y), .a(qy_d6), .b(py), .sub(1'b0),
                  .out_valid(v3y), .y(qy_c));

  a_planes_aligned: assert property (@(posedge clk) disable iff (!rst_n) out_valid == v3y);

endmodule
