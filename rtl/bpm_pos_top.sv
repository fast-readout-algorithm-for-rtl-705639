// bpm_pos_top: fast beam-position readout for a cylindrical beam position
// monitor with four pickup electrodes.
//
// From the signal amplitudes of the four electrodes (A_x right, B_x left,
// A_y top, B_y bottom, seen along the beam) it computes the transverse beam
// position with the analytic inversion of the pencil-beam response of a
// cylinder, without iteration:
//
//   Q_x = (A_x - B_x)/(A_x + B_x),  Q_y = (A_y - B_y)/(A_y + B_y)  bpm_ratio x2
//   Q'_x = Q_x + b Q_x |Q_y|,       Q'_y = Q_y + b |Q_x| Q_y       bpm_refine
//   Q' = |(Q'_x, Q'_y)|,  rho = 1/Q' - sqrt(1/Q'^2 - 1)
//   X = a(1+eps) rho Q'_x/Q',       Y = a(1+eps) rho Q'_y/Q'       bpm_pos_core
//
// b and a(1+eps) are calibration inputs (b = 0 switches the empirical
// correction off). All arithmetic is IEEE-754 single precision. Close to the
// axis the core switches to the paraxial form X = a(1+eps) Q'_x/2 and raises
// the paraxial flag with the result.
//
// Timing: 20 clocks for the ratios, 12 for the correction and 52 for the
// position chain, 84 clocks from an accepted sample to out_valid. The
// divide and square-root operators take 14 clocks per operation, so a
// sample is accepted at most once every 14 clocks: in_ready falls for 13
// clocks after each accepted sample, and in_valid may be held until
// in_ready returns (valid/ready handshake). At the paper's 200 MHz clock
// that is one position every 70 ns; the latency after the ratios (64
// clocks, 320 ns) is the paper's figure, while the ratio stage here takes
// 20 clocks against the 38 the paper quotes for its existing ratio blocks.
module bpm_pos_top
  import fp_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  // electrode amplitudes, valid/ready
  input  logic  in_valid,
  output logic  in_ready,
  input  fp32_t amp_ax,
  input  fp32_t amp_bx,
  input  fp32_t amp_ay,
  input  fp32_t amp_by,
  // calibration, held stable while samples are in flight
  input  fp32_t cfg_b,
  input  fp32_t cfg_a_eff,
  // position
  output logic  out_valid,
  output fp32_t x_pos,
  output fp32_t y_pos,
  output logic  paraxial
);

  // Sample-rate limiter: one accepted sample per SAMPLE_II clocks.
  logic [4:0] hold;
  logic       accept;

  assign in_ready = (hold == '0);
  assign accept   = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      hold <= '0;
    else if (accept) hold <= 5'(SAMPLE_II - 1);
    else if (hold != '0) hold <= hold - 5'd1;
  end

  // Ratios
  logic  vqx, vqy;
  fp32_t qx, qy;
  bpm_ratio u_ratio_x (.clk, .rst_n, .in_valid(accept), .amp_a(amp_ax), .amp_b(amp_bx),
                       .out_valid(vqx), .q(qx));
  bpm_ratio u_ratio_y (.clk, .rst_n, .in_valid(accept), .amp_a(amp_ay), .amp_b(amp_by),
                       .out_valid(vqy), .q(qy));

  // Empirical correction
  logic  vqc;
  fp32_t qx_c, qy_c;
  bpm_refine u_refine (.clk, .rst_n, .in_valid(vqx), .qx, .qy, .b_coef(cfg_b),
                       .out_valid(vqc), .qx_c, .qy_c);

  // Position chain
  bpm_pos_core u_core (.clk, .rst_n, .in_valid(vqc), .qx(qx_c), .qy(qy_c), .a_eff(cfg_a_eff),
                       .out_valid, .x_pos, .y_pos, .paraxial);

  a_planes_aligned: assert property (@(posedge clk) disable iff (!rst_n) vqx == vqy);
  a_hold_data: assert property (@(posedge clk) disable iff (!rst_n)
                                in_valid && !in_ready |=> in_valid)
    else $error("bpm_pos_top: in_valid dropped before the sample was accepted");

endmodule
