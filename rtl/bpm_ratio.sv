// bpm_ratio: difference-over-sum ratio of two opposite pickup electrodes.
//
// Computes Q = (A - B) / (A + B) for the signal amplitudes A and B of two
// electrodes facing each other across the beam pipe (right/left for Q_x,
// top/bottom for Q_y). The difference and the sum are formed in parallel by
// two 6-clock adders and divided by one 14-clock divider, all in IEEE-754
// single precision.
//
// Timing: latency 20 clocks (6 + 14) from in_valid to out_valid. Because the
// divider is iterative, samples may be offered at most once every 14 clocks;
// the divider's own assertion checks this.
//
// The ratio itself is the paper's (its Eq. 8), and so is the use of the
// single-precision operators. The paper takes the ratios from existing
// single-plane readout blocks and quotes 38 clocks until they are available,
// a figure that includes upstream processing of the electrode signals it
// does not describe; this unit computes only the ratio and takes 20.
module bpm_ratio
  import fp_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp32_t amp_a,
  input  fp32_t amp_b,
  output logic  out_valid,
  output fp32_t q
);

  logic  diff_v, sum_v;
  fp32_t diff, sum;
  logic  div_ready;

  fp_addsub u_diff (.clk, .rst_n, .in_valid, .a(amp_a), .b(amp_b), .sub(1'b1),
                    .out_valid(diff_v), .y(diff));
  fp_addsub u_sum  (.clk, .rst_n, .in_valid, .a(amp_a), .b(amp_b), .sub(1'b0),
                    .out_valid(sum_v), .y(sum));
  fp_div    u_div  (.clk, .rst_n, .in_valid(diff_v), .in_ready(div_ready),
                    .a(diff), .b(sum), .out_valid, .y(q));

  a_aligned: assert property (@(posedge clk) disable iff (!rst_n) diff_v == sum_v);
  a_rate:    assert property (@(posedge clk) disable iff (!rst_n) diff_v |-> div_ready)
    else $error("bpm_ratio: samples closer than 14 clocks");

endmodule
