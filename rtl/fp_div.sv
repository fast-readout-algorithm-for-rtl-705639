// fp_div: IEEE-754 single-precision divider, iterative, two quotient bits per
// clock. Also serves as the reciprocal unit (dividend tied to 1.0).
//
// Computes y = a / b with round-to-nearest-even and flush-to-zero of
// subnormals. The dividend significand is pre-shifted one place when it is
// smaller than the divisor so that the quotient lies in [1, 2). A restoring
// radix-2 division then produces 26 quotient bits (24 significand bits, a
// guard bit and one more), two per clock over 13 clocks; the remainder gives
// the sticky bit. NaN operands, 0/0 and inf/inf give the quiet NaN, x/0 a
// signed infinity, x/inf a signed zero.
//
// Timing: an operand pair is accepted in a clock with in_valid and in_ready
// both high; in_valid must not be raised while in_ready is low (asserted).
// The result appears with a one-clock out_valid pulse 14 clocks after the
// operands were accepted, and in_ready rises again in that same clock, so
// the unit takes one division every 14 clocks. The 14-clock latency and
// rate are the divide figures the paper gives; the two-bits-per-clock
// iteration is this design's way of meeting them.
module fp_div
  import fp_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  fp32_t a,
  input  fp32_t b,
  output logic  out_valid,
  output fp32_t y
);

  localparam int unsigned QBITS = 26;
  localparam int unsigned STEPS = QBITS / 2;   // 13 iteration clocks

  logic               busy;
  logic [3:0]         cnt;
  logic               special;
  fp32_t              spec_res;
  logic               sign;
  logic signed [11:0] exp_q;
  logic [25:0]        rem;
  logic [23:0]        dvs;
  logic [QBITS-1:0]   quo;

  // Partial remainder and quotient bits so far.
  typedef struct packed {
    logic [25:0]      r;
    logic [QBITS-1:0] q;
  } div_state_t;

  // One restoring step: compare, subtract, shift.
  function automatic div_state_t div_step(div_state_t st, logic [23:0] dv);
    div_state_t nx;
    if (st.r >= {2'b00, dv}) begin
      nx.r = (st.r - {2'b00, dv}) << 1;
      nx.q = {st.q[QBITS-2:0], 1'b1};
    end else begin
      nx.r = st.r << 1;
      nx.q = {st.q[QBITS-2:0], 1'b0};
    end
    return nx;
  endfunction

  assign in_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      cnt       <= '0;
      out_valid <= 1'b0;
      special   <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (!busy) begin
        if (in_valid) begin
          busy    <= 1'b1;
          cnt     <= 4'd1;
          special <= fp_is_nan(a) || fp_is_nan(b) || fp_is_inf(a) || fp_is_inf(b) ||
                     fp_is_zero(a) || fp_is_zero(b);
        end
      end else if (cnt == 4'(STEPS)) begin
        busy      <= 1'b0;
        out_valid <= 1'b1;
      end else begin
        cnt <= cnt + 4'd1;
      end
    end
  end

  always_ff @(posedge clk) begin
    div_state_t       d;
    logic [23:0]      ma, mb;
    logic             s;
    s  = a[31] ^ b[31];
    ma = {1'b1, a[22:0]};
    mb = {1'b1, b[22:0]};
    if (!busy && in_valid) begin
      sign     <= s;
      dvs      <= mb;
      // Special operands: the result is known now, held until the end.
      if (fp_is_nan(a) || fp_is_nan(b) || (fp_is_zero(a) && fp_is_zero(b)) ||
          (fp_is_inf(a) && fp_is_inf(b)))
        spec_res <= FP_QNAN;
      else if (fp_is_inf(a) || fp_is_zero(b))
        spec_res <= {s, 8'hFF, 23'd0};
      else
        spec_res <= {s, 31'd0};
      // Pre-normalise so that the first quotient bit is 1, then run the
      // first iteration clock.
      if (ma < mb) begin
        d.r   = {1'b0, ma, 1'b0};
        exp_q <= 12'($signed({4'd0, a[30:23]})) - 12'($signed({4'd0, b[30:23]})) + 12'sd126;
      end else begin
        d.r   = {2'b00, ma};
        exp_q <= 12'($signed({4'd0, a[30:23]})) - 12'($signed({4'd0, b[30:23]})) + 12'sd127;
      end
      d.q = '0;
      d   = div_step(div_step(d, mb), mb);
      rem <= d.r;
      quo <= d.q;
    end else if (busy && cnt != 4'(STEPS)) begin
      d   = div_step(div_step('{r: rem, q: quo}, dvs), dvs);
      rem <= d.r;
      quo <= d.q;
    end else if (busy) begin
      if (special) y <= spec_res;
      else         y <= fp_round_pack(sign, exp_q, quo[25:2], quo[1], quo[0] | (rem != '0));
    end
  end

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> in_ready)
    else $error("fp_div: operands presented while busy");

endmodule
