// fp_sqrt: IEEE-754 single-precision square root, iterative, two root bits
// per clock.
//
// Computes y = sqrt(a) with round-to-nearest-even and flush-to-zero of
// subnormals. The exponent is made even by shifting the significand one
// place when needed, and halved. A restoring digit-by-digit square root of
// the 52-bit radicand then produces 26 root bits (24 significand bits, a
// guard bit and one more), two per clock over 13 clocks; the remainder gives
// the sticky bit. sqrt(+-0) = +-0, sqrt(+inf) = +inf, and a NaN or a negative
// non-zero operand gives the quiet NaN.
//
// Timing: an operand is accepted in a clock with in_valid and in_ready both
// high; in_valid must not be raised while in_ready is low (asserted). The
// result appears with a one-clock out_valid pulse 14 clocks after
// acceptance, when in_ready rises again: one square root every 14 clocks, the
// latency and rate the paper gives for this operator. The two-bits-per-clock
// iteration is this design's choice.
module fp_sqrt
  import fp_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  fp32_t a,
  output logic  out_valid,
  output fp32_t y
);

  localparam int unsigned RBITS = 26;
  localparam int unsigned STEPS = RBITS / 2;   // 13 iteration clocks

  logic               busy;
  logic [3:0]         cnt;
  logic               special;
  fp32_t              spec_res;
  logic signed [11:0] exp_r;
  logic [51:0]        rad;       // radicand bits not yet consumed
  logic [29:0]        rem;
  logic [RBITS-1:0]   root;

  // Unconsumed radicand bits, partial remainder and root bits so far.
  typedef struct packed {
    logic [51:0]      rd;
    logic [29:0]      r;
    logic [RBITS-1:0] rt;
  } sqrt_state_t;

  // One restoring step: bring down two radicand bits, try 4*root+1.
  function automatic sqrt_state_t sqrt_step(sqrt_state_t st);
    sqrt_state_t nx;
    logic [29:0] r2, trial;
    r2    = {st.r[27:0], st.rd[51:50]};
    trial = {2'b00, st.rt, 2'b01};
    nx.rd = st.rd << 2;
    if (r2 >= trial) begin
      nx.r  = r2 - trial;
      nx.rt = {st.rt[RBITS-2:0], 1'b1};
    end else begin
      nx.r  = r2;
      nx.rt = {st.rt[RBITS-2:0], 1'b0};
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
          special <= fp_is_nan(a) || fp_is_inf(a) || fp_is_zero(a) || a[31];
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
    sqrt_state_t        sq;
    logic signed [11:0] e;
    if (!busy && in_valid) begin
      if (fp_is_zero(a))                     spec_res <= {a[31], 31'd0};
      else if (fp_is_nan(a) || a[31])        spec_res <= FP_QNAN;
      else                                   spec_res <= FP_PINF;
      // Unbiased exponent; an odd one moves one factor of two into the
      // significand so that the exponent can be halved exactly.
      e = 12'($signed({4'd0, a[30:23]})) - 12'sd127;
      if (e[0]) begin
        sq.rd = {{1'b1, a[22:0]}, 2'b00, 26'd0};
        exp_r <= ((e - 12'sd1) >>> 1) + 12'sd127;
      end else begin
        sq.rd = {1'b0, {1'b1, a[22:0]}, 1'b0, 26'd0};
        exp_r <= (e >>> 1) + 12'sd127;
      end
      sq.r  = '0;
      sq.rt = '0;
      sq    = sqrt_step(sqrt_step(sq));
      rad  <= sq.rd;
      rem  <= sq.r;
      root <= sq.rt;
    end else if (busy && cnt != 4'(STEPS)) begin
      sq    = sqrt_step(sqrt_step('{rd: rad, r: rem, rt: root}));
      rad  <= sq.rd;
      rem  <= sq.r;
      root <= sq.rt;
    end else if (busy) begin
      if (special) y <= spec_res;
      else         y <= fp_round_pack(1'b0, exp_r, root[25:2], root[1], root[0] | (rem != '0));
    end
  end

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> in_ready)
    else $error("fp_sqrt: operand presented while busy");

endmodule
