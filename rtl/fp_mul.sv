// fp_mul: IEEE-754 single-precision multiplier, fully pipelined.
//
// Computes y = a * b with round-to-nearest-even and flush-to-zero of
// subnormals. The two 24-bit significands are multiplied into a 48-bit
// product, normalised by at most one place, rounded and packed. NaN operands
// and 0 * inf give the quiet NaN; inf times a non-zero gives a signed inf.
//
// Timing: a new operand pair may be presented every clock. The result for an
// operand pair sampled with in_valid in clock t appears with out_valid in
// clock t + LATENCY. The default of 3 clocks is the multiply latency printed
// in the pipeline schematic. The arithmetic is one combinational step
// followed by LATENCY registers, left for the synthesis tool to retime; how
// the original operator spreads its work over the 3 clocks is not known.
module fp_mul
  import fp_pkg::*;
#(
  parameter int unsigned LATENCY = MUL_LAT
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp32_t a,
  input  fp32_t b,
  output logic  out_valid,
  output fp32_t y
);

  fp32_t res;

  always_comb begin
    logic               s;
    logic [47:0]        prod;
    logic signed [11:0] e;
    logic [23:0]        m;
    logic               g, st;
    s    = a[31] ^ b[31];
    prod = '0;
    e    = '0;
    m    = '0;
    g    = 1'b0;
    st   = 1'b0;
    if (fp_is_nan(a) || fp_is_nan(b) ||
        (fp_is_inf(a) && fp_is_zero(b)) || (fp_is_zero(a) && fp_is_inf(b))) begin
      res = FP_QNAN;
    end else if (fp_is_inf(a) || fp_is_inf(b)) begin
      res = {s, 8'hFF, 23'd0};
    end else if (fp_is_zero(a) || fp_is_zero(b)) begin
      res = {s, 31'd0};
    end else begin
      prod = {1'b1, a[22:0]} * {1'b1, b[22:0]};
      e    = 12'($signed({4'd0, a[30:23]})) + 12'($signed({4'd0, b[30:23]})) - 12'sd127;
      if (prod[47]) begin
        m  = prod[47:24];
        g  = prod[23];
        st = |prod[22:0];
        e  = e + 12'sd1;
      end else begin
        m  = prod[46:23];
        g  = prod[22];
        st = |prod[21:0];
      end
      res = fp_round_pack(s, e, m, g, st);
    end
  end

  logic  vld [LATENCY];
  fp32_t dat [LATENCY];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LATENCY; i++) vld[i] <= 1'b0;
    end else begin
      vld[0] <= in_valid;
      for (int i = 1; i < LATENCY; i++) vld[i] <= vld[i-1];
    end
  end

  always_ff @(posedge clk) begin
    dat[0] <= res;
    for (int i = 1; i < LATENCY; i++) dat[i] <= dat[i-1];
  end

  assign out_valid = vld[LATENCY-1];
  assign y         = dat[LATENCY-1];

endmodule
