// fp_pkg: types, constants and helper functions shared by the IEEE-754
// single-precision operators and the beam-position pipeline.
//
// All operators in this design work on 32-bit IEEE-754 binary32 words with
// round-to-nearest-even. Subnormal inputs are read as zero and results that
// would be subnormal are flushed to a signed zero (flush-to-zero, the usual
// setting of FPGA floating-point operators). Every NaN produced is the quiet
// NaN 0x7FC00000.
//
// The operator latencies are the clock counts printed under each column of
// the pipeline schematic: 3 for a multiply, 6 for an add or subtract and 14
// for a divide, reciprocal or square root. The 14-clock units are iterative
// and accept one operand every 14 clocks, which sets the sample rate of the
// whole position calculation.
package fp_pkg;

  typedef logic [31:0] fp32_t;

  localparam fp32_t FP_ZERO = 32'h0000_0000;
  localparam fp32_t FP_ONE  = 32'h3F80_0000;
  localparam fp32_t FP_QNAN = 32'h7FC0_0000;
  localparam fp32_t FP_PINF = 32'h7F80_0000;

  // Clocks per operation, from the pipeline schematic.
  localparam int unsigned MUL_LAT  = 3;
  localparam int unsigned ADD_LAT  = 6;
  localparam int unsigned DIV_LAT  = 14;
  localparam int unsigned SQRT_LAT = 14;

  // Minimum spacing of samples, set by the 14-clock iterative units.
  localparam int unsigned SAMPLE_II = 14;

  function automatic logic fp_is_nan(fp32_t v);
    return (v[30:23] == 8'hFF) && (v[22:0] != '0);
  endfunction

  function automatic logic fp_is_inf(fp32_t v);
    return (v[30:23] == 8'hFF) && (v[22:0] == '0);
  endfunction

  // Zero or subnormal: both read as zero.
  function automatic logic fp_is_zero(fp32_t v);
    return v[30:23] == 8'h00;
  endfunction

  function automatic fp32_t fp_abs(fp32_t v);
    return {1'b0, v[30:0]};
  endfunction

  // v/2 for a finite operand, by decrementing the exponent (flushes to zero
  // when the result would be subnormal).
  function automatic fp32_t fp_half(fp32_t v);
    if (v[30:23] == 8'hFF) return v;
    if (v[30:23] <= 8'd1)  return {v[31], 31'd0};
    return {v[31], v[30:23] - 8'd1, v[22:0]};
  endfunction

  // Round a normalised significand and pack the result.
  //   s  : sign
  //   e  : biased exponent of the significand m (may be out of range)
  //   m  : 24-bit significand with the hidden one in m[23]
  //   g  : first bit below m[0]
  //   st : OR of all bits below g
  // Round to nearest, ties to even. Overflow gives infinity, a result below
  // the normal range gives a signed zero.
  function automatic fp32_t fp_round_pack(logic s, logic signed [11:0] e,
                                          logic [23:0] m, logic g, logic st);
    logic [24:0]        mr;
    logic signed [11:0] er;
    mr = {1'b0, m} + {24'd0, g & (st | m[0])};
    er = e;
    if (mr[24]) begin
      mr = mr >> 1;
      er = er + 12'sd1;
    end
    if (er >= 12'sd255) return {s, 8'hFF, 23'd0};
    if (er <= 12'sd0)   return {s, 31'd0};
    return {s, er[7:0], mr[22:0]};
  endfunction

endpackage
