// fp_addsub: IEEE-754 single-precision adder/subtractor, fully pipelined.
//
// Computes y = a + b (sub = 0) or y = a - b (sub = 1) with
// round-to-nearest-even and flush-to-zero of subnormals. The operand of
// smaller magnitude is shifted right into a 27-bit field that keeps a guard,
// a round and a sticky bit; the significands are added or subtracted, the
// sum is normalised (one place right, or left by its leading-zero count) and
// rounded. An exact zero difference is +0; (-0) + (-0) is -0. inf - inf and
// NaN operands give the quiet NaN.
//
// Timing: a new operand pair may be presented every clock; its result
// appears with out_valid LATENCY clocks later. The default of 6 clocks is the
// add/subtract latency printed in the pipeline schematic. The arithmetic is
// one combinational step followed by LATENCY registers, left for the
// synthesis tool to retime.
module fp_addsub
  import fp_pkg::*;
#(
  parameter int unsigned LATENCY = ADD_LAT
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp32_t a,
  input  fp32_t b,
  input  logic  sub,
  output logic  out_valid,
  output fp32_t y
);

  fp32_t res;

  always_comb begin
    logic               sb;
    fp32_t              big, sml;
    logic [7:0]         d;
    logic [26:0]        mb, ms, msh;
    logic [27:0]        sum;
    logic [26:0]        n;
    logic signed [11:0] e;
    int unsigned        lz;
    logic               found;
    sb  = b[31] ^ sub;
    big = '0;
    sml = '0;
    d   = '0;
    mb  = '0;
    ms  = '0;
    msh = '0;
    sum = '0;
    n   = '0;
    e   = '0;
    lz  = 0;
    found = 1'b0;
    if (fp_is_nan(a) || fp_is_nan(b) ||
        (fp_is_inf(a) && fp_is_inf(b) && (a[31] != sb))) begin
      res = FP_QNAN;
    end else if (fp_is_inf(a)) begin
      res = a;
    end else if (fp_is_inf(b)) begin
      res = {sb, 8'hFF, 23'd0};
    end else if (fp_is_zero(a) && fp_is_zero(b)) begin
      res = {a[31] & sb, 31'd0};
    end else if (fp_is_zero(b)) begin
      res = a;
    end else if (fp_is_zero(a)) begin
      res = {sb, b[30:0]};
    end else begin
      // Order by magnitude; the result takes the sign of the larger operand.
      if (a[30:0] >= b[30:0]) begin
        big = a;
        sml = {sb, b[30:0]};
      end else begin
        big = {sb, b[30:0]};
        sml = a;
      end
      d  = big[30:23] - sml[30:23];
      mb = {1'b1, big[22:0], 3'b000};
      ms = {1'b1, sml[22:0], 3'b000};
      if (d >= 8'd27) begin
        msh = 27'd1;                         // only the sticky bit survives
      end else begin
        msh = (ms >> d) | 27'(((ms & ((27'd1 << d) - 27'd1)) != '0));
      end
      e = 12'($signed({4'd0, big[30:23]}));
      if (big[31] == sml[31]) begin
        sum = {1'b0, mb} + {1'b0, msh};
        if (sum[27]) begin
          n = {sum[27:2], sum[1] | sum[0]};
          e = e + 12'sd1;
        end else begin
          n = sum[26:0];
        end
      end else begin
        sum = {1'b0, mb} - {1'b0, msh};
        n   = sum[26:0];
        found = 1'b0;
        for (int i = 26; i >= 0; i--) begin
          if (!found) begin
            if (n[i]) found = 1'b1;
            else      lz++;
          end
        end
        n = n << lz;
        e = e - 12'(lz);
      end
      if (n == '0) res = FP_ZERO;
      else         res = fp_round_pack(big[31], e, n[26:3], n[2], n[1] | n[0]);
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
