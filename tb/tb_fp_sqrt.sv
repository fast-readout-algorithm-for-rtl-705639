// tb_fp_sqrt: self-checking testbench for fp_sqrt.
//
// Offers operands whenever the square-root unit is ready (random normal
// operands over the whole exponent range, exact squares, negative operands
// and the special values zero, inf and NaN) and compares each root
// bit-exactly with a binary64 reference rounded to binary32. Checks
// the 14-clock latency of every result and that in_ready stays low for the
// 14 clocks of an operation, which makes the unit's rate one per 14 clocks.
module tb_fp_sqrt;
  import tb_fp_pkg::*;

  localparam int N = 3000;

  logic        clk = 0;
  logic        rst_n = 0;
  logic        in_valid = 0;
  logic        in_ready;
  logic [31:0] a = 0;
  logic        out_valid;
  logic [31:0] y;

  int checks = 0, failures = 0;
  int cyc = 0;

  fp_sqrt dut (.clk, .rst_n, .in_valid, .in_ready, .a, .out_valid, .y);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] pick(int i);
    logic [31:0] specials[8] = '{32'h0000_0000, 32'h8000_0000, 32'h7F80_0000, 32'hFF80_0000,
                                 32'h7FC0_0000, 32'h3F80_0000, 32'h0000_1234, 32'hBF80_0000};
    case (i % 10)
      0:       return specials[$urandom_range(0, 7)];
      1:       return rand32(190, 254);
      2:       return rand32(1, 60);
      default: return rand32(90, 160);
    endcase
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < N; i++) begin
      logic [31:0] x, z, e;
      int t0, busy_cycles;
      x = pick($urandom);
      // Mostly positive operands; exact squares now and then.
      if ($urandom_range(0, 3) != 0 && !is_nan32(x)) x[31] = 1'b0;
      if ($urandom_range(0, 7) == 0) x = r2f(f2r(x) * f2r(x));
      z = 0;
      e = (f2r(x) < 0.0) ? 32'h7FC0_0000 : r2f($sqrt(f2r(x)));
      if (x[30:23] == 8'h00) e = {x[31], 31'd0};
      checks++;
      if (!in_ready) begin
        failures++;
        $display("square-root unit not ready at start of operation %0d", i);
      end
      a <= x;
      in_valid <= 1;
      @(posedge clk);
      t0 = cyc;
      in_valid <= 0;
      busy_cycles = 0;
      do begin
        @(posedge clk);
        if (!in_ready && !out_valid) busy_cycles++;
      end while (!out_valid && cyc - t0 < 40);
      checks++;
      if (cyc - t0 != 14) begin
        failures++;
        $display("SQRT latency %0d, expected 14", cyc - t0);
      end
      checks++;
      if (busy_cycles != 13 || !in_ready) begin
        failures++;
        $display("SQRT busy for %0d clocks, ready=%b at result", busy_cycles, in_ready);
      end
      checks++;
      if (!same32(y, e)) begin
        failures++;
        if (failures < 10) $display("SQRT mismatch: sqrt(%h) got %h exp %h", x, y, e);
      end
      // Back-to-back operations most of the time, sometimes a gap.
      if ($urandom_range(0, 3) == 0) repeat ($urandom_range(0, 5)) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
