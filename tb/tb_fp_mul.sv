// tb_fp_mul: self-checking testbench for fp_mul.
//
// Streams one operand pair per clock (random normal operands, operands whose
// product overflows or underflows, and the special values zero, inf and NaN)
// and compares every result bit-exactly with a binary64 reference rounded to
// binary32. Also checks that each result arrives exactly 3 clocks after its
// operands, the multiply latency of the pipeline schematic.
module tb_fp_mul;
  import tb_fp_pkg::*;

  localparam int N = 4000;

  logic        clk = 0;
  logic        rst_n = 0;
  logic        in_valid = 0;
  logic [31:0] a = 0, b = 0;
  logic        out_valid;
  logic [31:0] y;

  int checks = 0, failures = 0;
  logic [31:0] exp_q[$];
  int          t_q[$];
  int          cyc = 0;

  fp_mul dut (.clk, .rst_n, .in_valid, .a, .b, .out_valid, .y);

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
      1:       return rand32(200, 254);   // large: products may overflow
      2:       return rand32(1, 60);      // small: products may flush to zero
      default: return rand32(90, 160);
    endcase
  endfunction

  // Checker
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("unexpected output %h", y);
      end else begin
        logic [31:0] e;
        int t;
        e = exp_q.pop_front();
        t = t_q.pop_front();
        if (!same32(y, e)) begin
          failures++;
          if (failures < 10) $display("MUL mismatch: got %h exp %h", y, e);
        end
        checks++;
        if (cyc - t - 1 != 3) begin
          failures++;
          $display("MUL latency %0d, expected 3", cyc - t - 1);
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < N; i++) begin
      logic [31:0] x, z;
      x = pick($urandom);
      z = pick($urandom);
      a <= x;
      b <= z;
      in_valid <= 1;
      exp_q.push_back(r2f(f2r(x) * f2r(z)));
      t_q.push_back(cyc);
      @(posedge clk);
      if ($urandom_range(0, 7) == 0) begin
        in_valid <= 0;
        @(posedge clk);
      end
    end
    in_valid <= 0;
    repeat (10) @(posedge clk);
    if (exp_q.size() != 0) begin
      failures++;
      $display("%0d results missing", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
