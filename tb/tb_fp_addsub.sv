// tb_fp_addsub: self-checking testbench for fp_addsub.
//
// Streams one operand pair per clock, adding or subtracting at random:
// random normal operands, very large and very small ones, nearly equal
// magnitudes (heavy cancellation) and the special values zero, inf and NaN.
// Every result is compared bit-exactly with a binary64 reference rounded to
// binary32, and must arrive exactly 6 clocks after its operands, the
// add/subtract latency of the pipeline schematic.
module tb_fp_addsub;
  import tb_fp_pkg::*;

  localparam int N = 4000;

  logic        clk = 0;
  logic        rst_n = 0;
  logic        in_valid = 0;
  logic        sub = 0;
  logic [31:0] a = 0, b = 0;
  logic        out_valid;
  logic [31:0] y;

  int checks = 0, failures = 0;
  logic [31:0] exp_q[$];
  int          t_q[$];
  int          cyc = 0;

  fp_addsub dut (.clk, .rst_n, .in_valid, .a, .b, .sub, .out_valid, .y);

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
      1:       return rand32(200, 254);   // large: sums may overflow
      2:       return rand32(1, 60);      // small: differences may flush to zero
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
          if (failures < 10) $display("ADD mismatch: got %h exp %h", y, e);
        end
        checks++;
        if (cyc - t - 1 != 6) begin
          failures++;
          $display("ADD latency %0d, expected 6", cyc - t - 1);
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
      logic sb;
      x  = pick($urandom);
      z  = pick($urandom);
      sb = 1'($urandom_range(0, 1));
      // Every fifth pair: nearly equal magnitudes, for cancellation.
      if ($urandom_range(0, 4) == 0 && x[30:23] > 8'd2 && x[30:23] < 8'd250)
        z = {1'($urandom_range(0, 1)), x[30:23] - 8'($urandom_range(0, 1)), x[22:0] ^ 23'($urandom_range(0, 255))};
      a <= x;
      b <= z;
      sub <= sb;
      in_valid <= 1;
      exp_q.push_back(sb ? r2f(f2r(x) - f2r(z)) : r2f(f2r(x) + f2r(z)));
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
