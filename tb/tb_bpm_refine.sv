// tb_bpm_refine: self-checking testbench for bpm_refine.
//
// Streams ratio pairs (Q_x, Q_y) drawn uniformly from (-1, 1), one per clock
// with random gaps, each with a correction coefficient b taken from the
// values the paper quotes (-0.0125, -0.0144, -0.0394, -0.08), from b = 0 or
// at random. Each corrected pair is compared bit-exactly with
// Q + (b*Q)*|P| evaluated operation by operation in rounded binary32, and
// must arrive 12 clocks after its inputs. With b = 0 the output must equal
// the input.
module tb_bpm_refine;
  import tb_fp_pkg::*;

  localparam int N = 4000;
  localparam int LAT = 12;

  logic        clk = 0;
  logic        rst_n = 0;
  logic        in_valid = 0;
  logic [31:0] qx = 0, qy = 0, b_coef = 0;
  logic        out_valid;
  logic [31:0] qx_c, qy_c;

  int checks = 0, failures = 0;
  int cyc = 0;
  logic [63:0] exp_q[$];
  int          t_q[$];

  bpm_refine dut (.clk, .rst_n, .in_valid, .qx, .qy, .b_coef, .out_valid, .qx_c, .qy_c);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks += 3;
      if (exp_q.size() == 0) begin
        failures++;
        $display("unexpected output");
      end else begin
        logic [63:0] e;
        int t;
        e = exp_q.pop_front();
        t = t_q.pop_front();
        if (!same32(qx_c, e[63:32])) begin
          failures++;
          if (failures < 10) $display("REFINE x mismatch: got %h exp %h", qx_c, e[63:32]);
        end
        if (!same32(qy_c, e[31:0])) begin
          failures++;
          if (failures < 10) $display("REFINE y mismatch: got %h exp %h", qy_c, e[31:0]);
        end
        if (cyc - t - 1 != LAT) begin
          failures++;
          $display("REFINE latency %0d, expected %0d", cyc - t - 1, LAT);
        end
      end
    end
  end

  function automatic logic [31:0] rnd_q();
    return r2f(real'(int'($urandom_range(0, 2000000)) - 1000000) / 1000001.0);
  endfunction

  initial begin
    static logic [31:0] bvals[4] = '{32'hBC4C_CCCD, 32'hBC6B_EDFA, 32'hBD21_6873, 32'hBDA3_D70A};
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < N; i++) begin
      logic [31:0] x, y, bb;
      x = rnd_q();
      y = rnd_q();
      case ($urandom_range(0, 5))
        0:       bb = 32'h0000_0000;
        1:       bb = r2f(-($urandom_range(0, 100000) / 1000000.0));
        default: bb = bvals[$urandom_range(0, 3)];
      endcase
      qx <= x;
      qy <= y;
      b_coef <= bb;
      in_valid <= 1;
      exp_q.push_back({ref_refine(x, y, bb), ref_refine(y, x, bb)});
      t_q.push_back(cyc);
      if (bb == 0 && (ref_refine(x, y, bb) != x || ref_refine(y, x, bb) != y)) begin
        failures++;
        $display("reference not the identity for b = 0");
      end
      @(posedge clk);
      if ($urandom_range(0, 3) == 0) begin
        in_valid <= 0;
        qx <= $urandom;               // inputs are don't-care between samples
        qy <= $urandom;
        b_coef <= $urandom;
        repeat ($urandom_range(1, 4)) @(posedge clk);
      end
    end
    in_valid <= 0;
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("%0d outputs missing", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
