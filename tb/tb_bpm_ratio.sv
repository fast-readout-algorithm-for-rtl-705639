// tb_bpm_ratio: self-checking testbench for bpm_ratio.
//
// Feeds pairs of electrode amplitudes (positive values of similar size, as
// from a beam inside the pipe, plus a few with one amplitude zero or
// negative) at the fastest allowed rate of one per 14 clocks and at random
// slower rates. Each ratio is compared bit-exactly with (A - B)/(A + B)
// evaluated operation by operation in rounded binary32, and must arrive 20
// clocks (6 for the sum and difference, 14 for the divide) after its sample.
module tb_bpm_ratio;
  import tb_fp_pkg::*;

  localparam int N = 1500;
  localparam int LAT = 20;

  logic        clk = 0;
  logic        rst_n = 0;
  logic        in_valid = 0;
  logic [31:0] amp_a = 0, amp_b = 0;
  logic        out_valid;
  logic [31:0] q;

  int checks = 0, failures = 0;
  int cyc = 0;
  logic [31:0] exp_q[$];
  int          t_q[$];

  bpm_ratio dut (.clk, .rst_n, .in_valid, .amp_a, .amp_b, .out_valid, .q);

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
      checks += 2;
      if (exp_q.size() == 0) begin
        failures++;
        $display("unexpected ratio output");
      end else begin
        logic [31:0] e;
        int t;
        e = exp_q.pop_front();
        t = t_q.pop_front();
        if (!same32(q, e)) begin
          failures++;
          if (failures < 10) $display("RATIO mismatch: got %h exp %h", q, e);
        end
        if (cyc - t - 1 != LAT) begin
          failures++;
          $display("RATIO latency %0d, expected %0d", cyc - t - 1, LAT);
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < N; i++) begin
      logic [31:0] xa, xb;
      real ra, rb;
      ra = 0.05 + 2.0 * ($urandom_range(0, 1000000) / 1000000.0);
      rb = 0.05 + 2.0 * ($urandom_range(0, 1000000) / 1000000.0);
      xa = r2f(ra);
      xb = r2f(rb);
      case ($urandom_range(0, 19))
        0: xb = 32'h0000_0000;
        1: xa = 32'h0000_0000;
        2: xb = {1'b1, xb[30:0]};
        3: xb = xa;
        default: ;
      endcase
      amp_a <= xa;
      amp_b <= xb;
      in_valid <= 1;
      exp_q.push_back(ref_ratio(xa, xb));
      t_q.push_back(cyc);
      @(posedge clk);
      in_valid <= 0;
      amp_a <= $urandom;              // inputs are don't-care between samples
      amp_b <= $urandom;
      repeat (13 + (($urandom_range(0, 3) == 0) ? $urandom_range(0, 20) : 0)) @(posedge clk);
    end
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("%0d ratios missing", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
