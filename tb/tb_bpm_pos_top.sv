// tb_bpm_pos_top: end-to-end testbench for bpm_pos_top at its default size.
//
// Models a 60 mm monitor (radius a = 30 mm) with four small electrodes and
// a relativistic pencil beam. For each bunch it draws a position, forms the
// four electrode amplitudes from the wall-current density of a line charge
// in a cylinder, (a^2 - r^2)/(a^2 + r^2 - 2 a r cos(theta - phi)) with
// phi = 0, 180, 90, 270 degrees for A_x, B_x, A_y, B_y, scales them by a
// random bunch intensity, and sends them through the valid/ready input.
//
// Checks:
//   * X, Y and the paraxial flag bit-exactly against the whole algorithm
//     (ratios, correction, position chain) evaluated operation by operation
//     in rounded binary32;
//   * with the correction off (b = 0, a_eff = a) the position within 2 um of
//     the true beam position, out to 90% of the radius;
//   * latency of 84 clocks from acceptance to result (20 ratio + 12
//     correction + 52 position chain), and one accepted sample every 14
//     clocks when the input is always valid (70 ns at 200 MHz);
//   * that every mechanism occurs: input stalls (in_valid held while
//     in_ready is low), the paraxial path, the correction on and off, the
//     calibration of Table 1 (b = -0.0125, eps = 0.022), and a sample with
//     a faulty electrode (ratio modulus >= 1, NaN result).
module tb_bpm_pos_top;
  import tb_fp_pkg::*;

  localparam int  N   = 600;
  localparam int  LAT = 84;
  localparam real A   = 30.0;

  logic        clk = 0;
  logic        rst_n = 0;
  logic        in_valid = 0;
  logic        in_ready;
  logic [31:0] amp_ax = 0, amp_bx = 0, amp_ay = 0, amp_by = 0;
  logic [31:0] cfg_b, cfg_a_eff;
  logic        out_valid, paraxial;
  logic [31:0] x_pos, y_pos;

  int checks = 0, failures = 0;
  int cyc = 0;
  int n_stall = 0, n_parax = 0, n_corr = 0, n_nocorr = 0, n_nan = 0, n_b2b = 0;
  int last_accept = -100;

  typedef struct {
    logic [31:0] x, y;
    logic        px;
    logic        truth;    // compare with the true position
    logic        bad;      // faulty electrode, NaN expected
    real         tx, ty;
    int          t;
  } exp_t;
  exp_t exp_q[$];

  bpm_pos_top dut (.clk, .rst_n, .in_valid, .in_ready, .amp_ax, .amp_bx, .amp_ay, .amp_by,
                   .cfg_b, .cfg_a_eff, .out_valid, .x_pos, .y_pos, .paraxial);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Acceptance monitor: stalls and sample spacing.
  always @(posedge clk) begin
    if (rst_n && in_valid && !in_ready) n_stall++;
    if (rst_n && in_valid && in_ready) begin
      checks++;
      if (cyc - last_accept < 14) begin
        failures++;
        $display("TOP accepted samples %0d clocks apart", cyc - last_accept);
      end
      if (cyc - last_accept == 14) n_b2b++;
      last_accept = cyc;
    end
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      if (exp_q.size() == 0) begin
        checks++;
        failures++;
        $display("unexpected output");
      end else begin
        exp_t e;
        e = exp_q.pop_front();
        checks += 3;
        if (!same32(x_pos, e.x) || !same32(y_pos, e.y)) begin
          failures++;
          if (failures < 10) $display("TOP mismatch: got %h %h exp %h %h", x_pos, y_pos, e.x, e.y);
        end
        if (paraxial != e.px) begin
          failures++;
          $display("TOP paraxial flag %b, expected %b", paraxial, e.px);
        end
        if (cyc - e.t != LAT) begin
          failures++;
          $display("TOP latency %0d, expected %0d", cyc - e.t, LAT);
        end
        if (e.truth) begin
          real dx, dy;
          checks++;
          dx = f2r(x_pos) - e.tx;
          dy = f2r(y_pos) - e.ty;
          if (dx * dx + dy * dy > 4e-6 || is_nan32(x_pos)) begin
            failures++;
            $display("TOP position error: got (%f, %f) true (%f, %f)", f2r(x_pos), f2r(y_pos),
                     e.tx, e.ty);
          end
        end
        if (e.bad) begin
          checks++;
          if (!is_nan32(x_pos)) begin
            failures++;
            $display("TOP expected NaN for a faulty electrode");
          end
          n_nan++;
        end
        if (paraxial) n_parax++;
      end
    end
  end

  function automatic real pue(real r, real th, real phi);
    return (A * A - r * r) / (A * A + r * r - 2.0 * A * r * $cos(th - phi));
  endfunction

  initial begin
    cfg_b     = 0;
    cfg_a_eff = r2f(A);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < N; i++) begin
      real r, th, g, ax, bx, ay, by;
      exp_t pend;
      logic [31:0] fax, fbx, fay, fby, qx, qy, qxc, qyc;
      int phase;
      // Three phases: correction off, Table 1 calibration, then b = -0.08
      // (the value that fitted the stripline monitor), eps = 0.
      phase = (i * 3) / N;
      if (i == N / 3 || i == (2 * N) / 3) begin
        // Let the pipeline drain before the calibration changes.
        in_valid <= 0;
        wait (exp_q.size() == 0);
        @(posedge clk);
        if (phase == 1) begin
          cfg_b     = r2f(-0.0125);
          cfg_a_eff = r2f(A * 1.022);
        end else begin
          cfg_b     = r2f(-0.08);
          cfg_a_eff = r2f(A);
        end
      end
      if ($urandom_range(0, 7) == 0) r = 0.5 * ($urandom_range(0, 1000) / 1000.0);  // paraxial
      else                           r = 0.9 * A * ($urandom_range(0, 1000000) / 1000000.0);
      th = 6.283185307179586 * ($urandom_range(0, 1000000) / 1000000.0);
      g  = 0.2 + $urandom_range(0, 1000) / 100.0;
      ax = g * pue(r, th, 0.0);
      bx = g * pue(r, th, 3.141592653589793);
      ay = g * pue(r, th, 1.5707963267948966);
      by = g * pue(r, th, 4.71238898038469);
      pend.bad = 1'b0;
      if (i == 7 || $urandom_range(0, 49) == 0) begin
        bx = -0.2 * ax;                // faulty electrode: |Q_x| > 1
        pend.bad = 1'b1;
      end
      fax = r2f(ax); fbx = r2f(bx); fay = r2f(ay); fby = r2f(by);
      qx  = ref_ratio(fax, fbx);
      qy  = ref_ratio(fay, fby);
      qxc = ref_refine(qx, qy, cfg_b);
      qyc = ref_refine(qy, qx, cfg_b);
      ref_core(qxc, qyc, cfg_a_eff, -10, pend.x, pend.y, pend.px);
      pend.truth = (phase == 0) && !pend.bad;
      pend.tx = r * $cos(th);
      pend.ty = r * $sin(th);
      if (phase == 0) n_nocorr++;
      else n_corr++;
      amp_ax <= fax; amp_bx <= fbx; amp_ay <= fay; amp_by <= fby;
      in_valid <= 1;
      // Hold until accepted.
      do @(posedge clk); while (!in_ready);
      pend.t = cyc;
      exp_q.push_back(pend);
      // Mostly back to back (the input then stalls), sometimes idle.
      if ($urandom_range(0, 3) == 0) begin
        in_valid <= 0;
        amp_ax <= $urandom;           // inputs are don't-care between samples
        amp_bx <= $urandom;
        amp_ay <= $urandom;
        amp_by <= $urandom;
        repeat ($urandom_range(1, 30)) @(posedge clk);
      end
    end
    in_valid <= 0;
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("%0d results missing", exp_q.size());
    end
    $display("stall clocks %0d, back-to-back samples %0d, paraxial %0d, corrected %0d, uncorrected %0d, faulty %0d",
             n_stall, n_b2b, n_parax, n_corr, n_nocorr, n_nan);
    checks += 6;
    if (n_stall == 0)  begin failures++; $display("no input stall happened");        end
    if (n_b2b == 0)    begin failures++; $display("never ran at the full rate");     end
    if (n_parax == 0)  begin failures++; $display("paraxial path never taken");      end
    if (n_corr == 0)   begin failures++; $display("correction never on");            end
    if (n_nocorr == 0) begin failures++; $display("correction never off");           end
    if (n_nan == 0)    begin failures++; $display("no faulty-electrode sample");     end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
