// tb_bpm_workloads: runs the monitor geometries and calibrations evaluated
// for this readout through bpm_pos_top at its default size.
//
//   1. 60 mm button monitor, beam on the grid X, Y = 0..20 mm in 5 mm
//      steps; uncorrected, then with eps = 0.0234, b = -0.0144.
//   2. 100 mm stripline monitor, grid in 5 mm steps inside 60% of the
//      radius; uncorrected, then with eps = 0.0225, b = -0.0394.
//   3. 60 mm monitor with the four (eps, b) pairs found for beta = 1, 0.9,
//      0.7 and 0.5.
//   4. 34.925 mm stripline monitor, grid in 2 mm steps out to 95% of the
//      radius; eps = 0 and b = 0, -0.06, -0.08, -0.10.
//
// The electrode signals are those of an ideal monitor with point-like
// electrodes and a relativistic pencil beam (wall-current density of a line
// charge in a cylinder); measured or field-solver signals are not part of
// this testbench. Every result is compared bit-exactly with the algorithm
// evaluated operation by operation in rounded binary32. Uncorrected runs
// must also reproduce the true beam position to within 1e-4 of the radius;
// for the corrected runs, which are meant for non-ideal electrodes, the RMS
// displacement the correction causes on ideal signals is printed. Samples
// are offered back to back, so the run also exercises the full rate.
module tb_bpm_workloads;
  import tb_fp_pkg::*;

  localparam int LAT = 84;

  logic        clk = 0;
  logic        rst_n = 0;
  logic        in_valid = 0;
  logic        in_ready;
  logic [31:0] amp_ax = 0, amp_bx = 0, amp_ay = 0, amp_by = 0;
  logic [31:0] cfg_b = 0, cfg_a_eff = 0;
  logic        out_valid, paraxial;
  logic [31:0] x_pos, y_pos;

  int  checks = 0, failures = 0;
  int  cyc = 0;
  real sum_d2;
  int  n_pts;

  typedef struct {
    logic [31:0] x, y;
    logic        px;
    logic        truth;
    real         tx, ty, tol;
    int          t;
  } exp_t;
  exp_t exp_q[$];

  bpm_pos_top dut (.clk, .rst_n, .in_valid, .in_ready, .amp_ax, .amp_bx, .amp_ay, .amp_by,
                   .cfg_b, .cfg_a_eff, .out_valid, .x_pos, .y_pos, .paraxial);

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
      if (exp_q.size() == 0) begin
        checks++;
        failures++;
        $display("unexpected output");
      end else begin
        exp_t e;
        real dx, dy;
        e = exp_q.pop_front();
        checks += 3;
        if (!same32(x_pos, e.x) || !same32(y_pos, e.y)) begin
          failures++;
          if (failures < 10) $display("mismatch: got %h %h exp %h %h", x_pos, y_pos, e.x, e.y);
        end
        if (paraxial != e.px) failures++;
        if (cyc - e.t != LAT) failures++;
        dx = f2r(x_pos) - e.tx;
        dy = f2r(y_pos) - e.ty;
        sum_d2 += dx * dx + dy * dy;
        n_pts++;
        if (e.truth) begin
          checks++;
          if (dx * dx + dy * dy > e.tol * e.tol || is_nan32(x_pos)) begin
            failures++;
            $display("position error: got (%f, %f) true (%f, %f)", f2r(x_pos), f2r(y_pos),
                     e.tx, e.ty);
          end
        end
      end
    end
  end

  function automatic real pue(real a, real r, real th, real phi);
    return (a * a - r * r) / (a * a + r * r - 2.0 * a * r * $cos(th - phi));
  endfunction

  // One sample through the valid/ready input.
  task automatic send(real a, real x, real y, logic truth);
    exp_t e;
    real r, th;
    logic [31:0] fax, fbx, fay, fby, qx, qy;
    r   = $sqrt(x * x + y * y);
    th  = $atan2(y, x);
    fax = r2f(pue(a, r, th, 0.0));
    fbx = r2f(pue(a, r, th, 3.141592653589793));
    fay = r2f(pue(a, r, th, 1.5707963267948966));
    fby = r2f(pue(a, r, th, 4.71238898038469));
    qx  = ref_ratio(fax, fbx);
    qy  = ref_ratio(fay, fby);
    ref_core(ref_refine(qx, qy, cfg_b), ref_refine(qy, qx, cfg_b), cfg_a_eff, -10,
             e.x, e.y, e.px);
    e.truth = truth;
    e.tx = x;
    e.ty = y;
    e.tol = 1e-4 * a;
    amp_ax <= fax; amp_bx <= fbx; amp_ay <= fay; amp_by <= fby;
    in_valid <= 1;
    do @(posedge clk); while (!in_ready);
    e.t = cyc;
    exp_q.push_back(e);
  endtask

  // A whole grid under one calibration.
  task automatic run(string name, real a, real eps, real b, real step, real rmax, real xmax);
    logic truth;
    in_valid <= 0;
    wait (exp_q.size() == 0);
    @(posedge clk);
    cfg_a_eff = r2f(a * (1.0 + eps));
    cfg_b     = r2f(b);
    truth     = (eps == 0.0) && (b == 0.0);
    sum_d2 = 0;
    n_pts  = 0;
    for (real x = 0.0; x <= xmax + 1e-9; x += step)
      for (real y = 0.0; y <= xmax + 1e-9; y += step)
        if (x * x + y * y <= rmax * rmax + 1e-9) send(a, x, y, truth);
    in_valid <= 0;
    wait (exp_q.size() == 0);
    $display("%-44s a=%6.3f eps=%7.4f b=%7.4f points=%3d rms shift %8.2f um", name, a, eps, b,
             n_pts, 1000.0 * $sqrt(sum_d2 / n_pts));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    run("button 60 mm, 5 mm grid",              30.0,   0.0,     0.0,    5.0, 30.0,  20.0);
    run("button 60 mm, 5 mm grid, corrected",   30.0,   0.0234, -0.0144, 5.0, 30.0,  20.0);
    run("stripline 100 mm, r <= 60%",           50.0,   0.0,     0.0,    5.0, 30.0,  30.0);
    run("stripline 100 mm, r <= 60%, corrected", 50.0,  0.0225, -0.0394, 5.0, 30.0,  30.0);
    run("beta = 1",                             30.0,   0.022,  -0.0125, 5.0, 30.0,  20.0);
    run("beta = 0.9",                           30.0,  -0.0013, -0.033,  5.0, 30.0,  20.0);
    run("beta = 0.7",                           30.0,  -0.035,  -0.062,  5.0, 30.0,  20.0);
    run("beta = 0.5",                           30.0,  -0.057,  -0.084,  5.0, 30.0,  20.0);
    run("Cornell 34.925 mm, b = 0",             17.4625, 0.0,    0.0,    2.0, 16.59, 16.0);
    run("Cornell 34.925 mm, b = -0.06",         17.4625, 0.0,   -0.06,   2.0, 16.59, 16.0);
    run("Cornell 34.925 mm, b = -0.08",         17.4625, 0.0,   -0.08,   2.0, 16.59, 16.0);
    run("Cornell 34.925 mm, b = -0.10",         17.4625, 0.0,   -0.10,   2.0, 16.59, 16.0);
    repeat (10) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
