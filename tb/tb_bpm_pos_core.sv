// tb_bpm_pos_core: self-checking testbench for bpm_pos_core.
//
// Presents ratio pairs at one per 14 clocks (the fastest rate) and at random
// slower rates, with a monitor radius a_eff = 30 (a 60 mm monitor in mm).
// The ratios come from three sources:
//   * an ideal pencil beam at a random position inside 95% of the radius,
//     Q_x = 2 rho cos(theta)/(rho^2+1), Q_y = 2 rho sin(theta)/(rho^2+1);
//     the computed position must then lie within 1 um of the true one;
//   * beams very close to the axis (and exactly on it), where the chain
//     must take the paraxial form X = a Q_x / 2;
//   * ratio vectors of modulus >= 1 (no beam inside the pipe), which must
//     give NaN.
// Every X and Y is also compared bit-exactly with the same sequence of
// operations evaluated in rounded binary32, every paraxial flag with the
// reference decision, and every result must arrive 52 clocks after its
// ratios, the sum of the column latencies of the pipeline schematic.
module tb_bpm_pos_core;
  import tb_fp_pkg::*;

  localparam int N   = 1200;
  localparam int LAT = 52;
  localparam real A  = 30.0;

  logic        clk = 0;
  logic        rst_n = 0;
  logic        in_valid = 0;
  logic [31:0] qx = 0, qy = 0;
  logic [31:0] a_eff;
  logic        out_valid, paraxial;
  logic [31:0] x_pos, y_pos;

  int checks = 0, failures = 0;
  int cyc = 0;
  int n_parax = 0, n_exact = 0, n_nan = 0;

  typedef struct {
    logic [31:0] x, y;
    logic        px;
    real         tx, ty;   // true position, or 1e30 when not applicable
    int          t;
  } exp_t;
  exp_t exp_q[$];

  bpm_pos_core dut (.clk, .rst_n, .in_valid, .qx, .qy, .a_eff, .out_valid, .x_pos, .y_pos,
                    .paraxial);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (300000) @(posedge clk);
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
        e = exp_q.pop_front();
        checks += 4;
        if (!same32(x_pos, e.x) || !same32(y_pos, e.y)) begin
          failures++;
          if (failures < 10) $display("CORE mismatch: got %h %h exp %h %h", x_pos, y_pos, e.x, e.y);
        end
        if (paraxial != e.px) begin
          failures++;
          $display("CORE paraxial flag %b, expected %b", paraxial, e.px);
        end
        if (cyc - e.t - 1 != LAT) begin
          failures++;
          $display("CORE latency %0d, expected %0d", cyc - e.t - 1, LAT);
        end
        if (e.tx < 1e29) begin
          real dx, dy;
          dx = f2r(x_pos) - e.tx;
          dy = f2r(y_pos) - e.ty;
          if (dx * dx + dy * dy > 1e-6 || is_nan32(x_pos)) begin
            failures++;
            $display("CORE position error: got (%f, %f) true (%f, %f)", f2r(x_pos), f2r(y_pos),
                     e.tx, e.ty);
          end
        end else if (e.ty < 0) begin
          if (!is_nan32(x_pos) || !is_nan32(y_pos)) begin
            failures++;
            $display("CORE expected NaN for a vector of modulus >= 1");
          end
        end
        if (paraxial) n_parax++;
        else if (is_nan32(x_pos)) n_nan++;
        else n_exact++;
      end
    end
  end

  initial begin
    a_eff = r2f(A);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < N; i++) begin
      exp_t e;
      real rho, th, qm, sc;
      int kind;
      kind = $urandom_range(0, 9);
      th = 6.283185307179586 * ($urandom_range(0, 1000000) / 1000000.0);
      e.tx = 1e30;
      e.ty = 0;
      if (kind == 0) begin
        // Modulus >= 1: outside the pipe.
        qm = 1.0 + 0.5 * ($urandom_range(1, 1000) / 1000.0);
        qx <= r2f(qm * $cos(th));
        qy <= r2f(qm * $sin(th));
        e.ty = -1;
        ref_core(r2f(qm * $cos(th)), r2f(qm * $sin(th)), a_eff, -10, e.x, e.y, e.px);
      end else begin
        if (kind == 1) rho = 0.02 * ($urandom_range(0, 1000) / 1000.0);   // near the axis
        else           rho = 0.95 * ($urandom_range(0, 1000000) / 1000000.0);
        sc = 2.0 * rho / (rho * rho + 1.0);
        qx <= r2f(sc * $cos(th));
        qy <= r2f(sc * $sin(th));
        e.tx = A * rho * $cos(th);
        e.ty = A * rho * $sin(th);
        ref_core(r2f(sc * $cos(th)), r2f(sc * $sin(th)), a_eff, -10, e.x, e.y, e.px);
      end
      if (i == 5) begin
        qx <= 0;
        qy <= 0;
        e.tx = 0;
        e.ty = 0;
        ref_core(0, 0, a_eff, -10, e.x, e.y, e.px);
      end
      e.t = cyc;
      exp_q.push_back(e);
      in_valid <= 1;
      @(posedge clk);
      in_valid <= 0;
      qx <= $urandom;                 // inputs are don't-care between samples
      qy <= $urandom;
      repeat (13 + (($urandom_range(0, 3) == 0) ? $urandom_range(1, 10) : 0)) @(posedge clk);
    end
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("%0d outputs missing", exp_q.size());
    end
    $display("exact form %0d, paraxial form %0d, outside the pipe %0d", n_exact, n_parax, n_nan);
    checks += 3;
    if (n_exact == 0) failures++;
    if (n_parax == 0) failures++;
    if (n_nan == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
