// tb_cordic_neg_stage: drives the negative-iteration stage directly, acting
// as its controller (load, M+1 iterations, output load), and compares the
// Neg_*OutReg values with the bit-accurate model of equation (1), in both
// rotation (e^a set-up) and vectoring (ln a set-up) modes. It also checks
// the gt0 flag in every iteration and that the output registers change only
// on out_ld.
module tb_cordic_neg_stage;
  import cordic_pkg::*;
  import cordic_ref_pkg::*;
  localparam int unsigned B = 52, FW = 32, M = 5, N = 32;

  logic clk = 0, rst;
  cordic_mode_t mode;
  logic [B-1:0] xin, yin, zin, x_out, y_out, z_out;
  logic xyz_sel, xyz_ld, iter_sel, iter_ld, out_ld, gt0;
  int checks = 0, failures = 0;

  cordic_neg_stage #(.B(B), .FW(FW), .M(M)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic run(bit vect, real xr, real yr, real zr);
    longint mx, my, mz;
    logic [B-1:0] hold;
    mx = to_fx(xr, FW); my = to_fx(yr, FW); mz = to_fx(zr, FW);
    @(negedge clk);
    mode = vect ? VECTORING : ROTATION;
    xin = B'(mx); yin = B'(my); zin = B'(mz);
    xyz_sel = 1; xyz_ld = 1; iter_sel = 1; iter_ld = 1; out_ld = 0;
    hold = x_out;
    @(negedge clk);
    xyz_sel = 0; iter_sel = 0;
    for (int k = M; k >= 0; k--) begin
      check(gt0 == (k > 0), $sformatf("gt0 at k=%0d", k));
      check(x_out == hold, "out register held");
      xyz_ld = gt0; iter_ld = gt0; out_ld = !gt0;
      neg_iter(vect, k, B, FW, mx, my, mz);
      @(negedge clk);
    end
    xyz_ld = 0; iter_ld = 0; out_ld = 0;
    check(x_out == B'(mx), $sformatf("x v=%0d %f %f", vect, xr, zr));
    check(y_out == B'(my), $sformatf("y v=%0d %f %f", vect, xr, zr));
    check(z_out == B'(mz), $sformatf("z v=%0d %f %f", vect, xr, zr));
  endtask

  initial begin
    real ia;
    ia = 1.0 / gain(M, N);
    rst = 1; mode = ROTATION; xin = '0; yin = '0; zin = '0;
    xyz_sel = 0; xyz_ld = 0; iter_sel = 0; iter_ld = 0; out_ld = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    foreach (ia_pts[j]) run(0, ia, ia, ia_pts[j]);
    foreach (ln_pts[j]) run(1, ln_pts[j] + 1.0, ln_pts[j] - 1.0, 0.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real ia_pts[] = '{0.0, 1.0, -1.0, 5.5, -7.25, 12.0, -12.4, 0.001};
  real ln_pts[] = '{1.0, 0.5, 2.0, 100.0, 0.0001, 250000.0, 3.14159};
endmodule
