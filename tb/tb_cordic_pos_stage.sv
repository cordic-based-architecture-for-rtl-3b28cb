// tb_cordic_pos_stage: drives the positive-iteration stage directly, acting
// as its controller (load, iterations 1..N with the repeated ones run twice
// while iReg holds, output load), and compares x/y/zOut_Reg with the
// bit-accurate model of equation (2) in both modes. It checks the ltN and rep
// comparator outputs at every iteration.
module tb_cordic_pos_stage;
  import cordic_pkg::*;
  import cordic_ref_pkg::*;
  localparam int unsigned B = 52, FW = 32, N = 32;

  logic clk = 0, rst;
  cordic_mode_t mode;
  logic [B-1:0] xin, yin, zin, x_out, y_out, z_out;
  logic xyz_sel, xyz_ld, iter_sel, iter_ld, out_ld, ltN, rep;
  int checks = 0, failures = 0;

  cordic_pos_stage #(.B(B), .FW(FW), .N(N)) dut (.*);

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
    int unsigned i;
    bit second;
    mx = to_fx(xr, FW); my = to_fx(yr, FW); mz = to_fx(zr, FW);
    @(negedge clk);
    mode = vect ? VECTORING : ROTATION;
    xin = B'(mx); yin = B'(my); zin = B'(mz);
    xyz_sel = 1; xyz_ld = 1; iter_sel = 1; iter_ld = 1; out_ld = 0;
    @(negedge clk);
    xyz_sel = 0; iter_sel = 0;
    i = 1; second = 0;
    forever begin
      check(ltN == (i < N), $sformatf("ltN at i=%0d", i));
      check(rep == (i == 4 || i == 13 || i == 40), $sformatf("rep at i=%0d", i));
      pos_iter(vect, i, B, FW, mx, my, mz);
      if (rep && !second) begin
        xyz_ld = 1; iter_ld = 0; out_ld = 0; second = 1;
      end else if (i < N) begin
        xyz_ld = 1; iter_ld = 1; out_ld = 0; second = 0; i++;
      end else begin
        xyz_ld = 0; iter_ld = 0; out_ld = 1;
        @(negedge clk);
        break;
      end
      @(negedge clk);
    end
    xyz_ld = 0; iter_ld = 0; out_ld = 0;
    check(x_out == B'(mx), $sformatf("x v=%0d %f %f %f", vect, xr, yr, zr));
    check(y_out == B'(my), $sformatf("y v=%0d %f %f %f", vect, xr, yr, zr));
    check(z_out == B'(mz), $sformatf("z v=%0d %f %f %f", vect, xr, yr, zr));
  endtask

  initial begin
    rst = 1; mode = ROTATION; xin = '0; yin = '0; zin = '0;
    xyz_sel = 0; xyz_ld = 0; iter_sel = 0; iter_ld = 0; out_ld = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    run(0, 1.2, 1.2, 0.5);
    run(0, 1.2, 1.2, -0.9);
    run(0, 3.0, -1.0, 0.01);
    run(1, 2.0, 1.0, 0.0);
    run(1, 5.0, -3.0, 0.25);
    run(1, 1.0, 0.0, 0.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
