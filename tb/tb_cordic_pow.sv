// tb_cordic_pow: end-to-end test of the powering unit at its default
// parameters ([52 32] format, M = 5, N = 32).
//
// Each operation computes x^y. The result is compared bit for bit with an
// integer model of the whole computation (vectoring pass, <<1, fixed-point
// multiply, rotation pass) and, to a tolerance, with real-number pow(). The
// latency is checked against 2(M+1) + 2N + 2v(N) + 5 cycles (equation (8),
// 85 cycles here). The test counts how often each mechanism of the design
// was exercised and fails if one never was: negative iterations, repeated
// positive iterations, vectoring and rotation passes, the chained second
// start in the done cycle of the first pass, x < 1 (negative ln x), y < 0
// and a result below 1.
module tb_cordic_pow;
  import cordic_pkg::*;
  import cordic_ref_pkg::*;
  localparam int unsigned B = 52, FW = 32, M = 5, N = 32;

  logic clk = 0, rst, start;
  logic [B-1:0] x, y, inv_an, xy;
  logic busy, done;
  int checks = 0, failures = 0;
  int cyc = 0;

  cordic_pow dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // Mechanism counters, observed inside the design
  int n_neg_it, n_rep, n_vect, n_rot, n_chain, n_xlt1, n_yneg, n_rlt1;
  always @(posedge clk) if (!rst) begin
    if (dut.u_engine.u_ctrl.n_xyz_ld && !dut.u_engine.u_ctrl.n_xyz_sel) n_neg_it++;
    if (dut.u_engine.u_ctrl.p_xyz_ld && dut.u_engine.u_ctrl.again) n_rep++;
    if (dut.cordic_start && dut.mode == VECTORING) n_vect++;
    if (dut.cordic_start && dut.mode == ROTATION) n_rot++;
    if (dut.cordic_start && dut.cordic_done) n_chain++;
  end

  initial begin
    repeat (200000) @(posedge clk);
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

  function automatic longint model_pow(longint mx, longint my, longint ia);
    longint px, py, pz, lnx;
    logic signed [127:0] prod;
    px = wrap(mx + (64'sd1 <<< FW), B);
    py = wrap(mx - (64'sd1 <<< FW), B);
    pz = 0;
    engine(1, M, N, B, FW, px, py, pz);
    lnx  = wrap(pz <<< 1, B);
    prod = (128'(my) * 128'(lnx)) >>> FW;
    pz = wrap(longint'(prod[63:0]), B);
    px = ia; py = ia;
    engine(0, M, N, B, FW, px, py, pz);
    return px;
  endfunction

  task automatic op(real xr, real yr);
    longint mx, my, ia, expv;
    real got, ref_v, err, tol;
    int t0;
    mx = to_fx(xr, FW); my = to_fx(yr, FW); ia = to_fx(1.0 / gain(M, N), FW);
    @(negedge clk);
    x = B'(mx); y = B'(my); inv_an = B'(ia);
    start = 1;
    t0 = cyc;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    check(cyc - t0 == 2 * (M + 1) + 2 * N + 2 * int'(num_repeats(N)) + 5,
          $sformatf("latency %0d", cyc - t0));
    expv = model_pow(mx, my, ia);
    check(xy == B'(expv), $sformatf("bit-exact x=%g y=%g got %h exp %h", xr, yr, xy, B'(expv)));
    got   = to_real($signed(xy), FW);
    ref_v = $pow(to_real(mx, FW), to_real(my, FW));
    err   = got - ref_v;
    if (err < 0) err = -err;
    // ln x is accurate to ~1e-5 (1e-3 for x near 0), amplified by |y|
    tol = 1.0e-6 + ref_v * ((yr < 0) ? -yr : yr) * ((xr < 1.0e-3) ? 2.0e-3 : 2.0e-5);
    check(err <= tol, $sformatf("x=%g y=%g got %g ref %g", xr, yr, got, ref_v));
    if (xr < 1.0) n_xlt1++;
    if (yr < 0.0) n_yneg++;
    if (ref_v < 1.0) n_rlt1++;
  endtask

  real xs [] = '{2.0, 0.5, 10.0, 3.7, 100.0, 0.01, 1.0, 1.5, 25.0, 1234.5};
  real ys [] = '{3.0, 2.0, -1.0, 0.5, 2.5, -2.0, 7.0, -4.25, 1.0, 1.5};

  initial begin
    rst = 1; start = 0; x = '0; y = '0; inv_an = '0;
    n_neg_it = 0; n_rep = 0; n_vect = 0; n_rot = 0; n_chain = 0;
    n_xlt1 = 0; n_yneg = 0; n_rlt1 = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    foreach (xs[j]) op(xs[j], ys[j]);
    $display("mechanisms: neg_iter=%0d repeat=%0d vectoring=%0d rotation=%0d chained=%0d x<1=%0d y<0=%0d result<1=%0d",
             n_neg_it, n_rep, n_vect, n_rot, n_chain, n_xlt1, n_yneg, n_rlt1);
    check(n_neg_it > 0, "negative iterations exercised");
    check(n_rep > 0, "repeated iterations exercised");
    check(n_vect > 0, "vectoring pass exercised");
    check(n_rot > 0, "rotation pass exercised");
    check(n_chain > 0, "chained start exercised");
    check(n_xlt1 > 0, "x < 1 exercised");
    check(n_yneg > 0, "y < 0 exercised");
    check(n_rlt1 > 0, "result < 1 exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
