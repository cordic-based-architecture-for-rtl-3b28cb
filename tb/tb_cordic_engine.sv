// tb_cordic_engine: exercises the complete expanded hyperbolic CORDIC engine.
//   e^a : rotation, xin = yin = 1/An, zin = a; checks xout against exp(a)
//   ln a: vectoring, xin = a+1, yin = a-1, zin = 0; checks 2*zout against ln(a)
//   cosh/sinh: rotation with xin = 1/An, yin = 0 (xout = cosh, yout = sinh)
// Every result is compared bit for bit with the integer model of the
// iterations and, to a relative tolerance, with real-number math. The pass
// time is checked against M+1+N+v(N)+2 cycles (equation (7)); passes are
// also issued back to back (start in the done cycle). A second instance
// with another configuration ([40 20], M = 1, N = 13, so that the final
// positive iteration is a repeated one) is checked bit for bit and for its
// pass time.
module tb_cordic_engine;
  import cordic_pkg::*;
  import cordic_ref_pkg::*;
  localparam int unsigned B = 52, FW = 32, M = 5, N = 32;

  logic clk = 0, rst, start;
  cordic_mode_t mode;
  logic [B-1:0] xin, yin, zin, xout, yout, zout;
  logic busy, done;
  int checks = 0, failures = 0;
  int cyc = 0;

  cordic_engine #(.B(B), .FW(FW), .M(M), .N(N)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (100000) @(posedge clk);
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

  function automatic bit close(real got, real expv, real rel, real abs_tol);
    real e;
    e = got - expv;
    if (e < 0) e = -e;
    return e <= abs_tol + rel * ((expv < 0) ? -expv : expv);
  endfunction

  // Vectoring shrinks x by the gain An (about 1e-5 for M = 5), so the
  // precision of atanh(y/x) is limited by the resolution of y relative to the
  // final x; it drops further for small a, where x^2 - y^2 = 4a is small.
  function automatic real ln_tol(real a);
    return (a < 1.0e-3) ? 1.0e-3 : 1.0e-5;
  endfunction

  // kind 0: e^a, 1: ln a, 2: cosh/sinh
  task automatic op(int kind, real a, bit chained);
    longint mx, my, mz;
    int t0;
    bit vect;
    real ia;
    ia = 1.0 / gain(M, N);
    vect = (kind == 1);
    case (kind)
      0: begin mx = to_fx(ia, FW);      my = to_fx(ia, FW);      mz = to_fx(a, FW); end
      1: begin mx = to_fx(a + 1.0, FW); my = to_fx(a - 1.0, FW); mz = 0;           end
      default: begin mx = to_fx(ia, FW); my = 0;                 mz = to_fx(a, FW); end
    endcase
    if (!chained) @(negedge clk);
    start = 1; mode = vect ? VECTORING : ROTATION;
    xin = B'(mx); yin = B'(my); zin = B'(mz);
    t0 = cyc;
    @(negedge clk);
    start = 0;
    xin = '0; yin = '0; zin = '0;    // inputs are sampled at start only
    while (!done) @(negedge clk);
    check(cyc - t0 == int'(exec_cycles(M, N)), $sformatf("latency %0d", cyc - t0));
    engine(vect, M, N, B, FW, mx, my, mz);
    check(xout == B'(mx) && yout == B'(my) && zout == B'(mz),
          $sformatf("bit-exact kind=%0d a=%g", kind, a));
    case (kind)
      0: check(close(to_real($signed(xout), FW), $exp(a), 1e-7, 1e-7),
               $sformatf("exp(%g) got %g", a, to_real($signed(xout), FW)));
      1: check(close(2.0 * to_real($signed(zout), FW), $ln(a), 0.0, ln_tol(a)),
               $sformatf("ln(%g) got %g", a, 2.0 * to_real($signed(zout), FW)));
      default: begin
        check(close(to_real($signed(xout), FW), $cosh(a), 1e-7, 1e-7), $sformatf("cosh(%g)", a));
        check(close(to_real($signed(yout), FW), $sinh(a), 1e-7, 1e-7), $sformatf("sinh(%g)", a));
      end
    endcase
  endtask

  real e_pts [] = '{0.0, 0.5, -0.5, 1.0, 2.7, -3.3, 6.0, -9.0, 11.8, -12.4, 12.4};
  real l_pts [] = '{1.0, 0.5, 2.0, 10.0, 0.01, 1000.0, 5.0e-6, 123456.0, 3.0e5};
  real c_pts [] = '{0.0, 1.0, -2.0, 5.0, 10.0};

  // Second configuration
  localparam int unsigned B2 = 40, FW2 = 20, M2 = 1, N2 = 13;
  logic start2, busy2, done2;
  cordic_mode_t mode2;
  logic [B2-1:0] xin2, yin2, zin2, xout2, yout2, zout2;
  bit fin2 = 0;

  cordic_engine #(.B(B2), .FW(FW2), .M(M2), .N(N2)) dut2 (
    .clk, .rst, .start(start2), .mode(mode2), .xin(xin2), .yin(yin2), .zin(zin2),
    .xout(xout2), .yout(yout2), .zout(zout2), .busy(busy2), .done(done2)
  );

  real pts2 [] = '{0.0, 0.7, -1.9, 3.0, -3.4};
  initial begin
    longint mx, my, mz;
    int t0;
    start2 = 0; mode2 = ROTATION; xin2 = '0; yin2 = '0; zin2 = '0;
    @(negedge rst);
    for (int v = 0; v < 2; v++) begin
      foreach (pts2[j]) begin
        if (v == 0) begin
          mx = to_fx(1.0 / gain(M2, N2), FW2); my = mx; mz = to_fx(pts2[j], FW2);
        end else begin
          mx = to_fx($exp(pts2[j]) + 1.0, FW2); my = to_fx($exp(pts2[j]) - 1.0, FW2); mz = 0;
        end
        @(negedge clk);
        start2 = 1; mode2 = v ? VECTORING : ROTATION;
        xin2 = B2'(mx); yin2 = B2'(my); zin2 = B2'(mz);
        t0 = cyc;
        @(negedge clk);
        start2 = 0;
        while (!done2) @(negedge clk);
        check(cyc - t0 == int'(exec_cycles(M2, N2)), $sformatf("config 2 latency %0d", cyc - t0));
        engine(v, M2, N2, B2, FW2, mx, my, mz);
        check(xout2 == B2'(mx) && yout2 == B2'(my) && zout2 == B2'(mz),
              $sformatf("config 2 bit-exact v=%0d a=%g", v, pts2[j]));
        if (v == 0)
          check(close(real'($signed(xout2)) / 2.0 ** FW2, $exp(pts2[j]), 1e-3, 1e-3),
                $sformatf("config 2 exp(%g)", pts2[j]));
        else
          check(close(2.0 * real'($signed(zout2)) / 2.0 ** FW2, pts2[j], 0.0, 1e-2),
                $sformatf("config 2 ln(e^%g)", pts2[j]));
      end
    end
    fin2 = 1;
  end

  initial begin
    $display("1/An = %f", 1.0 / gain(M, N));
    rst = 1; start = 0; mode = ROTATION; xin = '0; yin = '0; zin = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    foreach (e_pts[j]) op(0, e_pts[j], 0);
    foreach (l_pts[j]) op(1, l_pts[j], 0);
    foreach (c_pts[j]) op(2, c_pts[j], 0);
    // back-to-back: a new start in the cycle done is high
    op(1, 7.0, 0);
    op(0, 1.5, 1);
    op(1, 0.25, 1);
    wait (fin2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
