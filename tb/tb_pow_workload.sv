// tb_pow_workload: the x^y accuracy experiment, run on the seven Pareto-front
// profiles of the design-space exploration ([24 8] N=8, [28 8] N=8,
// [32 12] N=8, [36 16] N=12, [44 24] N=20, [48 28] N=24, [52 32] N=32; all
// M = 5).
//
// Test set: 150 x values spaced linearly over [e^-T, e^T] and, for each, 10
// y values spaced linearly over [-T/|ln x|, T/|ln x|], where T = 12.42644 is
// the convergence bound for M = 5 (the sum of all rotation angles). Every
// result is checked bit for bit against the integer model of the unit; the
// PSNR against real pow() of the unquantised operands is printed per profile, with maxval the largest
// value of the shortest format holding the largest reference output. The
// test also checks that the widest profile is the most accurate one and that
// every operation takes 2(M+1) + 2N + 2v(N) + 5 cycles.
module tb_pow_workload;
  import cordic_pkg::*;
  import cordic_ref_pkg::*;

  localparam int NP = 7;
  localparam int unsigned PB  [NP] = '{24, 28, 32, 36, 44, 48, 52};
  localparam int unsigned PFW [NP] = '{ 8,  8, 12, 16, 24, 28, 32};
  localparam int unsigned PN  [NP] = '{ 8,  8,  8, 12, 20, 24, 32};
  localparam int unsigned M = 5;
  localparam int NX = 150, NY = 10;

  logic clk = 0, rst = 1;
  int checks = 0, failures = 0;
  real psnr [NP];
  bit  fin  [NP];

  always #5 clk = ~clk;

  function automatic real theta_max(int unsigned m);
    real s;
    s = 0.0;
    for (int unsigned k = 0; k <= m; k++) s += atanh(1.0 - 2.0 ** (-1.0 * (k + 2)));
    for (int unsigned i = 1; i <= 200; i++) begin
      s += atanh(2.0 ** (-1.0 * i));
      if (repeated(i)) s += atanh(2.0 ** (-1.0 * i));
    end
    return s;
  endfunction

  initial begin
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar p = 0; p < NP; p++) begin : g_prof
    localparam int unsigned B = PB[p], FW = PFW[p], N = PN[p];
    logic start, busy, done;
    logic [B-1:0] x, y, inv_an, xy;
    int cyc = 0;
    int n_bad = 0, n_lat = 0;

    cordic_pow #(.B(B), .FW(FW), .M(M), .N(N)) dut (.*);

    always @(posedge clk) cyc <= cyc + 1;

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

    initial begin
      real t, xr, yr, ylim, se, mx_ref, got, ref_v, maxval;
      longint mx, my, ia, expv;
      int t0, cnt;
      start = 0; x = '0; y = '0; inv_an = '0;
      se = 0.0; mx_ref = 0.0; cnt = 0;
      t = theta_max(M);
      ia = to_fx(1.0 / gain(M, N), FW);
      @(negedge rst);
      for (int ix = 0; ix < NX; ix++) begin
        xr = $exp(-t) + ($exp(t) - $exp(-t)) * ix / (NX - 1);
        ylim = t / (($ln(xr) < 0) ? -$ln(xr) : $ln(xr));
        for (int iy = 0; iy < NY; iy++) begin
          yr = -ylim + 2.0 * ylim * iy / (NY - 1);
          mx = to_fx(xr, FW);
          my = to_fx(yr, FW);
          @(negedge clk);
          x = B'(mx); y = B'(my); inv_an = B'(ia);
          start = 1;
          t0 = cyc;
          @(negedge clk);
          start = 0;
          while (!done) @(negedge clk);
          if (cyc - t0 != 2 * (M + 1) + 2 * N + 2 * int'(num_repeats(N))+ 5) n_lat++;
          expv = model_pow(mx, my, ia);
          if (xy != B'(expv)) n_bad++;
          got   = to_real(longint'($signed(xy)), FW);
          ref_v = $pow(xr, yr);
          se += (got - ref_v) * (got - ref_v);
          if (ref_v > mx_ref) mx_ref = ref_v;
          cnt++;
        end
      end
      maxval  = 2.0 ** $ceil($ln(mx_ref) / $ln(2.0));
      psnr[p] = 10.0 * $log10(maxval * maxval / (se / cnt));
      $display("profile [%0d %0d] N=%0d: %0d points, PSNR %.1f dB, bit-exact mismatches %0d, latency errors %0d",
               B, FW, N, cnt, psnr[p], n_bad, n_lat);
      fin[p] = 1;
    end
  end

  initial begin
    foreach (fin[p]) fin[p] = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    wait (fin.and() == 1);
    checks++; if (g_prof[0].n_bad != 0 || g_prof[0].n_lat != 0) failures++;
    checks++; if (g_prof[1].n_bad != 0 || g_prof[1].n_lat != 0) failures++;
    checks++; if (g_prof[2].n_bad != 0 || g_prof[2].n_lat != 0) failures++;
    checks++; if (g_prof[3].n_bad != 0 || g_prof[3].n_lat != 0) failures++;
    checks++; if (g_prof[4].n_bad != 0 || g_prof[4].n_lat != 0) failures++;
    checks++; if (g_prof[5].n_bad != 0 || g_prof[5].n_lat != 0) failures++;
    checks++; if (g_prof[6].n_bad != 0 || g_prof[6].n_lat != 0) failures++;
    for (int p = 0; p < NP - 1; p++) begin
      checks++;
      if (psnr[NP-1] < psnr[p]) begin
        failures++;
        $display("FAIL widest profile less accurate than profile %0d", p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
