// tb_engine_workload: the e^x and ln x accuracy experiments on the CORDIC
// engine (M = 5, N = 40), each over 1000 equally spaced points of the
// function's convergence domain for M = 5:
//   e^x on [-T, T], T = 12.42644, for formats [24 8], [28 8], [52 32]
//   ln x on (0, 6.21539e10] for formats [52 32], [68 32], [72 32], [76 32]
// PSNR against real math is printed for every format (maxval: largest value
// of the shortest format holding the largest reference output). The checks
// are the qualitative outcomes of the experiments: 16 integer bits ([24 8])
// are too few for e^x while 20 are enough; ln x over its whole domain needs
// 37 integer bits, so [72 32] and [76 32] are far more accurate than [52 32]
// and [68 32]. Every pass must take M+1+N+v(N)+2 cycles.
module tb_engine_workload;
  import cordic_pkg::*;
  import cordic_ref_pkg::*;

  localparam int NE = 3, NL = 4;
  localparam int unsigned EB [NE] = '{24, 28, 52};
  localparam int unsigned EF [NE] = '{ 8,  8, 32};
  localparam int unsigned LB [NL] = '{52, 68, 72, 76};
  localparam int unsigned M = 5, N = 40, NPTS = 1000;
  localparam real LN_MAX = 6.21539e10;

  logic clk = 0, rst = 1;
  int checks = 0, failures = 0;
  real e_psnr [NE], l_psnr [NL];
  bit  e_fin [NE], l_fin [NL];
  int  n_lat = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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

  // real -> signed fixed point of up to 128 bits, rounded to nearest
  function automatic logic signed [127:0] fx128(real r, int unsigned fw);
    real a, hi;
    logic signed [127:0] v;
    a  = ((r < 0) ? -r : r) * (2.0 ** fw) + 0.5;
    hi = $floor(a / (2.0 ** 40));
    v  = (128'(longint'(hi)) <<< 40) + 128'(longint'($floor(a - hi * (2.0 ** 40))));
    return (r < 0) ? -v : v;
  endfunction

  function automatic real psnr(real se, int cnt, real mx_ref);
    real maxval;
    maxval = 2.0 ** $ceil($ln(mx_ref) / $ln(2.0));
    return 10.0 * $log10(maxval * maxval / (se / cnt));
  endfunction

  for (genvar p = 0; p < NE; p++) begin : g_exp
    localparam int unsigned B = EB[p], FW = EF[p];
    logic start, busy, done;
    cordic_mode_t mode;
    logic [B-1:0] xin, yin, zin, xout, yout, zout;
    int cyc = 0;
    cordic_engine #(.B(B), .FW(FW), .M(M), .N(N)) dut (.*);
    always @(posedge clk) cyc <= cyc + 1;
    initial begin
      real t, a, se, mx_ref, got, ref_v;
      int t0;
      start = 0; mode = ROTATION; xin = '0; yin = '0; zin = '0;
      se = 0.0; mx_ref = 0.0;
      t = theta_max(M);
      @(negedge rst);
      for (int j = 0; j < NPTS; j++) begin
        a = -t + 2.0 * t * j / (NPTS - 1);
        @(negedge clk);
        xin = B'(fx128(1.0 / gain(M, N), FW));
        yin = xin;
        zin = B'(fx128(a, FW));
        mode = ROTATION;
        start = 1;
        t0 = cyc;
        @(negedge clk);
        start = 0;
        while (!done) @(negedge clk);
        if (cyc - t0 != int'(exec_cycles(M, N))) n_lat++;
        got   = real'($signed(xout)) / (2.0 ** FW);
        ref_v = $exp(a);
        se += (got - ref_v) * (got - ref_v);
        if (ref_v > mx_ref) mx_ref = ref_v;
      end
      e_psnr[p] = psnr(se, NPTS, mx_ref);
      $display("e^x  [%0d %0d] N=%0d: PSNR %.1f dB", B, FW, N, e_psnr[p]);
      e_fin[p] = 1;
    end
  end

  for (genvar p = 0; p < NL; p++) begin : g_ln
    localparam int unsigned B = LB[p], FW = 32;
    logic start, busy, done;
    cordic_mode_t mode;
    logic [B-1:0] xin, yin, zin, xout, yout, zout;
    int cyc = 0;
    cordic_engine #(.B(B), .FW(FW), .M(M), .N(N)) dut (.*);
    always @(posedge clk) cyc <= cyc + 1;
    initial begin
      real a, se, mx_ref, got, ref_v;
      int t0;
      start = 0; mode = VECTORING; xin = '0; yin = '0; zin = '0;
      se = 0.0; mx_ref = 0.0;
      @(negedge rst);
      for (int j = 1; j <= NPTS; j++) begin
        a = LN_MAX * j / NPTS;
        @(negedge clk);
        xin = B'(fx128(a + 1.0, FW));
        yin = B'(fx128(a - 1.0, FW));
        zin = '0;
        mode = VECTORING;
        start = 1;
        t0 = cyc;
        @(negedge clk);
        start = 0;
        while (!done) @(negedge clk);
        if (cyc - t0 != int'(exec_cycles(M, N))) n_lat++;
        got   = 2.0 * real'($signed(zout)) / (2.0 ** FW);
        ref_v = $ln(a);
        se += (got - ref_v) * (got - ref_v);
        if (ref_v > mx_ref) mx_ref = ref_v;
      end
      l_psnr[p] = psnr(se, NPTS, mx_ref);
      $display("ln x [%0d %0d] N=%0d: PSNR %.1f dB", B, FW, N, l_psnr[p]);
      l_fin[p] = 1;
    end
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    foreach (e_fin[p]) e_fin[p] = 0;
    foreach (l_fin[p]) l_fin[p] = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    wait (e_fin.and() == 1 && l_fin.and() == 1);
    check(n_lat == 0, $sformatf("%0d passes with wrong latency", n_lat));
    check(e_psnr[1] > e_psnr[0] + 20.0, "e^x: [28 8] far better than [24 8]");
    check(e_psnr[2] > e_psnr[1], "e^x: [52 32] better than [28 8]");
    check(e_psnr[2] > 100.0, "e^x: [52 32] above 100 dB");
    check(l_psnr[2] > l_psnr[1] + 20.0, "ln x: [72 32] far better than [68 32]");
    check(l_psnr[3] > l_psnr[0] + 20.0, "ln x: [76 32] far better than [52 32]");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
