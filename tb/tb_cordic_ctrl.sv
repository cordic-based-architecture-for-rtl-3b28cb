// tb_cordic_ctrl: runs the engine state machine against counter models of
// the two stages (Neg_iReg counting M..0, iReg counting 1..N) for several
// (M, N) pairs, including N equal to a repeated index. For each pass it
// checks: the number of negative and positive iterations (M+1 and N+v(N)),
// that each repeated index is executed exactly twice, that the output
// registers are loaded once, that done comes exactly M+1+N+v(N)+2 cycles
// after start (equation (7)), that the mode is latched at start and that a
// start in the done cycle is accepted. It also runs M = 5 with every N of
// the published execution-time table and compares the measured pass time,
// at 8 ns per cycle (125 MHz), with the tabulated e^x / ln x times; twice
// that plus one cycle must equal the tabulated x^y times.
module tb_cordic_ctrl;
  import cordic_pkg::*;
  import cordic_ref_pkg::*;

  logic clk = 0, rst, start;
  cordic_mode_t mode_in, mode;
  logic busy, done, gt0, ltN, rep;
  logic n_xyz_sel, n_xyz_ld, n_iter_sel, n_iter_ld, n_out_ld;
  logic p_xyz_sel, p_xyz_ld, p_iter_sel, p_iter_ld, p_out_ld;
  int checks = 0, failures = 0;
  int unsigned cur_m, cur_n;
  int k_q, i_q;

  cordic_ctrl dut (.*);

  always #5 clk = ~clk;

  // Stage counter models
  always_ff @(posedge clk) begin
    if (n_iter_ld) k_q <= n_iter_sel ? int'(cur_m) : k_q - 1;
    if (p_iter_ld) i_q <= p_iter_sel ? 1 : i_q + 1;
  end
  assign gt0 = k_q > 0;
  assign ltN = i_q < int'(cur_n);
  assign rep = repeated(i_q);

  // Activity counters
  int n_it, p_it, n_out, p_out, cyc;
  int per_i [64];
  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if ((n_xyz_ld && !n_xyz_sel) || n_out_ld) n_it <= n_it + 1;
    if ((p_xyz_ld && !p_xyz_sel) || p_out_ld) begin
      p_it <= p_it + 1;
      per_i[i_q] <= per_i[i_q] + 1;
    end
    if (n_out_ld) n_out <= n_out + 1;
    if (p_out_ld) p_out <= p_out + 1;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    foreach (tab_n[j]) begin
      int t0, t;
      cur_m = 5; cur_n = tab_n[j];
      @(negedge clk);
      start = 1; mode_in = ROTATION;
      t0 = cyc;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      t = cyc - t0;
      check(8 * t == tab_exp_ns[j], $sformatf("N=%0d: %0d ns, table %0d ns", cur_n, 8 * t, tab_exp_ns[j]));
      check(8 * (2 * t + 1) == tab_pow_ns[j], $sformatf("N=%0d: x^y %0d ns, table %0d ns", cur_n, 8 * (2 * t + 1), tab_pow_ns[j]));
    end
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

  // Starts a pass (start is already high for chained passes) and waits
  // for done; returns the cycle count.
  task automatic pass(cordic_mode_t md, bit chained);
    int t0, t;
    if (!chained) @(negedge clk);
    start = 1; mode_in = md;
    n_it = 0; p_it = 0; n_out = 0; p_out = 0;
    foreach (per_i[j]) per_i[j] = 0;
    t0 = cyc;
    @(negedge clk);
    start = 0;
    mode_in = (md == ROTATION) ? VECTORING : ROTATION;   // must be ignored
    @(negedge clk);
    check(busy, "busy during pass");
    check(mode == md, "mode latched");
    while (!done) @(negedge clk);
    t = cyc - t0;
    check(t == int'(exec_cycles(cur_m, cur_n)),
          $sformatf("M=%0d N=%0d cycles %0d exp %0d", cur_m, cur_n, t, exec_cycles(cur_m, cur_n)));
    check(n_it == int'(cur_m) + 1, $sformatf("neg iterations %0d", n_it));
    check(p_it == int'(cur_n + num_repeats(cur_n)), $sformatf("pos iterations %0d", p_it));
    check(n_out == 1 && p_out == 1, "one output load per stage");
    for (int unsigned i = 1; i <= cur_n; i++)
      check(per_i[i] == (repeated(i) ? 2 : 1), $sformatf("iteration %0d ran %0d times", i, per_i[i]));
    check(!busy, "idle in done cycle");
  endtask

  int unsigned ms [] = '{5, 5, 5, 0, 2, 10};
  int unsigned ns [] = '{32, 40, 13, 4, 8, 12};

  // Execution-time table, M = 5, 125 MHz
  int unsigned tab_n      [] = '{  8,  12,  16,  20,  24,  32,  36,  40};
  int          tab_exp_ns [] = '{136, 168, 208, 240, 272, 336, 368, 408};
  int          tab_pow_ns [] = '{280, 344, 424, 488, 552, 680, 744, 824};

  initial begin
    rst = 1; start = 0; mode_in = ROTATION; cyc = 0; k_q = 0; i_q = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    foreach (ms[j]) begin
      cur_m = ms[j]; cur_n = ns[j];
      pass(ROTATION, 0);
      // chained: new start in the done cycle
      pass(VECTORING, 1);
      @(negedge clk);
      check(!busy && !done, "idle after chained pass");
    end
    foreach (tab_n[j]) begin
      int t0, t;
      cur_m = 5; cur_n = tab_n[j];
      @(negedge clk);
      start = 1; mode_in = ROTATION;
      t0 = cyc;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      t = cyc - t0;
      check(8 * t == tab_exp_ns[j], $sformatf("N=%0d: %0d ns, table %0d ns", cur_n, 8 * t, tab_exp_ns[j]));
      check(8 * (2 * t + 1) == tab_pow_ns[j], $sformatf("N=%0d: x^y %0d ns, table %0d ns", cur_n, 8 * (2 * t + 1), tab_pow_ns[j]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
