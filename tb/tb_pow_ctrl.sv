// tb_pow_ctrl: runs the powering sequencer against a model of the engine
// that raises cordic_done T cycles after each cordic_start, for several T.
// It checks that pass 1 is started with cordicSel = 0 in vectoring mode, that
// pass 2 is started with cordicSel = 1 in rotation mode in the very cycle
// pass 1 ends, that OutLd comes with the end of pass 2, that done follows
// 2T+1 cycles after start (equation (8)), and that a start while busy is
// ignored.
module tb_pow_ctrl;
  import cordic_pkg::*;

  logic clk = 0, rst, start, cordic_done, cordic_start, cordic_sel, out_ld, busy, done;
  cordic_mode_t mode;
  int checks = 0, failures = 0;
  int cyc = 0, t_eng = 10, cnt = -1;
  int n_start, n_outld;

  pow_ctrl dut (.*);

  always #5 clk = ~clk;

  // Engine model: done pulses t_eng cycles after a start.
  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (cordic_start)  cnt <= t_eng - 1;
    else if (cnt >= 0) cnt <= cnt - 1;
    if (cordic_start) n_start <= n_start + 1;
    if (out_ld) n_outld <= n_outld + 1;
  end
  assign cordic_done = (cnt == 0);

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

  task automatic op(int t);
    int t0;
    t_eng = t;
    n_start = 0; n_outld = 0;
    @(negedge clk);
    start = 1;
    t0 = cyc;
    #1;
    check(cordic_start && !cordic_sel && mode == VECTORING, "pass 1 start");
    @(negedge clk);
    start = 1;                                  // ignored while busy
    check(!cordic_start && busy, "no restart while busy");
    @(negedge clk);
    start = 0;
    while (!cordic_done) begin
      check(!out_ld && !cordic_start, "quiet during pass 1");
      @(negedge clk);
    end
    check(cyc - t0 == t, "pass 1 length");
    check(cordic_start && cordic_sel && mode == ROTATION && !out_ld, "pass 2 start in done cycle");
    @(negedge clk);
    while (!cordic_done) begin
      check(cordic_sel && !out_ld && !cordic_start, "quiet during pass 2");
      @(negedge clk);
    end
    check(out_ld && !cordic_start, "OutLd at end of pass 2");
    @(negedge clk);
    check(done && !busy, "done after OutLd");
    check(cyc - t0 == 2 * t + 1, $sformatf("total %0d exp %0d", cyc - t0, 2 * t + 1));
    check(n_start == 2 && n_outld == 1, "two passes, one output load");
    @(negedge clk);
    check(!done, "done is one cycle");
  endtask

  initial begin
    rst = 1; start = 0; n_start = 0; n_outld = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    op(42);
    op(3);
    op(51);
    op(17);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
