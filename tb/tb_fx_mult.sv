// tb_fx_mult: checks the [B FW] fixed-point multiplier on hand-worked
// products (including negative operands and truncation towards minus
// infinity) and on random operands, against the real-number product
// floor(a*b*2^FW) computed in 128-bit arithmetic.
module tb_fx_mult;
  localparam int unsigned B = 52, FW = 32;

  logic [B-1:0] a, b, p;
  int checks = 0, failures = 0;

  fx_mult #(.B(B), .FW(FW)) dut (.a, .b, .p);

  function automatic logic [B-1:0] fx(real r);
    return B'(longint'(r * 2.0 ** FW));
  endfunction

  task automatic expect_eq(logic [B-1:0] expv, string what);
    #1;
    checks++;
    if (p !== expv) begin
      failures++;
      $display("FAIL %s: a=%h b=%h p=%h exp=%h", what, a, b, p, expv);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = fx(1.5);   b = fx(2.0);    expect_eq(fx(3.0), "1.5*2");
    a = fx(-0.5);  b = fx(3.0);    expect_eq(fx(-1.5), "-0.5*3");
    a = fx(-2.25); b = fx(-4.0);   expect_eq(fx(9.0), "-2.25*-4");
    a = fx(100.0); b = fx(0.125);  expect_eq(fx(12.5), "100*0.125");
    // 2^-FW * 0.5 truncates to 0, -2^-FW * 0.5 truncates to -2^-FW
    a = B'(1);     b = fx(0.5);    expect_eq('0, "lsb*0.5");
    a = '1;        b = fx(0.5);    expect_eq('1, "-lsb*0.5");
    for (int n = 0; n < 2000; n++) begin
      logic signed [127:0] pa, pb, pr;
      a  = B'({$urandom, $urandom}) >>> 12;   // keep products in range
      b  = B'({$urandom, $urandom}) >>> 12;
      if ($urandom % 2) a = -a;
      pa = 128'($signed(a));
      pb = 128'($signed(b));
      pr = (pa * pb) >>> FW;
      expect_eq(pr[B-1:0], "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
