// tb_pos_angle_lut: checks every entry of the positive-iteration angle ROM
// against atanh(2^-i) evaluated with the power series
// atanh(t) = sum t^(2n+1)/(2n+1), to within one LSB, and that address 0 and
// addresses above N read 0.
module tb_pos_angle_lut;
  localparam int unsigned B = 52, FW = 32, N = 32;
  localparam int unsigned AW = $clog2(N + 1);

  logic [AW-1:0] addr;
  logic [B-1:0]  theta;
  int checks = 0, failures = 0;

  pos_angle_lut #(.B(B), .FW(FW), .N(N)) dut (.addr, .theta);

  function automatic real atanh_series(real t);
    real s, p;
    s = 0.0;
    p = t;
    for (int n = 0; n < 200; n++) begin
      s += p / (2 * n + 1);
      p *= t * t;
    end
    return s;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2**AW; i++) begin
      longint expv, got;
      addr = AW'(i);
      #1;
      got  = longint'(theta);
      expv = (i >= 1 && i <= N) ? longint'(atanh_series(2.0 ** (-i)) * 2.0 ** FW) : 0;
      checks++;
      if (got - expv > 1 || expv - got > 1) begin
        failures++;
        $display("FAIL i=%0d got=%0d exp=%0d", i, got, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
