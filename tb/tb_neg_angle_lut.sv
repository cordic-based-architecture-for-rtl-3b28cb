// tb_neg_angle_lut: checks every entry of the negative-iteration angle ROM
// against atanh(1 - 2^-(k+2)) evaluated with the power series
// atanh(t) = sum t^(2n+1)/(2n+1) (a different formula from the ROM's), to
// within one LSB of the [B FW] format, and that unused addresses read 0.
module tb_neg_angle_lut;
  localparam int unsigned B = 52, FW = 32, M = 5;
  localparam int unsigned AW = $clog2(M + 1);

  logic [AW-1:0] addr;
  logic [B-1:0]  theta;
  int checks = 0, failures = 0;

  neg_angle_lut #(.B(B), .FW(FW), .M(M)) dut (.addr, .theta);

  function automatic real atanh_series(real t);
    real s, p;
    s = 0.0;
    p = t;
    for (int n = 0; n < 20000; n++) begin
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
    for (int k = 0; k < 2**AW; k++) begin
      longint expv, got;
      addr = AW'(k);
      #1;
      got  = longint'(theta);
      expv = (k <= M) ? longint'(atanh_series(1.0 - 2.0 ** (-(k + 2))) * 2.0 ** FW) : 0;
      checks++;
      if (got - expv > 1 || expv - got > 1) begin
        failures++;
        $display("FAIL k=%0d got=%0d exp=%0d", k, got, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
