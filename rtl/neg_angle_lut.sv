// neg_angle_lut: angle ROM of the negative-iteration stage.
//
// Holds the M+1 angles theta_i = atanh(1 - 2^(i-2)) of the iterations
// i = -M .. 0. It is addressed by k = -i, the value held in the stage's
// Neg_iReg counter (k = M down to 0), so entry k is
// atanh(1 - 2^-(k+2)) = ln(2^(k+3) - 1) / 2, rounded to the [B FW] format.
// Unused addresses read as 0. The table is computed at elaboration from that closed form; the read is
// purely combinational (the address register is Neg_iReg itself).
// Entries follow the paper's equation (1); the closed form used to compute
// them and the address order are this design's choice.
module neg_angle_lut
  import cordic_pkg::*;
#(
  parameter int unsigned B  = 52,
  parameter int unsigned FW = 32,
  parameter int unsigned M  = 5,
  localparam int unsigned AW = (M > 0) ? $clog2(M + 1) : 1
) (
  input  logic [AW-1:0] addr,   // k = -i, 0..M
  output logic [B-1:0]  theta   // atanh(1-2^-(k+2)) in [B FW]
);

  typedef logic [B-1:0] word_t;

  function automatic word_t entry(int unsigned k);
    return word_t'(neg_theta(k, FW));
  endfunction

  word_t rom [2**AW];
  for (genvar k = 0; k <= M; k++) begin : g_rom
    assign rom[k] = entry(k);
  end
  for (genvar k = M + 1; k < 2**AW; k++) begin : g_unused
    assign rom[k] = '0;
  end

  assign theta = rom[addr];

endmodule
