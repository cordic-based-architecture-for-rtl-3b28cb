// pos_angle_lut: angle ROM of the positive-iteration stage.
//
// Holds the N angles theta_i = atanh(2^-i), i = 1 .. N, rounded to the
// [B FW] format and computed at elaboration. It is addressed directly by i,
// the value of the stage's iReg counter; address 0 and addresses above N
// read as 0. Combinational read. The entries are the paper's equation (2);
// the addressing by i is this design's choice.
module pos_angle_lut
  import cordic_pkg::*;
#(
  parameter int unsigned B  = 52,
  parameter int unsigned FW = 32,
  parameter int unsigned N  = 32,
  localparam int unsigned AW = (N > 0) ? $clog2(N + 1) : 1
) (
  input  logic [AW-1:0] addr,   // i, 1..N
  output logic [B-1:0]  theta   // atanh(2^-i) in [B FW]
);

  typedef logic [B-1:0] word_t;

  function automatic word_t entry(int unsigned i);
    return word_t'(pos_theta(i, FW));
  endfunction

  word_t rom [2**AW];
  assign rom[0] = '0;
  for (genvar i = 1; i <= N; i++) begin : g_rom
    assign rom[i] = entry(i);
  end
  for (genvar i = N + 1; i < 2**AW; i++) begin : g_unused
    assign rom[i] = '0;
  end

  assign theta = rom[addr];

endmodule
