// cordic_engine: parameterized expanded hyperbolic CORDIC engine.
//
// Computes, in one pass of M+1+N+v(N)+2 clock cycles,
//   rotation : xout = An*(xin*cosh zin + yin*sinh zin),
//              yout = An*(xin*sinh zin + yin*cosh zin), zout ~ 0
//   vectoring: xout = An*sqrt(xin^2 - yin^2), yout ~ 0,
//              zout = zin + atanh(yin/xin)
// where An is the CORDIC gain of the M+1 negative iterations (i = -M..0) and
// the N positive ones. So e^a = xout for xin = yin = 1/An, zin = a in
// rotation mode, and ln(a)/2 = zout for xin = a+1, yin = a-1, zin = 0 in
// vectoring mode.
//
// It is the paper's two-stage structure: a negative-iteration stage followed
// by a positive-iteration stage, each with its own registers, adders,
// shifters, angle ROM and counter, sequenced by one state machine.
// Interface: start (one cycle, accepted when not busy) samples xin, yin, zin
// and mode; done pulses for one cycle when xout/yout/zout hold the result,
// which stays until the next pass ends. All values are signed [B FW]
// fixed point and wrap on overflow.
module cordic_engine
  import cordic_pkg::*;
#(
  parameter int unsigned B  = 52,
  parameter int unsigned FW = 32,
  parameter int unsigned M  = 5,
  parameter int unsigned N  = 32
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         start,
  input  cordic_mode_t mode,
  input  logic [B-1:0] xin,
  input  logic [B-1:0] yin,
  input  logic [B-1:0] zin,
  output logic [B-1:0] xout,
  output logic [B-1:0] yout,
  output logic [B-1:0] zout,
  output logic         busy,
  output logic         done
);

  cordic_mode_t mode_q;
  logic         gt0, ltN, rep;
  logic         n_xyz_sel, n_xyz_ld, n_iter_sel, n_iter_ld, n_out_ld;
  logic         p_xyz_sel, p_xyz_ld, p_iter_sel, p_iter_ld, p_out_ld;
  logic [B-1:0] nx, ny, nz;

  cordic_ctrl u_ctrl (
    .clk, .rst, .start,
    .mode_in (mode),
    .mode    (mode_q),
    .busy, .done,
    .gt0, .n_xyz_sel, .n_xyz_ld, .n_iter_sel, .n_iter_ld, .n_out_ld,
    .ltN, .rep, .p_xyz_sel, .p_xyz_ld, .p_iter_sel, .p_iter_ld, .p_out_ld
  );

  cordic_neg_stage #(.B(B), .FW(FW), .M(M)) u_neg (
    .clk, .rst,
    .mode     (mode_q),
    .xin, .yin, .zin,
    .xyz_sel  (n_xyz_sel),
    .xyz_ld   (n_xyz_ld),
    .iter_sel (n_iter_sel),
    .iter_ld  (n_iter_ld),
    .out_ld   (n_out_ld),
    .gt0,
    .x_out    (nx),
    .y_out    (ny),
    .z_out    (nz)
  );

  cordic_pos_stage #(.B(B), .FW(FW), .N(N)) u_pos (
    .clk, .rst,
    .mode     (mode_q),
    .xin      (nx),
    .yin      (ny),
    .zin      (nz),
    .xyz_sel  (p_xyz_sel),
    .xyz_ld   (p_xyz_ld),
    .iter_sel (p_iter_sel),
    .iter_ld  (p_iter_ld),
    .out_ld   (p_out_ld),
    .ltN, .rep,
    .x_out    (xout),
    .y_out    (yout),
    .z_out    (zout)
  );

endmodule
