// cordic_pow: fixed-point powering unit, x^y = e^(y ln x), built around one
// expanded hyperbolic CORDIC engine that is used twice.
//
// Datapath (the paper's powering block diagram):
//   x + 1, x - 1   two adders with a constant input
//   input muxes    cordicSel = 0: (x+1, x-1, 0), cordicSel = 1: (1/An, 1/An, y ln x)
//   engine         pass 1 vectoring -> zn = ln(x)/2; pass 2 rotation -> xn = x^y
//   << 1           turns zn = ln(x)/2 into ln x
//   FX multiplier  y * ln x, fed back to the z input of the engine
//   OutReg         loaded with xn by OutLd at the end of pass 2
// All values are signed [B FW] fixed point (IW = B-FW integer bits). The
// scaling constant 1/An depends on M and N and is an input (inv_an), as in
// the paper. x must be > 0 and |y ln x| within the convergence bound of the
// engine (12.43 for M = 5).
//
// Timing: start is sampled when idle; x, y and inv_an must stay stable until
// done. done pulses 2*(M+1) + 2N + 2v(N) + 5 cycles after the start cycle
// (v(N) = repeated iterations), and xy then holds the result until the next
// operation ends. Holding the operands at the ports instead of registering
// them follows the block diagram, which draws no input registers.
// The engine's yn and busy outputs are left unused on purpose: the block
// diagram uses only xn and zn, and pow_ctrl tracks the passes itself.
module cordic_pow
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
  input  logic [B-1:0] x,
  input  logic [B-1:0] y,
  input  logic [B-1:0] inv_an,
  output logic [B-1:0] xy,
  output logic         busy,
  output logic         done
);

  localparam logic [B-1:0] ONE = B'(1) << FW;

  logic         cordic_start, cordic_sel, cordic_done, out_ld;
  cordic_mode_t mode;
  logic [B-1:0] x_p1, x_m1;
  logic [B-1:0] xin, yin, zin;
  logic [B-1:0] xn, yn, zn;
  logic [B-1:0] ln_x, yln_x;

  pow_ctrl u_ctrl (
    .clk, .rst, .start,
    .cordic_done,
    .cordic_start,
    .cordic_sel,
    .mode,
    .out_ld,
    .busy,
    .done
  );

  assign x_p1 = x + ONE;
  assign x_m1 = x - ONE;

  assign xin = cordic_sel ? inv_an : x_p1;
  assign yin = cordic_sel ? inv_an : x_m1;
  assign zin = cordic_sel ? yln_x  : '0;

  cordic_engine #(.B(B), .FW(FW), .M(M), .N(N)) u_engine (
    .clk, .rst,
    .start (cordic_start),
    .mode,
    .xin, .yin, .zin,
    .xout  (xn),
    .yout  (yn),
    .zout  (zn),
    .busy  (),
    .done  (cordic_done)
  );

  assign ln_x = zn << 1;

  fx_mult #(.B(B), .FW(FW)) u_mult (
    .a (y),
    .b (ln_x),
    .p (yln_x)
  );

  always_ff @(posedge clk) begin
    if (rst)         xy <= '0;
    else if (out_ld) xy <= xn;
  end

endmodule
