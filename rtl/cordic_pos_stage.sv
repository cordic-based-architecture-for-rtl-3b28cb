// cordic_pos_stage: the positive-iteration stage of the expanded hyperbolic
// CORDIC engine (iterations i = 1 .. N).
//
// One iteration per clock cycle:
//   x <- x + d*(y >>> i)
//   y <- y + d*(x >>> i)
//   z <- z - d*theta_i,   theta_i = atanh(2^-i)
// with d = -1 when z < 0 (rotation) or when x*y >= 0 (vectoring), +1
// otherwise: three adders, two barrel shifters and the angle ROM. The
// counter iReg holds i (posShft = i); it is loaded with 1 and counts up.
// Comparators report ltN = (i < N) and rep = 1 when i is one of the
// iterations that must run twice (4, 13, 40, ...); the controller then keeps
// iReg unchanged for one cycle.
//
// Control (from cordic_ctrl, sampled at the rising edge):
//   xyz_sel  1: X/Y/Z_Reg take xin/yin/zin (the negative stage's outputs),
//            0: they take the iteration result
//   xyz_ld   load enable of X/Y/Z_Reg
//   iter_sel 1: iReg takes 1, 0: it takes iReg + 1
//   iter_ld  load enable of iReg
//   out_ld   xOut/yOut/zOut_Reg take the iteration result (last iteration)
// The structure follows the paper's engine figure. The paper draws separate
// comparators for 4, 13 and 40; here one comparator is generated for every
// repeated index up to N, which is the same set for N <= 120. Arithmetic
// wraps modulo 2^B and synchronous reset clears all registers (this
// design's choices).
module cordic_pos_stage
  import cordic_pkg::*;
#(
  parameter int unsigned B  = 52,
  parameter int unsigned FW = 32,
  parameter int unsigned N  = 32,
  localparam int unsigned AW = (N > 0) ? $clog2(N + 1) : 1
) (
  input  logic         clk,
  input  logic         rst,
  input  cordic_mode_t mode,
  input  logic [B-1:0] xin,
  input  logic [B-1:0] yin,
  input  logic [B-1:0] zin,
  input  logic         xyz_sel,
  input  logic         xyz_ld,
  input  logic         iter_sel,
  input  logic         iter_ld,
  input  logic         out_ld,
  output logic         ltN,
  output logic         rep,
  output logic [B-1:0] x_out,
  output logic [B-1:0] y_out,
  output logic [B-1:0] z_out
);

  logic signed [B-1:0] x_q, y_q, z_q;          // X_Reg, Y_Reg, Z_Reg
  logic signed [B-1:0] x_nx, y_nx, z_nx;
  logic signed [B-1:0] x_sh, y_sh;             // 2^-posShft barrel shifters
  logic signed [B-1:0] theta;
  logic [AW-1:0]       i_q;                    // iReg
  logic                d_neg;

  pos_angle_lut #(.B(B), .FW(FW), .N(N)) u_lut (
    .addr  (i_q),
    .theta (theta)
  );

  assign ltN = (i_q < AW'(N));

  // One equality comparator per repeated index k <= N (k = 4, 13, 40, ...).
  logic [N:0] eq;
  for (genvar k = 0; k <= N; k++) begin : g_cmp
    if (is_repeat(k)) begin : g_rep
      assign eq[k] = (i_q == AW'(k));
    end else begin : g_norep
      assign eq[k] = 1'b0;
    end
  end
  assign rep = |eq;

  always_comb begin
    if (mode == ROTATION) d_neg = z_q[B-1];
    else                  d_neg = (x_q == '0) || (y_q == '0) || (x_q[B-1] == y_q[B-1]);
  end

  assign x_sh = y_q >>> i_q;
  assign y_sh = x_q >>> i_q;

  always_comb begin
    if (d_neg) begin
      x_nx = x_q - x_sh;
      y_nx = y_q - y_sh;
      z_nx = z_q + theta;
    end else begin
      x_nx = x_q + x_sh;
      y_nx = y_q + y_sh;
      z_nx = z_q - theta;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      x_q <= '0;
      y_q <= '0;
      z_q <= '0;
    end else if (xyz_ld) begin
      x_q <= xyz_sel ? xin : x_nx;
      y_q <= xyz_sel ? yin : y_nx;
      z_q <= xyz_sel ? zin : z_nx;
    end
  end

  always_ff @(posedge clk) begin
    if (rst)          i_q <= '0;
    else if (iter_ld) i_q <= iter_sel ? AW'(1) : i_q + AW'(1);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      x_out <= '0;
      y_out <= '0;
      z_out <= '0;
    end else if (out_ld) begin
      x_out <= x_nx;
      y_out <= y_nx;
      z_out <= z_nx;
    end
  end

endmodule
