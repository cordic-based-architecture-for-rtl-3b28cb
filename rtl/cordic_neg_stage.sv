// cordic_neg_stage: the negative-iteration stage of the expanded hyperbolic
// CORDIC engine (iterations i = -M .. 0).
//
// One iteration per clock cycle:
//   x <- x + d*y*(1 - 2^(i-2)) = (x + d*y) - d*(y >>> (2-i))
//   y <- y + d*x*(1 - 2^(i-2)) = (y + d*x) - d*(x >>> (2-i))
//   z <- z - d*theta_i,          theta_i = atanh(1 - 2^(i-2))
// with d = -1 when z < 0 (rotation) or when x*y >= 0 (vectoring), +1
// otherwise. Each of x and y uses two adders and one barrel shifter, z one
// adder and the angle ROM: five adders, as in the paper. The counter
// Neg_iReg holds k = -i; it is loaded with M and counts down, the shift
// amount is negShft = k + 2 and gt0 = (k > 0) tells the controller that more
// iterations follow.
//
// Control (all from cordic_ctrl, sampled at the rising edge):
//   xyz_sel  1: Neg_x/y/zReg take xin/yin/zin, 0: they take the iteration result
//   xyz_ld   load enable of Neg_x/y/zReg
//   iter_sel 1: Neg_iReg takes M, 0: it takes Neg_iReg - 1
//   iter_ld  load enable of Neg_iReg
//   out_ld   Neg_x/y/zOutReg take the iteration result (last iteration, i = 0)
// The datapath structure follows the paper's engine figure. Arithmetic wraps
// modulo 2^B (no saturation), shifts are arithmetic and truncate, and
// synchronous active-high reset clears every register: these are this
// design's choices.
module cordic_neg_stage
  import cordic_pkg::*;
#(
  parameter int unsigned B  = 52,
  parameter int unsigned FW = 32,
  parameter int unsigned M  = 5,
  localparam int unsigned AW = (M > 0) ? $clog2(M + 1) : 1
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
  output logic         gt0,
  output logic [B-1:0] x_out,
  output logic [B-1:0] y_out,
  output logic [B-1:0] z_out
);

  logic signed [B-1:0] x_q, y_q, z_q;          // Neg_xReg, Neg_yReg, Neg_zReg
  logic signed [B-1:0] x_nx, y_nx, z_nx;       // iteration results
  logic signed [B-1:0] x_sh, y_sh;             // 2^-negShft barrel shifters
  logic signed [B-1:0] x_s1, y_s1;             // first-level adders
  logic signed [B-1:0] theta;
  logic [AW-1:0]       k_q;                    // Neg_iReg (k = -i)
  logic [AW:0]         neg_shft;               // k + 2
  logic                d_neg;                  // 1: delta = -1

  neg_angle_lut #(.B(B), .FW(FW), .M(M)) u_lut (
    .addr  (k_q),
    .theta (theta)
  );

  assign neg_shft = {1'b0, k_q} + (AW+1)'(2);
  assign gt0      = (k_q != '0);

  always_comb begin
    if (mode == ROTATION) d_neg = z_q[B-1];
    else                  d_neg = (x_q == '0) || (y_q == '0) || (x_q[B-1] == y_q[B-1]);
  end

  assign x_sh = y_q >>> neg_shft;
  assign y_sh = x_q >>> neg_shft;

  always_comb begin
    if (d_neg) begin
      x_s1 = x_q - y_q;
      y_s1 = y_q - x_q;
      x_nx = x_s1 + x_sh;
      y_nx = y_s1 + y_sh;
      z_nx = z_q + theta;
    end else begin
      x_s1 = x_q + y_q;
      y_s1 = y_q + x_q;
      x_nx = x_s1 - x_sh;
      y_nx = y_s1 - y_sh;
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
    if (rst)          k_q <= '0;
    else if (iter_ld) k_q <= iter_sel ? AW'(M) : k_q - AW'(1);
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
