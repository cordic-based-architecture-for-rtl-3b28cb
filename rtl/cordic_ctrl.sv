// cordic_ctrl: state machine of the expanded hyperbolic CORDIC engine.
//
// It drives the register loads, the multiplexer selects and the iteration
// counters of both stages, and latches the operation mode for the whole
// pass. One pass takes exactly M+1+N+v(N)+2 clock cycles from the cycle in
// which start is high to the cycle in which done is high:
//   1 cycle      load xin/yin/zin into the negative stage, Neg_iReg <= M
//   M+1 cycles   negative iterations; the last one (i = 0) writes Neg_*OutReg
//   1 cycle      load the positive stage from Neg_*OutReg, iReg <= 1
//   N+v cycles   positive iterations, each repeated index (rep) run twice;
//                the last one writes x/y/zOut_Reg
// done is a one-cycle pulse; the controller is already idle in that cycle,
// so a new start is accepted in the same cycle (the powering unit relies on
// this to chain its two passes). A start while busy is ignored.
// The paper states what the state machine controls and the cycle count of
// equation (7); the states and this exact schedule are this design's choice.
module cordic_ctrl
  import cordic_pkg::*;
(
  input  logic         clk,
  input  logic         rst,
  input  logic         start,
  input  cordic_mode_t mode_in,
  output cordic_mode_t mode,
  output logic         busy,
  output logic         done,
  // negative stage
  input  logic         gt0,
  output logic         n_xyz_sel,
  output logic         n_xyz_ld,
  output logic         n_iter_sel,
  output logic         n_iter_ld,
  output logic         n_out_ld,
  // positive stage
  input  logic         ltN,
  input  logic         rep,
  output logic         p_xyz_sel,
  output logic         p_xyz_ld,
  output logic         p_iter_sel,
  output logic         p_iter_ld,
  output logic         p_out_ld
);

  typedef enum logic [1:0] {
    S_IDLE  = 2'd0,
    S_NEG   = 2'd1,
    S_PLOAD = 2'd2,
    S_POS   = 2'd3
  } state_t;

  state_t state_q, state_d;
  logic   rep_done_q, rep_done_d;   // the current repeated index ran once already
  logic   again;                    // the current positive iteration is run again

  assign busy  = (state_q != S_IDLE);
  assign again = rep && !rep_done_q;

  always_comb begin
    state_d    = state_q;
    rep_done_d = rep_done_q;
    n_xyz_sel  = 1'b0;
    n_xyz_ld   = 1'b0;
    n_iter_sel = 1'b0;
    n_iter_ld  = 1'b0;
    n_out_ld   = 1'b0;
    p_xyz_sel  = 1'b0;
    p_xyz_ld   = 1'b0;
    p_iter_sel = 1'b0;
    p_iter_ld  = 1'b0;
    p_out_ld   = 1'b0;
    unique case (state_q)
      S_IDLE: begin
        if (start) begin
          n_xyz_sel  = 1'b1;
          n_xyz_ld   = 1'b1;
          n_iter_sel = 1'b1;
          n_iter_ld  = 1'b1;
          state_d    = S_NEG;
        end
      end
      S_NEG: begin
        if (gt0) begin
          n_xyz_ld  = 1'b1;
          n_iter_ld = 1'b1;
        end else begin
          n_out_ld = 1'b1;
          state_d  = S_PLOAD;
        end
      end
      S_PLOAD: begin
        p_xyz_sel  = 1'b1;
        p_xyz_ld   = 1'b1;
        p_iter_sel = 1'b1;
        p_iter_ld  = 1'b1;
        rep_done_d = 1'b0;
        state_d    = S_POS;
      end
      S_POS: begin
        if (ltN || again) begin
          p_xyz_ld = 1'b1;
          if (again) begin
            rep_done_d = 1'b1;
          end else begin
            p_iter_ld  = 1'b1;
            rep_done_d = 1'b0;
          end
        end else begin
          p_out_ld = 1'b1;
          state_d  = S_IDLE;
        end
      end
      default: state_d = S_IDLE;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state_q    <= S_IDLE;
      rep_done_q <= 1'b0;
      done       <= 1'b0;
      mode       <= ROTATION;
    end else begin
      state_q    <= state_d;
      rep_done_q <= rep_done_d;
      done       <= p_out_ld;
      if (state_q == S_IDLE && start) mode <= mode_in;
    end
  end

  // Handshake rule: a new pass is requested only when the engine is idle.
  a_start_idle: assert property (@(posedge clk) disable iff (rst) busy |-> !start)
    else $error("cordic_ctrl: start while busy");

endmodule
