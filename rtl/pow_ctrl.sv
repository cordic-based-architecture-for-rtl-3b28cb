// pow_ctrl: sequencer of the powering unit x^y = e^(y ln x).
//
// It runs the CORDIC engine twice and then loads the output register:
//   pass 1 (vectoring, cordicSel = 0): engine input (x+1, x-1, 0), giving
//          zn = ln(x)/2
//   pass 2 (rotation,  cordicSel = 1): engine input (1/An, 1/An, y*ln x),
//          giving xn = x^y
//   OutLd: the output register takes xn.
// The second start is issued in the very cycle cordicDone of the first pass
// is high, so a whole operation takes 2*T + 1 cycles with T the engine's
// M+1+N+v(N)+2, matching the paper's equation (8). done is high for one
// cycle, the cycle after OutLd. start is accepted only when idle.
// The control signal names are those of the paper's block diagram; the
// states and their timing are this design's choice.
module pow_ctrl
  import cordic_pkg::*;
(
  input  logic         clk,
  input  logic         rst,
  input  logic         start,
  input  logic         cordic_done,
  output logic         cordic_start,
  output logic         cordic_sel,
  output cordic_mode_t mode,
  output logic         out_ld,
  output logic         busy,
  output logic         done
);

  typedef enum logic [1:0] {
    P_IDLE = 2'd0,
    P_LN   = 2'd1,
    P_EXP  = 2'd2
  } pstate_t;

  pstate_t state_q, state_d;

  assign busy       = (state_q != P_IDLE);
  assign cordic_sel = (state_q != P_IDLE);
  assign mode       = (state_q == P_IDLE) ? VECTORING : ROTATION;

  always_comb begin
    state_d      = state_q;
    cordic_start = 1'b0;
    out_ld       = 1'b0;
    unique case (state_q)
      P_IDLE: if (start) begin
        cordic_start = 1'b1;
        state_d      = P_LN;
      end
      P_LN: if (cordic_done) begin
        cordic_start = 1'b1;
        state_d      = P_EXP;
      end
      P_EXP: if (cordic_done) begin
        out_ld  = 1'b1;
        state_d = P_IDLE;
      end
      default: state_d = P_IDLE;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state_q <= P_IDLE;
      done    <= 1'b0;
    end else begin
      state_q <= state_d;
      done    <= out_ld;
    end
  end

endmodule
