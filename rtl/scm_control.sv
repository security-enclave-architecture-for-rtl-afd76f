// scm_control: the SCM control unit of a security wrapper.
//
// It runs one command at a time, issued by the enclave through the wrapper's
// port map:
//   SCM_PUF    - drop the MeLPUF control for two cycles (select the bistable
//                cells); in the second cycle puf_capture tells the wrapper to
//                copy the signature into the storage buffer.
//   SCM_UNLOCK - start the key application SCM and give it the IP inputs
//                through the test wrapper (scm_sel) until it reports done.
//   SCM_RELOCK - pulse relock, returning the obfuscated IP to its locked
//                initial state.
// busy is high from the cycle after cmd_valid until the command ends; done is
// set when a command ends and cleared by the next command. A command issued
// while busy is ignored (the wrapper answers it with a bus error). The paper
// names this unit and its role; the command set and timing are this design's.
module scm_control
  import citadel_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     cmd_valid,
  input  scm_cmd_e cmd,
  output logic     busy,
  output logic     done,
  output logic     puf_control,
  output logic     puf_capture,
  output logic     key_start,
  input  logic     key_done,
  output logic     scm_sel,
  output logic     relock
);
  typedef enum logic [2:0] {
    C_IDLE, C_PUF_SEL, C_PUF_CAP, C_KEY_START, C_KEY_RUN, C_RELOCK, C_FINISH
  } ctl_state_e;

  ctl_state_e state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE;
      done  <= 1'b0;
    end else begin
      unique case (state)
        C_IDLE: if (cmd_valid && cmd != SCM_NONE) begin
          done <= 1'b0;
          unique case (cmd)
            SCM_PUF:    state <= C_PUF_SEL;
            SCM_UNLOCK: state <= C_KEY_START;
            SCM_RELOCK: state <= C_RELOCK;
            default:    state <= C_IDLE;
          endcase
        end
        C_PUF_SEL:   state <= C_PUF_CAP;
        C_PUF_CAP:   state <= C_FINISH;
        C_KEY_START: state <= C_KEY_RUN;
        C_KEY_RUN:   if (key_done) state <= C_FINISH;
        C_RELOCK:    state <= C_FINISH;
        C_FINISH: begin
          done  <= 1'b1;
          state <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  assign busy        = (state != C_IDLE);
  assign puf_control = !(state == C_PUF_SEL || state == C_PUF_CAP);
  assign puf_capture = (state == C_PUF_CAP);
  assign key_start   = (state == C_KEY_START);
  assign scm_sel     = (state == C_KEY_START) || (state == C_KEY_RUN);
  assign relock      = (state == C_RELOCK);
endmodule
