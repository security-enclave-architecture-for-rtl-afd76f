// obf_ip: representative host IP locked by state-space obfuscation.
//
// The paper protects host IPs with ProtectIP: the IP powers on in state Sa of
// a non-functional state space and reaches its functional initial state S1
// only when the right sequence of key fragments is applied, along the single
// path Sa -> Sd -> Sc -> S1 printed in the paper's state diagram for a
// three-fragment key. Here the path has P = ceil(KEY_BITS/IN_W) steps (16 for
// a 512-bit key on a 32-bit input), counted by step: step 0 is Sa, step P is
// S1. A fragment that does not match sends the FSM to a trap state in the
// non-functional space, left only by reset or relock (the paper does not give
// the non-functional transitions; the trap is this design's choice). relock
// returns to Sa at any time, as the paper allows CITADEL to lock IPs back.
// The IP's own function is not the paper's: a stand-in 32-bit accumulator
// (acc += din on din_valid, dout = acc). While locked dout = ~din, a corrupted
// output, and the accumulator does not move.
// Interface: key fragments arrive on din with key_valid, one per cycle.
module obf_ip
  import citadel_pkg::*;
#(
  parameter int unsigned         KEY_BITS = 512,
  parameter int unsigned         IN_W     = 32,
  parameter logic [KEY_BITS-1:0] KEY      = KEY_BITS'(demo_obf_key())
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [IN_W-1:0] din,
  input  logic            din_valid,
  input  logic            key_valid,
  input  logic            relock,
  output logic [IN_W-1:0] dout,
  output logic            unlocked
);
  localparam int unsigned P  = (KEY_BITS + IN_W - 1) / IN_W;
  localparam int unsigned SW = $clog2(P + 1);
  localparam logic [P*IN_W-1:0] KEY_PAD = (P*IN_W)'(KEY);

  typedef enum logic [1:0] {ST_OBF, ST_TRAP, ST_FUNC} obf_state_e;

  obf_state_e      state;
  logic [SW-1:0]   step;
  logic [IN_W-1:0] acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= ST_OBF;
      step  <= '0;
      acc   <= '0;
    end else if (relock) begin
      state <= ST_OBF;
      step  <= '0;
    end else begin
      unique case (state)
        ST_OBF: if (key_valid) begin
          if (din == KEY_PAD[step*IN_W +: IN_W]) begin
            step <= step + 1'b1;
            if (step == SW'(P - 1)) state <= ST_FUNC;
          end else begin
            state <= ST_TRAP;
          end
        end
        ST_TRAP: ;
        ST_FUNC: if (din_valid) acc <= acc + din;
        default: state <= ST_TRAP;
      endcase
    end
  end

  assign unlocked = (state == ST_FUNC);
  assign dout     = unlocked ? acc : ~din;
endmodule
