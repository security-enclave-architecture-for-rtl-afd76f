// lifecycle_ctrl: device lifecycle state with key-validated transitions.
//
// The device moves through the five lifecycles of the paper: testing facility,
// packaging/OEM, deployment, recall and end of life. The allowed transitions
// are the paper's: TEST->OEM, OEM->DEPLOY, DEPLOY->RECALL, RECALL->EOL and
// RECALL->OEM (re-enrolment). Every lifecycle that can be entered has its own
// 256-bit validation key (paper), which the entity making the transition must
// present. Keys are provisioned only in the TEST lifecycle (when the chip is
// inside the HSM); afterwards they can be neither written nor read.
// A transition request (write TARGET) is checked in one cycle: if the step is
// allowed and KEYIN equals the target's key the state changes, otherwise the
// device stays in its current lifecycle and STATUS.rejected is set. KEYIN is
// cleared after every request. Entering EOL pulses purge for one cycle (the
// memory, the PCM and these keys are erased; only the lifecycle state stays)
// and eol stays high, which the enclave firmware uses for its truncated boot.
// The state register resets to TEST; keeping it across power cycles needs
// non-volatile storage, which this block does not model.
// Register map (this design's choice):
//   0x00 STATE  R [2:0] lifecycle, [8] eol
//   0x04 TARGET W [2:0] requested lifecycle (starts the check)
//   0x08 STATUS R [0] accepted [1] rejected [2] keys locked
//   0x40+4*i   KEYIN word i, W (i = 0..7)
//   0x100+0x20*t+4*i  key word i of lifecycle t (1..4), W in TEST only
module lifecycle_ctrl
  import citadel_pkg::*;
#(
  parameter int unsigned KEY_BITS = 256
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t req,
  output axil_rsp_t rsp,
  output lc_state_e state,
  output logic      eol,
  output logic      purge
);
  localparam int unsigned KW = KEY_BITS / 32;

  logic        wr_en, rd_en, wr_err, rd_err;
  logic [11:0] wr_addr, rd_addr;
  logic [31:0] wr_data, rd_data;
  logic [3:0]  wr_strb;

  axil_port_map #(.AW(12)) u_pm (
    .clk, .rst_n, .req, .rsp,
    .wr_en, .wr_addr, .wr_data, .wr_strb, .wr_err,
    .rd_en, .rd_addr, .rd_data, .rd_err
  );

  logic [KEY_BITS-1:0] lc_key [1:4];
  logic [KEY_BITS-1:0] keyin;
  logic                accepted, rejected;

  function automatic logic allowed(input lc_state_e from, input lc_state_e to);
    unique case (from)
      LC_TEST:   return to == LC_OEM;
      LC_OEM:    return to == LC_DEPLOY;
      LC_DEPLOY: return to == LC_RECALL;
      LC_RECALL: return to == LC_EOL || to == LC_OEM;
      default:   return 1'b0;
    endcase
  endfunction

  wire       wr_target = wr_en && wr_addr == 12'h004;
  lc_state_e target;
  assign target = lc_state_e'(wr_data[2:0]);
  wire       key_ok = (target inside {LC_OEM, LC_DEPLOY, LC_RECALL, LC_EOL}) &&
                      keyin == lc_key[int'(target)];
  wire       wr_keyin = wr_en && wr_addr >= 12'h040 && wr_addr < 12'(12'h040 + 4*KW);
  wire       wr_prov  = wr_en && wr_addr >= 12'h120 && wr_addr < 12'h1A0 &&
                        (32'(wr_addr[4:0]) < 4*KW);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= LC_TEST;
      keyin    <= '0;
      accepted <= 1'b0;
      rejected <= 1'b0;
      purge    <= 1'b0;
      for (int t = 1; t <= 4; t++) lc_key[t] <= '0;
    end else begin
      purge <= 1'b0;
      if (wr_keyin) keyin[wr_addr[4:2]*32 +: 32] <= wr_data;
      if (wr_prov && state == LC_TEST)
        lc_key[int'(wr_addr[7:5])][wr_addr[4:2]*32 +: 32] <= wr_data;
      if (wr_target) begin
        keyin <= '0;
        if (allowed(state, target) && key_ok) begin
          state    <= target;
          accepted <= 1'b1;
          rejected <= 1'b0;
          if (target == LC_EOL) begin
            purge <= 1'b1;
            for (int t = 1; t <= 4; t++) lc_key[t] <= '0;
          end
        end else begin
          accepted <= 1'b0;
          rejected <= 1'b1;
        end
      end
    end
  end

  assign eol    = (state == LC_EOL);
  assign wr_err = wr_en && !(wr_target || wr_keyin || (wr_prov && state == LC_TEST));

  always_comb begin
    rd_err  = 1'b0;
    rd_data = '0;
    unique case (rd_addr)
      12'h000: rd_data = {23'd0, eol, 5'd0, state};
      12'h008: rd_data = {29'd0, state != LC_TEST, rejected, accepted};
      default: rd_err = 1'b1;
    endcase
  end
endmodule
