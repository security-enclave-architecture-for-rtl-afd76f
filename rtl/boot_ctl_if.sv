// boot_ctl_if: the Boot Control Interface, a GPIO-style block through which
// the enclave and the host processor coordinate the four-stage boot.
//
// Pins named after the paper's boot flow:
//   init_handoff   out  stage 1 -> 2: enclave booted and ChipID matched; the
//                       host may initialise and wake the system bus
//   host_init_done in   stage 2 -> 3: host IPs powered, bus awake
//   rst_gate[i]    out  RESET gating: hold host IP i in reset (SENTRY RST CTL)
//   data_request   out  / data_ack in: per-IP data request handshake in stage 3
//   sys_access     out  stage 3 -> 4: system access handed back to the host
// Host inputs pass a two-flop synchroniser; a rising edge of host_init_done or
// data_ack sets a pending bit, and irq is high while an enabled bit is
// pending (the paper's interrupt-based communication). host_bus_awake is set
// by the first host_init_done edge and tells the bus bridge it may use the
// host bus. All IPs are held in reset from power-on until the enclave
// releases them.
// Abort and lockdown (the failure exits of the paper's boot flow): once the
// firmware sets CTRL[3], or lock_req is high (end of life), every IP is held
// in reset and init_handoff, sys_access and data_request drop, until the next
// enclave reset; CTRL and RSTGATE writes then get SLVERR. Register map and reset values are this design's choices:
//   0x00 CTRL    RW [0] init_handoff [1] sys_access [2] data_request
//                   [3] lockdown (write 1 to set; reads back the lock state)
//   0x04 RSTGATE RW [N_IPS-1:0] (resets to all ones)
//   0x08 PENDING R, write 1 to clear: [0] host_init_done [1] data_ack
//   0x0C IRQ_EN  RW [1:0]
//   0x10 PINS    R  [0] host_init_done [1] data_ack [2] host_bus_awake
module boot_ctl_if
  import citadel_pkg::*;
#(
  parameter int unsigned N_IPS = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  axil_req_t        req,
  output axil_rsp_t        rsp,
  output logic             init_handoff,
  input  logic             host_init_done,
  output logic [N_IPS-1:0] rst_gate,
  output logic             data_request,
  input  logic             data_ack,
  output logic             sys_access,
  output logic             host_bus_awake,
  output logic             irq,
  input  logic             lock_req
);
  logic        wr_en, rd_en, wr_err, rd_err;
  logic [7:0]  wr_addr, rd_addr;
  logic [31:0] wr_data, rd_data;
  logic [3:0]  wr_strb;

  axil_port_map #(.AW(8)) u_pm (
    .clk, .rst_n, .req, .rsp,
    .wr_en, .wr_addr, .wr_data, .wr_strb, .wr_err,
    .rd_en, .rd_addr, .rd_data, .rd_err
  );

  logic [1:0] s1, s2, s3, pending, irq_en;
  logic       locked;
  wire        lock_now = locked || lock_req || (wr_en && wr_addr == 8'h00 && wr_data[3]);
  wire  [1:0] rise = s2 & ~s3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= '0; s2 <= '0; s3 <= '0;
      pending <= '0; irq_en <= '0;
      init_handoff <= 1'b0; sys_access <= 1'b0; data_request <= 1'b0;
      rst_gate <= '1; host_bus_awake <= 1'b0; locked <= 1'b0;
    end else begin
      s1 <= {data_ack, host_init_done};
      s2 <= s1;
      s3 <= s2;
      if (rise[0]) host_bus_awake <= 1'b1;
      pending <= pending | rise;
      if (wr_en) begin
        unique case (wr_addr)
          8'h00: {data_request, sys_access, init_handoff} <= wr_data[2:0];
          8'h04: rst_gate <= wr_data[N_IPS-1:0];
          8'h08: pending  <= (pending & ~wr_data[1:0]) | rise;
          8'h0C: irq_en   <= wr_data[1:0];
          default: ;
        endcase
      end
      // abort and lockdown: overrides the register writes above
      if (lock_now) begin
        locked       <= 1'b1;
        init_handoff <= 1'b0;
        sys_access   <= 1'b0;
        data_request <= 1'b0;
        rst_gate     <= '1;
      end
    end
  end

  assign wr_err = wr_en && (!(wr_addr inside {8'h00, 8'h04, 8'h08, 8'h0C}) ||
                            (locked && wr_addr inside {8'h00, 8'h04}));
  assign irq    = |(pending & irq_en);

  always_comb begin
    rd_err  = 1'b0;
    rd_data = '0;
    unique case (rd_addr)
      8'h00: rd_data = {28'd0, locked, data_request, sys_access, init_handoff};
      8'h04: rd_data = 32'(rst_gate);
      8'h08: rd_data = {30'd0, pending};
      8'h0C: rd_data = {30'd0, irq_en};
      8'h10: rd_data = {29'd0, host_bus_awake, s2[1], s2[0]};
      default: rd_err = 1'b1;
    endcase
  end
endmodule
