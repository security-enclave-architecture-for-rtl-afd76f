// citadel_top: the CITADEL security enclave for supply-chain protection,
// together with the security wrappers it controls in the host SoC.
//
// Enclave side (the paper's supply-chain instance): an AXI4-Lite interconnect
// whose single master is the compute enclave (a RISC-V core that is not part
// of this RTL: its master port is the ce_req/ce_rsp port pair), with the
// memory module, the PUF Control Module, the boot control interface, the
// lifecycle controller, the bus interface to the host, and ports for the
// AES-256, SHA-256 and Ethernet IPs, which are likewise outside this RTL.
// Host side: the bus interface drives a host-bus interconnect with N_IPS
// security wrappers, each around a representative locked IP with its own
// MeLPUF bank (seed 0x1000+i) and unlock key (ip_obf_key(i)). The boot control
// interface's reset-gating lines hold the wrapped IPs in reset; the lifecycle
// controller's purge erases the memory and the PCM at end of life, and its
// end-of-life flag locks the boot control down so the host IPs stay in reset.
//
// Enclave address map (this design's choice):
//   0x0000_0000  memory (MEM_BYTES)    0x4000_0000  PCM
//   0x4000_1000  boot control          0x4000_2000  lifecycle
//   0x4000_3000  AES-256 port          0x4000_4000  SHA-256 port
//   0x4000_5000  Ethernet port         0x8000_0000+ host bus; wrapper i at
//                                                   0x8000_0000 + i*0x1000
// Clocking: one clock. rst_n resets the enclave, host_rst_n the host side.
module citadel_top
  import citadel_pkg::*;
#(
  parameter int unsigned N_IPS     = 4,
  parameter int unsigned PUF_BITS  = 256,
  parameter int unsigned KEY_BITS  = 512,
  parameter int unsigned IN_W      = 32,
  parameter int unsigned MEM_BYTES = 65536
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      host_rst_n,
  // compute enclave master port
  input  axil_req_t ce_req,
  output axil_rsp_t ce_rsp,
  output logic      ce_irq,
  // crypto and off-chip link IPs
  output axil_req_t aes_req,
  input  axil_rsp_t aes_rsp,
  output axil_req_t sha_req,
  input  axil_rsp_t sha_rsp,
  output axil_req_t eth_req,
  input  axil_rsp_t eth_rsp,
  // boot control pins to the host processor
  output logic      init_handoff,
  input  logic      host_init_done,
  output logic      data_request,
  input  logic      data_ack,
  output logic      sys_access,
  // lifecycle
  output lc_state_e lc_state,
  output logic      lc_eol,
  output logic      mem_purging,
  // host IP side
  input  logic [N_IPS-1:0][PUF_BITS-1:0] puf_noise,
  input  logic [N_IPS-1:0] test_mode,
  input  logic [N_IPS-1:0] test_capture,
  input  logic [N_IPS-1:0] test_shift,
  input  logic [N_IPS-1:0] test_update,
  input  logic [N_IPS-1:0] test_tdi,
  output logic [N_IPS-1:0] test_tdo,
  output logic [N_IPS-1:0] ip_unlocked,
  output logic [N_IPS-1:0] ip_rst_n
);
  localparam logic [N_CITADEL_SLV-1:0][31:0] BASE = {
    32'h8000_0000, 32'h4000_5000, 32'h4000_4000, 32'h4000_3000,
    32'h4000_2000, 32'h4000_1000, 32'h4000_0000, 32'h0000_0000};
  localparam logic [N_CITADEL_SLV-1:0][31:0] MASK = {
    32'h8000_0000, 32'hFFFF_F000, 32'hFFFF_F000, 32'hFFFF_F000,
    32'hFFFF_F000, 32'hFFFF_F000, 32'hFFFF_F000, ~(32'(MEM_BYTES) - 32'd1)};

  axil_req_t s_req [N_CITADEL_SLV];
  axil_rsp_t s_rsp [N_CITADEL_SLV];

  axil_xbar #(.N_SLV(N_CITADEL_SLV), .BASE(BASE), .MASK(MASK)) u_fabric (
    .clk, .rst_n, .m_req(ce_req), .m_rsp(ce_rsp), .s_req, .s_rsp
  );

  logic lc_purge, host_bus_awake;
  logic [N_IPS-1:0] rst_gate;

  mem_module #(.BYTES(MEM_BYTES)) u_mem (
    .clk, .rst_n, .req(s_req[SLV_MEM]), .rsp(s_rsp[SLV_MEM]),
    .purge(lc_purge), .purging(mem_purging)
  );

  pcm #(.N_ENTRIES(N_IPS), .SIG_BITS(PUF_BITS)) u_pcm (
    .clk, .rst_n, .req(s_req[SLV_PCM]), .rsp(s_rsp[SLV_PCM]), .purge(lc_purge)
  );

  boot_ctl_if #(.N_IPS(N_IPS)) u_boot (
    .clk, .rst_n, .req(s_req[SLV_BOOT]), .rsp(s_rsp[SLV_BOOT]),
    .init_handoff, .host_init_done, .rst_gate, .data_request, .data_ack,
    .sys_access, .host_bus_awake, .irq(ce_irq), .lock_req(lc_eol)
  );

  lifecycle_ctrl u_lc (
    .clk, .rst_n, .req(s_req[SLV_LC]), .rsp(s_rsp[SLV_LC]),
    .state(lc_state), .eol(lc_eol), .purge(lc_purge)
  );

  assign aes_req        = s_req[SLV_AES];
  assign s_rsp[SLV_AES] = aes_rsp;
  assign sha_req        = s_req[SLV_SHA];
  assign s_rsp[SLV_SHA] = sha_rsp;
  assign eth_req        = s_req[SLV_ETH];
  assign s_rsp[SLV_ETH] = eth_rsp;

  // ---------------- host side ----------------
  axil_req_t h_req;
  axil_rsp_t h_rsp;

  bus_interface #(.HOST_BASE(32'h8000_0000)) u_busif (
    .clk, .rst_n, .host_bus_awake,
    .s_req(s_req[SLV_HOST]), .s_rsp(s_rsp[SLV_HOST]), .h_req, .h_rsp
  );

  function automatic logic [N_IPS-1:0][31:0] wrap_base();
    for (int i = 0; i < N_IPS; i++) wrap_base[i] = 32'(i) << 12;
  endfunction

  axil_req_t w_req [N_IPS];
  axil_rsp_t w_rsp [N_IPS];

  axil_xbar #(.N_SLV(N_IPS), .BASE(wrap_base()), .MASK({N_IPS{32'hFFFF_F000}})) u_host_bus (
    .clk, .rst_n(host_rst_n), .m_req(h_req), .m_rsp(h_rsp), .s_req(w_req), .s_rsp(w_rsp)
  );

  for (genvar i = 0; i < N_IPS; i++) begin : g_wrap
    security_wrapper #(
      .PUF_BITS(PUF_BITS), .KEY_BITS(KEY_BITS), .IN_W(IN_W),
      .SEED(32'h1000 + 32'(i)), .IP_KEY(KEY_BITS'(ip_obf_key(i)))
    ) u_wrap (
      .clk, .rst_n(host_rst_n), .req(w_req[i]), .rsp(w_rsp[i]),
      .sentry_rst_ctl(rst_gate[i]), .puf_noise(puf_noise[i]),
      .test_mode(test_mode[i]), .test_capture(test_capture[i]),
      .test_shift(test_shift[i]), .test_update(test_update[i]),
      .test_tdi(test_tdi[i]), .test_tdo(test_tdo[i]),
      .ip_unlocked(ip_unlocked[i]), .ip_rst_n(ip_rst_n[i])
    );
  end
endmodule
