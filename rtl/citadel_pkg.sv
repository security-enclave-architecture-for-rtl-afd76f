// citadel_pkg: types and constants shared by the CITADEL security enclave.
//
// The enclave and the security wrappers talk over AXI4-Lite with 32-bit
// addresses and data. The request and response halves of a channel bundle
// are carried as two packed structs so that they can be routed through the
// interconnect as arrays. The paper names the AXI fabric; the exact bus
// flavour (AXI4-Lite), the widths and every register map below are this
// design's own choices.
package citadel_pkg;

  localparam int unsigned AXI_AW = 32;
  localparam int unsigned AXI_DW = 32;

  typedef struct packed {
    logic [AXI_AW-1:0] awaddr;
    logic              awvalid;
    logic [AXI_DW-1:0] wdata;
    logic [3:0]        wstrb;
    logic              wvalid;
    logic              bready;
    logic [AXI_AW-1:0] araddr;
    logic              arvalid;
    logic              rready;
  } axil_req_t;

  typedef struct packed {
    logic              awready;
    logic              wready;
    logic [1:0]        bresp;
    logic              bvalid;
    logic              arready;
    logic [AXI_DW-1:0] rdata;
    logic [1:0]        rresp;
    logic              rvalid;
  } axil_rsp_t;

  localparam logic [1:0] RESP_OKAY   = 2'b00;
  localparam logic [1:0] RESP_SLVERR = 2'b10;
  localparam logic [1:0] RESP_DECERR = 2'b11;

  // Device lifecycles (Fig. 10 of the paper names the five stages).
  typedef enum logic [2:0] {
    LC_TEST    = 3'd0,
    LC_OEM     = 3'd1,
    LC_DEPLOY  = 3'd2,
    LC_RECALL  = 3'd3,
    LC_EOL     = 3'd4
  } lc_state_e;

  // PUF Control Module instructions (state names printed in Fig. 3).
  typedef enum logic [2:0] {
    PCM_IDLE_STATE = 3'd0,
    PCM_GET_CTL    = 3'd1,
    PCM_COMPARE    = 3'd2,
    PCM_PROV_IP_ID = 3'd3,
    PCM_PROV_EXP   = 3'd4,
    PCM_PROV_CTL   = 3'd5
  } pcm_instr_e;

  // Security wrapper SCM commands.
  typedef enum logic [1:0] {
    SCM_NONE    = 2'd0,
    SCM_PUF     = 2'd1,
    SCM_UNLOCK  = 2'd2,
    SCM_RELOCK  = 2'd3
  } scm_cmd_e;

  // Enclave address map: slave index -> base (4 KB windows above 0x4000_0000,
  // memory at 0x0). The host bus window is 0x8000_0000..0xFFFF_FFFF.
  localparam int unsigned SLV_MEM  = 0;
  localparam int unsigned SLV_PCM  = 1;
  localparam int unsigned SLV_BOOT = 2;
  localparam int unsigned SLV_LC   = 3;
  localparam int unsigned SLV_AES  = 4;
  localparam int unsigned SLV_SHA  = 5;
  localparam int unsigned SLV_ETH  = 6;
  localparam int unsigned SLV_HOST = 7;
  localparam int unsigned N_CITADEL_SLV = 8;

  // Default unlock key of the representative locked IP: 32-bit fragment i is
  // (i+1) * 0x9E3779B9 XOR 0x5A5A0F0F. A real key comes from the obfuscation
  // flow; this one only gives every fragment a distinct value.
  function automatic logic [511:0] demo_obf_key();
    logic [511:0] k;
    for (int i = 0; i < 16; i++) k[i*32 +: 32] = (32'(i + 1) * 32'h9E37_79B9) ^ 32'h5A5A_0F0F;
    return k;
  endfunction

  // Unlock key of wrapped IP number i: the default key with every 32-bit
  // fragment XORed with i * 0x11111111, so each IP has its own key.
  function automatic logic [511:0] ip_obf_key(input int unsigned i);
    return demo_obf_key() ^ {16{32'(i) * 32'h1111_1111}};
  endfunction

endpackage
