// security_wrapper: a host IP wrapped for CITADEL (the paper's security
// wrapper: a generic bus/test wrapper augmented with a MeLPUF SCM and a key
// application SCM).
//
// Blocks, following the paper's wrapper drawing: an AXI4-Lite port map
// (registers plus write/read FSMs), a reset release switch driven by the
// SENTRY RST CTL line, a storage buffer, the SCM control unit, the two SCM
// satellite units, and an IEEE-1500-style test wrapper around the IP. The IP
// here is the representative locked IP obf_ip.
//
// Data path: the functional input register feeds the MeLPUF bank (replicated
// over its PUF_BITS cells, so the cells sit on the IP's input path and are
// transparent while their control is 1); the first IN_W cell outputs go
// through the test wrapper to the IP. The signature is read with control 0
// and stored in buffer words 0..PUF_BITS/32-1. The unlock key is taken from
// the buffer words that follow and applied by the key application SCM through
// the test wrapper's SCM access, one IN_W-bit fragment per cycle.
//
// Register map (byte offsets; this design's choice, the paper gives none):
//   0x000 CTRL    W: [1:0] SCM command (starts it; SLVERR while busy),
//                    [8] software reset of the IP, [9] clear buffer (self-clearing)
//                 R: [8] software reset bit
//   0x004 STATUS  R: [0] busy [1] done [2] IP unlocked [3] IP out of reset
//   0x008 IP_DIN  W: functional input word; the IP consumes it the next cycle
//   0x00C IP_DOUT R: IP output word (through the test wrapper)
//   0x100+4*i     buffer word i, R/W
// Unmapped addresses read 0 with SLVERR; writes to them get SLVERR.
module security_wrapper
  import citadel_pkg::*;
#(
  parameter int unsigned         PUF_BITS = 256,
  parameter int unsigned         KEY_BITS = 512,
  parameter int unsigned         IN_W     = 32,
  parameter logic [31:0]         SEED     = 32'h1,
  parameter logic [KEY_BITS-1:0] IP_KEY   = KEY_BITS'(demo_obf_key())
) (
  input  logic                clk,
  input  logic                rst_n,          // host reset
  input  axil_req_t           req,
  output axil_rsp_t           rsp,
  input  logic                sentry_rst_ctl, // 1: CITADEL holds the IP in reset
  input  logic [PUF_BITS-1:0] puf_noise,      // model hook: unstable PUF cells
  input  logic                test_mode,
  input  logic                test_capture,
  input  logic                test_shift,
  input  logic                test_update,
  input  logic                test_tdi,
  output logic                test_tdo,
  output logic                ip_unlocked,
  output logic                ip_rst_n
);
  localparam int unsigned PUF_W = (PUF_BITS + 31) / 32;
  localparam int unsigned KEY_W = (KEY_BITS + 31) / 32;
  localparam int unsigned DEPTH = PUF_W + KEY_W;
  localparam int unsigned BW    = $clog2(DEPTH);
  localparam int unsigned REP   = (PUF_BITS + IN_W - 1) / IN_W;

  // ---------------- port map ----------------
  logic        wr_en, rd_en, wr_err, rd_err;
  logic [11:0] wr_addr, rd_addr;
  logic [31:0] wr_data, rd_data;
  logic [3:0]  wr_strb;

  axil_port_map #(.AW(12)) u_pm (
    .clk, .rst_n, .req, .rsp,
    .wr_en, .wr_addr, .wr_data, .wr_strb, .wr_err,
    .rd_en, .rd_addr, .rd_data, .rd_err
  );

  logic            sw_rst, buf_clear, cmd_valid;
  scm_cmd_e        cmd;
  logic [IN_W-1:0] din_q;
  logic            din_valid_q;
  logic            busy, done;

  wire wr_ctrl = wr_en && wr_addr == 12'h000;
  wire wr_din  = wr_en && wr_addr == 12'h008;
  wire wr_buf  = wr_en && wr_addr >= 12'h100 && wr_addr < 12'(12'h100 + 4*DEPTH);

  assign cmd_valid = wr_ctrl && !busy;
  assign cmd       = scm_cmd_e'(wr_data[1:0]);
  assign wr_err    = wr_en && !(wr_ctrl || wr_din || wr_buf) || (wr_ctrl && busy);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sw_rst      <= 1'b0;
      buf_clear   <= 1'b0;
      din_q       <= '0;
      din_valid_q <= 1'b0;
    end else begin
      buf_clear   <= wr_ctrl && !busy && wr_data[9];
      din_valid_q <= wr_din;
      if (wr_ctrl && !busy) sw_rst <= wr_data[8];
      if (wr_din)           din_q  <= IN_W'(wr_data);
    end
  end

  // ---------------- reset release ----------------
  reset_release u_rr (
    .clk, .host_rst_n(rst_n), .sw_rst, .sentry_rst_ctl, .ip_rst_n
  );

  // ---------------- storage buffer ----------------
  logic [DEPTH-1:0]    scm_we;
  logic [DEPTH*32-1:0] scm_wdata, scm_rdata;
  logic [31:0]         buf_rdata;
  logic                puf_control, puf_capture;
  logic [PUF_BITS-1:0] puf_q;

  always_comb begin
    scm_we    = '0;
    scm_wdata = '0;
    if (puf_capture) begin
      scm_we[PUF_W-1:0]            = '1;
      scm_wdata[PUF_BITS-1:0]      = puf_q;
    end
  end

  storage_buffer #(.DEPTH(DEPTH)) u_buf (
    .clk, .rst_n, .clear(buf_clear),
    .bus_we(wr_buf), .bus_addr(BW'((wr_addr - 12'h100) >> 2)), .bus_wdata(wr_data),
    .bus_strb(wr_strb), .bus_raddr(BW'((rd_addr - 12'h100) >> 2)), .bus_rdata(buf_rdata),
    .scm_we, .scm_wdata, .scm_rdata
  );

  // ---------------- SCM control and satellites ----------------
  logic            key_start, key_done, key_busy, scm_sel, relock, frag_valid;
  logic [IN_W-1:0] frag;

  scm_control u_ctl (
    .clk, .rst_n, .cmd_valid, .cmd, .busy, .done,
    .puf_control, .puf_capture, .key_start, .key_done, .scm_sel, .relock
  );

  melpuf_scm #(.PUF_BITS(PUF_BITS), .SEED(SEED)) u_puf (
    .din(PUF_BITS'({REP{din_q}})), .control(puf_control), .noise(puf_noise), .q(puf_q)
  );

  key_apply_scm #(.KEY_BITS(KEY_BITS), .IN_W(IN_W)) u_key (
    .clk, .rst_n, .start(key_start), .key(scm_rdata[PUF_W*32 +: KEY_BITS]),
    .frag, .frag_valid, .busy(key_busy), .done(key_done)
  );

  // ---------------- test wrapper and IP ----------------
  logic [IN_W-1:0] ip_in, ip_out, func_out;

  test_wrapper #(.IN_W(IN_W), .OUT_W(IN_W)) u_tw (
    .clk, .rst_n,
    .func_in(puf_q[IN_W-1:0]), .func_out,
    .ip_in, .ip_out,
    .scm_sel, .scm_in(frag),
    .test_mode, .capture(test_capture), .shift(test_shift), .update(test_update),
    .tdi(test_tdi), .tdo(test_tdo)
  );

  obf_ip #(.KEY_BITS(KEY_BITS), .IN_W(IN_W), .KEY(IP_KEY)) u_ip (
    .clk, .rst_n(ip_rst_n),
    .din(ip_in), .din_valid(din_valid_q && !scm_sel), .key_valid(frag_valid && scm_sel),
    .relock, .dout(ip_out), .unlocked(ip_unlocked)
  );

  // ---------------- read mux ----------------
  always_comb begin
    rd_err  = 1'b0;
    rd_data = '0;
    if (rd_addr == 12'h000)      rd_data = {23'd0, sw_rst, 8'd0};
    else if (rd_addr == 12'h004) rd_data = {28'd0, ip_rst_n, ip_unlocked, done, busy};
    else if (rd_addr == 12'h00C) rd_data = 32'(func_out);
    else if (rd_addr >= 12'h100 && rd_addr < 12'(12'h100 + 4*DEPTH)) rd_data = buf_rdata;
    else if (rd_addr != 12'h008) rd_err = 1'b1;
  end
endmodule
