// pcm: PUF Control Module. It provisions and authenticates the PUF responses
// of the wrapped host IPs.
//
// Storage holds N_ENTRIES elements {IP ID, expected response, control word}
// (the paper's "element response storage"). IP IDs are provisioned into a
// slot chosen by CONF; expected responses and control words are then indexed
// by IP ID, as the paper describes. The enclave writes a register and starts
// an instruction by writing INSTR (names from the paper's PCM drawing):
//   PROV_IP_ID  slot CONF <- IPID, marked valid (1 cycle)
//   PROV_EXP    expected response of IPID <- STORE (1 cycle)
//   PROV_CTL    control word of IPID <- STORE[CTL_W-1:0] (1 cycle)
//   GET_CTL     CTL <- control word of IPID (1 cycle)
//   COMPARE     error-correct SIG_IN against the expected response of IPID
//               one 16-bit segment per cycle (SIG_BITS/16 cycles), then
//               RES <- (corrected signature == expected response)
// An instruction naming an IP ID that is not stored sets STATUS.error. Which
// registers are written by the enclave and which are read, the register
// offsets, the one-segment-per-cycle schedule and the purge input (which
// erases the storage, used at end of life) are this design's choices.
//
// Register map (byte offsets):
//   0x00 IPID  RW   0x04 INSTR W (R: instruction running)   0x08 CONF RW
//   0x0C STATUS R: [0] busy [1] done [2] error [3] a bit was corrected
//                  [4] an uncorrectable segment was seen
//   0x10 CTL R   0x14 RES R: [0] match
//   0x100+4*i STORE word i RW  0x200+4*i SIG_IN word i RW  (up to 64 words:
//   signatures of up to 2048 bits)
module pcm
  import citadel_pkg::*;
#(
  parameter int unsigned N_ENTRIES = 4,
  parameter int unsigned SIG_BITS  = 256,
  parameter int unsigned CTL_W     = 32
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t req,
  output axil_rsp_t rsp,
  input  logic      purge
);
  localparam int unsigned SW   = SIG_BITS / 32;  // 32-bit words in a signature
  localparam int unsigned NSEG = SIG_BITS / 16;
  localparam int unsigned EW   = (N_ENTRIES > 1) ? $clog2(N_ENTRIES) : 1;
  localparam int unsigned GW   = (NSEG > 1) ? $clog2(NSEG) : 1;

  // STORE and SIG_IN have 64-word windows; a larger signature would alias.
  if (SW > 64 || SW * 32 != SIG_BITS) begin : g_bad_size
    $error("pcm: SIG_BITS must be a multiple of 32 and at most 2048");
  end

  logic        wr_en, rd_en, rd_err;
  logic [11:0] wr_addr, rd_addr;
  logic [31:0] wr_data, rd_data;
  logic [3:0]  wr_strb;

  axil_port_map #(.AW(12)) u_pm (
    .clk, .rst_n, .req, .rsp,
    .wr_en, .wr_addr, .wr_data, .wr_strb, .wr_err(1'b0),
    .rd_en, .rd_addr, .rd_data, .rd_err
  );

  // registers
  logic [31:0]         ipid_r, conf_r, ctl_r;
  logic [SIG_BITS-1:0] store_r, sig_r;
  logic                res_r, busy, done, err, fixed_any, unc_any;
  pcm_instr_e          instr;
  // element response storage
  logic [31:0]         e_ipid  [N_ENTRIES];
  logic [SIG_BITS-1:0] e_exp   [N_ENTRIES];
  logic [CTL_W-1:0]    e_ctl   [N_ENTRIES];
  logic [N_ENTRIES-1:0] e_valid;

  // IP ID lookup
  logic          hit;
  logic [EW-1:0] hit_idx;
  always_comb begin
    hit     = 1'b0;
    hit_idx = '0;
    for (int i = N_ENTRIES - 1; i >= 0; i--)
      if (e_valid[i] && e_ipid[i] == ipid_r) begin
        hit     = 1'b1;
        hit_idx = EW'(i);
      end
  end

  // comparison datapath: one segment per cycle
  logic [GW-1:0] seg;
  logic [EW-1:0] cmp_idx;
  logic [15:0]   seg_corr;
  logic          seg_fixed, seg_unc, mismatch;
  logic [SIG_BITS-1:0] cmp_exp;

  assign cmp_exp = e_exp[cmp_idx];

  pcm_ecc16 u_ecc (
    .sig(sig_r[seg*16 +: 16]), .exp_data(cmp_exp[seg*16 +: 16]),
    .corrected(seg_corr), .fixed(seg_fixed), .uncorrectable(seg_unc)
  );

  wire start = wr_en && wr_addr == 12'h04 && !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ipid_r <= '0; conf_r <= '0; ctl_r <= '0; store_r <= '0; sig_r <= '0;
      res_r <= 1'b0; busy <= 1'b0; done <= 1'b0; err <= 1'b0;
      fixed_any <= 1'b0; unc_any <= 1'b0; mismatch <= 1'b0;
      instr <= PCM_IDLE_STATE; seg <= '0; cmp_idx <= '0;
      e_valid <= '0;
      for (int i = 0; i < N_ENTRIES; i++) begin
        e_ipid[i] <= '0; e_exp[i] <= '0; e_ctl[i] <= '0;
      end
    end else if (purge) begin
      e_valid <= '0;
      for (int i = 0; i < N_ENTRIES; i++) begin
        e_ipid[i] <= '0; e_exp[i] <= '0; e_ctl[i] <= '0;
      end
      store_r <= '0; sig_r <= '0; ctl_r <= '0; res_r <= 1'b0;
      busy <= 1'b0; instr <= PCM_IDLE_STATE;
    end else begin
      // register writes
      if (wr_en && !busy) begin
        if (wr_addr == 12'h00) ipid_r <= wr_data;
        if (wr_addr == 12'h08) conf_r <= wr_data;
        for (int i = 0; i < SW; i++) begin
          if (wr_addr == 12'(12'h100 + 4*i)) store_r[i*32 +: 32] <= wr_data;
          if (wr_addr == 12'(12'h200 + 4*i)) sig_r[i*32 +: 32]   <= wr_data;
        end
      end
      if (start) begin
        done  <= 1'b0;
        err   <= 1'b0;
        instr <= pcm_instr_e'(wr_data[2:0]);
        unique case (pcm_instr_e'(wr_data[2:0]))
          PCM_PROV_IP_ID: begin
            if (conf_r < N_ENTRIES) begin
              e_ipid[EW'(conf_r)]  <= ipid_r;
              e_valid[EW'(conf_r)] <= 1'b1;
            end else begin
              err <= 1'b1;
            end
            done <= 1'b1;
          end
          PCM_PROV_EXP: begin
            if (hit) e_exp[hit_idx] <= store_r; else err <= 1'b1;
            done <= 1'b1;
          end
          PCM_PROV_CTL: begin
            if (hit) e_ctl[hit_idx] <= CTL_W'(store_r); else err <= 1'b1;
            done <= 1'b1;
          end
          PCM_GET_CTL: begin
            if (hit) ctl_r <= 32'(e_ctl[hit_idx]); else err <= 1'b1;
            done <= 1'b1;
          end
          PCM_COMPARE: begin
            if (hit) begin
              busy      <= 1'b1;
              cmp_idx   <= hit_idx;
              seg       <= '0;
              mismatch  <= 1'b0;
              fixed_any <= 1'b0;
              unc_any   <= 1'b0;
              res_r     <= 1'b0;
            end else begin
              err  <= 1'b1;
              done <= 1'b1;
            end
          end
          default: done <= 1'b1;
        endcase
      end else if (busy) begin
        // COMPARE: check one corrected segment
        if (seg_corr != cmp_exp[seg*16 +: 16]) mismatch <= 1'b1;
        if (seg_fixed) fixed_any <= 1'b1;
        if (seg_unc)   unc_any   <= 1'b1;
        seg <= seg + 1'b1;
        if (seg == GW'(NSEG - 1)) begin
          busy  <= 1'b0;
          done  <= 1'b1;
          res_r <= !(mismatch || seg_corr != cmp_exp[seg*16 +: 16]);
          instr <= PCM_IDLE_STATE;
        end
      end else if (done) begin
        instr <= PCM_IDLE_STATE;
      end
    end
  end

  always_comb begin
    rd_data = '0;
    rd_err  = 1'b0;
    unique case (rd_addr)
      12'h00: rd_data = ipid_r;
      12'h04: rd_data = 32'(instr);
      12'h08: rd_data = conf_r;
      12'h0C: rd_data = {27'd0, unc_any, fixed_any, err, done, busy};
      12'h10: rd_data = ctl_r;
      12'h14: rd_data = {31'd0, res_r};
      default: begin
        rd_err = 1'b1;
        for (int i = 0; i < SW; i++) begin
          if (rd_addr == 12'(12'h100 + 4*i)) begin rd_data = store_r[i*32 +: 32]; rd_err = 1'b0; end
          if (rd_addr == 12'(12'h200 + 4*i)) begin rd_data = sig_r[i*32 +: 32];   rd_err = 1'b0; end
        end
      end
    endcase
  end
endmodule
