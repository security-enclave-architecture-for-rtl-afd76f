// mem_module: the enclave's secure on-chip memory (64 KB in the paper), an
// AXI4-Lite slave holding the assets: ChipID, PUF responses, unlock keys,
// communication keys, lifecycle data and the enclave's working data.
//
// Word-organised, 32-bit words with byte strobes, read in the cycle the read
// is accepted. A purge request (from the lifecycle controller when the device
// reaches end of life, where the paper requires all assets to be erased)
// clears the memory one word per cycle, BYTES/4 cycles in all; while the sweep
// runs, purging is high and bus accesses get SLVERR (reads return 0). The
// sweep and the error response are this design's choices.
module mem_module
  import citadel_pkg::*;
#(
  parameter int unsigned BYTES = 65536
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t req,
  output axil_rsp_t rsp,
  input  logic      purge,
  output logic      purging
);
  localparam int unsigned WORDS = BYTES / 4;
  localparam int unsigned WA    = $clog2(WORDS);
  localparam int unsigned AW    = WA + 2;

  logic          wr_en, rd_en;
  logic [AW-1:0] wr_addr, rd_addr;
  logic [31:0]   wr_data, rd_data;
  logic [3:0]    wr_strb;
  logic [WA-1:0] sweep;

  axil_port_map #(.AW(AW)) u_pm (
    .clk, .rst_n, .req, .rsp,
    .wr_en, .wr_addr, .wr_data, .wr_strb, .wr_err(purging),
    .rd_en, .rd_addr, .rd_data, .rd_err(purging)
  );

  logic [31:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (purging) begin
      mem[sweep] <= '0;
    end else if (wr_en) begin
      for (int b = 0; b < 4; b++)
        if (wr_strb[b]) mem[wr_addr[AW-1:2]][b*8 +: 8] <= wr_data[b*8 +: 8];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      purging <= 1'b0;
      sweep   <= '0;
    end else if (purging) begin
      sweep <= sweep + 1'b1;
      if (sweep == WA'(WORDS - 1)) purging <= 1'b0;
    end else if (purge) begin
      purging <= 1'b1;
      sweep   <= '0;
    end
  end

  assign rd_data = purging ? '0 : mem[rd_addr[AW-1:2]];
endmodule
