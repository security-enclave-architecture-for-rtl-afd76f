// axil_ram_model: small AXI4-Lite register file for testbenches (WORDS words,
// word address = byte address / 4 modulo WORDS), built on the design's port
// map. Accesses are counted so a test can tell which slave was reached.
module axil_ram_model
  import citadel_pkg::*;
#(
  parameter int unsigned WORDS = 16
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t req,
  output axil_rsp_t rsp
);
  logic wr_en, rd_en;
  logic [11:0] wr_addr, rd_addr;
  logic [31:0] wr_data, rd_data;
  logic [3:0] wr_strb;
  logic [31:0] regs [WORDS];
  int writes = 0, reads = 0;

  axil_port_map #(.AW(12)) u_pm (.clk, .rst_n, .req, .rsp, .wr_en, .wr_addr, .wr_data, .wr_strb,
    .wr_err(1'b0), .rd_en, .rd_addr, .rd_data, .rd_err(1'b0));

  initial for (int i = 0; i < WORDS; i++) regs[i] = '0;
  assign rd_data = regs[(32'(rd_addr) >> 2) % WORDS];
  always @(posedge clk) begin
    if (wr_en) begin
      regs[(32'(wr_addr) >> 2) % WORDS] <= wr_data;
      writes++;
    end
    if (rd_en) reads++;
  end
endmodule
