// storage_buffer: the storage buffer of a security wrapper.
//
// DEPTH 32-bit words shared by two sides. The bus side writes one word with
// byte strobes and reads one word combinationally. The SCM side sees the whole
// buffer as one vector: it reads it combinationally and writes any set of
// words at once through a word mask (for example a 256-bit PUF signature into
// words 0..7). clear empties the buffer in one cycle. An SCM write wins over a
// bus write to the same word. The paper only names the buffer; the default
// size, one 256-bit signature plus one 512-bit key, is this design's choice.
module storage_buffer #(
  parameter int unsigned DEPTH = 24
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  // bus side
  input  logic                  bus_we,
  input  logic [$clog2(DEPTH)-1:0] bus_addr,
  input  logic [31:0]           bus_wdata,
  input  logic [3:0]            bus_strb,
  input  logic [$clog2(DEPTH)-1:0] bus_raddr,
  output logic [31:0]           bus_rdata,
  // SCM side
  input  logic [DEPTH-1:0]      scm_we,
  input  logic [DEPTH*32-1:0]   scm_wdata,
  output logic [DEPTH*32-1:0]   scm_rdata
);
  logic [31:0] mem [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else if (clear) begin
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else begin
      if (bus_we && (int'(bus_addr) < DEPTH))
        for (int b = 0; b < 4; b++)
          if (bus_strb[b]) mem[bus_addr][b*8 +: 8] <= bus_wdata[b*8 +: 8];
      for (int i = 0; i < DEPTH; i++)
        if (scm_we[i]) mem[i] <= scm_wdata[i*32 +: 32];
    end
  end

  assign bus_rdata = (int'(bus_raddr) < DEPTH) ? mem[bus_raddr] : '0;

  always_comb
    for (int i = 0; i < DEPTH; i++) scm_rdata[i*32 +: 32] = mem[i];
endmodule
