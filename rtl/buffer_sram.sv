// buffer_sram: one on-chip buffer (IBUF, WBUF or OBUF) of the training accelerator.
//
// DEPTH words of WIDTH bits with one write port and one read port, each WIDTH
// bits wide; a read returns its word on the next clock edge (rd_data is
// registered), a write takes effect at the clock edge.  Written as an array so
// that synthesis maps it to an SRAM macro.  The defaults give 32 KB with a
// 256-bit bus (1024 words), the size and bus width of the input and weight
// buffers of the proposed accelerator; the output buffer uses 768 words (24 KB).
// The port arrangement and the read latency are this design's choices.
module buffer_sram #(
  parameter int unsigned WIDTH = 256,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [WIDTH-1:0]         wr_data,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [WIDTH-1:0]         rd_data
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

  a_wr_range: assert property (@(posedge clk) wr_en |-> 32'(wr_addr) < DEPTH);
  a_rd_range: assert property (@(posedge clk) rd_en |-> 32'(rd_addr) < DEPTH);
endmodule
