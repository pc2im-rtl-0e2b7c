// sram_1r1w: on-chip buffer with one write port and one read port, written as an array
// so that synthesis can map it onto an SRAM macro. The accelerator uses it for the
// centroid index buffer, the neighbour index buffer, the feature buffer of the
// preprocessing module and the input buffer of the feature computing module. Their
// depths and widths are parameters chosen by the top level; the description gives the
// buffers' roles and a 512 KB total for standard on-chip SRAM, not their split.
// Timing: write on the clock edge when we is high; rd_data is the word at rd_addr
// registered on the edge after re (1-cycle read latency); a read and a write to the
// same address in one cycle return the old word.
module sram_1r1w #(
  parameter int DEPTH = 2048,
  parameter int WIDTH = 16
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [WIDTH-1:0]         wr_data,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [WIDTH-1:0]         rd_data
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[wr_addr] <= wr_data;
    if (re) rd_data <= mem[rd_addr];
  end
endmodule
