// dp_buffer: one on-chip buffer of the memory-management block (the read
// buffers buffer1..4 and the write buffers buffer5..6 of the block diagram).
// Simple dual-port RAM: one write port, one read port with a registered,
// one-cycle read latency (block-RAM style). Depth and width are this design's
// choice; the source does not give them.
module dp_buffer #(
  parameter int DEPTH = 256,
  parameter int W     = 67
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [W-1:0]             wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
