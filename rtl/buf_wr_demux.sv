// buf_wr_demux: the multiplexer between the MPE Write stage and the write
// buffers. It steers one result word to the write buffer selected by sel:
// the write enable goes to that buffer only, address and data go to all.
// Purely combinational.
module buf_wr_demux #(
  parameter int N  = 2,
  parameter int AW = 8,
  parameter int W  = 32
) (
  input  logic                 in_we,
  input  logic [$clog2(N)-1:0] sel,
  input  logic [AW-1:0]        in_addr,
  input  logic [W-1:0]         in_data,
  output logic [N-1:0]         out_we,
  output logic [AW-1:0]        out_addr,
  output logic [W-1:0]         out_data
);
  always_comb begin
    out_we = '0;
    if (in_we) out_we[sel] = 1'b1;
    out_addr = in_addr;
    out_data = in_data;
  end
endmodule
