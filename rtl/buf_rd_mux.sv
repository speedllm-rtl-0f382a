// buf_rd_mux: the multiplexer in front of the MPE Read stage. It presents the
// read data of the read buffer selected by sel (the buffer the Read stage is
// draining) and registers it together with a valid bit, so the Read stage sees
// entry data two cycles after it presents an address (one cycle of RAM, one of
// this register). The registered select is this design's choice.
module buf_rd_mux #(
  parameter int N = 4,
  parameter int W = 67
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [$clog2(N)-1:0] sel,
  input  logic                 in_valid,
  input  logic [W-1:0]         in_data [N],
  output logic                 out_valid,
  output logic [W-1:0]         out_data
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      out_data  <= in_data[sel];
    end
  end
endmodule
