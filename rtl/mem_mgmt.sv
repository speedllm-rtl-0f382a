// mem_mgmt: the memory-management block. It holds the NRB read buffers
// (buffer1..4) and the NWB write buffers (buffer5..6) and runs the memory
// allocation reuse strategy: each group is a ring (buf_ring) in which a
// buffer is released for refilling as soon as its own chunk has been consumed,
// independently of the rest of the operator, so loading, computing and
// writing back overlap.
// Read side: the AXI reader writes entries into buffer rd_fill_idx; the MPE
// reads all read buffers at rd_raddr (one-cycle latency) and selects one with
// its own multiplexer. Write side: the MPE writes result words through its
// output multiplexer (one enable per buffer); the AXI writer reads buffer
// wb_drain_idx at wb_raddr (one-cycle latency).
// Buffer counts come from the block diagram; depth and widths are choices of
// this design.
module mem_mgmt
  import speedllm_pkg::*;
#(
  parameter int NRB   = 4,
  parameter int NWB   = 2,
  parameter int DEPTH = 256
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // read buffers, producer (AXI reader)
  output logic                     rd_fill_ok,
  output logic [$clog2(NRB)-1:0]   rd_fill_idx,
  input  logic                     rd_fill_done,
  input  logic [$clog2(DEPTH):0]   rd_fill_len,
  input  logic                     rd_we,
  input  logic [$clog2(DEPTH)-1:0] rd_waddr,
  input  entry_t                   rd_wdata,
  // read buffers, consumer (MPE Read stage)
  output logic                     rd_drain_ok,
  output logic [$clog2(NRB)-1:0]   rd_drain_idx,
  output logic [$clog2(DEPTH):0]   rd_drain_len,
  input  logic                     rd_drain_done,
  input  logic [$clog2(DEPTH)-1:0] rd_raddr,
  output entry_t                   rd_rdata [NRB],
  // write buffers, producer (MPE Write stage)
  output logic                     wb_fill_ok,
  output logic [$clog2(NWB)-1:0]   wb_fill_idx,
  input  logic                     wb_fill_done,
  input  logic [$clog2(DEPTH):0]   wb_fill_len,
  input  addr_t                    wb_fill_addr,
  input  logic [NWB-1:0]           wb_we,
  input  logic [$clog2(DEPTH)-1:0] wb_waddr,
  input  data_t                    wb_wdata,
  // write buffers, consumer (AXI writer)
  output logic                     wb_drain_ok,
  output logic [$clog2(DEPTH):0]   wb_drain_len,
  output addr_t                    wb_drain_addr,
  input  logic                     wb_drain_done,
  input  logic [$clog2(DEPTH)-1:0] wb_raddr,
  output data_t                    wb_rdata,
  // status
  output logic [$clog2(NRB):0]     rd_used,
  output logic [$clog2(NWB):0]     wb_used
);
  localparam int EW = $bits(entry_t);
  logic [$clog2(NWB)-1:0] wb_drain_idx;
  data_t                  wb_q [NWB];
  addr_t                  rd_unused_addr;

  buf_ring #(.N(NRB), .DEPTH(DEPTH), .AW(AW)) u_rd_ring (
    .clk, .rst_n,
    .fill_ok(rd_fill_ok), .fill_idx(rd_fill_idx), .fill_done(rd_fill_done),
    .fill_len(rd_fill_len), .fill_addr('0),
    .drain_ok(rd_drain_ok), .drain_idx(rd_drain_idx), .drain_len(rd_drain_len),
    .drain_addr(rd_unused_addr), .drain_done(rd_drain_done), .used(rd_used));

  buf_ring #(.N(NWB), .DEPTH(DEPTH), .AW(AW)) u_wb_ring (
    .clk, .rst_n,
    .fill_ok(wb_fill_ok), .fill_idx(wb_fill_idx), .fill_done(wb_fill_done),
    .fill_len(wb_fill_len), .fill_addr(wb_fill_addr),
    .drain_ok(wb_drain_ok), .drain_idx(wb_drain_idx), .drain_len(wb_drain_len),
    .drain_addr(wb_drain_addr), .drain_done(wb_drain_done), .used(wb_used));

  for (genvar g = 0; g < NRB; g++) begin : g_rd
    logic [EW-1:0] q;
    dp_buffer #(.DEPTH(DEPTH), .W(EW)) u_buf (
      .clk, .we(rd_we && rd_fill_idx == g), .waddr(rd_waddr), .wdata(rd_wdata),
      .raddr(rd_raddr), .rdata(q));
    assign rd_rdata[g] = entry_t'(q);
  end

  for (genvar g = 0; g < NWB; g++) begin : g_wb
    dp_buffer #(.DEPTH(DEPTH), .W(DW)) u_buf (
      .clk, .we(wb_we[g]), .waddr(wb_waddr), .wdata(wb_wdata),
      .raddr(wb_raddr), .rdata(wb_q[g]));
  end

  assign wb_rdata = wb_q[wb_drain_idx];

  logic unused;
  assign unused = ^rd_unused_addr;
endmodule
