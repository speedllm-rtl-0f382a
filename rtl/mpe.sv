// mpe: the Matrix Processing Engine. Following the block diagram, data flow
// from the read buffers through an input multiplexer (buf_rd_mux) into the
// Read stage, which fans out to six operators (Add, Mul, Matmul, RoPE,
// RMSNorm, Softmax); their results are collected by the Write stage and
// steered by an output multiplexer (buf_wr_demux) into the write buffers.
// The special function unit sits outside the engine: the Read stage's
// OP_SILU channel leaves on sfu_* outputs and its results come back on
// sfu_out_*. Only the operator selected by `op` is active; start loads the
// destination address and result count of a new instruction.
module mpe
  import speedllm_pkg::*;
#(
  parameter int NRB     = 4,
  parameter int NWB     = 2,
  parameter int DEPTH   = 256,
  parameter int VEC_MAX = 2048
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  op_e                      op,
  input  logic                     start,
  input  addr_t                    dst_base,
  input  cnt_t                     total,
  // read buffers
  input  logic                     rd_drain_ok,
  input  logic [$clog2(NRB)-1:0]   rd_drain_idx,
  input  logic [$clog2(DEPTH):0]   rd_drain_len,
  output logic                     rd_drain_done,
  output logic [$clog2(DEPTH)-1:0] rd_raddr,
  input  entry_t                   rd_rdata [NRB],
  // write buffers
  input  logic                     wb_fill_ok,
  input  logic [$clog2(NWB)-1:0]   wb_fill_idx,
  output logic                     wb_fill_done,
  output logic [$clog2(DEPTH):0]   wb_fill_len,
  output addr_t                    wb_fill_addr,
  output logic [NWB-1:0]           wb_we,
  output logic [$clog2(DEPTH)-1:0] wb_waddr,
  output data_t                    wb_wdata,
  // special function unit
  output logic                     sfu_valid,
  input  logic                     sfu_ready,
  output data_t                    sfu_a,
  output data_t                    sfu_b,
  output tag_t                     sfu_tag,
  input  logic                     sfu_out_valid,
  output logic                     sfu_out_ready,
  input  data_t                    sfu_out_data,
  // status
  output logic                     read_idle,
  output logic                     write_done
);
  localparam int NU = 7;
  logic                   mux_valid, mux_out_valid;
  logic [$clog2(NRB)-1:0] mux_sel;
  entry_t                 mux_out_data;
  logic [NU-1:0]          iv, ir, ov, orr;
  data_t                  od [NU];
  data_t                  a, b;
  tag_t                   tg;
  logic                   we;
  logic [$clog2(DEPTH)-1:0] waddr;
  data_t                  wdata;

  buf_rd_mux #(.N(NRB), .W($bits(entry_t))) u_in_mux (
    .clk, .rst_n, .sel(mux_sel), .in_valid(mux_valid), .in_data(rd_rdata),
    .out_valid(mux_out_valid), .out_data(mux_out_data));

  mpe_read #(.DEPTH(DEPTH), .NRB(NRB), .NU(NU)) u_read (
    .clk, .rst_n, .op,
    .drain_ok(rd_drain_ok), .drain_idx(rd_drain_idx), .drain_len(rd_drain_len),
    .drain_done(rd_drain_done), .raddr(rd_raddr),
    .mux_valid, .mux_sel, .mux_out_valid, .mux_out_data,
    .u_valid(iv), .u_ready(ir), .u_a(a), .u_b(b), .u_tag(tg), .idle(read_idle));

  unit_add u_add (.clk, .rst_n, .in_valid(iv[OP_ADD]), .in_ready(ir[OP_ADD]),
    .in_a(a), .in_b(b), .in_tag(tg), .out_valid(ov[OP_ADD]), .out_ready(orr[OP_ADD]), .out_data(od[OP_ADD]));
  unit_mul u_mul (.clk, .rst_n, .in_valid(iv[OP_MUL]), .in_ready(ir[OP_MUL]),
    .in_a(a), .in_b(b), .in_tag(tg), .out_valid(ov[OP_MUL]), .out_ready(orr[OP_MUL]), .out_data(od[OP_MUL]));
  unit_matmul u_matmul (.clk, .rst_n, .in_valid(iv[OP_MATMUL]), .in_ready(ir[OP_MATMUL]),
    .in_a(a), .in_b(b), .in_tag(tg), .out_valid(ov[OP_MATMUL]), .out_ready(orr[OP_MATMUL]), .out_data(od[OP_MATMUL]));
  unit_rope u_rope (.clk, .rst_n, .in_valid(iv[OP_ROPE]), .in_ready(ir[OP_ROPE]),
    .in_a(a), .in_b(b), .in_tag(tg), .out_valid(ov[OP_ROPE]), .out_ready(orr[OP_ROPE]), .out_data(od[OP_ROPE]));
  unit_rmsnorm #(.VEC_MAX(VEC_MAX)) u_rmsnorm (.clk, .rst_n, .in_valid(iv[OP_RMSNORM]), .in_ready(ir[OP_RMSNORM]),
    .in_a(a), .in_b(b), .in_tag(tg), .out_valid(ov[OP_RMSNORM]), .out_ready(orr[OP_RMSNORM]), .out_data(od[OP_RMSNORM]));
  unit_softmax #(.VEC_MAX(VEC_MAX)) u_softmax (.clk, .rst_n, .in_valid(iv[OP_SOFTMAX]), .in_ready(ir[OP_SOFTMAX]),
    .in_a(a), .in_b(b), .in_tag(tg), .out_valid(ov[OP_SOFTMAX]), .out_ready(orr[OP_SOFTMAX]), .out_data(od[OP_SOFTMAX]));

  // SFU channel
  assign sfu_valid      = iv[OP_SILU];
  assign ir[OP_SILU]    = sfu_ready;
  assign sfu_a          = a;
  assign sfu_b          = b;
  assign sfu_tag        = tg;
  assign ov[OP_SILU]    = sfu_out_valid;
  assign od[OP_SILU]    = sfu_out_data;
  assign sfu_out_ready  = orr[OP_SILU];

  mpe_write #(.DEPTH(DEPTH), .NU(NU)) u_write (
    .clk, .rst_n, .op, .start, .dst_base, .total,
    .u_valid(ov), .u_data(od), .u_ready(orr),
    .fill_ok(wb_fill_ok), .fill_done(wb_fill_done), .fill_len(wb_fill_len),
    .fill_addr(wb_fill_addr), .we, .waddr, .wdata, .done(write_done));

  buf_wr_demux #(.N(NWB), .AW($clog2(DEPTH)), .W(DW)) u_out_mux (
    .in_we(we), .sel(wb_fill_idx), .in_addr(waddr), .in_data(wdata),
    .out_we(wb_we), .out_addr(wb_waddr), .out_data(wb_wdata));
endmodule
