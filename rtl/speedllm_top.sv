// speedllm_top: the SpeedLLM accelerator core, everything on the FPGA side of
// the HBM memory controller. The host pushes operator instructions; for each
// one the address generator (agu) lists the operand addresses, the AXI reader
// (dma_reader) loads operand pairs into the four read buffers, the Matrix
// Processing Engine (mpe) or the special function unit (sfu_silu) computes,
// the Write stage packs results into the two write buffers and the AXI writer
// (dma_writer) writes them back. Memory management (mem_mgmt) recycles each
// buffer as soon as its chunk is done, so these three phases overlap.
// Ports: instruction push (instr_*), a simplified AXI read channel (ar_*,
// r_*) and write channel (aw_*, w_data) towards the HBM controller, and
// status. The block structure and buffer counts follow the accelerator's
// block diagram; the instruction set, channel format, number format and
// sizes are this design's choices.
module speedllm_top
  import speedllm_pkg::*;
#(
  parameter int NRB     = 4,
  parameter int NWB     = 2,
  parameter int DEPTH   = 256,
  parameter int VEC_MAX = 2048,
  parameter int QDEPTH  = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  // host instruction queue
  input  logic        instr_valid,
  output logic        instr_ready,
  input  instr_t      instr,
  // HBM controller, read
  output logic        ar_valid,
  output addr_t       ar_addr,
  input  logic        ar_ready,
  input  logic        r_valid,
  input  data_t       r_data,
  // HBM controller, write
  output logic        aw_valid,
  output addr_t       aw_addr,
  output data_t       w_data,
  input  logic        aw_ready,
  // status
  output logic        idle,
  output logic [31:0] ops_done
);
  localparam int LW = $clog2(DEPTH);

  instr_t cur;
  logic   start;

  // agu -> reader
  logic  agu_valid, agu_next;
  addr_t agu_a, agu_b;
  tag_t  agu_tag;
  logic  rd_idle;

  // read buffers
  logic                   rd_fill_ok, rd_fill_done, rd_we;
  logic [$clog2(NRB)-1:0] rd_fill_idx, rd_drain_idx;
  logic [LW:0]            rd_fill_len, rd_drain_len;
  logic [LW-1:0]          rd_waddr, rd_raddr;
  entry_t                 rd_wdata;
  logic                   rd_drain_ok, rd_drain_done;
  entry_t                 rd_rdata [NRB];
  logic [$clog2(NRB):0]   rd_used;

  // write buffers
  logic                   wb_fill_ok, wb_fill_done;
  logic [$clog2(NWB)-1:0] wb_fill_idx;
  logic [LW:0]            wb_fill_len, wb_drain_len;
  addr_t                  wb_fill_addr, wb_drain_addr;
  logic [NWB-1:0]         wb_we;
  logic [LW-1:0]          wb_waddr, wb_raddr;
  data_t                  wb_wdata, wb_rdata;
  logic                   wb_drain_ok, wb_drain_done;
  logic [$clog2(NWB):0]   wb_used;

  // SFU
  logic  sfu_valid, sfu_ready, sfu_out_valid, sfu_out_ready;
  data_t sfu_a, sfu_b, sfu_out_data;
  tag_t  sfu_tag;

  logic read_idle, write_done, writer_idle, sched_idle;

  op_sched #(.QDEPTH(QDEPTH)) u_sched (
    .clk, .rst_n, .instr_valid, .instr_ready, .instr, .start, .cur,
    .write_done, .wb_empty(wb_used == '0), .writer_idle,
    .idle(sched_idle), .ops_done);

  agu u_agu (
    .clk, .rst_n, .start, .instr(cur), .next(agu_next),
    .valid(agu_valid), .addr_a(agu_a), .addr_b(agu_b), .tag(agu_tag));

  dma_reader #(.DEPTH(DEPTH)) u_reader (
    .clk, .rst_n,
    .agu_valid, .agu_addr_a(agu_a), .agu_addr_b(agu_b), .agu_tag, .agu_next,
    .fill_ok(rd_fill_ok), .fill_done(rd_fill_done), .fill_len(rd_fill_len),
    .buf_we(rd_we), .buf_waddr(rd_waddr), .buf_wdata(rd_wdata),
    .ar_valid, .ar_addr, .ar_ready, .r_valid, .r_data, .idle(rd_idle));

  mem_mgmt #(.NRB(NRB), .NWB(NWB), .DEPTH(DEPTH)) u_mem (
    .clk, .rst_n,
    .rd_fill_ok, .rd_fill_idx, .rd_fill_done, .rd_fill_len, .rd_we, .rd_waddr, .rd_wdata,
    .rd_drain_ok, .rd_drain_idx, .rd_drain_len, .rd_drain_done, .rd_raddr, .rd_rdata,
    .wb_fill_ok, .wb_fill_idx, .wb_fill_done, .wb_fill_len, .wb_fill_addr,
    .wb_we, .wb_waddr, .wb_wdata,
    .wb_drain_ok, .wb_drain_len, .wb_drain_addr, .wb_drain_done, .wb_raddr, .wb_rdata,
    .rd_used, .wb_used);

  mpe #(.NRB(NRB), .NWB(NWB), .DEPTH(DEPTH), .VEC_MAX(VEC_MAX)) u_mpe (
    .clk, .rst_n, .op(cur.op), .start, .dst_base(cur.dst_base), .total(result_count(cur)),
    .rd_drain_ok, .rd_drain_idx, .rd_drain_len, .rd_drain_done, .rd_raddr, .rd_rdata,
    .wb_fill_ok, .wb_fill_idx, .wb_fill_done, .wb_fill_len, .wb_fill_addr,
    .wb_we, .wb_waddr, .wb_wdata,
    .sfu_valid, .sfu_ready, .sfu_a, .sfu_b, .sfu_tag,
    .sfu_out_valid, .sfu_out_ready, .sfu_out_data,
    .read_idle, .write_done);

  sfu_silu u_sfu (
    .clk, .rst_n, .fuse(cur.fuse),
    .in_valid(sfu_valid), .in_ready(sfu_ready), .in_a(sfu_a), .in_b(sfu_b), .in_tag(sfu_tag),
    .out_valid(sfu_out_valid), .out_ready(sfu_out_ready), .out_data(sfu_out_data));

  dma_writer #(.DEPTH(DEPTH)) u_writer (
    .clk, .rst_n,
    .drain_ok(wb_drain_ok), .drain_len(wb_drain_len), .drain_addr(wb_drain_addr),
    .drain_done(wb_drain_done), .raddr(wb_raddr), .rdata(wb_rdata),
    .aw_valid, .aw_addr, .w_data, .aw_ready, .idle(writer_idle));

  assign idle = sched_idle && rd_idle && read_idle && writer_idle && (wb_used == '0);

  logic unused;
  assign unused = ^rd_used;
endmodule
