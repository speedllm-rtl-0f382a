// tb_mem_mgmt: self-checking testbench of mem_mgmt at its default sizes
// (4 read buffers, 2 write buffers, 256 entries). Read side: chunks of random
// length are written and closed until all four buffers are full (fill_ok must
// drop), then drained and refilled in an interleaved pattern; every entry read
// back must match, in fill order, and buffers must be reused cyclically. Write
// side: the same with the two write buffers, their lengths and destination
// addresses.
`timescale 1ns/1ps
module tb_mem_mgmt;
  import speedllm_pkg::*;
  localparam int NRB = 4, NWB = 2, DEPTH = 256;
  logic clk = 0, rst_n = 1;
  // a real falling edge applies the asynchronous reset before the first clock
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic rd_fill_ok, rd_fill_done = 0, rd_we = 0, rd_drain_ok, rd_drain_done = 0;
  logic [1:0] rd_fill_idx, rd_drain_idx;
  logic [8:0] rd_fill_len = '0, rd_drain_len;
  logic [7:0] rd_waddr = '0, rd_raddr = '0;
  entry_t rd_wdata = '0, rd_rdata [NRB];
  logic wb_fill_ok, wb_fill_done = 0, wb_drain_ok, wb_drain_done = 0;
  logic wb_fill_idx;
  logic [8:0] wb_fill_len = '0, wb_drain_len;
  addr_t wb_fill_addr = '0, wb_drain_addr;
  logic [1:0] wb_we = '0;
  logic [7:0] wb_waddr = '0, wb_raddr = '0;
  data_t wb_wdata = '0, wb_rdata;
  logic [2:0] rd_used;
  logic [1:0] wb_used;

  mem_mgmt dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", m); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { int len; int addr; int seed; } chunk_t;
  chunk_t rq [$], wq [$];
  int rfill = 0, rseed = 1, wfill = 0;

  function automatic entry_t ent(int seed, int j);
    entry_t e;
    e.a = data_t'(seed * 1000 + j); e.b = data_t'(~(seed * 1000 + j)); e.tag = 3'(j);
    return e;
  endfunction

  task automatic rd_fill;
    int len = $urandom_range(1, DEPTH);
    chk(rd_fill_ok, "read fill_ok");
    chk(rd_fill_idx == 2'(rfill), "read buffers not reused cyclically");
    for (int j = 0; j < len; j++) begin
      @(negedge clk);
      rd_we = 1; rd_waddr = 8'(j); rd_wdata = ent(rseed, j);
      rd_fill_done = (j == len - 1); rd_fill_len = 9'(len);
    end
    @(negedge clk);
    rd_we = 0; rd_fill_done = 0;
    rq.push_back('{len: len, addr: 0, seed: rseed});
    rseed++; rfill = (rfill + 1) % NRB;
  endtask

  task automatic rd_drain;
    chunk_t c = rq.pop_front();
    chk(rd_drain_ok && int'(rd_drain_len) == c.len, "read drain length");
    for (int j = 0; j < c.len; j++) begin
      rd_raddr = 8'(j);
      @(negedge clk);
      chk(rd_rdata[rd_drain_idx] == ent(c.seed, j), "read data");
    end
    rd_drain_done = 1;
    @(negedge clk);
    rd_drain_done = 0;
  endtask

  task automatic wb_fill;
    int len = $urandom_range(1, DEPTH);
    int a = $urandom_range(1 << 20);
    chk(wb_fill_ok, "write fill_ok");
    chk(wb_fill_idx == 1'(wfill), "write buffers not reused cyclically");
    for (int j = 0; j < len; j++) begin
      @(negedge clk);
      wb_we = 2'b01 << wb_fill_idx; wb_waddr = 8'(j); wb_wdata = data_t'(a + 7 * j);
      wb_fill_done = (j == len - 1); wb_fill_len = 9'(len); wb_fill_addr = addr_t'(a);
    end
    @(negedge clk);
    wb_we = 0; wb_fill_done = 0;
    wq.push_back('{len: len, addr: a, seed: 0});
    wfill = (wfill + 1) % NWB;
  endtask

  task automatic wb_drain;
    chunk_t c = wq.pop_front();
    chk(wb_drain_ok && int'(wb_drain_len) == c.len && int'(wb_drain_addr) == c.addr, "write drain len/addr");
    for (int j = 0; j < c.len; j++) begin
      wb_raddr = 8'(j);
      @(negedge clk);
      chk(wb_rdata == data_t'(c.addr + 7 * j), "write-buffer data");
    end
    wb_drain_done = 1;
    @(negedge clk);
    wb_drain_done = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!rd_drain_ok && rd_fill_ok && !wb_drain_ok && wb_fill_ok, "empty after reset");
    repeat (NRB) rd_fill();
    chk(!rd_fill_ok && rd_used == 3'(NRB), "read buffers full");
    for (int k = 0; k < 10; k++) begin rd_drain(); rd_fill(); end
    repeat (NRB) rd_drain();
    chk(!rd_drain_ok && rd_used == 0, "read buffers empty");
    repeat (NWB) wb_fill();
    chk(!wb_fill_ok && wb_used == 2'(NWB), "write buffers full");
    for (int k = 0; k < 5; k++) begin wb_drain(); wb_fill(); end
    repeat (NWB) wb_drain();
    chk(!wb_drain_ok, "write buffers empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
