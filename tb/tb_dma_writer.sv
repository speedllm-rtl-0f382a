// tb_dma_writer: self-checking testbench of dma_writer with DEPTH = 16 and
// the HBM model (random write stalls). The testbench plays the write-buffer
// ring: 12 chunks of random length (1..16) and destination, held in a
// buffer model with a one-cycle read latency. After all chunks are released
// every destination word must hold its data, and the rate must be one word
// per clock apart from stalls and one priming clock per chunk.
`timescale 1ns/1ps
module tb_dma_writer;
  import speedllm_pkg::*;
  localparam int DEPTH = 16, NC = 12;
  logic clk = 0, rst_n = 1;
  // a real falling edge applies the asynchronous reset before the first clock
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  logic drain_ok, drain_done, aw_valid, aw_ready, idle;
  logic [4:0] drain_len;
  addr_t drain_addr, aw_addr, ar_addr = '0;
  logic [3:0] raddr;
  data_t rdata, w_data, r_data;
  logic ar_valid = 0, ar_ready, r_valid;

  dma_writer #(.DEPTH(DEPTH)) dut (.*);
  hbm_model #(.WORDS(4096), .LAT(4), .STALL_PCT(20), .BURST_PER(1000), .BURST_LEN(50)) u_hbm (.*);

  int checks = 0, failures = 0;
  int clen [NC], caddr [NC];
  data_t cdat [NC][DEPTH];
  int ci = 0, words = 0;
  longint cyc = 0, t0;
  always @(posedge clk) cyc++;

  assign drain_ok   = (ci < NC);
  assign drain_len  = 5'(clen[ci < NC ? ci : 0]);
  assign drain_addr = addr_t'(caddr[ci < NC ? ci : 0]);
  always @(posedge clk) begin
    rdata <= cdat[ci < NC ? ci : 0][raddr];
    if (drain_done) ci <= ci + 1;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < NC; c++) begin
      clen[c] = $urandom_range(1, DEPTH); caddr[c] = 256 * c + $urandom_range(100);
      words += clen[c];
      for (int j = 0; j < DEPTH; j++) cdat[c][j] = $urandom;
    end
    for (int k = 0; k < 4096; k++) u_hbm.mem[k] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    t0 = cyc;
    wait (ci == NC);
    repeat (5) @(posedge clk);
    for (int c = 0; c < NC; c++) for (int j = 0; j < clen[c]; j++) begin
      checks++;
      if (u_hbm.mem[caddr[c] + j] != cdat[c][j]) begin failures++; if (failures < 10) $display("FAIL: chunk %0d word %0d", c, j); end
    end
    checks++;
    if (u_hbm.writes != words || !idle) begin failures++; $display("FAIL: %0d writes for %0d words", u_hbm.writes, words); end
    checks++;
    if (cyc - t0 > words + u_hbm.aw_stalls + 2 * NC + 10) begin failures++; $display("FAIL: slower than one word per clock"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
