// tb_dma_reader: self-checking testbench of dma_reader with DEPTH = 16 and
// the HBM model (latency 8, random stalls). The testbench plays the agu
// (150 pairs at pseudo-random addresses, the last tagged op_end) and the
// buffer ring (four buffers, drained at random). Every completed chunk is
// compared with the memory contents: 16 pairs per chunk except a final
// partial chunk of 6, pairs in order with their tags. It also requires that
// the reader was held off by full buffers at least once.
`timescale 1ns/1ps
module tb_dma_reader;
  import speedllm_pkg::*;
  localparam int DEPTH = 16, NP = 150, NB = 4;
  logic clk = 0, rst_n = 1;
  // a real falling edge applies the asynchronous reset before the first clock
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic agu_valid, agu_next;
  addr_t agu_addr_a, agu_addr_b;
  tag_t  agu_tag;
  logic fill_ok, fill_done, buf_we, ar_valid, ar_ready, r_valid, idle;
  logic [4:0] fill_len;
  logic [3:0] buf_waddr;
  entry_t buf_wdata;
  addr_t ar_addr;
  data_t r_data;
  logic aw_valid = 0, aw_ready;
  addr_t aw_addr = '0;
  data_t w_data = '0;

  dma_reader #(.DEPTH(DEPTH)) dut (.*);
  hbm_model #(.WORDS(4096), .LAT(8), .STALL_PCT(20)) u_hbm (.*);

  int checks = 0, failures = 0, full_stalls = 0;
  entry_t bufm [NB][DEPTH];
  int used = 0, fidx = 0, pairs_seen = 0, chunks = 0;
  int pa [NP], pb [NP];

  assign fill_ok = (used < NB);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // agu stand-in
  int pi = 0;
  always_comb begin
    agu_valid  = rst_n && (pi < NP);
    agu_addr_a = addr_t'(pa[pi < NP ? pi : 0]);
    agu_addr_b = addr_t'(pb[pi < NP ? pi : 0]);
    agu_tag    = '{bias: 1'b0, row_end: 1'b0, op_end: (pi == NP-1)};
  end

  always @(posedge clk) if (rst_n) begin
    if (agu_next) pi <= pi + 1;
    if (agu_valid && !fill_ok) full_stalls++;
    if (buf_we) bufm[fidx][buf_waddr] = buf_wdata;
    if (fill_done) begin
      int len, p;
      len = (pairs_seen + DEPTH <= NP) ? DEPTH : NP - pairs_seen;
      checks++;
      if (int'(fill_len) != len) begin failures++; $display("FAIL: chunk %0d len %0d", chunks, fill_len); end
      for (int j = 0; j < len; j++) begin
        p = pairs_seen + j;
        checks++;
        if (bufm[fidx][j].a != u_hbm.mem[pa[p]] || bufm[fidx][j].b != u_hbm.mem[pb[p]] ||
            bufm[fidx][j].tag.op_end != (p == NP-1)) begin
          failures++;
          if (failures < 10) $display("FAIL: pair %0d a %h/%h b %h/%h", p, bufm[fidx][j].a, u_hbm.mem[pa[p]], bufm[fidx][j].b, u_hbm.mem[pb[p]]);
        end
      end
      pairs_seen += len;
      chunks++;
      fidx = (fidx + 1) % NB;
    end
    // ring model: drain at random
    used <= used + int'(fill_done) - int'(used > 0 && $urandom_range(79) == 0);
  end

  initial begin
    for (int k = 0; k < 4096; k++) u_hbm.mem[k] = $urandom;
    for (int p = 0; p < NP; p++) begin pa[p] = $urandom_range(4095); pb[p] = $urandom_range(4095); end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (pairs_seen == NP);
    repeat (20) @(posedge clk);
    checks++;
    if (!idle || chunks != (NP + DEPTH - 1) / DEPTH) begin failures++; $display("FAIL: idle=%0d chunks=%0d", idle, chunks); end
    checks++;
    if (full_stalls == 0) begin failures++; $display("FAIL: never stalled on full buffers"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
