// tb_mpe_write: self-checking testbench of mpe_write with DEPTH = 16. Two
// instructions (50 Add results to 0x1000, then 7 Matmul results to 0x2345)
// are fed with random gaps while the other operator channels carry noise;
// the two write buffers are drained at random, so the stage also waits for a
// free buffer. Every closed chunk must have the right length, destination
// address (dst_base + index of its first word) and words; done must rise
// after the last result and stay high.
`timescale 1ns/1ps
module tb_mpe_write;
  import speedllm_pkg::*;
  localparam int DEPTH = 16, NU = 7;
  logic clk = 0, rst_n = 1;
  // a real falling edge applies the asynchronous reset before the first clock
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  op_e op = OP_ADD;
  logic start = 0, fill_ok, fill_done, we, done;
  addr_t dst_base = '0, fill_addr;
  cnt_t total = '0;
  logic [NU-1:0] u_valid = '0, u_ready;
  data_t u_data [NU], wdata;
  logic [4:0] fill_len;
  logic [3:0] waddr;

  mpe_write #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, used = 0, full_waits = 0;
  data_t bufm [DEPTH];
  data_t exp_w [$];
  int next_idx = 0;
  addr_t cur_dst;

  assign fill_ok = (used < 2);
  always @(posedge clk) if (rst_n) begin
    if (we) bufm[waddr] = wdata;
    if (fill_done) begin
      checks++;
      if (fill_addr != cur_dst + addr_t'(next_idx)) begin failures++; $display("FAIL: chunk address %h", fill_addr); end
      for (int j = 0; j < int'(fill_len); j++) begin
        checks++;
        if (bufm[j] != exp_w.pop_front()) begin failures++; if (failures < 10) $display("FAIL: word %0d", next_idx + j); end
      end
      next_idx += int'(fill_len);
    end
    if (u_valid[op] && !fill_ok) full_waits++;
    used <= used + int'(fill_done) - int'(used > 0 && $urandom_range(19) == 0);
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(op_e o, addr_t d, int n);
    @(negedge clk);
    op = o; dst_base = d; total = cnt_t'(n); start = 1; cur_dst = d; next_idx = 0;
    @(negedge clk);
    start = 0;
    checks++;
    if (done) begin failures++; $display("FAIL: done right after start"); end
    for (int k = 0; k < n; k++) begin
      bit ok;
      data_t v = $urandom;
      exp_w.push_back(v);
      while ($urandom_range(2) == 0) begin u_valid = '0; @(negedge clk); end
      u_valid = NU'(1) << o; u_data[o] = v;
      do begin
        ok = u_ready[o];
        for (int j = 0; j < NU; j++) if (j != o) u_data[j] = $urandom;
        @(negedge clk);
      end while (!ok);
      u_valid = '0;
    end
    @(negedge clk);
    checks++;
    if (!done || next_idx != n) begin failures++; $display("FAIL: done=%0d placed=%0d of %0d", done, next_idx, n); end
    checks++;
    if (u_ready != '0) begin failures++; $display("FAIL: ready after done"); end
  endtask

  initial begin
    for (int j = 0; j < NU; j++) u_data[j] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(OP_ADD, 'h1000, 50);
    run(OP_MATMUL, 'h2345, 7);
    checks++;
    if (full_waits == 0) begin failures++; $display("FAIL: never waited for a write buffer"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
