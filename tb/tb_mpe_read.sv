// tb_mpe_read: self-checking testbench of mpe_read with DEPTH = 32 and four
// read buffers (modelled here, with the RAM's one-cycle latency, and the real
// input multiplexer). Chunks of random length are queued; the entries
// dispatched on the selected operator channel must be exactly the queued
// entries in order, under random operator back-pressure, and no other channel
// may be offered anything. With the operator always ready, a 32-entry chunk
// must stream at one entry per clock.
`timescale 1ns/1ps
module tb_mpe_read;
  import speedllm_pkg::*;
  localparam int DEPTH = 32, NRB = 4, NU = 7;
  logic clk = 0, rst_n = 1;
  // a real falling edge applies the asynchronous reset before the first clock
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  op_e op = OP_MATMUL;
  logic drain_ok, drain_done, mux_valid, mux_out_valid, idle;
  logic [1:0] drain_idx, mux_sel;
  logic [5:0] drain_len;
  logic [4:0] raddr;
  entry_t mux_out_data, rdata [NRB];
  logic [NU-1:0] u_valid, u_ready;
  data_t u_a, u_b;
  tag_t u_tag;

  mpe_read #(.DEPTH(DEPTH), .NRB(NRB)) dut (.*);
  buf_rd_mux #(.N(NRB), .W($bits(entry_t))) u_mux (.clk, .rst_n, .sel(mux_sel), .in_valid(mux_valid),
    .in_data(rdata), .out_valid(mux_out_valid), .out_data(mux_out_data));

  entry_t bufm [NRB][DEPTH];
  int lens [NRB];
  int used = 0, didx = 0, fidx = 0;
  entry_t expq [$];
  int checks = 0, failures = 0, taken = 0;
  bit always_ready = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  assign drain_ok  = (used > 0);
  assign drain_idx = 2'(didx);
  assign drain_len = 6'(lens[didx]);
  always @(posedge clk) begin
    for (int j = 0; j < NRB; j++) rdata[j] <= bufm[j][raddr];
    if (drain_done) begin didx <= (didx + 1) % NRB; used <= used - 1; end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // operator side
  always @(posedge clk) if (rst_n) begin
    u_ready <= always_ready ? '1 : NU'($urandom);
    if ((u_valid & ~(NU'(1) << op)) != 0) begin checks++; failures++; $display("FAIL: wrong channel"); end
    if (u_valid[op] && u_ready[op]) begin
      entry_t e;
      e = expq.pop_front();
      checks++;
      if (u_a != e.a || u_b != e.b || u_tag != e.tag) begin failures++; if (failures < 10) $display("FAIL: entry %0d", taken); end
      taken++;
    end
  end

  task automatic add_chunk(int len);
    wait (used < NRB);
    @(negedge clk);
    for (int j = 0; j < len; j++) begin
      entry_t e;
      e.a = $urandom; e.b = $urandom; e.tag = 3'($urandom);
      bufm[fidx][j] = e;
      expq.push_back(e);
    end
    lens[fidx] = len;
    fidx = (fidx + 1) % NRB;
    used++;
  endtask

  initial begin
    longint t0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 12; c++) add_chunk($urandom_range(1, DEPTH));
    wait (expq.size() == 0 && idle);
    op = OP_SOFTMAX;
    for (int c = 0; c < 5; c++) add_chunk($urandom_range(1, DEPTH));
    wait (expq.size() == 0 && idle);
    // rate: one entry per clock
    always_ready = 1;
    repeat (3) @(negedge clk);
    t0 = cyc;
    add_chunk(DEPTH);
    wait (expq.size() == 0);
    checks++;
    if (cyc - t0 > DEPTH + 5) begin failures++; $display("FAIL: %0d clocks for %0d entries", cyc - t0, DEPTH); end
    repeat (5) @(negedge clk);
    checks++;
    if (!idle || used != 0) begin failures++; $display("FAIL: not idle at end"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
