// tb_op_sched: self-checking testbench of op_sched (queue depth 8). Twelve
// distinct instructions are pushed back to back while the "datapath" (this
// testbench) takes a random time to finish each one. Checks: instr_ready
// drops when the queue is full; start pulses once per instruction, in push
// order, with cur holding that instruction; no new start before the previous
// instruction's write_done, wb_empty and writer_idle are all seen; ops_done
// counts them all and idle returns at the end.
`timescale 1ns/1ps
module tb_op_sched;
  import speedllm_pkg::*;
  logic clk = 0, rst_n = 1;
  // a real falling edge applies the asynchronous reset before the first clock
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  logic instr_valid = 0, instr_ready, start, idle;
  instr_t instr = '0, cur;
  logic write_done = 1, wb_empty = 1, writer_idle = 1;
  logic [31:0] ops_done;

  op_sched dut (.*);

  int checks = 0, failures = 0, n_full = 0, starts = 0;
  bit busy = 0;
  instr_t sent [$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // datapath stand-in
  initial begin
    forever begin
      @(negedge clk);
      if (start) begin
        instr_t e;
        checks++;
        if (busy) begin failures++; $display("FAIL: start while busy"); end
        e = sent.pop_front();
        if (cur != e) begin failures++; $display("FAIL: instruction %0d out of order", starts); end
        starts++;
        busy = 1;
        write_done = 0;
        repeat ($urandom_range(5, 40)) @(negedge clk);
        write_done = 1; wb_empty = 0;
        repeat ($urandom_range(0, 5)) @(negedge clk);
        wb_empty = 1; writer_idle = 0;
        repeat ($urandom_range(0, 5)) @(negedge clk);
        writer_idle = 1;
        busy = 0;
      end
    end
  end

  initial begin
    bit ok;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 12; k++) begin
      instr_t i;
      i = '0;
      i.op = op_e'(k % 7); i.a_base = addr_t'(k * 1000); i.n = cnt_t'(k + 1);
      @(negedge clk);
      instr_valid = 1; instr = i;
      do begin
        ok = instr_ready;
        if (!ok) n_full++;
        @(negedge clk);
      end while (!ok);
      sent.push_back(i);
      instr_valid = 0;
    end
    wait (ops_done == 12);
    repeat (5) @(negedge clk);
    checks++;
    if (starts != 12 || !idle) begin failures++; $display("FAIL: starts=%0d idle=%0d", starts, idle); end
    checks++;
    if (n_full == 0) begin failures++; $display("FAIL: queue never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
