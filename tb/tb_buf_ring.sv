// tb_buf_ring: self-checking testbench of buf_ring (N = 4). A random
// producer completes buffers whenever one is free and a random consumer
// releases them whenever one is full; a queue model checks that buffers are
// handed out cyclically, that the consumer sees them in fill order with their
// lengths and addresses, and that fill_ok, drain_ok and used track the count.
// Both the "all full" and "all empty" states are required to occur.
`timescale 1ns/1ps
module tb_buf_ring;
  localparam int N = 4, DEPTH = 256, AW = 32;
  logic clk = 0, rst_n = 1;
  // a real falling edge applies the asynchronous reset before the first clock
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  logic fill_ok, fill_done = 0, drain_ok, drain_done = 0;
  logic [1:0] fill_idx, drain_idx;
  logic [8:0] fill_len = '0, drain_len;
  logic [31:0] fill_addr = '0, drain_addr;
  logic [2:0] used;
  int checks = 0, failures = 0, n_full = 0, n_empty = 0;

  buf_ring dut (.*);

  typedef struct { int idx; int len; int addr; } rec_t;
  rec_t q [$];
  int exp_fill = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", m); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      // state checks (mid-cycle)
      chk(used == 3'(q.size()), "used");
      chk(fill_ok == (q.size() < N), "fill_ok");
      chk(drain_ok == (q.size() > 0), "drain_ok");
      chk(fill_idx == 2'(exp_fill), "fill index not cyclic");
      if (q.size() > 0) begin
        chk(drain_idx == 2'(q[0].idx), "drain order");
        chk(drain_len == 9'(q[0].len) && drain_addr == 32'(q[0].addr), "drain len/addr");
      end
      if (q.size() == N) n_full++;
      if (q.size() == 0) n_empty++;
      // choose actions for this cycle (phase-dependent bias)
      fill_done  = fill_ok  && ($urandom_range(99) < ((t / 300) % 2 ? 70 : 30));
      drain_done = drain_ok && ($urandom_range(99) < ((t / 300) % 2 ? 30 : 70));
      fill_len   = 9'($urandom_range(1, 256));
      fill_addr  = $urandom;
      @(posedge clk);
      #1;
      if (drain_done) void'(q.pop_front());
      if (fill_done) begin
        q.push_back('{idx: exp_fill, len: int'(fill_len), addr: int'(fill_addr)});
        exp_fill = (exp_fill + 1) % N;
      end
    end
    chk(n_full > 0, "ring never full");
    chk(n_empty > 0, "ring never empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
