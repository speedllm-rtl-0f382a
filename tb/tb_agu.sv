// tb_agu: self-checking testbench of agu. For one instruction of each kind
// (Add, Mul, softmax, plain and fused SiLU, RoPE, dense Matmul, fused Matmul
// with residual, and a strided Matmul as used for attention over a value
// cache) the expected address/tag sequence is generated here from the
// operator definitions and compared entry by entry, with next pulled at
// random. The entry count must match exactly and valid must drop afterwards.
`timescale 1ns/1ps
module tb_agu;
  import speedllm_pkg::*;
  logic clk = 0, rst_n = 1;
  // a real falling edge applies the asynchronous reset before the first clock
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  logic   start = 0, next = 0, valid;
  instr_t instr = '0;
  addr_t  addr_a, addr_b;
  tag_t   tag;
  int checks = 0, failures = 0;
  agu dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { int a; int b; bit bias; bit row_end; bit op_end; } ent_t;
  ent_t e [$];

  function automatic instr_t mk(op_e op, bit fuse, int a, int b, int c, int n, int d, int pos, int hs, int rs, int cs);
    instr_t i = '0;
    i.op = op; i.fuse = fuse; i.a_base = a; i.b_base = b; i.c_base = c; i.dst_base = 'h999;
    i.n = n; i.d = d; i.pos = pos; i.hs = hs; i.rs = rs; i.cs = cs;
    return i;
  endfunction

  task automatic expect_seq(instr_t i);
    e.delete();
    if (i.op == OP_MATMUL) begin
      for (int r = 0; r < i.d; r++) begin
        for (int k = 0; k < i.n; k++)
          e.push_back('{a: i.a_base + r*i.rs + k*i.cs, b: i.b_base + k, bias: 0,
                        row_end: (!i.fuse && k == i.n-1), op_end: (!i.fuse && k == i.n-1 && r == i.d-1)});
        if (i.fuse) e.push_back('{a: i.c_base + r, b: i.c_base + r, bias: 1, row_end: 1, op_end: (r == i.d-1)});
      end
    end else begin
      for (int k = 0; k < i.n; k++) begin
        int b;
        case (i.op)
          OP_SOFTMAX: b = i.a_base + k;
          OP_SILU:    b = i.fuse ? i.b_base + k : i.a_base + k;
          OP_ROPE:    b = i.b_base + i.pos*i.hs + 2*((k/2) % (i.hs/2)) + (k % 2);
          default:    b = i.b_base + k;
        endcase
        e.push_back('{a: i.a_base + k, b: b, bias: 0, row_end: 0, op_end: (k == i.n-1)});
      end
    end
  endtask

  task automatic run(instr_t i);
    int got = 0;
    expect_seq(i);
    @(negedge clk);
    instr = i; start = 1;
    @(negedge clk);
    start = 0;
    while (got < e.size()) begin
      next = ($urandom_range(3) != 0);
      checks++;
      if (!valid || addr_a != addr_t'(e[got].a) || addr_b != addr_t'(e[got].b) ||
          tag.bias != e[got].bias || tag.row_end != e[got].row_end || tag.op_end != e[got].op_end) begin
        failures++;
        if (failures < 10) $display("FAIL op %0d entry %0d: v=%0d a=%0h/%0h b=%0h/%0h tag=%b", i.op, got,
                                    valid, addr_a, e[got].a, addr_b, e[got].b, tag);
      end
      @(negedge clk);
      if (next) got++;
    end
    next = 0;
    checks++;
    if (valid) begin failures++; $display("FAIL op %0d: valid after last entry", i.op); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(mk(OP_ADD,     0, 'h100, 'h400, 0, 37, 0, 0, 0, 0, 0));
    run(mk(OP_MUL,     0, 'h100, 'h400, 0, 5, 0, 0, 0, 0, 0));
    run(mk(OP_SOFTMAX, 0, 'h200, 0, 0, 9, 0, 0, 0, 0, 0));
    run(mk(OP_SILU,    0, 'h300, 'h700, 0, 11, 0, 0, 0, 0, 0));
    run(mk(OP_SILU,    1, 'h300, 'h700, 0, 11, 0, 0, 0, 0, 0));
    run(mk(OP_ROPE,    0, 'h500, 'h8000, 0, 24, 0, 3, 8, 0, 0));
    run(mk(OP_MATMUL,  0, 'h1000, 'h80, 0, 13, 6, 0, 0, 13, 1));
    run(mk(OP_MATMUL,  1, 'h1000, 'h80, 'h60, 7, 5, 0, 0, 7, 1));
    run(mk(OP_MATMUL,  0, 'h2000, 'h90, 0, 4, 6, 0, 0, 1, 6));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
