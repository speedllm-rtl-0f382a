// tb_mpe: self-checking testbench of the Matrix Processing Engine together
// with the memory-management block and the SFU, at DEPTH = 32 and
// VEC_MAX = 256. The testbench loads operand chunks into the read buffers
// through the fill port and empties the write buffers through the drain
// port, both at random moments. It runs a fused Matmul (5 x 40 plus residual),
// an Add over 70 words, a RoPE over 8 words, an RMSNorm over 45 words, a
// Softmax over 40 words and a fused SiLU over 12 words, and compares every
// written word and its destination address with real-arithmetic references.
`timescale 1ns/1ps
module tb_mpe;
  import speedllm_pkg::*;
  localparam int NRB = 4, NWB = 2, DEPTH = 32;
  logic clk = 0, rst_n = 1;
  // a real falling edge applies the asynchronous reset before the first clock
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  op_e op = OP_ADD;
  logic start = 0;
  addr_t dst_base = '0;
  cnt_t total = '0;
  logic fuse = 0;

  logic rd_fill_ok, rd_fill_done = 0, rd_we = 0, rd_drain_ok, rd_drain_done;
  logic [1:0] rd_fill_idx, rd_drain_idx;
  logic [5:0] rd_fill_len = '0, rd_drain_len;
  logic [4:0] rd_waddr = '0, rd_raddr;
  entry_t rd_wdata = '0, rd_rdata [NRB];
  logic wb_fill_ok, wb_fill_done, wb_drain_ok, wb_drain_done = 0;
  logic wb_fill_idx;
  logic [5:0] wb_fill_len, wb_drain_len;
  addr_t wb_fill_addr, wb_drain_addr;
  logic [1:0] wb_we;
  logic [4:0] wb_waddr, wb_raddr = '0;
  data_t wb_wdata, wb_rdata;
  logic [2:0] rd_used;
  logic [1:0] wb_used;
  logic sfu_valid, sfu_ready, sfu_out_valid, sfu_out_ready;
  data_t sfu_a, sfu_b, sfu_out_data;
  tag_t sfu_tag;
  logic read_idle, write_done;

  mem_mgmt #(.NRB(NRB), .NWB(NWB), .DEPTH(DEPTH)) u_mem (.*);
  mpe #(.NRB(NRB), .NWB(NWB), .DEPTH(DEPTH), .VEC_MAX(256)) dut (.*);
  sfu_silu u_sfu (.clk, .rst_n, .fuse, .in_valid(sfu_valid), .in_ready(sfu_ready), .in_a(sfu_a),
    .in_b(sfu_b), .in_tag(sfu_tag), .out_valid(sfu_out_valid), .out_ready(sfu_out_ready), .out_data(sfu_out_data));

  int checks = 0, failures = 0;
  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic data_t r2q(real v); return data_t'($rtoi(v * 65536.0)); endfunction
  function automatic real q2r(data_t v); return real'(v) / 65536.0; endfunction
  function automatic real rabs(real v); return v < 0.0 ? -v : v; endfunction
  function automatic real rnd(real amp); return amp * (real'($urandom_range(0, 20000)) / 10000.0 - 1.0); endfunction

  entry_t ents [$];
  real    expv [$];
  data_t  wmem [int];

  // producer: entries into read buffers, chunk by chunk
  task automatic load_all;
    while (ents.size() > 0) begin
      int len;
      wait (rd_fill_ok);
      @(negedge clk);
      len = (ents.size() < DEPTH) ? ents.size() : DEPTH;
      len = $urandom_range(1, len);
      for (int j = 0; j < len; j++) begin
        rd_we = 1; rd_waddr = 5'(j); rd_wdata = ents.pop_front();
        rd_fill_done = (j == len - 1); rd_fill_len = 6'(len);
        @(negedge clk);
      end
      rd_we = 0; rd_fill_done = 0;
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
  endtask

  // consumer: write buffers back into wmem
  initial begin
    forever begin
      @(negedge clk);
      if (rst_n && wb_drain_ok && $urandom_range(3) == 0) begin
        for (int j = 0; j < int'(wb_drain_len); j++) begin
          wb_raddr = 5'(j);
          @(negedge clk);
          wmem[int'(wb_drain_addr) + j] = wb_rdata;
        end
        wb_drain_done = 1;
        @(negedge clk);
        wb_drain_done = 0;
      end
    end
  end

  task automatic run(op_e o, bit f, int dst, real tol);
    int n = expv.size();
    @(negedge clk);
    op = o; fuse = f; dst_base = dst; total = cnt_t'(n); start = 1;
    @(negedge clk);
    start = 0;
    load_all();
    wait (write_done && wb_used == 0 && !wb_drain_done);
    repeat (3) @(negedge clk);
    for (int k = 0; k < n; k++) begin
      real g;
      checks++;
      g = wmem.exists(dst + k) ? q2r(wmem[dst + k]) : 1.0e9;
      if (rabs(g - expv[k]) > tol + tol * rabs(expv[k])) begin
        failures++;
        if (failures < 10) $display("FAIL: op %0d result %0d got %f expected %f", o, k, g, expv[k]);
      end
    end
    expv.delete();
  endtask

  function automatic entry_t e3(real a, real b, bit bias, bit re, bit oe);
    entry_t e;
    e.a = r2q(a); e.b = r2q(b); e.tag = '{bias: bias, row_end: re, op_end: oe};
    return e;
  endfunction

  initial begin
    real x [], w [], s, mx;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // fused matmul, 5 rows of 40, residual added
    x = new[40];
    for (int i = 0; i < 40; i++) x[i] = q2r(r2q(rnd(1.0)));
    for (int r = 0; r < 5; r++) begin
      real c;
      s = 0.0;
      for (int i = 0; i < 40; i++) begin
        real wv = q2r(r2q(rnd(1.0)));
        s += wv * x[i];
        ents.push_back(e3(wv, x[i], 0, 0, 0));
      end
      c = q2r(r2q(rnd(3.0)));
      ents.push_back(e3(c, c, 1, 1, r == 4));
      expv.push_back(s + c);
    end
    run(OP_MATMUL, 1, 'h100, 1e-3);
    // add
    for (int i = 0; i < 70; i++) begin
      real a = q2r(r2q(rnd(9.0))), b = q2r(r2q(rnd(9.0)));
      ents.push_back(e3(a, b, 0, 0, i == 69));
      expv.push_back(a + b);
    end
    run(OP_ADD, 0, 'h200, 1e-4);
    // rope, 4 pairs
    for (int i = 0; i < 4; i++) begin
      real th = rnd(3.0), x0 = q2r(r2q(rnd(2.0))), x1 = q2r(r2q(rnd(2.0)));
      real c = q2r(r2q($cos(th))), sn = q2r(r2q($sin(th)));
      ents.push_back(e3(x0, c, 0, 0, 0)); ents.push_back(e3(x1, sn, 0, 0, i == 3));
      expv.push_back(x0*c - x1*sn); expv.push_back(x0*sn + x1*c);
    end
    run(OP_ROPE, 0, 'h300, 1e-3);
    // rmsnorm
    x = new[45]; w = new[45]; s = 0.0;
    for (int i = 0; i < 45; i++) begin x[i] = q2r(r2q(rnd(3.0))); w[i] = q2r(r2q(rnd(2.0))); s += x[i]*x[i]; end
    s = 1.0 / $sqrt(s / 45 + 1e-5);
    for (int i = 0; i < 45; i++) begin ents.push_back(e3(x[i], w[i], 0, 0, i == 44)); expv.push_back(w[i]*x[i]*s); end
    run(OP_RMSNORM, 0, 'h400, 2e-3);
    // softmax
    x = new[40]; s = 0.0; mx = -1.0e9;
    for (int i = 0; i < 40; i++) begin x[i] = q2r(r2q(rnd(5.0))); if (x[i] > mx) mx = x[i]; end
    for (int i = 0; i < 40; i++) s += $exp(x[i] - mx);
    for (int i = 0; i < 40; i++) begin ents.push_back(e3(x[i], x[i], 0, 0, i == 39)); expv.push_back($exp(x[i] - mx) / s); end
    run(OP_SOFTMAX, 0, 'h500, 1e-3);
    // fused silu
    for (int i = 0; i < 12; i++) begin
      real a = q2r(r2q(rnd(6.0))), b = q2r(r2q(rnd(2.0)));
      ents.push_back(e3(a, b, 0, 0, i == 11));
      expv.push_back(a / (1.0 + $exp(-a)) * b);
    end
    run(OP_SILU, 1, 'h600, 2e-3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
