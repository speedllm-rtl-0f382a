// tb_speedllm_context: attention at the context lengths of the evaluated
// workloads, on the accelerator at its default sizes.
// The workloads are generation runs of the 15M-parameter TinyStories model
// with [prompt : generated] token counts of [128:512], [128:1024],
// [128:1536], [512:512], [512:1024] and [512:1536]. They differ only in how
// long the KV cache grows, and the last generated token of each sees the
// longest context: 640, 1152, 1664, 1024, 1536 and 2048 positions. For each
// workload this test runs the attention part of one decoder layer for that
// last token: RoPE on q and on every head's new key (in place in the cache),
// scaling of q, and per head the score Matmul over the K cache (row stride
// = head size), Softmax over all positions, and the weighted sum over the V
// cache (row stride 1, column stride = head size). The longest one fills
// RMSNorm/Softmax vector storage exactly (2048 words). Simulating every
// layer of every token of a workload would take billions of cycles; the
// attention of the last token is the part whose size depends on the
// workload, so it is the part exercised here.
// A reference interpreter executes each program in double-precision real
// arithmetic on a shadow memory; every word the accelerator wrote is
// compared with it (tolerance 0.001 + 2 %, tighter than in the layer test
// because softmax weights over 2048 positions are near 0.0005). The memory
// model stalls both channels at random. The test counts chunked operands, buffer recycling,
// Softmax vectors longer than one read buffer and full-length (2048)
// Softmax vectors, operator back-pressure and AXI stalls, and counts a
// failure for any that never occurred.
`timescale 1ns/1ps
module tb_speedllm_context;
  import speedllm_pkg::*;

  localparam int DIM = 288, NH = 6, HS = 48, SEQ = 2048, NW = 6;
  localparam int CTX [NW] = '{640, 1152, 1664, 1024, 1536, 2048};
  // memory map (word addresses)
  localparam int Q = 'h0000, QR = 'h0200, QS = 'h0400, SCL = 'h0600, XO = 'h0800;
  localparam int ATT = 'h1000, ATTS = 'h4000, TAB = 'h8000;
  localparam int KC = 'h40000, VC = 'h100000;
  localparam int WORDS = 'h1c0000;

  logic clk = 0, rst_n = 1;
  // a real falling edge applies the asynchronous reset before the first clock
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic   instr_valid = 0, instr_ready;
  instr_t instr = '0;
  logic   ar_valid, ar_ready, r_valid, aw_valid, aw_ready, idle;
  addr_t  ar_addr, aw_addr;
  data_t  r_data, w_data;
  logic [31:0] ops_done;

  speedllm_top dut (.*);
  hbm_model #(.WORDS(WORDS), .LAT(8), .STALL_PCT(10)) u_hbm (.*);

  int checks = 0, failures = 0;
  longint cycles = 0;
  always @(posedge clk) cycles++;

  // ---------------- watchdog ----------------
  initial begin
    repeat (60_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference interpreter ----------------
  real sh [int];
  function automatic real rd(int a);
    return sh.exists(a) ? sh[a] : 0.0;
  endfunction
  function automatic real rabs(real v);
    return v < 0.0 ? -v : v;
  endfunction
  function automatic real q2r(data_t v);
    return real'(v) / 65536.0;
  endfunction
  function automatic data_t r2q(real v);
    return data_t'($rtoi(v * 65536.0));
  endfunction

  typedef struct { int dst; int len; } region_t;
  region_t regions [$];

  // only the operators attention uses
  task automatic ref_exec(instr_t i);
    real t [];
    int  nres;
    nres = (i.op == OP_MATMUL) ? int'(i.d) : int'(i.n);
    t = new[nres];
    case (i.op)
      OP_MUL:  for (int k = 0; k < i.n; k++) t[k] = rd(i.a_base+k) * rd(i.b_base+k);
      OP_MATMUL: for (int r = 0; r < i.d; r++) begin
        real s;
        s = 0.0;
        for (int k = 0; k < i.n; k++) s += rd(i.a_base + r*i.rs + k*i.cs) * rd(i.b_base+k);
        t[r] = s;
      end
      OP_ROPE: for (int k = 0; k < i.n; k += 2) begin
        int  j;
        real c, s, x0, x1;
        j  = (k/2) % (i.hs/2);
        c  = rd(i.b_base + i.pos*i.hs + 2*j);
        s  = rd(i.b_base + i.pos*i.hs + 2*j + 1);
        x0 = rd(i.a_base+k);
        x1 = rd(i.a_base+k+1);
        t[k] = x0*c - x1*s;  t[k+1] = x0*s + x1*c;
      end
      OP_SOFTMAX: begin
        real mx, s;
        mx = rd(i.a_base);
        s  = 0.0;
        for (int k = 1; k < i.n; k++) if (rd(i.a_base+k) > mx) mx = rd(i.a_base+k);
        for (int k = 0; k < i.n; k++) begin t[k] = $exp(rd(i.a_base+k) - mx); s += t[k]; end
        for (int k = 0; k < i.n; k++) t[k] /= s;
      end
      default: ;
    endcase
    for (int k = 0; k < nres; k++) sh[i.dst_base + k] = t[k];
    regions.push_back('{dst: int'(i.dst_base), len: nres});
  endtask

  function automatic instr_t mk(op_e op, int a, int b, int dst, int n, int d = 0,
                                int pos = 0, int hs = 0, int rs = 0, int cs = 1);
    instr_t i;
    i = '0;
    i.op = op; i.a_base = a; i.b_base = b; i.dst_base = dst;
    i.n = n; i.d = d; i.pos = pos; i.hs = hs; i.rs = rs; i.cs = cs;
    return i;
  endfunction

  task automatic put(int a, real v);
    u_hbm.mem[a] = r2q(v);
    sh[a] = q2r(r2q(v));
  endtask
  function automatic real rnd(real amp);
    return amp * (real'($urandom_range(0, 20000)) / 10000.0 - 1.0);
  endfunction

  // shared data: rotation table for every position, a full KV cache
  task automatic build_data;
    for (int p = 0; p < SEQ; p++)
      for (int j = 0; j < HS/2; j++) begin
        real f;
        f = 1.0 / (10000.0 ** (real'(2*j) / HS));
        put(TAB + p*HS + 2*j, $cos(p*f)); put(TAB + p*HS + 2*j + 1, $sin(p*f));
      end
    for (int k = 0; k < DIM; k++) put(SCL+k, 1.0 / $sqrt(real'(HS)));
    for (int k = 0; k < NH*SEQ*HS; k++) begin
      put(KC + k, rnd(1.0));
      put(VC + k, rnd(1.0));
    end
  endtask

  // program for the last token of a context of 'ctx' positions
  task automatic build_prog(int ctx, ref instr_t prog [$]);
    int pos;
    pos = ctx - 1;
    prog.delete();
    for (int k = 0; k < DIM; k++) put(Q+k, rnd(1.0));
    prog.push_back(mk(OP_ROPE, Q, TAB, QR, DIM, 0, pos, HS));
    for (int h = 0; h < NH; h++)
      prog.push_back(mk(OP_ROPE, KC + h*SEQ*HS + pos*HS, TAB, KC + h*SEQ*HS + pos*HS, HS, 0, pos, HS));
    prog.push_back(mk(OP_MUL, QR, SCL, QS, DIM));
    for (int h = 0; h < NH; h++) begin
      prog.push_back(mk(OP_MATMUL, KC + h*SEQ*HS, QS + h*HS, ATT + h*SEQ, HS, ctx, 0, 0, HS, 1));
      prog.push_back(mk(OP_SOFTMAX, ATT + h*SEQ, 0, ATTS + h*SEQ, ctx));
      prog.push_back(mk(OP_MATMUL, VC + h*SEQ*HS, ATTS + h*SEQ, XO + h*HS, ctx, HS, 0, 0, 1, HS));
    end
  endtask

  // ---------------- mechanism counters ----------------
  int n_chunks = 0, n_reuse = 0, n_long_sm = 0, n_full_sm = 0, n_backpressure = 0;
  int fills_this_op = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.start) begin
      if (dut.cur.op == OP_SOFTMAX && dut.cur.n > 256)  n_long_sm++;
      if (dut.cur.op == OP_SOFTMAX && dut.cur.n == 2048) n_full_sm++;
      fills_this_op = 0;
    end
    if (dut.rd_fill_done) begin
      n_chunks++;
      fills_this_op++;
      if (fills_this_op > 4) n_reuse++;
    end
    if (dut.u_mpe.iv[dut.cur.op] && !dut.u_mpe.ir[dut.cur.op]) n_backpressure++;
  end

  task automatic need(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL: mechanism never happened: %s", what); end
    else $display("  %-34s %0d", what, n);
  endtask

  instr_t prog [$];
  int     issued = 0;

  initial begin
    build_data();
    repeat (5) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int w = 0; w < NW; w++) begin
      longint c0;
      int      f0;
      c0 = cycles;
      f0 = failures;
      build_prog(CTX[w], prog);
      regions.delete();
      foreach (prog[k]) ref_exec(prog[k]);
      foreach (prog[k]) begin
        instr       <= prog[k];
        instr_valid <= 1'b1;
        @(posedge clk);
        while (!instr_ready) @(posedge clk);
      end
      instr_valid <= 1'b0;
      issued += prog.size();
      wait (ops_done == issued && idle);
      repeat (5) @(posedge clk);
      foreach (regions[k]) for (int j = 0; j < regions[k].len; j++) begin
        int  a;
        real got, exp_v;
        a = regions[k].dst + j;
        got = q2r(u_hbm.mem[a]);
        exp_v = rd(a);
        checks++;
        if (rabs(got - exp_v) > 0.001 + 0.02 * rabs(exp_v)) begin
          failures++;
          if (failures < 20) $display("FAIL: context %0d word %0h got %f expected %f", CTX[w], a, got, exp_v);
        end
      end
      $display("context %0d: %0d instructions, %0d cycles, %0d failures",
               CTX[w], prog.size(), cycles - c0, failures - f0);
    end
    checks++;
    if (ops_done != issued) failures++;
    $display("mechanisms:");
    need("read-buffer chunks", n_chunks);
    need("buffer reuse within an instruction", n_reuse);
    need("Softmax longer than a read buffer", n_long_sm);
    need("Softmax of full vector storage", n_full_sm);
    need("operator back-pressure", n_backpressure);
    need("AXI read stalls", u_hbm.ar_stalls);
    need("AXI write stalls", u_hbm.aw_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
