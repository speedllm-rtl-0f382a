// tb_speedllm_top: end-to-end test of the accelerator at its default sizes.
// It runs one complete Llama2 decoder layer of the 15M-parameter TinyStories
// model (dim 288, hidden 768, 6 heads of 48, KV cache of SEQ positions, token
// at position POS) as a program of 47 instructions: RMSNorm, Q/K/V matmuls
// (K and V per head, straight into a head-major KV cache), RoPE on q and k,
// scaling of q (Mul), per-head attention scores (strided Matmul over the K
// cache), Softmax, weighted sum over the V cache (Matmul with column stride),
// output projection fused with the residual add, RMSNorm, the two FFN
// matmuls, SiLU fused with the gate multiply, the down projection and a
// separate residual Add. Two long vector instructions follow (a plain SiLU
// over 1536 words and an Add over 2048 words).
// A reference interpreter executes the same program on a shadow memory in
// double-precision real arithmetic; every word the accelerator wrote is
// compared with it (tolerance 0.02 + 2 %). The HBM model stalls both AXI
// channels at random. The test counts how often each mechanism occurred
// (chunked operands, buffer recycling within one instruction, loader stalled
// on full read buffers, Write stage stalled on full write buffers, operator
// back-pressure, load/compute/write-back overlap, AXI stalls, both fusions,
// every operator) and counts a failure for any that never occurred. It also
// measures the memory traffic of each fused instruction and checks it is
// exactly that of the fused form: the intermediate vector of the unfused
// pair is never written (both fusions) nor read back (SiLU*Mul saves the
// reads too; Matmul+Add fetches the residual as both operands of its bias
// entry, so its reads equal those of the unfused pair).
`timescale 1ns/1ps
module tb_speedllm_top;
  import speedllm_pkg::*;

  localparam int DIM = 288, HID = 768, NH = 6, HS = 48, SEQ = 8, POS = 5;
  // memory map (word addresses)
  localparam int X = 'h0000, WATT = 'h0200, WFFN = 'h0400, SCL = 'h0600, TAB = 'h0800;
  localparam int XB = 'h1000, Q = 'h1200, QR = 'h1400, QS = 'h1600, XO = 'h1800;
  localparam int X2 = 'h1a00, XB2 = 'h1c00, T = 'h1e00, X3 = 'h2000;
  localparam int ATT = 'h2200, ATTS = 'h2400, H1 = 'h3000, H3 = 'h3400, HG = 'h3800;
  localparam int KC = 'h4000, VC = 'h8000;
  localparam int WQ = 'h10000, WK = 'h30000, WV = 'h50000, WO = 'h70000;
  localparam int W1 = 'h90000, W3 = 'hd0000, W2 = 'h110000;
  localparam int LA = 'h146000, LB = 'h146800, LC = 'h147000, LS = 'h147800, LSO = 'h148000;
  localparam int NL = 2048, NS = 1536;
  localparam int WORDS = 'h150000;

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
    repeat (20_000_000) @(posedge clk);
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

  task automatic ref_exec(instr_t i);
    real t [];
    int  nres;
    nres = (i.op == OP_MATMUL) ? int'(i.d) : int'(i.n);
    t = new[nres];
    case (i.op)
      OP_ADD:  for (int k = 0; k < i.n; k++) t[k] = rd(i.a_base+k) + rd(i.b_base+k);
      OP_MUL:  for (int k = 0; k < i.n; k++) t[k] = rd(i.a_base+k) * rd(i.b_base+k);
      OP_MATMUL: for (int r = 0; r < i.d; r++) begin
        real s = 0.0;
        for (int k = 0; k < i.n; k++) s += rd(i.a_base + r*i.rs + k*i.cs) * rd(i.b_base+k);
        if (i.fuse) s += rd(i.c_base + r);
        t[r] = s;
      end
      OP_ROPE: for (int k = 0; k < i.n; k += 2) begin
        int  j = (k/2) % (i.hs/2);
        real c = rd(i.b_base + i.pos*i.hs + 2*j), s = rd(i.b_base + i.pos*i.hs + 2*j + 1);
        real x0 = rd(i.a_base+k), x1 = rd(i.a_base+k+1);
        t[k] = x0*c - x1*s;  t[k+1] = x0*s + x1*c;
      end
      OP_RMSNORM: begin
        real ss = 0.0;
        for (int k = 0; k < i.n; k++) ss += rd(i.a_base+k)**2;
        ss = 1.0 / $sqrt(ss / i.n + 1e-5);
        for (int k = 0; k < i.n; k++) t[k] = rd(i.b_base+k) * rd(i.a_base+k) * ss;
      end
      OP_SOFTMAX: begin
        real mx = rd(i.a_base), s = 0.0;
        for (int k = 1; k < i.n; k++) if (rd(i.a_base+k) > mx) mx = rd(i.a_base+k);
        for (int k = 0; k < i.n; k++) begin t[k] = $exp(rd(i.a_base+k) - mx); s += t[k]; end
        for (int k = 0; k < i.n; k++) t[k] /= s;
      end
      OP_SILU: for (int k = 0; k < i.n; k++) begin
        real x = rd(i.a_base+k);
        t[k] = x / (1.0 + $exp(-x));
        if (i.fuse) t[k] *= rd(i.b_base+k);
      end
      default: ;
    endcase
    for (int k = 0; k < nres; k++) sh[i.dst_base + k] = t[k];
    regions.push_back('{dst: int'(i.dst_base), len: nres});
  endtask

  // ---------------- program ----------------
  instr_t prog [$];
  function automatic instr_t mk(op_e op, bit fuse, int a, int b, int c, int dst,
                                int n, int d = 0, int pos = 0, int hs = 0, int rs = 0, int cs = 1);
    instr_t i;
    i = '0;
    i.op = op; i.fuse = fuse; i.a_base = a; i.b_base = b; i.c_base = c; i.dst_base = dst;
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

  task automatic build;
    for (int k = 0; k < DIM; k++) begin
      put(X+k, rnd(1.0)); put(WATT+k, 1.0 + rnd(0.2)); put(WFFN+k, 1.0 + rnd(0.2));
      put(SCL+k, 1.0 / $sqrt(real'(HS)));
    end
    for (int p = 0; p < SEQ; p++)
      for (int j = 0; j < HS/2; j++) begin
        real f = 1.0 / (10000.0 ** (real'(2*j) / HS));
        put(TAB + p*HS + 2*j, $cos(p*f)); put(TAB + p*HS + 2*j + 1, $sin(p*f));
      end
    for (int k = 0; k < DIM*DIM; k++) begin
      put(WQ+k, rnd(0.06)); put(WK+k, rnd(0.06)); put(WV+k, rnd(0.06)); put(WO+k, rnd(0.06));
    end
    for (int k = 0; k < DIM*HID; k++) begin
      put(W1+k, rnd(0.06)); put(W3+k, rnd(0.06)); put(W2+k, rnd(0.04));
    end
    for (int h = 0; h < NH; h++)
      for (int p = 0; p < POS; p++)
        for (int k = 0; k < HS; k++) begin
          put(KC + h*SEQ*HS + p*HS + k, rnd(1.0));
          put(VC + h*SEQ*HS + p*HS + k, rnd(1.0));
        end
    prog.push_back(mk(OP_RMSNORM, 0, X, WATT, 0, XB, DIM));
    prog.push_back(mk(OP_MATMUL, 0, WQ, XB, 0, Q, DIM, DIM, 0, 0, DIM, 1));
    for (int h = 0; h < NH; h++) begin
      prog.push_back(mk(OP_MATMUL, 0, WK + h*HS*DIM, XB, 0, KC + h*SEQ*HS + POS*HS, DIM, HS, 0, 0, DIM, 1));
      prog.push_back(mk(OP_MATMUL, 0, WV + h*HS*DIM, XB, 0, VC + h*SEQ*HS + POS*HS, DIM, HS, 0, 0, DIM, 1));
    end
    prog.push_back(mk(OP_ROPE, 0, Q, TAB, 0, QR, DIM, 0, POS, HS));
    for (int h = 0; h < NH; h++)
      prog.push_back(mk(OP_ROPE, 0, KC + h*SEQ*HS + POS*HS, TAB, 0, KC + h*SEQ*HS + POS*HS, HS, 0, POS, HS));
    prog.push_back(mk(OP_MUL, 0, QR, SCL, 0, QS, DIM));
    for (int h = 0; h < NH; h++) begin
      prog.push_back(mk(OP_MATMUL, 0, KC + h*SEQ*HS, QS + h*HS, 0, ATT + h*SEQ, HS, POS+1, 0, 0, HS, 1));
      prog.push_back(mk(OP_SOFTMAX, 0, ATT + h*SEQ, 0, 0, ATTS + h*SEQ, POS+1));
      prog.push_back(mk(OP_MATMUL, 0, VC + h*SEQ*HS, ATTS + h*SEQ, 0, XO + h*HS, POS+1, HS, 0, 0, 1, HS));
    end
    prog.push_back(mk(OP_MATMUL, 1, WO, XO, X, X2, DIM, DIM, 0, 0, DIM, 1));
    prog.push_back(mk(OP_RMSNORM, 0, X2, WFFN, 0, XB2, DIM));
    prog.push_back(mk(OP_MATMUL, 0, W1, XB2, 0, H1, DIM, HID, 0, 0, DIM, 1));
    prog.push_back(mk(OP_MATMUL, 0, W3, XB2, 0, H3, DIM, HID, 0, 0, DIM, 1));
    prog.push_back(mk(OP_SILU, 1, H1, H3, 0, HG, HID));
    prog.push_back(mk(OP_MATMUL, 0, W2, HG, 0, T, HID, DIM, 0, 0, HID, 1));
    prog.push_back(mk(OP_ADD, 0, X2, T, 0, X3, DIM));
    // two long vector instructions beyond the layer: a plain SiLU, slow
    // enough to fill all read buffers, and an Add long enough to keep
    // loading, computing and writing back busy at the same time
    for (int k = 0; k < NL; k++) begin put(LA+k, rnd(4.0)); put(LB+k, rnd(4.0)); end
    for (int k = 0; k < NS; k++) put(LS+k, rnd(6.0));
    prog.push_back(mk(OP_SILU, 0, LS, 0, 0, LSO, NS));
    prog.push_back(mk(OP_ADD, 0, LA, LB, 0, LC, NL));
  endtask

  // ---------------- mechanism counters ----------------
  int n_op [7];
  int n_fused_mm = 0, n_fused_silu = 0, n_fuse_saved = 0;
  int n_chunks = 0, n_reuse = 0, n_rd_full = 0, n_wb_full = 0, n_backpressure = 0, n_overlap = 0;
  int fills_this_op = 0;
  // memory traffic per instruction (instructions never overlap, so the
  // counts between two starts belong to one instruction)
  int rd_at_start [$], wr_at_start [$];
  always @(posedge clk) if (rst_n) begin
    if (dut.start) begin
      rd_at_start.push_back(u_hbm.reads);
      wr_at_start.push_back(u_hbm.writes);
      n_op[dut.cur.op]++;
      if (dut.cur.fuse && dut.cur.op == OP_MATMUL) n_fused_mm++;
      if (dut.cur.fuse && dut.cur.op == OP_SILU)   n_fused_silu++;
      fills_this_op = 0;
    end
    if (dut.rd_fill_done) begin
      n_chunks++;
      fills_this_op++;
      if (fills_this_op > 4) n_reuse++;
    end
    if (dut.agu_valid && !dut.rd_fill_ok) n_rd_full++;
    if (dut.u_mpe.u_write.u_valid[dut.cur.op] && !dut.wb_fill_ok) n_wb_full++;
    if (dut.u_mpe.iv[dut.cur.op] && !dut.u_mpe.ir[dut.cur.op]) n_backpressure++;
    if (ar_valid && aw_valid && dut.u_mpe.u_read.pop) n_overlap++;
  end

  task automatic need(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL: mechanism never happened: %s", what); end
    else $display("  %-34s %0d", what, n);
  endtask

  initial begin
    build();
    foreach (prog[k]) ref_exec(prog[k]);
    repeat (5) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    foreach (prog[k]) begin
      instr       <= prog[k];
      instr_valid <= 1'b1;
      @(posedge clk);
      while (!instr_ready) @(posedge clk);
    end
    instr_valid <= 1'b0;
    wait (ops_done == prog.size() && idle);
    repeat (5) @(posedge clk);
    $display("program of %0d instructions finished after %0d cycles, %0d reads, %0d writes",
             prog.size(), cycles, u_hbm.reads, u_hbm.writes);
    checks++;
    if (ops_done != prog.size()) failures++;
    foreach (regions[k]) for (int j = 0; j < regions[k].len; j++) begin
      int  a;
      real got, exp_v;
      a = regions[k].dst + j;
      got = q2r(u_hbm.mem[a]);
      exp_v = rd(a);
      checks++;
      if (rabs(got - exp_v) > 0.02 + 0.02 * rabs(exp_v)) begin
        failures++;
        if (failures < 20) $display("FAIL: word %0h (instr region %0d) got %f expected %f", a, k, got, exp_v);
      end
    end
    // fusion: the fused output projection (Matmul + residual) must move
    // exactly n*d + d operand pairs in and d words out; the same work done
    // unfused, like the FFN down projection plus its separate Add, also
    // writes an intermediate vector of d words
    rd_at_start.push_back(u_hbm.reads);
    wr_at_start.push_back(u_hbm.writes);
    foreach (prog[k]) if (prog[k].op == OP_MATMUL && prog[k].fuse) begin
      int rd_f, wr_f, rd_u, wr_u;
      rd_f = rd_at_start[k+1] - rd_at_start[k];
      wr_f = wr_at_start[k+1] - wr_at_start[k];
      checks++;
      if (rd_f != 2*(prog[k].n*prog[k].d + prog[k].d) || wr_f != prog[k].d) begin
        failures++;
        $display("FAIL: fused Matmul+Add moved %0d reads / %0d writes", rd_f, wr_f);
      end
      // unfused cost of the same shape: Matmul reads 2nd, writes d; Add reads 2d, writes d
      rd_u = 2*prog[k].n*prog[k].d + 2*prog[k].d;
      wr_u = 2*prog[k].d;
      $display("fused Matmul+Add: %0d reads, %0d writes; unfused: %0d reads, %0d writes",
               rd_f, wr_f, rd_u, wr_u);
      n_fuse_saved += wr_u - wr_f;
    end
    foreach (prog[k]) if (prog[k].op == OP_SILU && prog[k].fuse) begin
      int rd_f, wr_f;
      rd_f = rd_at_start[k+1] - rd_at_start[k];
      wr_f = wr_at_start[k+1] - wr_at_start[k];
      checks++;
      if (rd_f != 2*prog[k].n || wr_f != prog[k].n) begin
        failures++;
        $display("FAIL: fused SiLU*Mul moved %0d reads / %0d writes", rd_f, wr_f);
      end
      // unfused: SiLU reads 2n, writes n; Mul reads 2n, writes n
      n_fuse_saved += 2*prog[k].n - wr_f;
    end
    $display("mechanisms:");
    need("Add", n_op[OP_ADD]);           need("Mul", n_op[OP_MUL]);
    need("Matmul", n_op[OP_MATMUL]);     need("RoPE", n_op[OP_ROPE]);
    need("RMSNorm", n_op[OP_RMSNORM]);   need("Softmax", n_op[OP_SOFTMAX]);
    need("SFU SiLU", n_op[OP_SILU]);
    need("fused Matmul+Add", n_fused_mm); need("fused SiLU*Mul", n_fused_silu);
    need("intermediate words not written (fusion)", n_fuse_saved);
    need("read-buffer chunks", n_chunks); need("buffer reuse within an instruction", n_reuse);
    need("loader stalled, read buffers full", n_rd_full);
    need("Write stalled, write buffers full", n_wb_full);
    need("operator back-pressure", n_backpressure);
    need("read/compute/write-back overlap", n_overlap);
    need("AXI read stalls", u_hbm.ar_stalls); need("AXI write stalls", u_hbm.aw_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
