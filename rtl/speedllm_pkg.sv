// speedllm_pkg: types, constants and fixed-point helpers shared by the
// SpeedLLM accelerator. All data are signed 32-bit Q16.16 fixed-point words
// (16 integer bits, 16 fraction bits); this number format is a choice of this
// design, the source describes none. The operator set (Add, Mul, Matmul, RoPE,
// RMSNorm, Softmax, SiLU) follows the accelerator's block diagram; the
// instruction format and the entry tags are this design's own.
package speedllm_pkg;

  localparam int DW   = 32;           // data word width
  localparam int FRAC = 16;           // fraction bits of Q16.16
  localparam int AW   = 32;           // word address width towards HBM
  localparam int CW   = 16;           // vector length / count width

  typedef logic signed [DW-1:0] data_t;
  typedef logic [AW-1:0]        addr_t;
  typedef logic [CW-1:0]        cnt_t;

  localparam data_t ONE = data_t'(32'sd1 <<< FRAC);

  // Operators. OP_SILU runs in the special function unit, the rest in the MPE.
  typedef enum logic [2:0] {
    OP_ADD     = 3'd0,
    OP_MUL     = 3'd1,
    OP_MATMUL  = 3'd2,
    OP_ROPE    = 3'd3,
    OP_RMSNORM = 3'd4,
    OP_SOFTMAX = 3'd5,
    OP_SILU    = 3'd6
  } op_e;

  // One instruction = one (possibly fused) operator over vectors in HBM.
  //   ADD/MUL  : dst[i] = a[i] op b[i],               i < n
  //   MATMUL   : dst[r] = sum_i a[r*rs+i*cs]*b[i] (+ c[r] when fuse), r < d
  //              (rs = n, cs = 1 for a dense row-major matrix)
  //   ROPE     : rotate pairs of a[0..n) with the cos/sin table at b for
  //              position pos and head size hs
  //   RMSNORM  : dst[i] = b[i] * a[i] / sqrt(mean(a^2) + eps)
  //   SOFTMAX  : dst = softmax(a[0..n))
  //   SILU     : dst[i] = silu(a[i]) (* b[i] when fuse)
  typedef struct packed {
    op_e    op;
    logic   fuse;
    addr_t  a_base;
    addr_t  b_base;
    addr_t  c_base;
    addr_t  dst_base;
    cnt_t   n;
    cnt_t   d;
    cnt_t   pos;
    cnt_t   hs;
    cnt_t   rs;     // MATMUL: address step between rows of a
    cnt_t   cs;     // MATMUL: address step between columns of a
  } instr_t;

  // Tag carried with every operand pair.
  typedef struct packed {
    logic bias;     // MATMUL+ADD: a holds the residual for the row just ended
    logic row_end;  // last entry of a matmul row
    logic op_end;   // last entry of the whole instruction
  } tag_t;

  // One read-buffer entry.
  typedef struct packed {
    tag_t  tag;
    data_t a;
    data_t b;
  } entry_t;

  // Q16.16 product, rounded toward minus infinity.
  function automatic data_t qmul(data_t x, data_t y);
    logic signed [2*DW-1:0] p;
    p = 64'(x) * 64'(y);
    return data_t'(p >>> FRAC);
  endfunction

  // Number of results an instruction produces.
  function automatic cnt_t result_count(instr_t i);
    return (i.op == OP_MATMUL) ? i.d : i.n;
  endfunction

  // exp(x) for x <= 0 in Q16.16: 2^(x*log2 e), integer part as a shift,
  // fraction part f in [0,1) by the cubic 1 + f*(0.6951 + f*(0.2262 + f*0.0782)).
  function automatic data_t exp_neg(data_t x);
    logic signed [2*DW-1:0] y;
    logic signed [DW-1:0]   yi;
    logic [FRAC-1:0]        f;
    logic [DW-1:0]          p;
    int                     sh;
    y  = (64'(x) * 64'sd94548) >>> FRAC;   // log2(e) = 1.442695 in Q16.16
    yi = data_t'(y >>> FRAC);              // floor, <= 0
    f  = y[FRAC-1:0];
    p  = 32'd5125;                                            // 0.0782
    p  = 32'd14824 + ((p * 32'(f)) >> FRAC);                  // 0.2262
    p  = 32'd45553 + ((p * 32'(f)) >> FRAC);                  // 0.6951
    p  = 32'd65536 + ((p * 32'(f)) >> FRAC);                  // 1.0
    sh = -int'(yi);
    if (x > 0) return ONE;
    if (sh > 31) return '0;
    return data_t'(p >> sh);
  endfunction

endpackage
