// unit_rmsnorm: the MPE's "RMSNorm" operator (printed "RMSRorm" in the block
// diagram), o[i] = w[i] * (x[i] / sqrt(mean(x^2) + eps)) as in the Llama2
// reference code, eps = 1e-5.
// How it works: operand pairs (a = x[i], b = w[i]) are stored in two local
// arrays of VEC_MAX words while the sum of squares is accumulated at full
// Q32.32 precision. The entry tagged op_end starts the scale computation:
// mean = sum / n (bit-serial divider, 64 clocks), root = sqrt(mean + eps)
// (bit-serial square root, 32 clocks, result in Q16.16), scale = 2^48 / root
// (divider, 49 clocks, result in Q32.32). The unit then streams n results,
// one per clock under out_ready.
// Latency from the last operand to the first result: about 150 clocks.
// The operator is named in the source; storage, the serial arithmetic and
// the number format are choices of this design.
module unit_rmsnorm
  import speedllm_pkg::*;
#(
  parameter int VEC_MAX = 2048
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  data_t in_a,
  input  data_t in_b,
  input  tag_t  in_tag,
  output logic  out_valid,
  input  logic  out_ready,
  output data_t out_data
);
  localparam int IW = $clog2(VEC_MAX);
  localparam logic [63:0] EPS_Q32 = 64'd42950;   // 1e-5 * 2^32

  typedef enum logic [2:0] {S_LOAD, S_MEAN, S_SQRT, S_RECIP, S_OUT} state_e;
  state_e st;

  data_t xm [VEC_MAX];
  data_t wm [VEC_MAX];
  logic [IW:0]  n_q, idx;
  logic [63:0]  ss;
  logic signed [63:0] scale;     // Q32.32
  logic signed [63:0] xs;

  logic        div_start, div_busy, div_done, sq_start, sq_busy, sq_done;
  logic [63:0] div_num, div_q;
  logic [31:0] div_den;
  logic [31:0] root;
  logic [63:0] mean_q;

  seq_div #(.WN(64), .WD(32)) u_div (
    .clk, .rst_n, .start(div_start), .num(div_num), .den(div_den),
    .busy(div_busy), .done(div_done), .quo(div_q));
  isqrt #(.WR(64)) u_sqrt (
    .clk, .rst_n, .start(sq_start), .rad(mean_q + EPS_Q32),
    .busy(sq_busy), .done(sq_done), .root(root));

  assign in_ready = (st == S_LOAD);
  assign xs = (64'(xm[idx[IW-1:0]]) * scale) >>> 32;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_LOAD; n_q <= '0; idx <= '0; ss <= '0; scale <= '0;
      div_start <= 1'b0; sq_start <= 1'b0; div_num <= '0; div_den <= '0;
      mean_q <= '0; out_valid <= 1'b0; out_data <= '0;
    end else begin
      div_start <= 1'b0;
      sq_start  <= 1'b0;
      unique case (st)
        S_LOAD: if (in_valid) begin
          xm[idx[IW-1:0]] <= in_a;
          wm[idx[IW-1:0]] <= in_b;
          ss  <= ss + 64'(64'(in_a) * 64'(in_a));
          idx <= idx + 1'b1;
          if (in_tag.op_end) begin
            n_q       <= idx + 1'b1;
            div_num   <= ss + 64'(64'(in_a) * 64'(in_a));
            div_den   <= 32'(idx + 1'b1);
            div_start <= 1'b1;
            st        <= S_MEAN;
          end
        end
        S_MEAN: if (div_done) begin
          mean_q   <= div_q;
          sq_start <= 1'b1;
          st       <= S_SQRT;
        end
        S_SQRT: if (sq_done) begin
          div_num   <= 64'd1 << 48;
          div_den   <= root;
          div_start <= 1'b1;
          st        <= S_RECIP;
        end
        S_RECIP: if (div_done) begin
          scale <= div_q;
          idx   <= '0;
          st    <= S_OUT;
        end
        S_OUT: begin
          if (out_valid && out_ready) out_valid <= 1'b0;
          if (!out_valid || out_ready) begin
            if (idx < n_q) begin
              out_data  <= qmul(wm[idx[IW-1:0]], data_t'(xs));
              out_valid <= 1'b1;
              idx       <= idx + 1'b1;
            end else begin
              idx <= '0;
              ss  <= '0;
              st  <= S_LOAD;
            end
          end
        end
        default: st <= S_LOAD;
      endcase
    end
  end

  logic unused;
  assign unused = ^{in_tag.bias, in_tag.row_end, div_busy, sq_busy, div_q[63:48]};
endmodule
