// unit_softmax: the MPE's "Softmax" operator, the numerically stable
// softmax y[i] = exp(x[i] - max) / sum_j exp(x[j] - max) used on attention
// scores.
// How it works: operands a = x[i] are stored in a local array of VEC_MAX
// words while the running maximum is tracked. After the entry tagged op_end
// the unit replaces every x[i] by e[i] = exp(x[i] - max) (one per clock,
// exp_neg from the package: 2^(x log2 e), cubic polynomial for the fraction)
// and sums them; sum >= 1 because the maximum contributes exp(0). One
// reciprocal 2^48 / sum (bit-serial divider, 49 clocks, Q32.32) follows, and
// the unit streams y[i] = e[i] * recip, one per clock under out_ready.
// Latency from the last operand to the first result: n + about 52 clocks.
// The operator is named in the source; everything inside is this design's.
module unit_softmax
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
  typedef enum logic [2:0] {S_LOAD, S_EXP, S_RECIP, S_OUT} state_e;
  state_e st;

  data_t xm [VEC_MAX];
  logic [IW:0]  n_q, idx;
  data_t        mx;
  logic [31:0]  sum;
  logic [63:0]  recip;   // Q32.32
  data_t        e_cur;

  logic        div_start, div_busy, div_done;
  logic [63:0] div_q;

  seq_div #(.WN(64), .WD(32)) u_div (
    .clk, .rst_n, .start(div_start), .num(64'd1 << 48), .den(sum),
    .busy(div_busy), .done(div_done), .quo(div_q));

  assign in_ready = (st == S_LOAD);
  assign e_cur    = exp_neg(xm[idx[IW-1:0]] - mx);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_LOAD; n_q <= '0; idx <= '0; mx <= '0; sum <= '0; recip <= '0;
      div_start <= 1'b0; out_valid <= 1'b0; out_data <= '0;
    end else begin
      div_start <= 1'b0;
      unique case (st)
        S_LOAD: if (in_valid) begin
          xm[idx[IW-1:0]] <= in_a;
          if (idx == '0 || in_a > mx) mx <= in_a;
          idx <= idx + 1'b1;
          if (in_tag.op_end) begin
            n_q <= idx + 1'b1;
            idx <= '0;
            sum <= '0;
            st  <= S_EXP;
          end
        end
        S_EXP: begin
          xm[idx[IW-1:0]] <= e_cur;
          sum <= sum + 32'(e_cur);
          idx <= idx + 1'b1;
          if (idx + 1'b1 == n_q) begin
            div_start <= 1'b1;
            st        <= S_RECIP;
          end
        end
        S_RECIP: if (div_done) begin
          recip <= div_q;
          idx   <= '0;
          st    <= S_OUT;
        end
        S_OUT: begin
          if (out_valid && out_ready) out_valid <= 1'b0;
          if (!out_valid || out_ready) begin
            if (idx < n_q) begin
              out_data  <= data_t'((64'(xm[idx[IW-1:0]]) * 64'(recip)) >>> 32);
              out_valid <= 1'b1;
              idx       <= idx + 1'b1;
            end else begin
              idx <= '0;
              st  <= S_LOAD;
            end
          end
        end
        default: st <= S_LOAD;
      endcase
    end
  end

  logic unused;
  assign unused = ^{in_b, in_tag.bias, in_tag.row_end, div_busy};
endmodule
