// unit_matmul: the MPE's "Matmul" operator, a matrix-vector product
// dst[r] = sum_i W[r][i] * x[i] streamed row by row. Each operand pair is
// (a = W[r][i], b = x[i]); one multiply-accumulate per clock into a 64-bit
// accumulator that keeps the full Q32.32 product, rounded to Q16.16 once per
// row. The entry tagged row_end closes the row. Operator fusion (MATMUL+ADD):
// if the closing entry is tagged bias, its a operand is the residual c[r] and
// is added to the row result instead of being multiplied, so the residual
// connection costs no extra pass through memory.
// Timing: the row result appears one clock after the row's last entry and is
// held until accepted; while it waits, input is stalled. The operator itself
// comes from the block diagram; MAC width, rounding and the fused form are
// choices of this design.
module unit_matmul
  import speedllm_pkg::*;
(
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
  logic signed [63:0] acc;
  logic signed [63:0] acc_nx;

  assign in_ready = !out_valid || out_ready;

  always_comb begin
    if (in_tag.bias) acc_nx = acc + (64'(in_a) <<< FRAC);
    else             acc_nx = acc + 64'(in_a) * 64'(in_b);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (in_tag.row_end) begin
          out_data  <= data_t'(acc_nx >>> FRAC);
          out_valid <= 1'b1;
          acc       <= '0;
        end else begin
          acc <= acc_nx;
        end
      end
    end
  end
endmodule
