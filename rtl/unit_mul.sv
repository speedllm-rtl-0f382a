// unit_mul: the MPE's "Mul" operator, element-wise multiplication, dst[i] = a[i] * b[i], rounded toward minus infinity.
// The operator is named in the block diagram; its arithmetic follows the
// Llama2 reference code, in this design's Q16.16 fixed point with wrap-around.
// Interface: valid/ready operand stream (a, b, tag) in, valid/ready result
// stream out. One result per operand pair, one pair per clock, one cycle of
// latency (output register); the tag is not needed and is ignored.
module unit_mul
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
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_data <= qmul(in_a, in_b);
    end
  end

  // in_tag is part of the common operator interface but carries nothing
  // this operator needs.
  tag_t unused_tag;
  assign unused_tag = in_tag;
endmodule
