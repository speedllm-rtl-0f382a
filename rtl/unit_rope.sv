// unit_rope: the MPE's "RoPE" operator (rotary position embedding). Entries
// arrive in pairs: the first carries (x0, cos), the second (x1, sin) for one
// two-dimensional sub-vector of a query or key head. The unit outputs
//   y0 = x0*cos - x1*sin,   y1 = x0*sin + x1*cos
// one word per clock, y0 first. The cos/sin values are read from a table in
// HBM (the agu computes the table address from position and head size), as in
// early Llama2 reference checkpoints; the source only names the operator.
// Timing: the pair is collected in two accepted entries, then y0 and y1 are
// offered on two successive cycles; input is stalled while they are pending.
module unit_rope
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
  logic  have0;          // first entry of the pair captured
  logic  [1:0] pend;     // results still to be delivered (2, 1 or 0)
  data_t x0, c, y0, y1;

  assign in_ready  = (pend == 2'd0);
  assign out_valid = (pend != 2'd0);
  assign out_data  = (pend == 2'd2) ? y0 : y1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have0 <= 1'b0;
      pend  <= '0;
      x0 <= '0; c <= '0; y0 <= '0; y1 <= '0;
    end else begin
      if (out_valid && out_ready) pend <= pend - 2'd1;
      if (in_valid && in_ready) begin
        if (!have0) begin
          x0    <= in_a;
          c     <= in_b;
          have0 <= 1'b1;
        end else begin
          y0    <= qmul(x0, c) - qmul(in_a, in_b);
          y1    <= qmul(x0, in_b) + qmul(in_a, c);
          have0 <= 1'b0;
          pend  <= 2'd2;
        end
      end
    end
  end

  tag_t unused_tag;
  assign unused_tag = in_tag;
endmodule
