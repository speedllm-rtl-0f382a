// sfu_silu: the special function unit (SFU) with its SiLU function,
// silu(x) = x * sigmoid(x), and the fused SwiGLU form silu(a) * b used in the
// Llama2 feed-forward block (fuse = 1).
// How it works: for each operand pair the unit computes e = exp(-|x|) with
// the package's exp_neg, then sigmoid by one bit-serial division:
// x >= 0: 2^32 / (2^16 + e), x < 0: (e << 16) / (2^16 + e), both Q16.16.
// The product x * sigmoid (and * b when fused) is offered on the output.
// Timing: one element every ~36 clocks (33-clock divider plus handshakes);
// input is accepted only when the unit is idle. The source names the SFU and
// SiLU only; the arithmetic and the fused form are choices of this design.
module sfu_silu
  import speedllm_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  fuse,
  input  logic  in_valid,
  output logic  in_ready,
  input  data_t in_a,
  input  data_t in_b,
  input  tag_t  in_tag,
  output logic  out_valid,
  input  logic  out_ready,
  output data_t out_data
);
  typedef enum logic [1:0] {S_IDLE, S_DIV, S_OUT} state_e;
  state_e st;
  data_t x_q, g_q, e;
  logic  div_start, div_busy, div_done;
  logic [32:0] div_q;
  data_t sx;

  assign e = exp_neg(in_a[DW-1] ? in_a : -in_a);

  seq_div #(.WN(33), .WD(32)) u_div (
    .clk, .rst_n, .start(div_start),
    .num(in_a[DW-1] ? 33'(e) << FRAC : 33'd1 << 32),
    .den(32'(ONE) + 32'(e)),
    .busy(div_busy), .done(div_done), .quo(div_q));

  assign in_ready  = (st == S_IDLE);
  assign out_valid = (st == S_OUT);
  assign div_start = in_valid && in_ready;
  assign sx        = qmul(x_q, data_t'(div_q[31:0]));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; x_q <= '0; g_q <= '0; out_data <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (in_valid) begin
          x_q <= in_a;
          g_q <= in_b;
          st  <= S_DIV;
        end
        S_DIV: if (div_done) begin
          out_data <= fuse ? qmul(sx, g_q) : sx;
          st       <= S_OUT;
        end
        S_OUT: if (out_ready) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  logic unused;
  assign unused = ^{in_tag, div_busy, div_q[32]};
endmodule
