// agu: operand address generator. For the instruction loaded by start it
// produces, one entry per next pulse, the HBM word addresses of the operand
// pair (a, b) and the entry's tag, in the order the operators consume them:
//   ADD, MUL, RMSNORM : (a[i], b[i])                       i = 0..n-1
//   SOFTMAX           : (a[i], a[i])
//   SILU              : (a[i], b[i]) fused, (a[i], a[i]) otherwise
//   ROPE              : (a[i], tab[pos*hs + 2*((i/2) mod (hs/2)) + (i mod 2)])
//                       tab holds interleaved cos/sin per position
//   MATMUL            : row r: (a[r*rs+i*cs], b[i]) i = 0..n-1, then with fuse one
//                       bias entry (c[r], c[r]); rows r = 0..d-1
// row_end marks the entry closing a matmul row, op_end the last entry.
// valid stays high from the clock after start until the last entry has been
// taken with next. Addresses are combinational from the counters.
// The source only says operands are read "through AXI"; the address
// sequences follow the Llama2 reference code and are this design's choice.
module agu
  import speedllm_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  instr_t instr,
  input  logic   next,
  output logic   valid,
  output addr_t  addr_a,
  output addr_t  addr_b,
  output tag_t   tag
);
  instr_t ins;
  cnt_t   i, r, k;
  addr_t  a_ptr;     // address of a for the current column
  addr_t  row_base;  // address of a for column 0 of the current row
  addr_t  rope_base;
  logic   in_bias;
  logic   last_col, last_row;

  assign last_col = (i == ins.n - 1'b1);
  assign last_row = (ins.op != OP_MATMUL) || (r == ins.d - 1'b1);

  always_comb begin
    addr_a = ins.a_base + addr_t'(i);
    addr_b = ins.b_base + addr_t'(i);
    tag    = '0;
    unique case (ins.op)
      OP_SOFTMAX: addr_b = addr_a;
      OP_SILU:    if (!ins.fuse) addr_b = addr_a;
      OP_ROPE:    addr_b = rope_base + addr_t'({k, 1'b0}) + addr_t'(i[0]);
      OP_MATMUL: begin
        if (in_bias) begin
          addr_a = ins.c_base + addr_t'(r);
          addr_b = addr_a;
          tag.bias    = 1'b1;
          tag.row_end = 1'b1;
        end else begin
          addr_a = a_ptr;
          tag.row_end = last_col && !ins.fuse;
        end
      end
      default: ;
    endcase
    if (ins.op == OP_MATMUL) tag.op_end = last_row && tag.row_end;
    else                     tag.op_end = last_col;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ins <= '0; i <= '0; r <= '0; k <= '0; a_ptr <= '0; row_base <= '0; rope_base <= '0;
      in_bias <= 1'b0; valid <= 1'b0;
    end else if (start) begin
      ins       <= instr;
      i         <= '0;
      r         <= '0;
      k         <= '0;
      a_ptr     <= instr.a_base;
      row_base  <= instr.a_base;
      rope_base <= instr.b_base + addr_t'(instr.pos) * addr_t'(instr.hs);
      in_bias   <= 1'b0;
      valid     <= (result_count(instr) != '0) && (instr.n != '0);
    end else if (valid && next) begin
      if (tag.op_end) valid <= 1'b0;
      if (ins.op == OP_MATMUL) begin
        if (in_bias) begin
          in_bias <= 1'b0;
          r <= r + 1'b1;
        end else begin
          a_ptr <= a_ptr + addr_t'(ins.cs);
          if (last_col) begin
            i        <= '0;
            a_ptr    <= row_base + addr_t'(ins.rs);
            row_base <= row_base + addr_t'(ins.rs);
            if (ins.fuse) in_bias <= 1'b1;
            else          r <= r + 1'b1;
          end else i <= i + 1'b1;
        end
      end else begin
        i <= i + 1'b1;
        if (i[0]) k <= (k == (ins.hs >> 1) - 1'b1) ? '0 : k + 1'b1;
      end
    end
  end
endmodule
