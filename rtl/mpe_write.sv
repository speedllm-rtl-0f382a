// mpe_write: the MPE's Write stage. It accepts result words from the
// operator selected by the current instruction (channel OP_SILU comes from
// the SFU), numbers them (result k goes to dst_base + k) and packs them into
// the write buffer the ring hands out. A chunk closes after DEPTH words or at
// the instruction's last result; it is then reported to the ring with its
// length and destination address for the AXI writer.
// Timing: one word per clock while a write buffer is free; done is high
// once all `total` results of the instruction have been placed. start (one
// clock) loads dst_base and total. The buffer index drives the output
// multiplexer (buf_wr_demux). Packing rules are this design's choice.
module mpe_write
  import speedllm_pkg::*;
#(
  parameter int DEPTH = 256,
  parameter int NU    = 7
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  op_e                      op,
  input  logic                     start,
  input  addr_t                    dst_base,
  input  cnt_t                     total,
  // operators
  input  logic [NU-1:0]            u_valid,
  input  data_t                    u_data [NU],
  output logic [NU-1:0]            u_ready,
  // write-buffer ring (producer side)
  input  logic                     fill_ok,
  output logic                     fill_done,
  output logic [$clog2(DEPTH):0]   fill_len,
  output addr_t                    fill_addr,
  // to the output multiplexer
  output logic                     we,
  output logic [$clog2(DEPTH)-1:0] waddr,
  output data_t                    wdata,
  output logic                     done
);
  addr_t dst_q, chunk_base;
  cnt_t  total_q, cnt;
  logic [$clog2(DEPTH):0] widx;
  logic  take, chunk_end;

  assign done = (cnt == total_q);
  always_comb begin
    u_ready = '0;
    u_ready[op] = fill_ok && !done;
  end
  assign take      = u_valid[op] && u_ready[op];
  assign chunk_end = (widx == ($clog2(DEPTH)+1)'(DEPTH-1)) || (cnt + 1'b1 == total_q);
  assign we        = take;
  assign waddr     = widx[$clog2(DEPTH)-1:0];
  assign wdata     = u_data[op];
  assign fill_done = take && chunk_end;
  assign fill_len  = widx + 1'b1;
  assign fill_addr = chunk_base;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dst_q <= '0; chunk_base <= '0; total_q <= '0; cnt <= '0; widx <= '0;
    end else if (start) begin
      dst_q      <= dst_base;
      chunk_base <= dst_base;
      total_q    <= total;
      cnt        <= '0;
      widx       <= '0;
    end else if (take) begin
      cnt <= cnt + 1'b1;
      if (chunk_end) begin
        widx       <= '0;
        chunk_base <= dst_q + addr_t'(cnt) + 1'b1;
      end else widx <= widx + 1'b1;
    end
  end
endmodule
