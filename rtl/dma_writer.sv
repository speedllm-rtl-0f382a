// dma_writer: the "write back" path. It takes the oldest full write buffer
// from the ring, sends its words to HBM on a simplified AXI write channel at
// consecutive addresses starting at the chunk's destination address, and
// releases the buffer after its last word has been accepted.
// Timing: one clock to prime the buffer read, then one word per clock while
// aw_ready is high (the next buffer address is presented in the same cycle a
// word is accepted). aw_valid, aw_addr and w_data stay stable until accepted.
// Merging address and data into one single-beat channel is a choice of this
// design; the source says only that results are written back.
module dma_writer
  import speedllm_pkg::*;
#(
  parameter int DEPTH = 256
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     drain_ok,
  input  logic [$clog2(DEPTH):0]   drain_len,
  input  addr_t                    drain_addr,
  output logic                     drain_done,
  output logic [$clog2(DEPTH)-1:0] raddr,
  input  data_t                    rdata,
  output logic                     aw_valid,
  output addr_t                    aw_addr,
  output data_t                    w_data,
  input  logic                     aw_ready,
  output logic                     idle
);
  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_SEND} state_e;
  state_e st;
  logic [$clog2(DEPTH):0] idx;
  logic hs, last;

  assign aw_valid   = (st == S_SEND);
  assign aw_addr    = drain_addr + addr_t'(idx);
  assign w_data     = rdata;
  assign hs         = aw_valid && aw_ready;
  assign last       = (idx + 1'b1 == drain_len);
  assign drain_done = hs && last;
  assign raddr      = ($clog2(DEPTH))'(hs ? idx + 1'b1 : idx);
  assign idle       = (st == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; idx <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (drain_ok) begin idx <= '0; st <= S_LOAD; end
        S_LOAD: st <= S_SEND;
        S_SEND: if (hs) begin
          if (last) st <= S_IDLE;
          else      idx <= idx + 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  a_awstable: assert property (@(posedge clk) disable iff (!rst_n)
    aw_valid && !aw_ready |=> aw_valid && $stable(aw_addr) && $stable(w_data));
endmodule
