// mpe_read: the MPE's Read stage. It drains full read buffers in ring order,
// one entry address per clock, and dispatches each operand pair to the
// operator selected by the current instruction (one valid/ready channel per
// operator, index = op_e value; channel OP_SILU goes to the SFU).
// Timing: an entry reaches the operators three clocks after its address is
// issued (buffer RAM, input multiplexer register, then a 4-entry FIFO that
// absorbs operator back-pressure). Addresses are issued only while the FIFO
// has room for everything in flight, so one pair per clock flows while the
// operator accepts one. The buffer is released (drain_done) in the cycle its
// last address is issued: its data are already on their way, so the reader
// may refill it at once. mux_sel follows the issued buffer one clock later,
// for the registered input multiplexer. The FIFO and the dispatch are
// choices of this design.
module mpe_read
  import speedllm_pkg::*;
#(
  parameter int DEPTH = 256,
  parameter int NRB   = 4,
  parameter int NU    = 7
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  op_e                      op,
  // ring (consumer side)
  input  logic                     drain_ok,
  input  logic [$clog2(NRB)-1:0]   drain_idx,
  input  logic [$clog2(DEPTH):0]   drain_len,
  output logic                     drain_done,
  output logic [$clog2(DEPTH)-1:0] raddr,
  // input multiplexer
  output logic                     mux_valid,
  output logic [$clog2(NRB)-1:0]   mux_sel,
  input  logic                     mux_out_valid,
  input  entry_t                   mux_out_data,
  // operators
  output logic [NU-1:0]            u_valid,
  input  logic [NU-1:0]            u_ready,
  output data_t                    u_a,
  output data_t                    u_b,
  output tag_t                     u_tag,
  output logic                     idle
);
  localparam int FD = 4;
  entry_t fifo [FD];
  logic [1:0] wp, rp;
  logic [2:0] cnt;
  logic       active, issue, pop;
  logic [$clog2(DEPTH):0] idx;
  logic [2:0] inflight;

  assign inflight   = 3'(mux_valid) + 3'(mux_out_valid);
  assign issue      = active && (cnt + inflight < 3'(FD));
  assign raddr      = idx[$clog2(DEPTH)-1:0];
  assign drain_done = issue && (idx + 1'b1 == drain_len);

  assign u_a   = fifo[rp].a;
  assign u_b   = fifo[rp].b;
  assign u_tag = fifo[rp].tag;
  always_comb begin
    u_valid = '0;
    u_valid[op] = (cnt != 0);
  end
  assign pop  = (cnt != 0) && u_ready[op];
  assign idle = !active && (cnt == 0) && (inflight == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; idx <= '0; mux_valid <= 1'b0; mux_sel <= '0;
      wp <= '0; rp <= '0; cnt <= '0;
      for (int j = 0; j < FD; j++) fifo[j] <= '0;
    end else begin
      mux_valid <= issue;
      mux_sel   <= drain_idx;
      if (!active) begin
        if (drain_ok) begin
          active <= 1'b1;
          idx    <= '0;
        end
      end else if (issue) begin
        if (drain_done) active <= 1'b0;
        idx <= idx + 1'b1;
      end
      if (mux_out_valid) begin
        fifo[wp] <= mux_out_data;
        wp <= wp + 1'b1;
      end
      if (pop) rp <= rp + 1'b1;
      cnt <= cnt + 3'(mux_out_valid) - 3'(pop);
    end
  end

  a_fifo: assert property (@(posedge clk) disable iff (!rst_n) cnt <= 3'(FD));
endmodule
