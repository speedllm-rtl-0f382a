// buf_ring: cyclic allocator for a group of N equal buffers, the "memory
// allocation reuse" mechanism. The producer always fills buffer fill_idx and
// the consumer always drains buffer drain_idx; both indices walk round the
// ring. A buffer returns to the free pool the moment its consumer has finished
// with it (drain_done), not when the whole operator ends, so the producer can
// refill it while the consumer works on the next one. Each full buffer
// remembers how many valid entries it holds (1..DEPTH) and, for write
// buffers, a destination address.
// Timing: fill_done / drain_done are single-cycle pulses; the state updates
// on the next clock edge. fill_ok (a free buffer exists) and drain_ok (a full
// buffer exists) are registered-state decodes.
module buf_ring #(
  parameter int N     = 4,
  parameter int DEPTH = 256,
  parameter int AW    = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // producer
  output logic                   fill_ok,
  output logic [$clog2(N)-1:0]   fill_idx,
  input  logic                   fill_done,
  input  logic [$clog2(DEPTH):0] fill_len,
  input  logic [AW-1:0]          fill_addr,
  // consumer
  output logic                   drain_ok,
  output logic [$clog2(N)-1:0]   drain_idx,
  output logic [$clog2(DEPTH):0] drain_len,
  output logic [AW-1:0]          drain_addr,
  input  logic                   drain_done,
  // status
  output logic [$clog2(N):0]     used
);
  localparam int IW = $clog2(N);
  logic [$clog2(DEPTH):0] len_q  [N];
  logic [AW-1:0]          addr_q [N];

  assign fill_ok    = (used != (IW+1)'(N));
  assign drain_ok   = (used != '0);
  assign drain_len  = len_q[drain_idx];
  assign drain_addr = addr_q[drain_idx];

  function automatic logic [IW-1:0] nxt(logic [IW-1:0] i);
    return (i == IW'(N-1)) ? '0 : i + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fill_idx  <= '0;
      drain_idx <= '0;
      used      <= '0;
      for (int k = 0; k < N; k++) begin
        len_q[k]  <= '0;
        addr_q[k] <= '0;
      end
    end else begin
      if (fill_done) begin
        len_q[fill_idx]  <= fill_len;
        addr_q[fill_idx] <= fill_addr;
        fill_idx         <= nxt(fill_idx);
      end
      if (drain_done) drain_idx <= nxt(drain_idx);
      used <= used + (IW+1)'(fill_done) - (IW+1)'(drain_done);
    end
  end

  // The producer may only complete into a free buffer, the consumer only
  // release a full one.
  a_fill:  assert property (@(posedge clk) disable iff (!rst_n) fill_done  |-> fill_ok);
  a_drain: assert property (@(posedge clk) disable iff (!rst_n) drain_done |-> drain_ok);
endmodule
