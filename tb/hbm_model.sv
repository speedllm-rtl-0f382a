// hbm_model: behavioural stand-in for the HBM stack and its memory
// controller, for simulation only. A word-addressed array of WORDS 32-bit
// words behind the simplified AXI channels of the accelerator: read
// addresses are accepted when ar_ready is high (it drops at random for
// STALL_PCT percent of cycles), data return in order LAT clocks later, one
// word per clock; writes are accepted when aw_ready is high (also randomly
// stalled, and blocked for BURST_LEN of every BURST_PER clocks, as when
// another master holds the memory) and update the array at once. Testbenches load and inspect the
// array through the mem variable. Counters record the stalls it caused.
module hbm_model
  import speedllm_pkg::*;
#(
  parameter int WORDS     = 1 << 20,
  parameter int LAT       = 8,
  parameter int STALL_PCT = 10,
  parameter int BURST_PER = 8192,   // every BURST_PER clocks ...
  parameter int BURST_LEN = 700     // ... the write channel is blocked this long
) (
  input  logic  clk,
  input  logic  ar_valid,
  input  addr_t ar_addr,
  output logic  ar_ready,
  output logic  r_valid,
  output data_t r_data,
  input  logic  aw_valid,
  input  addr_t aw_addr,
  input  data_t w_data,
  output logic  aw_ready
);
  data_t mem [WORDS];
  data_t pipe_d [LAT];
  logic  pipe_v [LAT];
  int    ar_stalls = 0, aw_stalls = 0, reads = 0, writes = 0;
  int    tick = 0;

  initial begin
    for (int j = 0; j < LAT; j++) begin pipe_v[j] = 1'b0; pipe_d[j] = '0; end
    ar_ready = 1'b1;
    aw_ready = 1'b1;
  end

  assign r_valid = pipe_v[LAT-1];
  assign r_data  = pipe_d[LAT-1];

  always @(posedge clk) begin
    for (int j = LAT-1; j > 0; j--) begin
      pipe_v[j] <= pipe_v[j-1];
      pipe_d[j] <= pipe_d[j-1];
    end
    pipe_v[0] <= ar_valid && ar_ready;
    pipe_d[0] <= (ar_valid && ar_ready) ? mem[ar_addr % WORDS] : '0;
    if (ar_valid && ar_ready) reads++;
    if (ar_valid && !ar_ready) ar_stalls++;
    if (aw_valid && aw_ready) begin
      mem[aw_addr % WORDS] <= w_data;
      writes++;
    end
    if (aw_valid && !aw_ready) aw_stalls++;
    ar_ready <= ($urandom_range(99) >= STALL_PCT);
    tick++;
    aw_ready <= ($urandom_range(99) >= STALL_PCT) && ((tick % BURST_PER) >= BURST_LEN);
  end
endmodule
