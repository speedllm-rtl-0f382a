// op_sched: instruction queue and sequencer. The host pushes instructions
// (instr_valid/instr_ready) into a QDEPTH-deep queue. The sequencer runs
// one instruction at a time: it pulses start for one clock (loading the
// address generator, the Write stage and the SFU's fuse bit from `cur`),
// then waits until every result has been placed in a write buffer
// (write_done) and every write buffer has been written back (wb_empty,
// writer_idle). Only then does the next instruction start, so an
// instruction may read what the previous one wrote. Inside one
// instruction, loading, computing and writing back overlap. ops_done
// counts completed instructions; idle is high when the queue is empty and
// nothing runs. The whole mechanism is this design's own; the source gives
// no instruction format or issue scheme.
module op_sched
  import speedllm_pkg::*;
#(
  parameter int QDEPTH = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        instr_valid,
  output logic        instr_ready,
  input  instr_t      instr,
  output logic        start,
  output instr_t      cur,
  input  logic        write_done,
  input  logic        wb_empty,
  input  logic        writer_idle,
  output logic        idle,
  output logic [31:0] ops_done
);
  localparam int QW = $clog2(QDEPTH);
  instr_t q [QDEPTH];
  logic [QW-1:0] wp, rp;
  logic [QW:0]   cnt;
  typedef enum logic [1:0] {S_IDLE, S_START, S_RUN} state_e;
  state_e st;
  logic pop;

  assign instr_ready = (cnt != (QW+1)'(QDEPTH));
  assign pop   = (st == S_IDLE) && (cnt != 0);
  assign start = (st == S_START);
  assign idle  = (st == S_IDLE) && (cnt == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0; st <= S_IDLE; cur <= '0; ops_done <= '0;
      for (int j = 0; j < QDEPTH; j++) q[j] <= '0;
    end else begin
      if (instr_valid && instr_ready) begin
        q[wp] <= instr;
        wp    <= (wp == QW'(QDEPTH-1)) ? '0 : wp + 1'b1;
      end
      if (pop) begin
        cur <= q[rp];
        rp  <= (rp == QW'(QDEPTH-1)) ? '0 : rp + 1'b1;
      end
      cnt <= cnt + (QW+1)'(instr_valid && instr_ready) - (QW+1)'(pop);
      unique case (st)
        S_IDLE:  if (pop) st <= S_START;
        S_START: st <= S_RUN;
        S_RUN:   if (write_done && wb_empty && writer_idle) begin
          st       <= S_IDLE;
          ops_done <= ops_done + 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
