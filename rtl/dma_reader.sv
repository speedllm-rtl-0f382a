// dma_reader: the "read through AXI" path from the memory controller into the
// read buffers. It takes operand-pair addresses from the agu, issues two
// single-word reads per pair (a first, then b) on a simplified AXI read
// channel, and writes each completed pair, with its tag, into the read buffer
// the buffer ring hands out. A chunk ends after DEPTH pairs or at the
// instruction's last pair; the reader then reports the chunk (fill_done,
// fill_len) and moves on to the next free buffer, so it keeps loading while
// the MPE drains older buffers.
// Interface: ar_valid/ar_addr/ar_ready (address stays stable while valid),
// r_valid/r_data with in-order responses and no back-pressure; at most
// MAX_OUT pairs are outstanding. Throughput: one read per clock when the
// memory accepts one. The channel simplification (single beats, no IDs) and
// the pair-per-entry layout are choices of this design.
module dma_reader
  import speedllm_pkg::*;
#(
  parameter int DEPTH   = 256,
  parameter int MAX_OUT = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // from the agu
  input  logic                     agu_valid,
  input  addr_t                    agu_addr_a,
  input  addr_t                    agu_addr_b,
  input  tag_t                     agu_tag,
  output logic                     agu_next,
  // buffer ring (producer side)
  input  logic                     fill_ok,
  output logic                     fill_done,
  output logic [$clog2(DEPTH):0]   fill_len,
  // read-buffer write port
  output logic                     buf_we,
  output logic [$clog2(DEPTH)-1:0] buf_waddr,
  output entry_t                   buf_wdata,
  // AXI-style read channel
  output logic                     ar_valid,
  output addr_t                    ar_addr,
  input  logic                     ar_ready,
  input  logic                     r_valid,
  input  data_t                    r_data,
  // status
  output logic                     idle
);
  localparam int DW_ = $clog2(DEPTH);
  localparam int OW  = $clog2(MAX_OUT);

  typedef struct packed { tag_t tag; logic chunk_end; } meta_t;
  meta_t meta [MAX_OUT];
  logic [OW-1:0] m_wp, m_rp;
  logic [OW:0]   outstanding;

  logic          half;        // 0: issue a, 1: issue b
  logic          wait_fill;   // chunk fully issued, waiting for its buffer to close
  logic [DW_:0]  iss_cnt;     // pairs issued into the current chunk
  logic          chunk_end;
  logic          issue_b;
  logic          r_half;
  data_t         a_q;
  logic [DW_:0]  w_cnt;
  logic          pair_done;

  assign chunk_end = agu_tag.op_end || (iss_cnt == (DW_+1)'(DEPTH-1));
  assign ar_valid  = agu_valid && fill_ok && !wait_fill && (outstanding != (OW+1)'(MAX_OUT));
  assign ar_addr   = half ? agu_addr_b : agu_addr_a;
  assign issue_b   = ar_valid && ar_ready && half;
  assign agu_next  = issue_b;
  assign pair_done = r_valid && r_half;

  assign buf_we    = pair_done;
  assign buf_waddr = w_cnt[DW_-1:0];
  assign buf_wdata = '{tag: meta[m_rp].tag, a: a_q, b: r_data};
  assign fill_done = pair_done && meta[m_rp].chunk_end;
  assign fill_len  = w_cnt + 1'b1;
  assign idle      = !agu_valid && (outstanding == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      half <= 1'b0; wait_fill <= 1'b0; iss_cnt <= '0;
      m_wp <= '0; m_rp <= '0; outstanding <= '0;
      r_half <= 1'b0; a_q <= '0; w_cnt <= '0;
      for (int j = 0; j < MAX_OUT; j++) meta[j] <= '0;
    end else begin
      // issue side
      if (ar_valid && ar_ready) half <= !half;
      if (issue_b) begin
        meta[m_wp] <= '{tag: agu_tag, chunk_end: chunk_end};
        m_wp       <= (m_wp == OW'(MAX_OUT-1)) ? '0 : m_wp + 1'b1;
        if (chunk_end) begin
          iss_cnt   <= '0;
          wait_fill <= 1'b1;
        end else iss_cnt <= iss_cnt + 1'b1;
      end
      if (fill_done) wait_fill <= 1'b0;
      // response side
      if (r_valid) begin
        r_half <= !r_half;
        if (!r_half) a_q <= r_data;
      end
      if (pair_done) begin
        m_rp  <= (m_rp == OW'(MAX_OUT-1)) ? '0 : m_rp + 1'b1;
        w_cnt <= meta[m_rp].chunk_end ? '0 : w_cnt + 1'b1;
      end
      outstanding <= outstanding + (OW+1)'(issue_b) - (OW+1)'(pair_done);
    end
  end

  a_arstable: assert property (@(posedge clk) disable iff (!rst_n)
    ar_valid && !ar_ready |=> ar_valid && $stable(ar_addr));
endmodule
