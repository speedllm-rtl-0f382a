// seq_div: unsigned restoring divider, one quotient bit per clock.
// start loads num and den; after WN clocks done pulses for one cycle with
// quo = num / den (truncated). den = 0 gives an all-ones quotient. busy is
// high while a division runs; start is ignored while busy.
// Helper of the RMSNorm, Softmax and SiLU operators (their reciprocals).
module seq_div #(
  parameter int WN = 48,
  parameter int WD = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [WN-1:0] num,
  input  logic [WD-1:0] den,
  output logic          busy,
  output logic          done,
  output logic [WN-1:0] quo
);
  logic [WD:0]           rem;
  logic [WN-1:0]         sh;
  logic [WD-1:0]         d_q;
  logic [$clog2(WN+1)-1:0] cnt;
  logic [WD:0]           trial;

  assign trial = {rem[WD-1:0], sh[WN-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem <= '0; sh <= '0; d_q <= '0; cnt <= '0;
      busy <= 1'b0; done <= 1'b0; quo <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          rem  <= '0;
          sh   <= num;
          d_q  <= den;
          cnt  <= ($clog2(WN+1))'(WN);
          busy <= 1'b1;
          quo  <= '0;
        end
      end else begin
        sh <= sh << 1;
        if (trial >= {1'b0, d_q}) begin
          rem <= trial - {1'b0, d_q};
          quo <= {quo[WN-2:0], 1'b1};
        end else begin
          rem <= trial;
          quo <= {quo[WN-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
