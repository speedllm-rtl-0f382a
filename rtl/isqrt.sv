// isqrt: unsigned integer square root, digit by digit, one root bit per
// clock. start loads rad; WR/2 clocks later done pulses with
// root = floor(sqrt(rad)). WR must be even. Helper of the RMSNorm operator.
module isqrt #(
  parameter int WR = 48
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [WR-1:0]   rad,
  output logic            busy,
  output logic            done,
  output logic [WR/2-1:0] root
);
  localparam int WQ = WR / 2;
  logic [WR-1:0]          x;
  logic [WQ+2:0]          rem;
  logic [$clog2(WQ+1)-1:0] cnt;
  logic [WQ+2:0]          trial, cand;

  assign trial = {rem[WQ:0], x[WR-1:WR-2]};
  assign cand  = {1'b0, root, 2'b01};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '0; rem <= '0; cnt <= '0; busy <= 1'b0; done <= 1'b0; root <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          x    <= rad;
          rem  <= '0;
          root <= '0;
          cnt  <= ($clog2(WQ+1))'(WQ);
          busy <= 1'b1;
        end
      end else begin
        x <= x << 2;
        if (trial >= cand) begin
          rem  <= trial - cand;
          root <= {root[WQ-2:0], 1'b1};
        end else begin
          rem  <= trial;
          root <= {root[WQ-2:0], 1'b0};
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
