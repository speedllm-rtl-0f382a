// tb_buf_rd_mux: self-checking testbench of buf_rd_mux (4 inputs). Random
// selects, valids and data; the output must be the selected input and the
// valid bit of the previous cycle.
`timescale 1ns/1ps
module tb_buf_rd_mux;
  localparam int N = 4, W = 67;
  logic clk = 0, rst_n = 1;
  // a real falling edge applies the asynchronous reset before the first clock
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  logic [1:0] sel = '0;
  logic in_valid = 0, out_valid;
  logic [W-1:0] in_data [N], out_data;
  int checks = 0, failures = 0;
  buf_rd_mux dut (.*);
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    logic [W-1:0] e; logic ev;
    for (int j = 0; j < N; j++) in_data[j] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      for (int j = 0; j < N; j++) in_data[j] = {$urandom, $urandom, $urandom};
      sel = 2'($urandom); in_valid = 1'($urandom);
      e = in_data[sel]; ev = in_valid;
      @(negedge clk);
      checks++;
      if (out_data !== e || out_valid !== ev) begin failures++; $display("FAIL at %0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
