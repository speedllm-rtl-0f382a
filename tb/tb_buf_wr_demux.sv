// tb_buf_wr_demux: self-checking testbench of buf_wr_demux (2 outputs).
// Tries every select with and without a write and random address/data: only
// the selected buffer may see the write enable.
`timescale 1ns/1ps
module tb_buf_wr_demux;
  logic in_we = 0, sel = 0;
  logic [7:0] in_addr = '0, out_addr;
  logic [31:0] in_data = '0, out_data;
  logic [1:0] out_we;
  int checks = 0, failures = 0;
  buf_wr_demux dut (.*);
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int t = 0; t < 200; t++) begin
      in_we = 1'(t); sel = 1'(t >> 1); in_addr = 8'($urandom); in_data = $urandom;
      #1;
      checks++;
      if (out_we !== (in_we ? (2'b01 << sel) : 2'b00) || out_addr !== in_addr || out_data !== in_data) begin
        failures++; $display("FAIL at %0d", t);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
