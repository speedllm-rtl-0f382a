// tb_dp_buffer: self-checking testbench of dp_buffer at its default size.
// Writes random words to every address in random order, reads every address
// back and checks the one-cycle read latency; then writes and reads the same
// address in one cycle and expects the old word (read before write).
`timescale 1ns/1ps
module tb_dp_buffer;
  localparam int DEPTH = 256, W = 67;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [7:0] waddr = '0, raddr = '0;
  logic [W-1:0] wdata = '0, rdata;
  logic [W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  dp_buffer dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] rw();
    return {$urandom, $urandom, $urandom};
  endfunction

  initial begin
    for (int k = 0; k < DEPTH; k++) begin
      @(negedge clk);
      we = 1; waddr = 8'(k * 37 + 11); wdata = rw(); model[waddr] = wdata;
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < DEPTH; k++) begin
      raddr = 8'(k);
      @(negedge clk);
      checks++;
      if (rdata !== model[k]) begin failures++; $display("FAIL: addr %0d", k); end
    end
    // same-cycle read and write
    raddr = 8'd5; waddr = 8'd5; we = 1; wdata = rw();
    @(negedge clk);
    we = 0;
    checks++;
    if (rdata !== model[5]) begin failures++; $display("FAIL: read during write"); end
    model[5] = wdata;
    @(negedge clk);
    checks++;
    if (rdata !== model[5]) begin failures++; $display("FAIL: word written"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
