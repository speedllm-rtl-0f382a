// tb_sfu_silu: self-checking testbench of sfu_silu. SiLU on 60 random inputs, then the fused silu(a)*b on 60 more.
// Operand pairs are offered with random gaps and results are taken with a
// random out_ready, so both handshakes stall. Expected values are computed
// here in real arithmetic and compared within 1e-3 + 0.1 %.
`timescale 1ns/1ps
module tb_sfu_silu;
  import speedllm_pkg::*;
  logic clk = 0, rst_n = 1;
  // a real falling edge applies the asynchronous reset before the first clock
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  logic  in_valid = 0, in_ready, out_valid, out_ready = 0;
  data_t in_a = '0, in_b = '0, out_data;
  tag_t  in_tag = '0;
  logic fuse = 0;
  sfu_silu dut (.clk, .rst_n, .fuse, .in_valid, .in_ready, .in_a, .in_b, .in_tag, .out_valid, .out_ready, .out_data);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic data_t r2q(real v); return data_t'($rtoi(v * 65536.0)); endfunction
  function automatic real q2r(data_t v); return real'(v) / 65536.0; endfunction
  function automatic real rabs(real v); return v < 0.0 ? -v : v; endfunction
  function automatic real rnd(real amp); return amp * (real'($urandom_range(0, 20000)) / 10000.0 - 1.0); endfunction

  data_t qa [$], qb [$];
  tag_t  qt [$];
  real   qe [$];
  int    got = 0, nexp = 0;
  bit    drive_done = 0;

  // Inputs change at the falling edge; in_ready is sampled there too, so a
  // pair is taken at the next rising edge exactly when ok is set.
  task automatic send(data_t a, data_t b, tag_t t);
    bit ok;
    @(negedge clk);
    while ($urandom_range(3) == 0) begin in_valid = 1'b0; @(negedge clk); end
    in_valid = 1'b1; in_a = a; in_b = b; in_tag = t;
    do begin ok = in_ready; @(negedge clk); end while (!ok);
    in_valid = 1'b0;
  endtask

  // result monitor
  always @(posedge clk) begin
    out_ready <= ($urandom_range(2) != 0);
    if (rst_n && out_valid && out_ready) begin
      real e, g;
      checks++;
      if (qe.size() == 0) begin
        failures++;
        $display("FAIL: unexpected result %f", q2r(out_data));
      end else begin
        e = qe.pop_front();
        g = q2r(out_data);
        if (rabs(g - e) > 1e-3 + 1e-3*rabs(e)) begin
          failures++;
          if (failures < 10) $display("FAIL: result %0d got %f expected %f", got, g, e);
        end
      end
      got++;
    end
  end

  task automatic run;
    for (int f = 0; f < 2; f++) begin
      wait (got == nexp);
      @(posedge clk);
      fuse <= f[0];
      for (int k = 0; k < 60; k++) begin
        real x = q2r(r2q(rnd(10.0))), g = q2r(r2q(rnd(3.0)));
        real s = x / (1.0 + $exp(-x));
        qe.push_back(f ? s * g : s); nexp++;
        send(r2q(x), r2q(g), '{bias: 1'b0, row_end: 1'b0, op_end: (k == 59)});
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    run();
    wait (got == nexp);
    repeat (20) @(posedge clk);
    checks++;
    if (got != nexp || qe.size() != 0) begin failures++; $display("FAIL: %0d results for %0d expected", got, nexp); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
