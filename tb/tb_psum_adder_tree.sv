// tb_psum_adder_tree: the cross-core adder tree.
// Random psums are applied each period; the registered sum must equal their
// sum modulo 2^8 from phase 5 on, and hold until phase 4 of the next period.
`timescale 1ns/1ps
module tb_psum_adder_tree;
  import conv_pkg::*;
  localparam int T = TILE_CYCLES, PHW = $clog2(T);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [PHW-1:0] phase = '0;
  logic [PSUM_W-1:0] psum [NCORE];
  logic [PSUM_W-1:0] sum;
  int checks = 0, failures = 0;

  psum_adder_tree dut (.*);

  initial begin
    repeat (4000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [PSUM_W-1:0] e, prev;
    foreach (psum[i]) psum[i] = '0;
    prev = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      int unsigned s;
      s = 0;
      foreach (psum[i]) begin psum[i] = PSUM_W'($urandom); s += psum[i]; end
      e = PSUM_W'(s);
      for (int ph = 0; ph < T; ph++) begin
        phase = PHW'(ph);
        @(negedge clk);
        checks++;
        if (sum !== ((ph >= 4) ? e : prev)) begin failures++; $display("FAIL sum %h ph %0d", sum, ph); end
      end
      prev = e;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
