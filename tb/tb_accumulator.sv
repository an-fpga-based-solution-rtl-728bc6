// tb_accumulator: read-modify-write into a model output BRAM.
// The memory model starts with random "biases".  Each period flagged
// cmp_valid adds a random sum to a random word (often the same word twice in
// a row, the 1x1-output case); periods without cmp_valid must not touch the
// memory.  At the end every word must equal its bias plus all sums added to
// it, modulo 2^8, and the port must have been used only in phases 4 and 5.
`timescale 1ns/1ps
module tb_accumulator;
  import conv_pkg::*;
  localparam int AW = 6, T = TILE_CYCLES, PHW = $clog2(T), D = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [PHW-1:0] phase = '0;
  logic cmp_valid = 0;
  logic [AW-1:0] out_addr = '0;
  logic [PSUM_W-1:0] sum = '0;
  logic ob_en, ob_we;
  logic [AW-1:0] ob_addr;
  logic [PSUM_W-1:0] ob_wdata, ob_rdata = '0;
  int checks = 0, failures = 0;
  logic [PSUM_W-1:0] mem [D];
  logic [PSUM_W-1:0] ref_mem [D];

  accumulator #(.AW(AW)) dut (.*);

  always @(posedge clk)
    if (ob_en) begin
      ob_rdata <= mem[ob_addr];
      if (ob_we) mem[ob_addr] <= ob_wdata;
    end

  int bad_phase = 0;
  always @(posedge clk) if (ob_en && phase != PHW'(4) && phase != PHW'(5)) bad_phase++;

  initial begin
    repeat (6000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a;
    foreach (mem[i]) begin mem[i] = PSUM_W'($urandom); ref_mem[i] = mem[i]; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    a = 0;
    for (int n = 0; n < 300; n++) begin
      bit v;
      logic [PSUM_W-1:0] s;
      v = ($urandom % 4 != 0);
      if ($urandom % 2) a = $urandom % D;
      s = PSUM_W'($urandom);
      for (int ph = 0; ph < T; ph++) begin
        phase = PHW'(ph); cmp_valid = v; out_addr = AW'(a);
        // the adder tree's sum is registered in phase 4
        if (ph == 5) sum = s; else if (ph < 5) sum = PSUM_W'($urandom);
        @(negedge clk);
      end
      if (v) ref_mem[a] = ref_mem[a] + s;
    end
    cmp_valid = 0;
    foreach (mem[i]) begin
      checks++;
      if (mem[i] != ref_mem[i]) begin failures++; $display("FAIL word %0d %h exp %h", i, mem[i], ref_mem[i]); end
    end
    checks++;
    if (bad_phase != 0) begin failures++; $display("FAIL port used outside phases 4-5"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
