// tb_bram_tdp: checks the dual-port BRAM against a reference array.
// Random reads and writes on both ports (never the same address written by
// both in one cycle); every read is compared, one cycle later, with the
// reference contents before that cycle's writes (read-first behaviour).
`timescale 1ns/1ps
module tb_bram_tdp;
  localparam int W = 8, D = 40, AW = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  logic a_en = 0, a_we = 0, b_en = 0, b_we = 0;
  logic [AW-1:0] a_addr = '0, b_addr = '0;
  logic [W-1:0]  a_wdata = '0, b_wdata = '0, a_rdata, b_rdata;
  int checks = 0, failures = 0;

  bram_tdp #(.WIDTH(W), .DEPTH(D), .AW(AW)) dut (.*);

  logic [W-1:0] ref_mem [D];
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] ea, eb;
    bit ra, rb;
    foreach (ref_mem[i]) ref_mem[i] = '0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      a_en = $urandom % 4 != 0; a_we = $urandom % 2; a_addr = AW'($urandom % D); a_wdata = W'($urandom);
      b_en = $urandom % 4 != 0; b_we = $urandom % 2; b_addr = AW'($urandom % D); b_wdata = W'($urandom);
      if (a_en && a_we && b_en && b_we && a_addr == b_addr) b_we = 0;
      ra = a_en; rb = b_en;
      ea = ref_mem[a_addr]; eb = ref_mem[b_addr];
      if (a_en && a_we) ref_mem[a_addr] = a_wdata;
      if (b_en && b_we) ref_mem[b_addr] = b_wdata;
      @(negedge clk);
      if (ra) begin checks++; if (a_rdata != ea) begin failures++; $display("FAIL A %h %h", a_rdata, ea); end end
      if (rb) begin checks++; if (b_rdata != eb) begin failures++; $display("FAIL B %h %h", b_rdata, eb); end end
      a_en = 0; b_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
