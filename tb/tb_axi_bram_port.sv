// tb_axi_bram_port: AXI4 slave in front of a model memory.
// The memory model decodes {region, word} and answers reads one cycle later,
// as the BRAM banks do.  The testbench issues INCR bursts of random length to
// random regions with random gaps on wvalid and rready, one FIXED burst, and
// checks the memory contents, the read data, rlast on the last beat only,
// the returned IDs, and that no address is accepted while hold is set.
`timescale 1ns/1ps
module tb_axi_bram_port;
  import conv_pkg::*;
  localparam int AW = 6, IDW = 4, ADDR_W = REGION_W + AW + 2, NW = 24 * 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic hold = 0;
  logic [IDW-1:0] s_awid = '0, s_arid = '0, s_bid, s_rid;
  logic [ADDR_W-1:0] s_awaddr = '0, s_araddr = '0;
  logic [7:0] s_awlen = '0, s_arlen = '0;
  logic [2:0] s_awsize = 3'd2, s_arsize = 3'd2;
  logic [1:0] s_awburst = 2'b01, s_arburst = 2'b01;
  logic s_awvalid = 0, s_wvalid = 0, s_wlast = 0, s_bready = 0, s_arvalid = 0, s_rready = 0;
  logic [31:0] s_wdata = '0, s_rdata;
  logic [3:0] s_wstrb = 4'hf;
  logic s_awready, s_wready, s_bvalid, s_arready, s_rvalid, s_rlast;
  logic [1:0] s_bresp, s_rresp;
  logic mem_en, mem_we;
  logic [REGION_W-1:0] mem_region;
  logic [AW-1:0] mem_addr;
  logic [31:0] mem_wdata, mem_rdata = '0;
  int checks = 0, failures = 0;
  logic [31:0] mem [NW];
  logic [31:0] ref_mem [NW];

  axi_bram_port #(.AW(AW), .IDW(IDW)) dut (.*);

  always @(posedge clk)
    if (mem_en) begin
      mem_rdata <= mem[{mem_region, mem_addr}];
      if (mem_we) mem[{mem_region, mem_addr}] <= mem_wdata;
    end

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", m); end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int held_aw = 0;
  always @(posedge clk) if (hold && (s_awready || s_arready)) held_aw++;

  task automatic wr(input int rg, input int w, input int n, input bit fixed, input logic [3:0] id);
    @(negedge clk);
    s_awaddr = {REGION_W'(rg), AW'(w), 2'b00}; s_awlen = 8'(n - 1); s_awburst = fixed ? 2'b00 : 2'b01;
    s_awid = id; s_awvalid = 1; #1;
    while (!s_awready) begin @(negedge clk); #1; end
    @(negedge clk);
    s_awvalid = 0;
    for (int i = 0; i < n; i++) begin
      while ($urandom % 3 == 0) @(negedge clk);
      s_wdata = $urandom; s_wlast = (i == n - 1); s_wvalid = 1;
      ref_mem[{REGION_W'(rg), AW'(fixed ? w : w + i)}] = s_wdata;
      #1;
      while (!s_wready) begin @(negedge clk); #1; end
      @(negedge clk);
      s_wvalid = 0; s_wlast = 0;
    end
    s_bready = 1; #1;
    while (!s_bvalid) begin @(negedge clk); #1; end
    chk(s_bid == id && s_bresp == 2'b00, "bid/bresp");
    @(negedge clk);
    s_bready = 0;
  endtask

  task automatic rd(input int rg, input int w, input int n, input logic [3:0] id);
    @(negedge clk);
    s_araddr = {REGION_W'(rg), AW'(w), 2'b00}; s_arlen = 8'(n - 1); s_arburst = 2'b01;
    s_arid = id; s_arvalid = 1; #1;
    while (!s_arready) begin @(negedge clk); #1; end
    @(negedge clk);
    s_arvalid = 0;
    for (int i = 0; i < n; i++) begin
      s_rready = 0;
      while ($urandom % 3 == 0) @(negedge clk);
      s_rready = 1; #1;
      while (!s_rvalid) begin @(negedge clk); #1; end
      chk(s_rdata == ref_mem[{REGION_W'(rg), AW'(w + i)}],
          $sformatf("read rg %0d w %0d: %h exp %h", rg, w + i, s_rdata, ref_mem[{REGION_W'(rg), AW'(w + i)}]));
      chk(s_rlast == (i == n - 1), "rlast");
      chk(s_rid == id, "rid");
      @(negedge clk);
    end
    s_rready = 0;
  endtask

  initial begin
    foreach (mem[i]) begin mem[i] = '0; ref_mem[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int rg, w, n;
      rg = $urandom % 24; n = 1 + $urandom % 20; w = $urandom % (64 - n);
      wr(rg, w, n, 0, 4'(t));
      rd(rg, w, n, 4'(t + 1));
    end
    // FIXED burst: every beat to the same word, last one wins
    wr(5, 7, 4, 1, 4'd3);
    rd(5, 7, 1, 4'd2);
    // hold: no address is taken
    hold = 1;
    @(negedge clk);
    s_arvalid = 1; s_araddr = '0;
    repeat (10) @(negedge clk);
    s_arvalid = 0;
    hold = 0;
    chk(held_aw == 0, "address accepted while held");
    foreach (mem[i]) if (mem[i] != ref_mem[i]) begin chk(0, $sformatf("mem word %0d", i)); break; end
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
