// bram_tdp: true dual-port block RAM, one clock, one-cycle read latency.
//
// This is the memory every buffer of the IP is built from, the equivalent of
// a block-memory-generator instance: two independent ports, each of which can
// read or write one word per cycle.  A read returns the word in the cycle
// after the port is enabled (read-first: a write and a read on the same port
// in one cycle return the old word).  Writes from both ports to one address
// in the same cycle are not allowed; nothing in this design does that.
// Contents are not reset; they are cleared to zero at time zero so that a
// simulation reads defined values, which is the power-up state of an FPGA BRAM.
// The read data registers hold their last value until the port is enabled.
module bram_tdp #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  // port A
  input  logic             a_en,
  input  logic             a_we,
  input  logic [AW-1:0]    a_addr,
  input  logic [WIDTH-1:0] a_wdata,
  output logic [WIDTH-1:0] a_rdata,
  // port B
  input  logic             b_en,
  input  logic             b_we,
  input  logic [AW-1:0]    b_addr,
  input  logic [WIDTH-1:0] b_wdata,
  output logic [WIDTH-1:0] b_rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  initial begin
    for (int i = 0; i < int'(DEPTH); i++) mem[i] = '0;
  end

  // Both ports in one process so that the array has a single driver.
  always_ff @(posedge clk) begin
    if (a_en) begin
      a_rdata <= mem[a_addr];
      if (a_we) mem[a_addr] <= a_wdata;
    end
    if (b_en) begin
      b_rdata <= mem[b_addr];
      if (b_we) mem[b_addr] <= b_wdata;
    end
  end

endmodule
