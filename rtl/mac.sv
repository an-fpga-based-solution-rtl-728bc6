// mac: multiply-accumulate unit of a PCORE.
//
// In a cycle with en set, acc becomes a*b (clr set) or acc + a*b (clr clear).
// Operands are unsigned; acc is wide enough for three products without loss.
// One cycle per product, result registered.
module mac #(
  parameter int unsigned A_W   = 8,
  parameter int unsigned ACC_W = 2 * A_W + 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic             clr,
  input  logic [A_W-1:0]   a,
  input  logic [A_W-1:0]   b,
  output logic [ACC_W-1:0] acc
);

  logic [2*A_W-1:0] prod;
  assign prod = a * b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  acc <= '0;
    else if (en) acc <= (clr ? '0 : acc) + ACC_W'(prod);
  end

endmodule
