// mac_unit: the PE's output-stationary multiply-accumulate.
//
// An 8x8-bit signed fixed-point multiplier feeding a 24-bit adder whose
// accumulator stays in the PE for the whole dot product. clear zeroes the
// accumulator; en adds a*b at the clock edge, so acc shows the sum one cycle
// after the operands. Widths are the source design's; two's-complement
// signedness and wrap-around on overflow are this implementation's choices.
module mac_unit #(
  parameter int unsigned DATA_W = 8,
  parameter int unsigned ACC_W  = 24
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     en,
  input  logic signed [DATA_W-1:0] a,
  input  logic signed [DATA_W-1:0] b,
  output logic signed [ACC_W-1:0]  acc
);
  logic signed [2*DATA_W-1:0] prod;
  assign prod = a * b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     acc <= '0;
    else if (clear) acc <= '0;
    else if (en)    acc <= acc + ACC_W'(prod);
  end
endmodule
