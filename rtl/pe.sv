// pe -- one processing element of the output-stationary systolic array.
//
// Each PE holds a 32-bit accumulator. `load` presets the accumulator with the
// old value of the destination element and clears the operand registers;
// while `en` is high the PE adds a_in*b_in to the accumulator and forwards
// a_in to the right and b_in downwards through one register each, so that a
// row operand reaches column j after j cycles and a column operand reaches
// row i after i cycles. Integer arithmetic, wrapping at 32 bits. The 32-bit
// datapath follows the design description; the integer type and the
// output-stationary dataflow are choices of this implementation.
//
// Lint note: only the low 32 bits of the product are accumulated (arithmetic
// modulo 2^32), so the upper half of `prod` is reported as unused.
module pe #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [W-1:0] c_in,
  input  logic         en,
  input  logic [W-1:0] a_in,
  input  logic [W-1:0] b_in,
  output logic [W-1:0] a_out,
  output logic [W-1:0] b_out,
  output logic [W-1:0] acc
);
  logic [2*W-1:0] prod;
  assign prod = a_in * b_in;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc   <= '0;
      a_out <= '0;
      b_out <= '0;
    end else if (load) begin
      acc   <= c_in;
      a_out <= '0;
      b_out <= '0;
    end else if (en) begin
      acc   <= acc + prod[W-1:0];
      a_out <= a_in;
      b_out <= b_in;
    end
  end
endmodule
