// accumulator: conventional bitstream accumulator of one OR-MAC.
//
// Every enabled cycle it adds the ASUM of its OR-MAC to a register. On the
// first cycle of a bitstream ('first') it loads the input instead, so no
// separate clear cycle is needed. The register then holds the unsigned
// count of ones until the next bitstream starts. Used by the precise
// variant (OR-MAC16, 4-bit ASUM), where the adder and register switch
// every cycle.
module accumulator #(
  parameter int unsigned IN_W  = 4,
  parameter int unsigned ACC_W = 12
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic             first,
  input  logic [IN_W-1:0]  din,
  output logic [ACC_W-1:0] acc
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     acc <= '0;
    else if (en)    acc <= (first ? '0 : acc) + ACC_W'(din);
  end
endmodule
