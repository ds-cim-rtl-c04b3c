// weight_sram: the 128 x 32 x 8-bit (32 Kb) weight array of the macro.
//
// Written one array row at a time (one code per column) through the
// bit-line driver port; all codes are read in parallel every cycle by the
// weight SNGs, as in a compute-in-memory array where weights stay put for
// the whole bitstream. The codes stored are the remapped weights.
// The silicon array is custom SRAM; here it is a register array with the
// same organisation. Write takes effect at the clock edge.
module weight_sram
  import dscim_pkg::*;
#(
  parameter int unsigned ROWS  = 128,
  parameter int unsigned COLS  = 32,
  localparam int unsigned ROW_W = $clog2(ROWS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [ROW_W-1:0] wr_row,
  input  code_t            wr_data  [COLS],
  output code_t            rd_codes [COLS][ROWS]
);
  code_t mem [COLS][ROWS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < COLS; c++)
        for (int r = 0; r < ROWS; r++) mem[c][r] <= '0;
    end else if (wr_en) begin
      for (int c = 0; c < COLS; c++) mem[c][wr_row] <= wr_data[c];
    end
  end

  assign rd_codes = mem;
endmodule
