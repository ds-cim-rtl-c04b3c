// term_d_lut: correction term d, one entry per weight column holding
// sum over rows of w' = w + 128 (unsigned).
//
// Weights are static while a layer runs, so this sum is worked out ahead
// of time by the host and written here; the output stage subtracts
// 128 * d. Write port: wr_en with wr_col and wr_data, effective at the
// clock edge. All entries are read in parallel.
module term_d_lut #(
  parameter int unsigned COLS  = 32,
  parameter int unsigned D_W   = 16,
  localparam int unsigned COL_W = $clog2(COLS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [COL_W-1:0] wr_col,
  input  logic [D_W-1:0]   wr_data,
  output logic [D_W-1:0]   d [COLS]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < COLS; c++) d[c] <= '0;
    end else if (wr_en) begin
      d[wr_col] <= wr_data;
    end
  end
endmodule
