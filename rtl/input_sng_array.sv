// input_sng_array: the activation side of the macro, LANES SNG columns of
// ROWS SNGs each.
//
// Each SNG column holds the remapped codes of one input channel for the
// whole bitstream and compares them every cycle with PRNG_A, producing the
// activation bits A_SC of its lane. Lane k's bits go to OR-MAC k of every
// weight column (they are broadcast across columns). A channel is written
// into lane k by a one-hot 'load' pulse; the code registers change at that
// clock edge and the lane's bits follow combinationally from the next
// cycle on. Channels are loaded one per cycle into successive lanes (see
// dscim_ctrl), so one narrow activation port feeds all 64 lanes.
// Each row's SNG uses the activation-axis mask of that row.
module input_sng_array
  import dscim_pkg::*;
#(
  parameter int unsigned LANES = 64,
  parameter int unsigned ROWS  = 128,
  parameter int unsigned SHIFT = 3
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [LANES-1:0] load,
  input  code_t           act_code [ROWS],
  input  code_t           rnd_a,
  output logic [ROWS-1:0] a_sc [LANES]
);
  code_t held [LANES][ROWS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < LANES; l++)
        for (int r = 0; r < ROWS; r++) held[l][r] <= '0;
    end else begin
      for (int l = 0; l < LANES; l++)
        if (load[l])
          for (int r = 0; r < ROWS; r++) held[l][r] <= act_code[r];
    end
  end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    for (genvar r = 0; r < ROWS; r++) begin : g_row
      sng #(.MASK(remap_mask(r, SHIFT, 1'b0))) u_sng (
        .rnd    (rnd_a),
        .code   (held[l][r]),
        .bit_sc (a_sc[l][r])
      );
    end
  end
endmodule
