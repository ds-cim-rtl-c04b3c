// dscim_column: one weight column of the macro.
//
// 128 weight SNGs compare the column's stored codes with PRNG_W to form
// W_SC, which is shared by all LANES OR-MACs of the column. OR-MAC k ANDs
// W_SC with lane k's activation bits, ORs each group of OR_N rows and adds
// the group outputs (ASUM); its accumulator sums ASUM over the bitstream.
// OR_N = 64 (efficient variant) uses the latch-cached accumulator, OR_N = 16
// (precise variant) the conventional one. The remap shift is
// SHIFT = log2(OR_N) / 2 (3 for OR64, 2 for OR16).
// Timing: a_sc, w_sc and ASUM are combinational within a cycle; 'acc' of a
// lane holds the full count one clock after the lane's last bitstream cycle.
module dscim_column
  import dscim_pkg::*;
#(
  parameter int unsigned LANES = 64,
  parameter int unsigned ROWS  = 128,
  parameter int unsigned OR_N  = 64,
  parameter int unsigned LEN_MAX = 256,
  localparam int unsigned SHIFT  = $clog2(OR_N) / 2,
  localparam int unsigned UNITS  = ROWS / OR_N,
  localparam int unsigned ASUM_W = $clog2(UNITS + 1),
  localparam int unsigned ACC_W  = $clog2(UNITS * LEN_MAX + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  code_t            w_code [ROWS],
  input  code_t            rnd_w,
  input  logic [ROWS-1:0]  a_sc [LANES],
  input  logic [LANES-1:0] lane_en,
  input  logic [LANES-1:0] lane_first,
  input  logic [1:0]       lane_phase [LANES],
  output logic [ACC_W-1:0] acc [LANES]
);
  logic [ROWS-1:0] w_sc;

  for (genvar r = 0; r < ROWS; r++) begin : g_wsng
    sng #(.MASK(remap_mask(r, SHIFT, 1'b1))) u_sng (
      .rnd    (rnd_w),
      .code   (w_code[r]),
      .bit_sc (w_sc[r])
    );
  end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic [ASUM_W-1:0] asum;

    or_mac #(.ROWS(ROWS), .N(OR_N)) u_or_mac (
      .a_sc (a_sc[l]),
      .w_sc (w_sc),
      .asum (asum)
    );

    if (OR_N == 64) begin : g_lca
      latch_cached_accumulator #(.IN_W(ASUM_W), .DEPTH(4), .ACC_W(ACC_W)) u_acc (
        .clk   (clk),
        .rst_n (rst_n),
        .en    (lane_en[l]),
        .first (lane_first[l]),
        .phase (lane_phase[l]),
        .din   (asum),
        .acc   (acc[l])
      );
    end else begin : g_conv
      accumulator #(.IN_W(ASUM_W), .ACC_W(ACC_W)) u_acc (
        .clk   (clk),
        .rst_n (rst_n),
        .en    (lane_en[l]),
        .first (lane_first[l]),
        .din   (asum),
        .acc   (acc[l])
      );
    end
  end

  initial assert (OR_N == 64 || OR_N == 16 || OR_N == 4)
    else $error("dscim_column: OR_N must be 4, 16 or 64");
endmodule
