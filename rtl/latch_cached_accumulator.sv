// latch_cached_accumulator: bitstream accumulator of an OR-MAC64 that
// updates its register only once every DEPTH (= 4) cycles.
//
// The 2-bit ORout of bitstream cycles with phase 0..DEPTH-2 is parked in a
// small cache; in the cycle with phase DEPTH-1 the cached values and the
// live input are added and the sum is accumulated into the register. The
// adder and the wide register therefore toggle once per four cycles,
// which is the energy saving this block exists for.
// The source design uses eight D-latches (four 2-bit entries); here the
// first three entries are enable flip-flops and the fourth entry is the
// live input itself, which is what a transparent latch would pass on the
// summing cycle. 'first' marks cycle 0 of a bitstream: the register is
// overwritten at the end of the first group. The bitstream length must be
// a multiple of DEPTH; 'acc' is the full count one clock after the last
// bitstream cycle.
module latch_cached_accumulator #(
  parameter int unsigned IN_W  = 2,
  parameter int unsigned DEPTH = 4,
  parameter int unsigned ACC_W = 10,
  localparam int unsigned PH_W = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic             first,
  input  logic [PH_W-1:0]  phase,
  input  logic [IN_W-1:0]  din,
  output logic [ACC_W-1:0] acc
);
  localparam int unsigned SUM_W = IN_W + PH_W;

  logic [IN_W-1:0]  cache [DEPTH-1];
  logic             group_first;   // this group is the bitstream's first
  logic [SUM_W-1:0] group_sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH-1; i++) cache[i] <= '0;
      group_first <= 1'b0;
    end else if (en) begin
      for (int i = 0; i < DEPTH-1; i++)
        if (phase == PH_W'(i)) cache[i] <= din;
      if (first) group_first <= 1'b1;
      else if (phase == PH_W'(DEPTH-1)) group_first <= 1'b0;
    end
  end

  always_comb begin
    group_sum = SUM_W'(din);
    for (int i = 0; i < DEPTH-1; i++) group_sum = group_sum + SUM_W'(cache[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc <= '0;
    else if (en && phase == PH_W'(DEPTH-1))
      acc <= (group_first ? '0 : acc) + ACC_W'(group_sum);
  end
endmodule
