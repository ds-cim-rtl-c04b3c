// dscim_ctrl: lane scheduler of the macro's pipelined channel input.
//
// Input channels arrive one per cycle over a valid/ready handshake and are
// assigned to the SNG lanes in round robin: channel 0 to lane 0, channel 1
// to lane 1, ..., channel 64 back to lane 0. Each lane then runs its own
// bitstream of L = 64, 128 or 256 cycles, so lanes are staggered by one
// cycle and the input port is busy only 64 cycles out of every L.
// A lane may be reloaded at the clock edge that ends its last bitstream
// cycle; if the next lane is still busy, in_ready is low (a stall).
//
// Per lane, during each bitstream cycle: lane_en = 1, lane_first marks
// cycle 0 and lane_phase is the cycle index mod 4 (for the latch-cached
// accumulator). fin_now is the one-hot set of lanes in their last cycle;
// fin_valid / fin_lane are that event registered, i.e. valid in the cycle
// in which the lane's accumulators hold their final count.
// cfg_len may only change while every lane is idle (asserted).
module dscim_ctrl
  import dscim_pkg::*;
#(
  parameter int unsigned LANES  = 64,
  localparam int unsigned LANE_W = $clog2(LANES)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  len_e              cfg_len,
  input  logic              in_valid,
  output logic              in_ready,
  output logic [LANES-1:0]  load,
  output logic [LANES-1:0]  lane_en,
  output logic [LANES-1:0]  lane_first,
  output logic [1:0]        lane_phase [LANES],
  output logic [LANES-1:0]  fin_now,
  output logic              fin_valid,
  output logic [LANE_W-1:0] fin_lane,
  output logic              idle
);
  logic [LANES-1:0]  busy;
  logic [7:0]        cnt [LANES];
  logic [LANE_W-1:0] ptr;
  logic [7:0]        last;

  assign last = 8'(len_cycles(cfg_len) - 1);

  for (genvar l = 0; l < LANES; l++) begin : g_st
    assign lane_en[l]    = busy[l];
    assign lane_first[l] = busy[l] && cnt[l] == '0;
    assign lane_phase[l] = cnt[l][1:0];
    assign fin_now[l]    = busy[l] && cnt[l] == last;
  end

  assign in_ready  = !busy[ptr] || fin_now[ptr];
  always_comb begin
    load = '0;
    load[ptr] = in_valid && in_ready;
  end
  assign idle = (busy == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= '0;
      ptr  <= '0;
      for (int l = 0; l < LANES; l++) cnt[l] <= '0;
    end else begin
      for (int l = 0; l < LANES; l++) begin
        if (load[l]) begin
          busy[l] <= 1'b1;
          cnt[l]  <= '0;
        end else if (busy[l]) begin
          if (fin_now[l]) busy[l] <= 1'b0;
          cnt[l] <= cnt[l] + 8'd1;
        end
      end
      if (in_valid && in_ready)
        ptr <= (ptr == LANE_W'(LANES - 1)) ? '0 : ptr + 1'b1;
    end
  end

  // Registered finish event; lanes started on distinct cycles with the same
  // length never finish together.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fin_valid <= 1'b0;
      fin_lane  <= '0;
    end else begin
      fin_valid <= |fin_now;
      fin_lane  <= '0;
      for (int l = 0; l < LANES; l++)
        if (fin_now[l]) fin_lane <= LANE_W'(l);
    end
  end

  ap_one_finish: assert property (@(posedge clk) $onehot0(fin_now));
  ap_len_stable: assert property (@(posedge clk) !idle |=> $stable(cfg_len));
endmodule
