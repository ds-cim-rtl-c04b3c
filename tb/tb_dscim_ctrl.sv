// tb_dscim_ctrl: lane scheduler with 8 lanes (reduced from 64). Offers a
// channel every cycle, with random gaps in a second phase, for lengths
// 64, 128 and 256. Checks: round-robin lane order; each lane runs exactly
// L enabled cycles with 'first' on cycle 0 and phase = cycle mod 4; a lane
// is reloaded no earlier than its last cycle; fin_valid/fin_lane appear
// one cycle after the last cycle; in_ready drops (stall) when the next
// lane is busy and the sustained rate is LANES channels per L cycles.
module tb_dscim_ctrl;
  import dscim_pkg::*;
  localparam int LANES = 8;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready;
  len_e cfg_len = LEN_64;
  logic [LANES-1:0] load, lane_en, lane_first, fin_now;
  logic [1:0] lane_phase [LANES];
  logic fin_valid, idle;
  logic [2:0] fin_lane;
  int checks = 0, failures = 0, stalls = 0;

  dscim_ctrl #(.LANES(LANES)) dut (.clk, .rst_n, .cfg_len, .in_valid, .in_ready, .load,
    .lane_en, .lane_first, .lane_phase, .fin_now, .fin_valid, .fin_lane, .idle);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (30000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // Model of each lane: cycles since load, -1 when idle.
  int mcnt [LANES];
  int exp_lane, L, accepted, exp_fin;
  bit exp_fin_v;

  initial begin
    for (int l = 0; l < LANES; l++) mcnt[l] = -1;
    exp_lane = 0; accepted = 0; exp_fin_v = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int mode = 0; mode < 6; mode++) begin
      int start_cycle, n;
      cfg_len = len_e'(mode % 3); L = 64 << (mode % 3);
      n = 0; start_cycle = 0;
      for (int cyc = 0; cyc < 3 * L; cyc++) begin
        @(negedge clk);
        in_valid = (mode < 3) ? (cyc < 2 * L) : (cyc < 2 * L && $urandom_range(0, 3) != 0);
        #1;
        // combinational checks in this cycle
        for (int l = 0; l < LANES; l++) begin
          chk(lane_en[l] == (mcnt[l] >= 0), $sformatf("en lane %0d", l));
          if (mcnt[l] >= 0) begin
            chk(lane_first[l] == (mcnt[l] == 0), "first");
            chk(lane_phase[l] == 2'(mcnt[l]), "phase");
            chk(fin_now[l] == (mcnt[l] == L - 1), "fin_now");
          end
        end
        chk(in_ready == (mcnt[exp_lane] < 0 || mcnt[exp_lane] == L - 1), "in_ready");
        chk(fin_valid == exp_fin_v && (!exp_fin_v || fin_lane == 3'(exp_fin)), "fin_valid/lane");
        if (in_valid && !in_ready) stalls++;
        if (in_valid && in_ready) chk(load == (LANES'(1) << exp_lane), "load lane order");
        else chk(load == '0, "no load");
        @(posedge clk);
        // advance model
        exp_fin_v = 0;
        for (int l = 0; l < LANES; l++)
          if (mcnt[l] >= 0) begin
            if (mcnt[l] == L - 1) begin mcnt[l] = -1; exp_fin_v = 1; exp_fin = l; end
            else mcnt[l]++;
          end
        if (in_valid && in_ready) begin
          mcnt[exp_lane] = 0; exp_lane = (exp_lane + 1) % LANES; n++;
        end
      end
      @(negedge clk); in_valid = 0;
      chk(idle, "idle after drain");
      if (mode < 3) chk(n == 2 * LANES, $sformatf("rate: %0d channels in 2L cycles", n));
    end
    chk(stalls > 0, "stall happened");
    $display("stalls=%0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
