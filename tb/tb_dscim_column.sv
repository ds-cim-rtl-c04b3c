// tb_dscim_column: one weight column with 4 lanes (reduced from 64), in
// both configurations: OR_N = 64 (latch-cached accumulators) and OR_N = 16
// (conventional accumulators). Lanes start one cycle apart and run
// bitstreams of 64 and 256 cycles with random sampling points. The
// reference counts ones with an adder (sum over rows of a & w per cycle),
// so an exact match also shows that the remap never lets two rows of an
// OR group be 1 in the same cycle. The activation bits are produced by a
// geometric model of the SNGs, independent of the RTL.
module tb_dscim_column;
  import dscim_pkg::*;
  localparam int LANES = 4, ROWS = 128;
  logic clk = 0, rst_n = 0;
  code_t w_code64 [ROWS], w_code16 [ROWS];
  code_t rnd_w = 0;
  logic [ROWS-1:0] a64 [LANES], a16 [LANES];
  logic [LANES-1:0] lane_en = '0, lane_first = '0;
  logic [1:0] lane_phase [LANES];
  logic [9:0]  acc64 [LANES];
  logic [11:0] acc16 [LANES];
  int checks = 0, failures = 0;

  dscim_column #(.LANES(LANES), .ROWS(ROWS), .OR_N(64)) u64 (.clk, .rst_n, .w_code(w_code64), .rnd_w,
    .a_sc(a64), .lane_en, .lane_first, .lane_phase, .acc(acc64));
  dscim_column #(.LANES(LANES), .ROWS(ROWS), .OR_N(16)) u16 (.clk, .rst_n, .w_code(w_code16), .rnd_w,
    .a_sc(a16), .lane_en, .lane_first, .lane_phase, .acc(acc16));
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // Geometric SNG model: region k along an axis, depth below v = (x+128)>>S.
  function automatic bit sbit(int xv, int k, int S, int rnd);
    int v, hi, lo;
    v = (xv + 128) >> S;
    hi = rnd >> (8 - S); lo = rnd % (1 << (8 - S));
    if (hi != k) return 0;
    if (k == 0) return lo < v;
    return ((1 << (8 - S)) - 1 - lo) < v;
  endfunction

  int wv [ROWS], xv [LANES][ROWS];
  int exp64 [LANES], exp16 [LANES], collisions64, collisions16;

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    collisions64 = 0; collisions16 = 0;
    for (int l = 0; l < LANES; l++) begin lane_phase[l] = 0; a64[l] = '0; a16[l] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int run = 0; run < 6; run++) begin
      int L, ra;
      L = (run % 2) ? 256 : 64;
      for (int r = 0; r < ROWS; r++) begin
        wv[r] = (run == 0) ? 127 : $urandom_range(0, 255) - 128;
        w_code64[r] = remap_value(8'(wv[r]), r, 3, 1'b1);
        w_code16[r] = remap_value(8'(wv[r]), r, 2, 1'b1);
        for (int l = 0; l < LANES; l++) xv[l][r] = (run == 0) ? 127 : $urandom_range(0, 255) - 128;
      end
      for (int l = 0; l < LANES; l++) begin exp64[l] = 0; exp16[l] = 0; end
      for (int t = 0; t < L + LANES; t++) begin
        @(negedge clk);
        ra = $urandom_range(0, 255); rnd_w = code_t'($urandom);
        for (int l = 0; l < LANES; l++) begin
          int j; j = t - l;
          lane_en[l] = (j >= 0 && j < L); lane_first[l] = (j == 0); lane_phase[l] = 2'(j);
          for (int r = 0; r < ROWS; r++) begin
            a64[l][r] = sbit(xv[l][r], r % 8, 3, ra);
            a16[l][r] = sbit(xv[l][r], r % 4, 2, ra);
          end
          if (lane_en[l]) begin
            int g64 [2], g16 [8];
            g64 = '{default: 0}; g16 = '{default: 0};
            for (int r = 0; r < ROWS; r++) begin
              bit p64, p16;
              p64 = a64[l][r] & sbit(wv[r], (r / 8) % 8, 3, int'(rnd_w));
              p16 = a16[l][r] & sbit(wv[r], (r / 4) % 4, 2, int'(rnd_w));
              exp64[l] += p64; exp16[l] += p16;
              g64[r / 64] += p64; g16[r / 16] += p16;
            end
            foreach (g64[g]) if (g64[g] > 1) collisions64++;
            foreach (g16[g]) if (g16[g] > 1) collisions16++;
          end
        end
      end
      @(negedge clk); lane_en = '0;
      for (int l = 0; l < LANES; l++) begin
        chk(acc64[l] == 10'(exp64[l]), $sformatf("run %0d OR64 lane %0d: %0d vs %0d", run, l, acc64[l], exp64[l]));
        chk(acc16[l] == 12'(exp16[l]), $sformatf("run %0d OR16 lane %0d: %0d vs %0d", run, l, acc16[l], exp16[l]));
      end
    end
    chk(collisions64 == 0 && collisions16 == 0, "model: no OR-group collision");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
