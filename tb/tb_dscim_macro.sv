// tb_dscim_macro: end-to-end test of the macro at its default size
// (128 x 32 weights, 64 lanes, efficient OR-MAC64 configuration).
//
// Flow: reset, load PRNG seeds, write all 128 weight rows and the 32
// term-d entries, then stream input channels in three phases:
//   1. L = 64,  80 channels back to back (lanes reloaded as they finish);
//   2. L = 256, 72 channels back to back (the input stalls once all
//      64 lanes are busy);
//   3. L = 128, 24 channels with random gaps;
//   4. L = 64, 40 channels of unsigned activations (signed mode off).
// The reference model is written from the algorithm, not the RTL: it runs
// its own copies of both LFSRs, turns each operand into a region of the
// 256 x 256 sampling map, counts per cycle how many rows' regions hold the
// sampling point (an adder, not an OR) and applies the signed correction.
// Every output must match it exactly, appear L + 2 cycles after the
// channel was accepted, and come in acceptance order. The run also
// reports the error of the stochastic result against the exact integer
// dot product, and counts how often each mechanism occurred.
module tb_dscim_macro;
  import dscim_pkg::*;
  localparam int OR_N = 64;
  localparam int S = (OR_N == 64) ? 3 : (OR_N == 16) ? 2 : 1;
  localparam int ROWS = 128, COLS = 32, LANES = 64;

  logic clk = 0, rst_n = 0;
  len_e cfg_len = LEN_64;
  logic cfg_act_signed = 1'b1;
  logic seed_load = 0;
  code_t seed_a = 8'h5A, seed_w = 8'hC3;
  logic w_wr_en = 0; logic [6:0] w_wr_row = 0; code_t w_wr_data [COLS];
  logic d_wr_en = 0; logic [4:0] d_wr_col = 0; logic [15:0] d_wr_data = 0;
  logic in_valid = 0, in_ready;
  code_t in_act [ROWS];
  logic out_valid; logic [5:0] out_lane; logic signed [24:0] out_psum [COLS];
  logic idle;

  dscim_macro dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // ---------------- reference PRNG model ----------------
  int cyc = 0;                  // index of the current cycle
  logic [7:0] pa = 1, pw = 1;   // model PRNG states during cycle cyc
  logic [7:0] ra_hist [int], rw_hist [int];

  function automatic logic [7:0] lfsr(logic [7:0] s, logic [7:0] taps);
    return {s[6:0], ^(s & taps)};
  endfunction

  // ---------------- geometric SNG model ----------------
  function automatic bit sbit(int xv, int k, int rnd, bit sg = 1'b1);
    int v, hi, lo;
    v = sg ? (xv + 128) >> S : xv >> S;
    hi = rnd >> (8 - S); lo = rnd % (1 << (8 - S));
    if (hi != k) return 0;
    if (k == 0) return lo < v;
    return ((1 << (8 - S)) - 1 - lo) < v;
  endfunction

  int w [COLS][ROWS];
  logic [ROWS-1:0] wtab [COLS][256];

  typedef struct {
    int t;                   // cycle in which the channel was accepted
    int len;
    bit sgn;
    int lane;
    int x [ROWS];
  } chan_t;
  chan_t q [$];

  // mechanism counters
  int n_unsigned = 0;
  int n_out = 0, n_stall = 0, n_reload = 0, n_len [3] = '{0, 0, 0};
  int lane_last_t [LANES], lane_last_len [LANES];
  real err2 = 0.0, ref2 = 0.0; longint max_err = 0;

  chan_t pending;
  int n_acc = 0;

  // One clocked process: record acceptance, check outputs, then record the
  // PRNG state of the cycle now ending and advance the model.
  always @(posedge clk) begin
    if (rst_n) begin
      if (in_valid && !in_ready) n_stall++;
      if (in_valid && in_ready) begin
        chan_t ch;
        ch = pending; ch.t = cyc; ch.lane = dut.u_ctrl.ptr;
        if (lane_last_t[ch.lane] >= 0 && ch.t == lane_last_t[ch.lane] + lane_last_len[ch.lane]) n_reload++;
        lane_last_t[ch.lane] = ch.t; lane_last_len[ch.lane] = ch.len;
        q.push_back(ch);
        n_acc++;
      end
      if (out_valid) begin
        chan_t ch;
        if (q.size() == 0) chk(0, "output with no channel pending");
        else begin
          ch = q.pop_front();
          chk(cyc == ch.t + ch.len + 2, $sformatf("latency: out in cycle %0d, accepted %0d, L %0d", cyc, ch.t, ch.len));
          chk(out_lane == 6'(ch.lane), "out_lane");
          check_channel(ch);
          n_out++;
        end
      end
    end
    ra_hist[cyc] = pa; rw_hist[cyc] = pw;
    if (!rst_n) begin pa = 1; pw = 1; end
    else if (seed_load) begin pa = (seed_a == 0) ? 8'h01 : seed_a; pw = (seed_w == 0) ? 8'h01 : seed_w; end
    else begin pa = lfsr(pa, 8'hB8); pw = lfsr(pw, 8'h8E); end
    cyc++;
  end

  task automatic check_channel(chan_t ch);
    logic [ROWS-1:0] atab [256];
    int csum, sh;
    for (int rv = 0; rv < 256; rv++)
      for (int r = 0; r < ROWS; r++) atab[rv][r] = sbit(ch.x[r], r % (1 << S), rv, ch.sgn);
    csum = 0; for (int r = 0; r < ROWS; r++) csum += ch.x[r];
    sh = 16 + 2 * S - $clog2(ch.len);
    for (int c = 0; c < COLS; c++) begin
      longint cnt, e, exact, dsum;
      cnt = 0;
      for (int j = 1; j <= ch.len; j++)
        cnt += $countones(atab[ra_hist[ch.t + j]] & wtab[c][rw_hist[ch.t + j]]);
      dsum = 0; exact = 0;
      for (int r = 0; r < ROWS; r++) begin dsum += w[c][r] + 128; exact += ch.x[r] * w[c][r]; end
      e = (cnt <<< sh) - 128 * longint'(csum) - (ch.sgn ? 128 * dsum : 0);
      chk(longint'(out_psum[c]) == e, $sformatf("lane %0d col %0d: %0d vs %0d", ch.lane, c, out_psum[c], e));
      err2 += real'(e - exact) ** 2; ref2 += real'(exact) ** 2;
      if ((e - exact > 0 ? e - exact : exact - e) > max_err) max_err = (e - exact > 0 ? e - exact : exact - e);
    end
  endtask

  task automatic send(int len, int kind);
    chan_t ch;
    for (int r = 0; r < ROWS; r++) begin
      case (kind)
        0: ch.x[r] = $urandom_range(0, 255) - 128;
        1: ch.x[r] = 127;
        2: ch.x[r] = -128;
        4: ch.x[r] = ($urandom_range(0, 3) == 0) ? $urandom_range(0, 255) : 0;
        5: ch.x[r] = $urandom_range(0, 255);
        default: ch.x[r] = ($urandom_range(0, 3) == 0) ? $urandom_range(0, 255) - 128 : -128 + $urandom_range(0, 15);
      endcase
      in_act[r] = code_t'(ch.x[r]);
    end
    ch.len = len; ch.sgn = cfg_act_signed;
    pending = ch;
    in_valid = 1;
    begin
      int n_prev; n_prev = n_acc;
      do @(negedge clk); while (n_acc == n_prev);
    end
    in_valid = 0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int l = 0; l < LANES; l++) lane_last_t[l] = -1;
    for (int r = 0; r < ROWS; r++) in_act[r] = 0;
    for (int c = 0; c < COLS; c++) w_wr_data[c] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk); seed_load = 1; @(negedge clk); seed_load = 0;
    // weights: column 0 all +127, column 1 all -128, the rest random
    for (int r = 0; r < ROWS; r++) begin
      w_wr_en = 1; w_wr_row = 7'(r);
      for (int c = 0; c < COLS; c++) begin
        w[c][r] = (c == 0) ? 127 : (c == 1) ? -128 : $urandom_range(0, 255) - 128;
        w_wr_data[c] = code_t'(w[c][r]);
      end
      @(negedge clk);
    end
    w_wr_en = 0;
    for (int c = 0; c < COLS; c++) begin
      int d; d = 0; for (int r = 0; r < ROWS; r++) d += w[c][r] + 128;
      d_wr_en = 1; d_wr_col = 5'(c); d_wr_data = 16'(d); @(negedge clk);
    end
    d_wr_en = 0;
    for (int c = 0; c < COLS; c++)
      for (int rv = 0; rv < 256; rv++)
        for (int r = 0; r < ROWS; r++) wtab[c][rv][r] = sbit(w[c][r], (r >> S) % (1 << S), rv);

    // phase 1: L = 64, back to back
    cfg_len = LEN_64; n_len[0]++;
    for (int i = 0; i < 80; i++) send(64, (i < 3) ? i : (i % 5 == 4) ? 3 : 0);
    wait (idle); repeat (4) @(negedge clk);
    // phase 2: L = 256, stalls when all lanes are busy
    cfg_len = LEN_256; n_len[2]++;
    for (int i = 0; i < 72; i++) send(256, (i % 7 == 6) ? 3 : 0);
    wait (idle); repeat (4) @(negedge clk);
    // phase 3: L = 128 with gaps
    cfg_len = LEN_128; n_len[1]++;
    for (int i = 0; i < 24; i++) begin
      send(128, 0);
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    wait (idle); repeat (4) @(negedge clk);

    // phase 4: unsigned activations, sparse and dense
    cfg_act_signed = 1'b0; cfg_len = LEN_64; n_unsigned++;
    for (int i = 0; i < 40; i++) send(64, (i % 2) ? 4 : 5);
    wait (idle); repeat (4) @(negedge clk);
    cfg_act_signed = 1'b1;

    chk(q.size() == 0, "all channels produced an output");
    chk(n_unsigned > 0, "unsigned activation mode used");
    chk(n_out == 216, $sformatf("output count %0d", n_out));
    chk(n_stall > 0, "input stall happened");
    chk(n_reload > 0, "lane reloaded at its last bitstream cycle");
    chk(n_len[0] > 0 && n_len[1] > 0 && n_len[2] > 0, "all three bitstream lengths used");
    $display("outputs=%0d stalls=%0d reloads=%0d lengths=%0d/%0d/%0d unsigned_runs=%0d",
             n_out, n_stall, n_reload, n_len[0], n_len[1], n_len[2], n_unsigned);
    $display("stochastic error vs exact dot product: RMSE/RMS(exact) = %0.4f, RMSE/2^21 = %0.4f, max |err| = %0d",
             $sqrt(err2 / ref2), $sqrt(err2 / n_out / 32) / 2097152.0, max_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
