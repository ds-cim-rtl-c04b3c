// tb_input_sng_array: loads four lanes (reduced from 64) with random
// channels one after another, then sweeps PRNG_A over all 256 values and
// checks every activation bit against a geometric model: the bit is 1
// exactly when the random number lies in the row's own strip of the map
// (top SHIFT bits = row mod 8) at a depth below the shifted value. Also
// checks that a lane keeps its channel while other lanes load.
module tb_input_sng_array;
  import dscim_pkg::*;
  localparam int LANES = 4, ROWS = 128, S = 3;
  logic clk = 0, rst_n = 0;
  logic [LANES-1:0] load = '0;
  code_t act_code [ROWS];
  code_t rnd_a = '0;
  logic [ROWS-1:0] a_sc [LANES];
  int x [LANES][ROWS];
  int checks = 0, failures = 0;

  input_sng_array #(.LANES(LANES), .ROWS(ROWS), .SHIFT(S)) dut (.clk, .rst_n, .load, .act_code, .rnd_a, .a_sc);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic bit model(int xv, int r, int rnd);
    int v, k, hi, lo;
    v = (xv + 128) >> S; k = r % (1 << S);
    hi = rnd >> (8 - S); lo = rnd % (1 << (8 - S));
    if (hi != k) return 0;
    if (k == 0) return lo < v;
    return ((1 << (8 - S)) - 1 - lo) < v;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      for (int l = 0; l < LANES; l++) begin
        for (int r = 0; r < ROWS; r++) begin
          x[l][r] = (round == 0 && l == 0) ? 127 : (round == 0 && l == 1) ? -128 : $urandom_range(0, 255) - 128;
          act_code[r] = remap_value(8'(x[l][r]), r, S, 1'b0);
        end
        load = '0; load[l] = 1'b1;
        @(negedge clk);
      end
      load = '0;
      for (int l = 0; l < LANES; l++) for (int r = 0; r < ROWS; r++) act_code[r] = code_t'($urandom);
      for (int rv = 0; rv < 256; rv++) begin
        rnd_a = code_t'(rv); #1;
        for (int l = 0; l < LANES; l++)
          for (int r = 0; r < ROWS; r++)
            chk(a_sc[l][r] == model(x[l][r], r, rv), $sformatf("lane %0d row %0d rnd %0d", l, r, rv));
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
