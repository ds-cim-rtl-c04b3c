// tb_prng8: checks both LFSR tap sets of prng8 against a bit-serial model,
// checks that each visits all 255 non-zero states once per period, that
// seed 0 is replaced by 1 and that the state holds when not stepped.
module tb_prng8;
  logic clk = 0, rst_n = 0, seed_load = 0, step = 0;
  logic [7:0] seed = 0, rnd_a, rnd_w;
  int checks = 0, failures = 0;

  prng8 #(.TAPS(8'hB8)) dut_a (.clk, .rst_n, .seed_load, .seed, .step, .rnd(rnd_a));
  prng8 #(.TAPS(8'h8E)) dut_w (.clk, .rst_n, .seed_load, .seed, .step, .rnd(rnd_w));

  always #5 clk = ~clk;

  function automatic logic [7:0] nxt(logic [7:0] s, int e0, int e1, int e2, int e3);
    // feedback from polynomial exponents e (state bit e-1)
    return {s[6:0], s[e0-1] ^ s[e1-1] ^ s[e2-1] ^ s[e3-1]};
  endfunction

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [7:0] ma, mw;
    bit seen_a [256], seen_w [256];
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(rnd_a == 8'h01 && rnd_w == 8'h01, "reset state");
    seed = 8'h5A; seed_load = 1; @(negedge clk); seed_load = 0;
    chk(rnd_a == 8'h5A && rnd_w == 8'h5A, "seed load");
    ma = 8'h5A; mw = 8'h5A;
    step = 1;
    for (int i = 0; i < 255; i++) begin
      @(negedge clk);
      ma = nxt(ma, 8, 6, 5, 4);
      mw = nxt(mw, 8, 4, 3, 2);
      chk(rnd_a == ma, $sformatf("A step %0d", i));
      chk(rnd_w == mw, $sformatf("W step %0d", i));
      chk(!seen_a[rnd_a] && rnd_a != 0, "A repeats early");
      chk(!seen_w[rnd_w] && rnd_w != 0, "W repeats early");
      seen_a[rnd_a] = 1; seen_w[rnd_w] = 1;
    end
    chk(rnd_a == 8'h5A && rnd_w == 8'h5A, "period 255");
    step = 0; repeat (3) @(negedge clk);
    chk(rnd_a == 8'h5A, "hold when not stepped");
    seed = 8'h00; seed_load = 1; @(negedge clk); seed_load = 0;
    chk(rnd_a == 8'h01 && rnd_w == 8'h01, "zero seed replaced");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
