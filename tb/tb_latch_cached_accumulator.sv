// tb_latch_cached_accumulator: random 2-bit ORout streams of 64, 128 and
// 256 cycles, back to back and with gaps. Checks the final count, the
// partial count after every group of four, and that the register never
// changes on the first three cycles of a group (it is updated once every
// four cycles).
module tb_latch_cached_accumulator;
  logic clk = 0, rst_n = 0, en = 0, first = 0;
  logic [1:0] phase = 0, din = 0;
  logic [9:0] acc;
  int checks = 0, failures = 0;

  latch_cached_accumulator #(.IN_W(2), .DEPTH(4), .ACC_W(10)) dut (
    .clk, .rst_n, .en, .first, .phase, .din, .acc);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int sum, len, updates, cycles;
    logic [9:0] acc_prev;
    updates = 0; cycles = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int b = 0; b < 30; b++) begin
      len = 64 << (b % 3);
      sum = 0;
      for (int j = 0; j < len; j++) begin
        @(negedge clk);
        en = 1; first = (j == 0); phase = 2'(j);
        din = (b == 4) ? 2'd2 : 2'($urandom_range(0, 2));
        sum += din;
        acc_prev = acc;
        @(posedge clk); #1;
        cycles++;
        if (j % 4 != 3) chk(acc == acc_prev, "register moved inside a group");
        else begin
          updates++;
          chk(acc == 10'(sum), $sformatf("group end %0d: %0d vs %0d", j, acc, sum));
        end
      end
      @(negedge clk); en = 0; first = 0;
      chk(acc == 10'(sum), $sformatf("bitstream %0d final", b));
      if (b % 2) repeat (2) @(negedge clk);
    end
    chk(updates * 4 == cycles, "one register update per four cycles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
