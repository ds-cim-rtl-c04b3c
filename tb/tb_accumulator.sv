// tb_accumulator: random bitstreams of 64 and 256 cycles of 4-bit ASUM
// values, with idle gaps; checks the count after every bitstream, that
// 'first' discards the previous count and that the value holds when idle.
module tb_accumulator;
  logic clk = 0, rst_n = 0, en = 0, first = 0;
  logic [3:0] din = 0;
  logic [11:0] acc;
  int checks = 0, failures = 0;

  accumulator #(.IN_W(4), .ACC_W(12)) dut (.clk, .rst_n, .en, .first, .din, .acc);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int sum, len;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int b = 0; b < 20; b++) begin
      len = (b % 2) ? 256 : 64;
      sum = 0;
      for (int j = 0; j < len; j++) begin
        @(negedge clk);
        en = 1; first = (j == 0);
        din = (b == 3) ? 4'd8 : 4'($urandom_range(0, 8));
        sum += din;
      end
      @(negedge clk); en = 0; first = 0;
      chk(acc == 12'(sum), $sformatf("bitstream %0d: %0d vs %0d", b, acc, sum));
      repeat (3) @(negedge clk);
      chk(acc == 12'(sum), "hold while idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
