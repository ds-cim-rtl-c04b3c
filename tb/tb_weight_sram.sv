// tb_weight_sram: writes every row of the 128 x 32 array with random codes,
// reads the whole array back, rewrites a few rows and checks the others
// kept their data.
module tb_weight_sram;
  import dscim_pkg::*;
  logic clk = 0, rst_n = 0, wr_en = 0;
  logic [6:0] wr_row = 0;
  code_t wr_data [32];
  code_t rd [32][128];
  code_t model [32][128];
  int checks = 0, failures = 0;

  weight_sram #(.ROWS(128), .COLS(32)) dut (.clk, .rst_n, .wr_en, .wr_row, .wr_data, .rd_codes(rd));
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic wr(int r);
    @(negedge clk);
    wr_en = 1; wr_row = 7'(r);
    for (int c = 0; c < 32; c++) begin wr_data[c] = code_t'($urandom); model[c][r] = wr_data[c]; end
    @(negedge clk); wr_en = 0;
  endtask

  task automatic check_all(string tag);
    for (int c = 0; c < 32; c++)
      for (int r = 0; r < 128; r++)
        chk(rd[c][r] == model[c][r], $sformatf("%s c%0d r%0d", tag, c, r));
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 128; r++) wr(r);
    check_all("fill");
    for (int k = 0; k < 10; k++) wr($urandom_range(0, 127));
    check_all("rewrite");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
