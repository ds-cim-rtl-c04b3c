// tb_term_d_lut: writes all 32 entries, rewrites some, checks every entry
// after each write.
module tb_term_d_lut;
  logic clk = 0, rst_n = 0, wr_en = 0;
  logic [4:0] wr_col = 0;
  logic [15:0] wr_data = 0;
  logic [15:0] d [32];
  logic [15:0] model [32];
  int checks = 0, failures = 0;

  term_d_lut #(.COLS(32), .D_W(16)) dut (.clk, .rst_n, .wr_en, .wr_col, .wr_data, .d);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int c = 0; c < 32; c++) model[c] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 100; k++) begin
      wr_en = 1; wr_col = (k < 32) ? 5'(k) : 5'($urandom); wr_data = 16'($urandom_range(0, 32640));
      model[wr_col] = wr_data;
      @(negedge clk); wr_en = 0;
      for (int c = 0; c < 32; c++) chk(d[c] == model[c], $sformatf("entry %0d after write %0d", c, k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
