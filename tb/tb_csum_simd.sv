// tb_csum_simd: random and extreme channels; the sum of 128 INT8
// activations, signed or unsigned, must match an integer model.
module tb_csum_simd;
  import dscim_pkg::*;
  code_t act [128];
  logic sgn;
  logic signed [15:0] sum;
  int checks = 0, failures = 0;

  csum_simd #(.ROWS(128), .SUM_W(16)) dut (.sgn, .act, .sum);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    #100000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      int m; m = 0; sgn = (t % 3 != 2);
      for (int r = 0; r < 128; r++) begin
        act[r] = (t == 0) ? 8'h80 : (t == 1) ? 8'h7F : code_t'($urandom);
        m += sgn ? int'(signed'(act[r])) : int'(act[r]);
      end
      #1;
      chk(int'(sum) == m, $sformatf("t=%0d %0d vs %0d", t, sum, m));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
