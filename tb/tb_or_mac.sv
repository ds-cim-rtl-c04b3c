// tb_or_mac: checks ASUM of the OR-MAC64 (2 units, 2-bit sum) and OR-MAC16
// (8 units, 4-bit sum) configurations against a per-group model, with
// sparse random vectors and with all groups active.
module tb_or_mac;
  logic [127:0] a, w;
  logic [1:0] s64; logic [3:0] s16;
  int checks = 0, failures = 0;

  or_mac #(.ROWS(128), .N(64)) u64 (.a_sc(a), .w_sc(w), .asum(s64));
  or_mac #(.ROWS(128), .N(16)) u16 (.a_sc(a), .w_sc(w), .asum(s16));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic int groups(logic [127:0] p, int n);
    int k; k = 0;
    for (int g = 0; g < 128 / n; g++) if (|((p >> (g * n)) & ((128'd1 << n) - 1))) k++;
    return k;
  endfunction

  initial begin
    #100000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      if (t == 0) begin a = '1; w = '1; end
      else if (t == 1) begin a = '0; w = '1; end
      else begin
        for (int i = 0; i < 4; i++) begin
          a[i*32 +: 32] = $urandom & $urandom & $urandom;
          w[i*32 +: 32] = $urandom & $urandom;
        end
      end
      #1;
      chk(s64 == 2'(groups(a & w, 64)), $sformatf("ASUM64 t=%0d", t));
      chk(s16 == 4'(groups(a & w, 16)), $sformatf("ASUM16 t=%0d", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
