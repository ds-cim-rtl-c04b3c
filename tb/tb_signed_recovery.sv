// tb_signed_recovery: random counts, c and d terms for both shifts and all
// three bitstream lengths; checks psum = count * 2^(16+2S) / L - 128c - 128d
// computed with 64-bit integers.
module tb_signed_recovery;
  logic [9:0] cnt3; logic [11:0] cnt2;
  logic [3:0] l2;
  logic signed [15:0] c;
  logic [15:0] d;
  logic use_d;
  logic signed [24:0] p3, p2;
  int checks = 0, failures = 0;

  signed_recovery #(.SHIFT(3), .CNT_W(10)) u3 (.count(cnt3), .len_log2(l2), .c, .d, .use_d, .psum(p3));
  signed_recovery #(.SHIFT(2), .CNT_W(12)) u2 (.count(cnt2), .len_log2(l2), .c, .d, .use_d, .psum(p2));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    #100000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      longint e3, e2; int L;
      l2 = 4'(6 + t % 3); L = 1 << l2;
      cnt3 = 10'($urandom_range(0, 2 * L));
      cnt2 = 12'($urandom_range(0, 8 * L));
      c = 16'($urandom_range(0, 32640) - 16384);
      d = 16'($urandom_range(0, 32640)); use_d = (t % 4 != 3);
      #1;
      e3 = longint'(cnt3) * (longint'(1) << 22) / L - 128 * longint'(c) - (use_d ? 128 * longint'(d) : 0);
      e2 = longint'(cnt2) * (longint'(1) << 20) / L - 128 * longint'(c) - (use_d ? 128 * longint'(d) : 0);
      chk(longint'(p3) == e3, $sformatf("S3 t=%0d %0d vs %0d", t, p3, e3));
      chk(longint'(p2) == e2, $sformatf("S2 t=%0d %0d vs %0d", t, p2, e2));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
