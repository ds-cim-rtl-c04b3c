// tb_or_mac_unit: random and directed vectors against a loop model of
// OR over n of (a[n] & w[n]), for the 64- and 16-input units.
module tb_or_mac_unit;
  logic [63:0] a, w; logic [15:0] a16, w16;
  logic o64, o16;
  int checks = 0, failures = 0;

  or_mac_unit #(.N(64)) u64 (.a_sc(a), .w_sc(w), .psum_sc(o64));
  or_mac_unit #(.N(16)) u16 (.a_sc(a16), .w_sc(w16), .psum_sc(o16));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    #100000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      bit e64, e16;
      if (t < 64) begin          // one product bit at position t, plus near misses
        a = 64'd1 << t; w = a | (64'd1 << ((t + 1) % 64));
      end else if (t < 128) begin
        a = 64'd1 << (t - 64); w = ~a;
      end else begin
        a = {$urandom, $urandom} & {$urandom, $urandom}; w = {$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom};
      end
      a16 = a[15:0]; w16 = w[31:16];
      #1;
      e64 = 0; for (int n = 0; n < 64; n++) e64 |= a[n] & w[n];
      e16 = 0; for (int n = 0; n < 16; n++) e16 |= a16[n] & w16[n];
      chk(o64 == e64, $sformatf("OR64 t=%0d", t));
      chk(o16 == e16, $sformatf("OR16 t=%0d", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
