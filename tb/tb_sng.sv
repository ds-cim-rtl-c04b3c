// tb_sng: exhaustive check of the SNG comparator for the masks the remap
// uses. For every code and every random value it checks the bit against
// an interval model: the ones must number (code ^ MASK) over the 256
// random values and must all fall in the row's region of the map.
module tb_sng;
  import dscim_pkg::*;
  localparam code_t M0 = 8'h00, M1 = 8'hFF, M2 = 8'h7F, M3 = 8'hBF;
  code_t rnd, code;
  logic b0, b1, b2, b3;
  int checks = 0, failures = 0;

  sng #(.MASK(M0)) u0 (.rnd, .code, .bit_sc(b0));
  sng #(.MASK(M1)) u1 (.rnd, .code, .bit_sc(b1));
  sng #(.MASK(M2)) u2 (.rnd, .code, .bit_sc(b2));
  sng #(.MASK(M3)) u3 (.rnd, .code, .bit_sc(b3));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    #1000000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int n0, n1, n2, n3;
    for (int c = 0; c < 256; c++) begin
      n0 = 0; n1 = 0; n2 = 0; n3 = 0;
      code = code_t'(c);
      for (int r = 0; r < 256; r++) begin
        rnd = code_t'(r); #1;
        // plain SNG and the paper's flipped-direction SNG
        chk(b0 == (r < c), $sformatf("M0 r=%0d c=%0d", r, c));
        chk(b1 == (r > c), $sformatf("MFF r=%0d c=%0d", r, c));
        n0 += b0; n1 += b1; n2 += b2; n3 += b3;
        // 4x4 split: region of mask 7F is rnd[7:6]==01, mirrored low bits
        if ((c ^ 32'h7F) < 64) chk(!b2 || (r[7:6] == 2'b01 && (63 - r[5:0]) < (c ^ 32'h7F)), "M7F region");
        if ((c ^ 32'hBF) < 64) chk(!b3 || (r[7:6] == 2'b10 && (63 - r[5:0]) < (c ^ 32'hBF)), "MBF region");
      end
      chk(n0 == (c ^ 32'h00), "M0 count");
      chk(n1 == (c ^ 32'hFF), "MFF count");
      chk(n2 == (c ^ 32'h7F), "M7F count");
      chk(n3 == (c ^ 32'hBF), "MBF count");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
