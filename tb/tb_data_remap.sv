// tb_data_remap: checks the remap of signed INT8 vectors against an
// arithmetic model (x + 128, shift, region placement) for S = 1, 2, 3 and
// both axes and both input modes (signed, unsigned), plus the worked example of the unipolar scheme: an unsigned,
// shifted value of 0000_0010 in activation row 1 becomes 1111_1101.
module tb_data_remap;
  import dscim_pkg::*;
  localparam int N = 128;
  code_t din [N];
  logic sgn = 1'b1;
  logic [6:0] row [N];
  code_t d1a [N], d2a [N], d3a [N], d3w [N], d2w [N];
  int checks = 0, failures = 0;

  data_remap #(.N(N), .SHIFT(1), .AXIS_W(1'b0)) u1a (.sgn, .din, .row, .dout(d1a));
  data_remap #(.N(N), .SHIFT(2), .AXIS_W(1'b0)) u2a (.sgn, .din, .row, .dout(d2a));
  data_remap #(.N(N), .SHIFT(3), .AXIS_W(1'b0)) u3a (.sgn, .din, .row, .dout(d3a));
  data_remap #(.N(N), .SHIFT(2), .AXIS_W(1'b1)) u2w (.sgn, .din, .row, .dout(d2w));
  data_remap #(.N(N), .SHIFT(3), .AXIS_W(1'b1)) u3w (.sgn, .din, .row, .dout(d3w));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // Model: value v = (x+128) >> s in region k of 2^s along the axis. The
  // code must make "(rnd ^ mask) < (code ^ mask)" true for exactly the v
  // random values k*2^(8-s) + {0..v-1} (k = 0) or the mirrored top ones.
  function automatic int unsigned model(int x, int r, int s, bit ax);
    int unsigned v, side, k, lo;
    v = sgn ? (x + 128) >> s : (x & 255) >> s; side = 1 << s;
    k = ax ? (r / side) % side : r % side;
    lo = (1 << (8 - s)) - 1;
    if (k == 0) return v;
    return (k << (8 - s)) | (lo - v);
  endfunction

  initial begin
    #100000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) row[i] = 7'(i);
    for (int t = 0; t < 60; t++) begin
      sgn = (t < 40);
      for (int i = 0; i < N; i++) din[i] = (t == 0) ? code_t'(i * 2 - 128) : code_t'($urandom);
      #1;
      for (int i = 0; i < N; i++) begin
        int x; x = int'(signed'(din[i]));
        chk(d1a[i] == code_t'(model(x, i, 1, 0)), $sformatf("S1 A row %0d", i));
        chk(d2a[i] == code_t'(model(x, i, 2, 0)), $sformatf("S2 A row %0d", i));
        chk(d3a[i] == code_t'(model(x, i, 3, 0)), $sformatf("S3 A row %0d", i));
        chk(d2w[i] == code_t'(model(x, i, 2, 1)), $sformatf("S2 W row %0d", i));
        chk(d3w[i] == code_t'(model(x, i, 3, 1)), $sformatf("S3 W row %0d", i));
      end
    end
    sgn = 1'b1;
    // worked example: x = -124 -> 4 unsigned -> 2 after shift -> 1111_1101 in row 1
    din[1] = 8'h84; #1;
    chk(d1a[1] == 8'b1111_1101, "worked example row 1");
    din[0] = 8'h84; #1;
    chk(d1a[0] == 8'b0000_0010, "worked example row 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
