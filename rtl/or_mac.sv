// or_mac: one OR-MAC of a DS-CIM column for one activation lane.
//
// The 128 rows are split into ROWS/N groups of N consecutive rows; group k
// (rows k*N .. k*N+N-1) feeds OR-MAC unit k. The unit outputs are then
// added (ASUM): a 4-bit sum of eight OR16 units for the precise variant,
// a 2-bit sum of two OR64 units for the efficient one.
// Combinational.
module or_mac #(
  parameter int unsigned ROWS  = 128,
  parameter int unsigned N     = 64,
  localparam int unsigned UNITS  = ROWS / N,
  localparam int unsigned ASUM_W = $clog2(UNITS + 1)
) (
  input  logic [ROWS-1:0]   a_sc,
  input  logic [ROWS-1:0]   w_sc,
  output logic [ASUM_W-1:0] asum
);
  logic [UNITS-1:0] unit_out;

  for (genvar k = 0; k < UNITS; k++) begin : g_unit
    or_mac_unit #(.N(N)) u_unit (
      .a_sc    (a_sc[k*N +: N]),
      .w_sc    (w_sc[k*N +: N]),
      .psum_sc (unit_out[k])
    );
  end

  always_comb begin
    asum = '0;
    for (int k = 0; k < UNITS; k++) asum = asum + ASUM_W'(unit_out[k]);
  end
endmodule
