// prng8: 8-bit pseudo random number generator shared by a whole macro.
//
// Two instances exist in the macro: PRNG_A feeds every activation SNG and
// PRNG_W every weight SNG, so all rows sample the same (PRNG_A, PRNG_W)
// point each cycle; this sharing is what makes the data remap possible.
// The generator family is not fixed by the source design (it searched
// several 8-bit PRNGs and their seeds); this one is a maximal-length
// Fibonacci LFSR of period 255, shifting left with the XOR of the TAPS bits
// fed into bit 0. TAPS = 8'hB8 is x^8 + x^6 + x^5 + x^4 + 1 (used for
// PRNG_A); the macro gives PRNG_W TAPS = 8'h8E, x^8 + x^4 + x^3 + x^2 + 1,
// so the two sequences are not mere shifts of each other.
//
// Interface: seed_load loads 'seed' (0 is replaced by 1, which the LFSR
// needs); otherwise 'step' advances one state per clock. 'rnd' is the
// current state, registered. Reset state is 8'h01.
module prng8 #(
  parameter int unsigned     WIDTH = 8,
  parameter logic [WIDTH-1:0] TAPS = 8'hB8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             seed_load,
  input  logic [WIDTH-1:0] seed,
  input  logic             step,
  output logic [WIDTH-1:0] rnd
);
  logic [WIDTH-1:0] state;
  logic             fb;

  assign fb = ^(state & TAPS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          state <= WIDTH'(1);
    else if (seed_load)  state <= (seed == '0) ? WIDTH'(1) : seed;
    else if (step)       state <= {state[WIDTH-2:0], fb};
  end

  assign rnd = state;

endmodule
