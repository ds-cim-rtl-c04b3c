// dscim_macro: top level of the digital stochastic compute-in-memory macro.
//
// Holds 128 x 32 signed INT8 weights and multiplies them with input channels
// of 128 signed INT8 activations, 64 channels in flight (one per SNG lane).
// Every cycle the two shared PRNGs give one sampling point; every row's SNG
// turns its remapped operand into a bit, each OR-MAC ANDs activation and
// weight bits and ORs them per group of OR_N rows. The remap guarantees at
// most one 1 per OR group per cycle, so the OR is an exact adder and the
// accumulated count is an unbiased estimate of sum x'w' (x' = x + 128,
// w' = w + 128). The output stage turns it into the signed dot product.
//
// Ports:
//   weights:   w_wr_en, w_wr_row, w_wr_data[32] (signed INT8, one array row
//              per write; remapped on the way in);
//   term d:    d_wr_en, d_wr_col, d_wr_data = sum over rows of (w + 128) of
//              the column, computed by the host;
//   PRNGs:     seed_load with seed_a, seed_w; the PRNGs step every cycle;
//   config:    cfg_len, the bitstream length 64 / 128 / 256;
//              cfg_act_signed, 1 for signed INT8 activations, 0 for
//              unsigned 8-bit activations (then term d is not used);
//              both may change only while the macro is idle;
//   input:     in_valid / in_ready, in_act[128] (signed INT8, one channel);
//   output:    out_valid, out_lane, out_psum[32] (signed, one per column).
// Timing: a channel accepted at clock edge t runs its bitstream in the
// next L cycles; its 32 results appear with out_valid two cycles after
// the last bitstream cycle, i.e. L + 2 cycles after acceptance. Results
// leave in acceptance order, one channel per cycle at most.
// OR_N = 64 is the efficient variant (two OR64 units per OR-MAC,
// latch-cached accumulators); OR_N = 16 the precise one (eight OR16 units,
// conventional accumulators).
module dscim_macro
  import dscim_pkg::*;
#(
  parameter int unsigned OR_N   = 64,
  parameter int unsigned ROWS   = 128,
  parameter int unsigned COLS   = 32,
  parameter int unsigned LANES  = 64,
  parameter int unsigned PSUM_W = 25,
  localparam int unsigned SHIFT  = $clog2(OR_N) / 2,
  localparam int unsigned ROW_W  = $clog2(ROWS),
  localparam int unsigned COL_W  = $clog2(COLS),
  localparam int unsigned LANE_W = $clog2(LANES),
  localparam int unsigned UNITS  = ROWS / OR_N,
  localparam int unsigned ACC_W  = $clog2(UNITS * 256 + 1),
  localparam int unsigned C_W    = 16,
  localparam int unsigned D_W    = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // configuration
  input  len_e                     cfg_len,
  input  logic                     cfg_act_signed,
  input  logic                     seed_load,
  input  code_t                    seed_a,
  input  code_t                    seed_w,
  // weight write
  input  logic                     w_wr_en,
  input  logic [ROW_W-1:0]         w_wr_row,
  input  code_t                    w_wr_data [COLS],
  // term-d LUT write
  input  logic                     d_wr_en,
  input  logic [COL_W-1:0]         d_wr_col,
  input  logic [D_W-1:0]           d_wr_data,
  // input channels
  input  logic                     in_valid,
  output logic                     in_ready,
  input  code_t                    in_act [ROWS],
  // results
  output logic                     out_valid,
  output logic [LANE_W-1:0]        out_lane,
  output logic signed [PSUM_W-1:0] out_psum [COLS],
  output logic                     idle
);
  // ---------------- PRNGs ----------------
  code_t rnd_a, rnd_w;

  prng8 #(.TAPS(8'hB8)) u_prng_a (.clk, .rst_n, .seed_load, .seed(seed_a), .step(1'b1), .rnd(rnd_a));
  prng8 #(.TAPS(8'h8E)) u_prng_w (.clk, .rst_n, .seed_load, .seed(seed_w), .step(1'b1), .rnd(rnd_w));

  // ---------------- weights ----------------
  code_t            w_code_in [COLS];
  logic [ROW_W-1:0] w_row_vec [COLS];
  code_t            w_codes   [COLS][ROWS];

  for (genvar c = 0; c < COLS; c++) begin : g_wrow
    assign w_row_vec[c] = w_wr_row;
  end

  data_remap #(.N(COLS), .SHIFT(SHIFT), .AXIS_W(1'b1), .ROW_W(ROW_W)) u_w_remap (
    .sgn (1'b1), .din (w_wr_data), .row (w_row_vec), .dout (w_code_in)
  );

  weight_sram #(.ROWS(ROWS), .COLS(COLS)) u_sram (
    .clk, .rst_n, .wr_en(w_wr_en), .wr_row(w_wr_row), .wr_data(w_code_in), .rd_codes(w_codes)
  );

  logic [D_W-1:0] d_term [COLS];

  term_d_lut #(.COLS(COLS), .D_W(D_W)) u_dlut (
    .clk, .rst_n, .wr_en(d_wr_en), .wr_col(d_wr_col), .wr_data(d_wr_data), .d(d_term)
  );

  // ---------------- lane control ----------------
  logic [LANES-1:0]  load, lane_en, lane_first, fin_now;
  logic [LANE_W-1:0] fin_lane;
  logic [1:0]        lane_phase [LANES];
  logic              fin_valid;

  dscim_ctrl #(.LANES(LANES)) u_ctrl (
    .clk, .rst_n, .cfg_len, .in_valid, .in_ready, .load,
    .lane_en, .lane_first, .lane_phase, .fin_now, .fin_valid, .fin_lane, .idle
  );

  // ---------------- activations ----------------
  logic [ROW_W-1:0] a_row_vec [ROWS];
  code_t            a_code    [ROWS];
  logic [ROWS-1:0]  a_sc      [LANES];

  for (genvar r = 0; r < ROWS; r++) begin : g_arow
    assign a_row_vec[r] = ROW_W'(r);
  end

  data_remap #(.N(ROWS), .SHIFT(SHIFT), .AXIS_W(1'b0), .ROW_W(ROW_W)) u_a_remap (
    .sgn (cfg_act_signed), .din (in_act), .row (a_row_vec), .dout (a_code)
  );

  input_sng_array #(.LANES(LANES), .ROWS(ROWS), .SHIFT(SHIFT)) u_isng (
    .clk, .rst_n, .load, .act_code(a_code), .rnd_a, .a_sc
  );

  // Term c: summed when a channel is loaded, kept per lane, and handed to
  // the output stage at the edge that ends the lane's bitstream (the lane
  // may be reloaded at that same edge).
  logic signed [C_W-1:0] c_new;
  logic signed [C_W-1:0] c_lane [LANES];
  logic signed [C_W-1:0] c_fin;

  csum_simd #(.ROWS(ROWS), .SUM_W(C_W)) u_csum (.sgn(cfg_act_signed), .act(in_act), .sum(c_new));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < LANES; l++) c_lane[l] <= '0;
      c_fin <= '0;
    end else begin
      for (int l = 0; l < LANES; l++) begin
        if (fin_now[l]) c_fin     <= c_lane[l];
        if (load[l])    c_lane[l] <= c_new;
      end
    end
  end

  // ---------------- DS-CIM columns ----------------
  logic [ACC_W-1:0] acc [COLS][LANES];

  for (genvar c = 0; c < COLS; c++) begin : g_col
    dscim_column #(.LANES(LANES), .ROWS(ROWS), .OR_N(OR_N), .LEN_MAX(256)) u_col (
      .clk, .rst_n, .w_code(w_codes[c]), .rnd_w, .a_sc,
      .lane_en, .lane_first, .lane_phase, .acc(acc[c])
    );
  end

  // ---------------- output stage ----------------
  logic signed [PSUM_W-1:0] psum_c [COLS];

  for (genvar c = 0; c < COLS; c++) begin : g_out
    signed_recovery #(.SHIFT(SHIFT), .CNT_W(ACC_W), .C_W(C_W), .D_W(D_W), .PSUM_W(PSUM_W)) u_rec (
      .count (acc[c][fin_lane]), .len_log2 (len_log2(cfg_len)),
      .c (c_fin), .d (d_term[c]), .use_d (cfg_act_signed), .psum (psum_c[c])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_lane  <= '0;
      for (int c = 0; c < COLS; c++) out_psum[c] <= '0;
    end else begin
      out_valid <= fin_valid;
      if (fin_valid) begin
        out_lane <= fin_lane;
        for (int c = 0; c < COLS; c++) out_psum[c] <= psum_c[c];
      end
    end
  end

  ap_mode_stable: assert property (@(posedge clk) !idle |=> $stable(cfg_act_signed));

  initial assert (ROWS % OR_N == 0 && (1 << (2 * SHIFT)) == OR_N)
    else $error("dscim_macro: OR_N must be a power of 4 dividing ROWS");
endmodule
