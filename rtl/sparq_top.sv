// sparq_top -- SPARQ accelerator top: a systolic-array engine, a dense tensor core
// and a sparse tensor core dot-product engine, all built on the SPARQ flexible
// multiplier.
//
// Systolic-array engine. Activations are written as raw 8-bit pairs (act_wr_a0,
// act_wr_a1 = activations 2i and 2i+1 of one column's stream); the trimming and
// rounding unit (vsparq_encoder) on the write path converts each pair to two n-bit
// lanes with ShiftCtrl/MuxCtrl metadata, and the encoded pair is stored in the
// activation buffer. Weight pairs are written to the weight buffer as they are.
// A `start` pulse runs one tile: `len` pairs from `base_addr` are streamed through the
// ROWS x COLS output-stationary array; when `done` pulses, PE (r,c) holds
// sum_i ( q(x_c) . w_r ) over the tile's pairs, plus the previous tile's sums if
// clear_acc was low. An `unload` pulse then drains the results down the columns:
// for ROWS cycles psum_out[c] shows result (psum_out_row, c) with psum_out_valid high,
// bottom row first. act_wr_case reports what the zero detector found for the pair
// being written.
// Sparse-tensor-core engine (sparq_stc): a registered dot-product path on 16
// activations and 8 stored 2:4-pruned weights per cycle; see that module.
// Dense tensor core (sparq_tc): tc_d = tc_a x tc_b + tc_c on a 4 x 4 tile with a
// reduction of 8 per evaluation, registered; see that module.
// The three engines share only clock and reset.
//
// Follows the paper's case studies (systolic array, tensor core, sparse tensor core) with
// the SPARQ multiplier in every processing element. Array size, buffer depth, the
// write interfaces and putting the engines under one top are this design's choices.
module sparq_top
  import sparq_pkg::*;
#(
  parameter int unsigned ROWS   = 16,
  parameter int unsigned COLS   = 16,
  parameter int unsigned DEPTH  = 256,
  parameter int unsigned N      = 4,
  parameter int unsigned NOPT   = 5,
  parameter bit          ROUND  = 1'b1,
  parameter bit          VSPARQ = 1'b1,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned CW    = (COLS > 1) ? $clog2(COLS) : 1,
  localparam int unsigned RW    = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // activation buffer write (raw pairs, encoded on the way in)
  input  logic                     act_wr_en,
  input  logic [CW-1:0]            act_wr_col,
  input  logic [AW-1:0]            act_wr_addr,
  input  logic [7:0]               act_wr_a0,
  input  logic [7:0]               act_wr_a1,
  output pair_case_e               act_wr_case,
  // weight buffer write
  input  logic                     wgt_wr_en,
  input  logic [RW-1:0]            wgt_wr_row,
  input  logic [AW-1:0]            wgt_wr_addr,
  input  logic signed [7:0]        wgt_wr_w0,
  input  logic signed [7:0]        wgt_wr_w1,
  // tile control
  input  logic                     start,
  input  logic                     clear_acc,
  input  logic [AW-1:0]            base_addr,
  input  logic [AW:0]              len,
  output logic                     busy,
  output logic                     done,
  input  logic                     unload,
  output logic                     psum_out_valid,
  output logic [RW-1:0]            psum_out_row,
  output logic signed [PSUM_W-1:0] psum_out [COLS],
  // sparse tensor core engine
  input  logic                     stc_in_valid,
  input  logic                     stc_acc_clr,
  input  logic [7:0]               stc_act [16],
  input  logic signed [7:0]        stc_wgt [8],
  input  logic [1:0]               stc_idx [4][2],
  output logic signed [PSUM_W-1:0] stc_acc,
  output logic                     stc_out_valid,
  output pair_case_e               stc_pcase [4],
  // dense tensor core engine
  input  logic                     tc_in_valid,
  input  logic [7:0]               tc_a [4][8],
  input  logic signed [7:0]        tc_b [8][4],
  input  logic signed [PSUM_W-1:0] tc_c [4][4],
  output logic signed [PSUM_W-1:0] tc_d [4][4],
  output logic                     tc_out_valid,
  output pair_case_e               tc_pcase [4][4]
);

  localparam int unsigned LW = lane_bits(N, NOPT);
  localparam int unsigned PW = 2 * LW;

  logic [LW-1:0]      enc_l0, enc_l1;
  logic               rd_en, clr, shift;
  logic signed [PSUM_W-1:0] psum [ROWS][COLS];
  logic [AW-1:0]      rd_addr;
  logic [PW-1:0]      a_top  [COLS];
  logic [2*WGT_W-1:0] w_left [ROWS];

  vsparq_encoder #(.N(N), .NOPT(NOPT), .ROUND(ROUND), .VSPARQ(VSPARQ)) u_enc (
    .a0(act_wr_a0), .a1(act_wr_a1), .lane0(enc_l0), .lane1(enc_l1), .pcase(act_wr_case)
  );

  act_buffer #(.COLS(COLS), .DEPTH(DEPTH), .PW(PW)) u_abuf (
    .clk, .rst_n,
    .wr_en(act_wr_en), .wr_col(act_wr_col), .wr_addr(act_wr_addr), .wr_data({enc_l1, enc_l0}),
    .rd_en, .rd_addr, .a_top
  );

  weight_buffer #(.ROWS(ROWS), .DEPTH(DEPTH)) u_wbuf (
    .clk, .rst_n,
    .wr_en(wgt_wr_en), .wr_row(wgt_wr_row), .wr_addr(wgt_wr_addr), .wr_data({wgt_wr_w1, wgt_wr_w0}),
    .rd_en, .rd_addr, .w_left
  );

  sa_controller #(.ROWS(ROWS), .COLS(COLS), .DEPTH(DEPTH)) u_ctrl (
    .clk, .rst_n, .start, .clear_acc, .base_addr, .len, .unload,
    .busy, .done, .rd_en, .rd_addr, .clr, .shift,
    .out_valid(psum_out_valid), .out_row(psum_out_row)
  );

  sparq_systolic_array #(.ROWS(ROWS), .COLS(COLS), .N(N), .NOPT(NOPT)) u_sa (
    .clk, .rst_n, .clr, .shift, .a_top, .w_left, .psum, .psum_bottom(psum_out)
  );

  sparq_stc #(.N(N), .NOPT(NOPT), .ROUND(ROUND), .VSPARQ(VSPARQ)) u_stc (
    .clk, .rst_n,
    .in_valid(stc_in_valid), .acc_clr(stc_acc_clr),
    .act(stc_act), .wgt(stc_wgt), .idx(stc_idx),
    .acc(stc_acc), .out_valid(stc_out_valid), .pcase(stc_pcase)
  );

  sparq_tc #(.N(N), .NOPT(NOPT), .ROUND(ROUND), .VSPARQ(VSPARQ)) u_tc (
    .clk, .rst_n,
    .in_valid(tc_in_valid), .a(tc_a), .b(tc_b), .c(tc_c),
    .d(tc_d), .out_valid(tc_out_valid), .pcase(tc_pcase)
  );

endmodule
