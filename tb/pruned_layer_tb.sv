// pruned_layer_tb -- a slice of a 2:4-pruned ResNet-18 layer4 3x3 convolution on the
// sparse-tensor-core engine of the default-size design.
//
// The layer has 512 input channels and a 3x3 kernel, so each output is a dot product of
// K = 4608 activations. Weights are pruned 2:4 by magnitude: in every group of four
// consecutive weights the two largest are kept, stored with their 2-bit positions, and
// the other two are dropped. The engine takes 16 activations and the 8 kept weights of
// those 16 positions per cycle, so one output takes 288 cycles: the first cycle clears
// the accumulator, the rest add to it. 16 output channels x 4 output pixels are run
// back to back (64 outputs, 18432 cycles). Activations are ReLU-like (about half exact
// zeros, small values most likely).
//
// Each finished output is compared with the SPARQ reference applied to the selected
// activations, and out_valid is checked every cycle. The relative error of SPARQ
// against the exact 8-bit dot product with the same pruned weights is printed for
// information, together with how often each pair case occurred.
module pruned_layer_tb;
  import sparq_pkg::*;
  import sparq_ref_pkg::*;

  localparam int K = 4608, CYC = K / 16, OCH = 16, PIX = 4;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n;
  logic act_wr_en, wgt_wr_en, start, clear_acc, busy, done;
  logic [3:0] act_wr_col, wgt_wr_row;
  logic [7:0] act_wr_addr, wgt_wr_addr, base_addr;
  logic [8:0] len;
  logic [7:0] act_wr_a0, act_wr_a1;
  logic signed [7:0] wgt_wr_w0, wgt_wr_w1;
  pair_case_e act_wr_case;
  logic unload, psum_out_valid;
  logic [3:0] psum_out_row;
  logic signed [31:0] psum_out [16];
  logic stc_in_valid, stc_acc_clr, stc_out_valid;
  logic [7:0] stc_act [16];
  logic signed [7:0] stc_wgt [8];
  logic [1:0] stc_idx [4][2];
  logic signed [31:0] stc_acc;
  pair_case_e stc_pcase [4];
  logic tc_in_valid, tc_out_valid;
  logic [7:0] tc_a [4][8];
  logic signed [7:0] tc_b [8][4];
  logic signed [31:0] tc_c [4][4], tc_d [4][4];
  pair_case_e tc_pcase [4][4];

  sparq_top dut (.*);

  byte unsigned X [PIX][K];          // activations, one row per output pixel
  byte          WV [OCH][K/2];       // kept weights, two per group of four
  bit [1:0]     WI [OCH][K/2];       // their positions inside the group
  int           n_case [4];

  function automatic int relu_act();
    int r;
    r = $urandom_range(0, 99);
    if (r < 50) return 0;
    if (r < 80) return $urandom_range(1, 12);
    if (r < 95) return $urandom_range(13, 48);
    return $urandom_range(49, 255);
  endfunction

  function automatic int iabs(int v);
    return (v < 0) ? -v : v;
  endfunction

  // magnitude pruning of one group of four dense weights: keep the two largest
  task automatic prune_group(input int o, input int g);
    int w [4];
    int i0, i1;
    for (int j = 0; j < 4; j++) w[j] = $urandom_range(0, 100) - 50;
    i0 = 0;
    for (int j = 1; j < 4; j++) if (iabs(w[j]) > iabs(w[i0])) i0 = j;
    i1 = (i0 == 0) ? 1 : 0;
    for (int j = 0; j < 4; j++) if (j != i0 && iabs(w[j]) > iabs(w[i1])) i1 = j;
    if (i0 > i1) begin int t = i0; i0 = i1; i1 = t; end
    WV[o][2*g] = 8'(w[i0]); WI[o][2*g] = 2'(i0);
    WV[o][2*g+1] = 8'(w[i1]); WI[o][2*g+1] = 2'(i1);
  endtask

  initial begin
    repeat (CYC * OCH * PIX + 2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e, ex, err_sum, mag_sum;
    int sa [8];
    rst_n = 1'b0;
    act_wr_en = 0; wgt_wr_en = 0; start = 0; clear_acc = 0; unload = 0;
    act_wr_col = '0; wgt_wr_row = '0; act_wr_addr = '0; wgt_wr_addr = '0; base_addr = '0; len = '0;
    act_wr_a0 = '0; act_wr_a1 = '0; wgt_wr_w0 = '0; wgt_wr_w1 = '0;
    stc_in_valid = 0; stc_acc_clr = 0;
    for (int i = 0; i < 16; i++) stc_act[i] = '0;
    for (int i = 0; i < 8; i++) stc_wgt[i] = '0;
    for (int g = 0; g < 4; g++) begin stc_idx[g][0] = '0; stc_idx[g][1] = '0; end
    tc_in_valid = 1'b0;
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 8; j++) begin tc_a[i][j] = '0; tc_b[j][i] = '0; end
    for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) tc_c[i][j] = '0;
    for (int i = 0; i < 4; i++) n_case[i] = 0;
    for (int p = 0; p < PIX; p++) for (int k = 0; k < K; k++) X[p][k] = 8'(relu_act());
    for (int o = 0; o < OCH; o++) for (int g = 0; g < K / 4; g++) prune_group(o, g);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    err_sum = 0; mag_sum = 0;
    for (int o = 0; o < OCH; o++) begin
      for (int p = 0; p < PIX; p++) begin
        e = 0; ex = 0;
        for (int t = 0; t < CYC; t++) begin
          @(negedge clk);
          stc_in_valid = 1'b1;
          stc_acc_clr = (t == 0);
          for (int i = 0; i < 16; i++) stc_act[i] = X[p][16*t + i];
          for (int g = 0; g < 4; g++) begin
            for (int j = 0; j < 2; j++) begin
              stc_idx[g][j] = WI[o][8*t + 2*g + j];
              stc_wgt[2*g+j] = WV[o][8*t + 2*g + j];
              sa[2*g+j] = int'(X[p][16*t + 4*g + int'(WI[o][8*t + 2*g + j])]);
              ex += longint'(sa[2*g+j]) * int'(WV[o][8*t + 2*g + j]);
            end
          end
          for (int k = 0; k < 4; k++) begin
            e += longint'(pair_dot(sa[2*k], sa[2*k+1], int'(stc_wgt[2*k]), int'(stc_wgt[2*k+1]), 4, 5, 1'b1, 1'b1));
            n_case[(sa[2*k] == 0 && sa[2*k+1] == 0) ? 0 : (sa[2*k+1] == 0) ? 1 : (sa[2*k] == 0) ? 2 : 3]++;
          end
          @(posedge clk);
          #1;
          checks++;
          if (!stc_out_valid) begin
            failures++;
            $display("FAIL out_valid low at output %0d/%0d cycle %0d", o, p, t);
          end
        end
        checks++;
        if (longint'(stc_acc) != e) begin
          failures++;
          if (failures < 10) $display("FAIL out[%0d][%0d] got %0d exp %0d", o, p, stc_acc, e);
        end
        err_sum += (e > ex) ? e - ex : ex - e;
        mag_sum += (ex > 0) ? ex : -ex;
      end
    end
    @(negedge clk);
    stc_in_valid = 1'b0;
    $display("pair cases: both zero %0d, only first %0d, only second %0d, both non-zero %0d",
             n_case[0], n_case[1], n_case[2], n_case[3]);
    $display("SPARQ vs exact 8-bit (same pruned weights): mean |error| / mean |result| = %0d ppm",
             (err_sum * 1000000) / mag_sum);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
