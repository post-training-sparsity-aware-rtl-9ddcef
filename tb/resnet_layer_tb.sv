// resnet_layer_tb -- one output tile of a ResNet-18 layer4 3x3 convolution on the
// default-size design.
//
// The layer has 512 input channels and a 3x3 kernel, so every output is a dot product
// of K = 4608 activations (2304 pairs). A 16 output-channel x 16 output-pixel tile is
// computed on the 16 x 16 array: the 4608-long reduction is cut into nine chunks of 256
// pairs; for each chunk both buffers are refilled and a tile is run, the first with
// clear and the other eight accumulating; the tile is then drained out of the array. Activations are ReLU-like (about half exact
// zeros, small magnitudes most likely); weights are signed 8-bit. All 256 results are
// compared with the SPARQ reference, and the relative error of SPARQ against the exact
// 8-bit dot product is printed for information.
module resnet_layer_tb;
  import sparq_pkg::*;
  import sparq_ref_pkg::*;

  localparam int R = 16, C = 16, D = 256, PAIRS = 2304, CHUNKS = PAIRS / D;
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
  logic signed [31:0] psum_out [C];
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

  byte unsigned X [C][2*PAIRS];
  byte          W [R][2*PAIRS];
  int           got [R][C];

  function automatic int relu_act();
    int r;
    r = $urandom_range(0, 99);
    if (r < 50) return 0;
    if (r < 80) return $urandom_range(1, 12);
    if (r < 95) return $urandom_range(13, 48);
    return $urandom_range(49, 255);
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e, ex, err_sum, mag_sum;
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
    for (int c = 0; c < C; c++) for (int k = 0; k < 2*PAIRS; k++) X[c][k] = 8'(relu_act());
    for (int r = 0; r < R; r++) for (int k = 0; k < 2*PAIRS; k++) W[r][k] = 8'($urandom_range(0, 60) - 30);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    for (int ch = 0; ch < CHUNKS; ch++) begin
      for (int c = 0; c < C; c++) begin
        for (int i = 0; i < D; i++) begin
          @(negedge clk);
          act_wr_en = 1'b1; act_wr_col = 4'(c); act_wr_addr = 8'(i);
          act_wr_a0 = X[c][2*(ch*D+i)]; act_wr_a1 = X[c][2*(ch*D+i)+1];
        end
      end
      @(negedge clk);
      act_wr_en = 1'b0;
      for (int r = 0; r < R; r++) begin
        for (int i = 0; i < D; i++) begin
          @(negedge clk);
          wgt_wr_en = 1'b1; wgt_wr_row = 4'(r); wgt_wr_addr = 8'(i);
          wgt_wr_w0 = W[r][2*(ch*D+i)]; wgt_wr_w1 = W[r][2*(ch*D+i)+1];
        end
      end
      @(negedge clk);
      wgt_wr_en = 1'b0;
      start = 1'b1; base_addr = '0; len = 9'(D); clear_acc = (ch == 0);
      @(negedge clk);
      start = 1'b0;
      while (!done) @(negedge clk);
    end

    // drain the tile, bottom row first
    @(negedge clk);
    unload = 1'b1;
    @(negedge clk);
    unload = 1'b0;
    for (int i = 0; i < R; i++) begin
      for (int c = 0; c < C; c++) got[int'(psum_out_row)][c] = psum_out[c];
      checks++;
      if (!psum_out_valid || int'(psum_out_row) != R - 1 - i) begin
        failures++;
        $display("FAIL drain sequence at %0d", i);
      end
      @(negedge clk);
    end

    err_sum = 0; mag_sum = 0;
    for (int r = 0; r < R; r++) begin
      for (int c = 0; c < C; c++) begin
        e = 0; ex = 0;
        for (int i = 0; i < PAIRS; i++) begin
          e  += pair_dot(int'(X[c][2*i]), int'(X[c][2*i+1]), int'(W[r][2*i]), int'(W[r][2*i+1]), 4, 5, 1'b1, 1'b1);
          ex += int'(X[c][2*i]) * int'(W[r][2*i]) + int'(X[c][2*i+1]) * int'(W[r][2*i+1]);
        end
        checks++;
        if (longint'(got[r][c]) != e) begin
          failures++;
          if (failures < 10) $display("FAIL out[%0d][%0d] got %0d exp %0d", r, c, got[r][c], e);
        end
        err_sum += (e > ex) ? e - ex : ex - e;
        mag_sum += (ex > 0) ? ex : -ex;
      end
    end
    $display("SPARQ vs exact 8-bit: mean |error| / mean |result| = %0d ppm", (err_sum * 1000000) / mag_sum);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
