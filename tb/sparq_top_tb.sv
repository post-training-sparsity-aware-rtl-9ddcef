// sparq_top_tb -- whole-design test at the default size (16 x 16 array, 256-pair
// buffers, 5opt, rounding and vSPARQ on).
//
// Systolic-array engine: an activation matrix (16 columns x 512 activations, about 40%
// zeros, bell-like magnitudes) is written pair by pair through the trimming and
// rounding unit into the activation buffer, and a weight matrix (16 rows x 512) into
// the weight buffer. Three tiles are run: all 256 pairs with clear, 40 pairs added on
// top of that result without clear, and a 3-pair tile with clear. After each, all 256
// results are drained out of the bottom row and compared with the reference (sum of
// vSPARQ/bSPARQ pair values), and the start-to-done latency must be len + ROWS + COLS
// cycles. The full tile is also run and drained on its own.
// Sparse-tensor-core engine: 300 vectors with 2:4-pruned weights, accumulated in runs.
// Dense tensor core: 200 evaluations of D = A x B + C, C either random or the previous
// D (a chained reduction); all 16 elements checked after each.
// Every mechanism of the design is counted and must occur at least once: the four
// pair cases (zero pair, lone first, lone second, both trimmed) on all engines, each
// of the five window placements, rounding up, saturation of a rounding carry, a
// cleared tile, an accumulating tile, a drain and a chained tensor-core step.
module sparq_top_tb;
  import sparq_pkg::*;
  import sparq_ref_pkg::*;

  localparam int R = 16, C = 16, D = 256, K = 2 * D;
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

  int X [C][K];
  int W [R][K];
  longint expp [R][C];

  // mechanism counters
  int n_sa_case [4], n_stc_case [4], n_place [5], n_round, n_sat, n_clear_tile, n_acc_tile, n_unload;
  int n_tc_case [4], n_tc_chain;

  task automatic chk(string tag, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %0d exp %0d", tag, got, exp);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // count what bSPARQ does to one activation trimmed to 4 bits
  function automatic void count_trim(int x);
    int s;
    s = bsparq_shift(x, 4, 1);
    n_place[s]++;
    if (s > 0 && ((x >> (s - 1)) & 1) != 0) begin
      if ((x >> s) == 15) n_sat++;
      else n_round++;
    end
  endfunction

  task automatic run_tile(int b, int l, bit ca);
    int lat;
    @(negedge clk);
    start = 1'b1; base_addr = 8'(b); len = 9'(l); clear_acc = ca;
    @(posedge clk);
    #1 start = 1'b0;
    lat = 0;
    while (!done && lat < 1000) begin
      @(posedge clk);
      #1 lat++;
    end
    chk("tile latency", lat, l + R + C);
    for (int r = 0; r < R; r++) begin
      for (int c = 0; c < C; c++) begin
        if (ca) expp[r][c] = 0;
        for (int i = b; i < b + l; i++)
          expp[r][c] += pair_dot(X[c][2*i], X[c][2*i+1], W[r][2*i], W[r][2*i+1], 4, 5, 1'b1, 1'b1);
        expp[r][c] = longint'(int'(expp[r][c]));
      end
    end
    if (ca) n_clear_tile++; else n_acc_tile++;
  endtask

  // drain the array and compare every result; bottom row first
  task automatic unload_check();
    @(negedge clk);
    unload = 1'b1;
    @(negedge clk);
    unload = 1'b0;
    for (int i = 0; i < R; i++) begin
      chk("psum_out_valid", int'(psum_out_valid), 1);
      chk("psum_out_row", int'(psum_out_row), R - 1 - i);
      for (int c = 0; c < C; c++)
        chk($sformatf("result[%0d][%0d]", R - 1 - i, c), psum_out[c], expp[R-1-i][c]);
      @(negedge clk);
    end
    chk("psum_out_valid after drain", int'(psum_out_valid), 0);
    n_unload++;
  endtask

  initial begin
    int e, n, sa [8];
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
    for (int i = 0; i < 4; i++) begin n_sa_case[i] = 0; n_stc_case[i] = 0; n_tc_case[i] = 0; end
    n_tc_chain = 0;
    for (int i = 0; i < 5; i++) n_place[i] = 0;
    n_round = 0; n_sat = 0; n_clear_tile = 0; n_acc_tile = 0; n_unload = 0;

    for (int c = 0; c < C; c++) for (int k = 0; k < K; k++) X[c][k] = rand_act();
    for (int r = 0; r < R; r++) for (int k = 0; k < K; k++) W[r][k] = rand_wgt();
    X[0][0] = 31;  X[0][1] = 5;     // rounding carry saturates: 31 -> 30
    X[1][2] = 255; X[1][3] = 1;     // top placement [7:4]
    X[2][4] = 0;   X[2][5] = 0;     // zero pair
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // fill the buffers
    for (int c = 0; c < C; c++) begin
      for (int i = 0; i < D; i++) begin
        pair_case_e ec;
        @(negedge clk);
        act_wr_en = 1'b1; act_wr_col = 4'(c); act_wr_addr = 8'(i);
        act_wr_a0 = 8'(X[c][2*i]); act_wr_a1 = 8'(X[c][2*i+1]);
        ec = (X[c][2*i] == 0 && X[c][2*i+1] == 0) ? PAIR_ZERO :
             (X[c][2*i+1] == 0) ? PAIR_LONE0 : (X[c][2*i] == 0) ? PAIR_LONE1 : PAIR_BOTH;
        #1 chk("act_wr_case", int'(act_wr_case), int'(ec));
        n_sa_case[int'(ec)]++;
        if (ec == PAIR_BOTH) begin count_trim(X[c][2*i]); count_trim(X[c][2*i+1]); end
      end
    end
    for (int r = 0; r < R; r++) begin
      for (int i = 0; i < D; i++) begin
        @(negedge clk);
        act_wr_en = 1'b0;
        wgt_wr_en = 1'b1; wgt_wr_row = 4'(r); wgt_wr_addr = 8'(i);
        wgt_wr_w0 = 8'(W[r][2*i]); wgt_wr_w1 = 8'(W[r][2*i+1]);
      end
    end
    @(negedge clk);
    wgt_wr_en = 1'b0;

    run_tile(0, D, 1'b1);      // full buffer, one complete tile
    unload_check();
    run_tile(0, D, 1'b1);      // again, then accumulate on top of it
    run_tile(16, 40, 1'b0);
    unload_check();
    run_tile(200, 3, 1'b1);    // short tile, cleared
    unload_check();

    // sparse tensor core engine
    e = 0; n = 0;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      stc_in_valid = 1'b1;
      stc_acc_clr = (n == 0);
      for (int i = 0; i < 16; i++) stc_act[i] = 8'(rand_act());
      for (int g = 0; g < 4; g++) begin
        stc_idx[g][0] = 2'($urandom_range(0, 2));
        stc_idx[g][1] = 2'($urandom_range(int'(stc_idx[g][0]) + 1, 3));
      end
      for (int i = 0; i < 8; i++) stc_wgt[i] = 8'(rand_wgt());
      for (int i = 0; i < 8; i++) sa[i] = int'(stc_act[4*(i/2) + int'(stc_idx[i/2][i%2])]);
      if (stc_acc_clr) e = 0;
      for (int k = 0; k < 4; k++) begin
        e += pair_dot(sa[2*k], sa[2*k+1], int'(stc_wgt[2*k]), int'(stc_wgt[2*k+1]), 4, 5, 1'b1, 1'b1);
        n_stc_case[(sa[2*k] == 0 && sa[2*k+1] == 0) ? 0 : (sa[2*k+1] == 0) ? 1 : (sa[2*k] == 0) ? 2 : 3]++;
      end
      n = (n == 0) ? $urandom_range(1, 8) : n - 1;
      @(posedge clk);
      #1;
      chk("stc_out_valid", int'(stc_out_valid), 1);
      chk("stc_acc", int'(stc_acc), e);
    end
    @(negedge clk);
    stc_in_valid = 1'b0;

    // dense tensor core engine
    for (int t = 0; t < 200; t++) begin : tc_step
      int et [4][4];
      bit chain;
      @(negedge clk);
      chain = (t > 0) && ($urandom_range(0, 1) == 1);
      tc_in_valid = 1'b1;
      for (int i = 0; i < 4; i++) for (int k = 0; k < 8; k++) tc_a[i][k] = 8'(rand_act());
      for (int k = 0; k < 8; k++) for (int j = 0; j < 4; j++) tc_b[k][j] = 8'(rand_wgt());
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++)
          tc_c[i][j] = chain ? tc_d[i][j] : 32'($urandom_range(0, 200000) - 100000);
      if (chain) n_tc_chain++;
      for (int i = 0; i < 4; i++) begin
        for (int j = 0; j < 4; j++) begin
          et[i][j] = int'(tc_c[i][j]);
          for (int k = 0; k < 4; k++)
            et[i][j] += pair_dot(int'(tc_a[i][2*k]), int'(tc_a[i][2*k+1]),
                                 int'(tc_b[2*k][j]), int'(tc_b[2*k+1][j]), 4, 5, 1'b1, 1'b1);
        end
        for (int k = 0; k < 4; k++)
          n_tc_case[(tc_a[i][2*k] == 0 && tc_a[i][2*k+1] == 0) ? 0 :
                    (tc_a[i][2*k+1] == 0) ? 1 : (tc_a[i][2*k] == 0) ? 2 : 3]++;
      end
      @(posedge clk);
      #1;
      chk("tc_out_valid", int'(tc_out_valid), 1);
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++) chk($sformatf("tc_d[%0d][%0d]", i, j), int'(tc_d[i][j]), et[i][j]);
    end
    @(negedge clk);
    tc_in_valid = 1'b0;

    $display("mechanisms: SA pair cases zero/lone0/lone1/both = %0d/%0d/%0d/%0d",
             n_sa_case[0], n_sa_case[1], n_sa_case[2], n_sa_case[3]);
    $display("mechanisms: STC pair cases zero/lone0/lone1/both = %0d/%0d/%0d/%0d",
             n_stc_case[0], n_stc_case[1], n_stc_case[2], n_stc_case[3]);
    $display("mechanisms: placements [3:0]..[7:4] = %0d/%0d/%0d/%0d/%0d, round-up %0d, saturate %0d",
             n_place[0], n_place[1], n_place[2], n_place[3], n_place[4], n_round, n_sat);
    $display("mechanisms: cleared tiles %0d, accumulating tiles %0d, drains %0d", n_clear_tile, n_acc_tile, n_unload);
    $display("mechanisms: TC pair cases zero/lone0/lone1/both = %0d/%0d/%0d/%0d, chained TC steps %0d",
             n_tc_case[0], n_tc_case[1], n_tc_case[2], n_tc_case[3], n_tc_chain);
    for (int i = 0; i < 4; i++) begin
      chk($sformatf("SA pair case %0d seen", i), int'(n_sa_case[i] > 0), 1);
      chk($sformatf("STC pair case %0d seen", i), int'(n_stc_case[i] > 0), 1);
      chk($sformatf("TC pair case %0d seen", i), int'(n_tc_case[i] > 0), 1);
    end
    for (int i = 0; i < 5; i++) chk($sformatf("placement %0d seen", i), int'(n_place[i] > 0), 1);
    chk("round-up seen", int'(n_round > 0), 1);
    chk("saturation seen", int'(n_sat > 0), 1);
    chk("cleared tile seen", int'(n_clear_tile > 0), 1);
    chk("accumulating tile seen", int'(n_acc_tile > 0), 1);
    chk("drain seen", int'(n_unload > 0), 1);
    chk("chained TC step seen", int'(n_tc_chain > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
