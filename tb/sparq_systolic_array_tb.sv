// sparq_systolic_array_tb -- a small (3 x 4) array computing a tile.
//
// The testbench plays the role of the buffers: it streams K random encoded activation
// pairs into each column and K random weight pairs into each row, skewing column c and
// row r by c and r cycles, raises clr with the first operands, and after K+ROWS+COLS
// cycles compares every partial sum with the dot product of that row and column
// computed from the decoded lane values. A second tile checks that clr discards the
// first one. After each tile the results are drained with `shift`: the bottom row
// must show result row ROWS-1-i in drain cycle i, and the array must be empty after.
module sparq_systolic_array_tb;
  import sparq_ref_pkg::*;

  localparam int R = 3, C = 4, K = 40;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, clr, shift;
  logic signed [31:0] psum_bottom [C];
  int expm [R][C];
  logic [15:0] a_top [C];
  logic [15:0] w_left [R];
  logic signed [31:0] psum [R][C];

  logic [15:0] A [C][K];
  logic [15:0] W [R][K];

  sparq_systolic_array #(.ROWS(R), .COLS(C), .N(4), .NOPT(5)) dut (.clk, .rst_n, .clr, .shift, .a_top, .w_left, .psum, .psum_bottom);

  function automatic logic [7:0] rand_lane();
    return {1'($urandom), 3'($urandom_range(0, 4)), 4'($urandom)};
  endfunction

  function automatic int pair_val(logic [15:0] a, logic [15:0] w);
    return lane_val(int'(a[7:0]), 4, 5, int'($signed(w[7:0])), int'($signed(w[15:8])))
         + lane_val(int'(a[15:8]), 4, 5, int'($signed(w[7:0])), int'($signed(w[15:8])));
  endfunction

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_tile();
    int e;
    for (int c = 0; c < C; c++) for (int k = 0; k < K; k++) A[c][k] = {rand_lane(), rand_lane()};
    for (int r = 0; r < R; r++) for (int k = 0; k < K; k++) W[r][k] = 16'($urandom);
    for (int t = 0; t < K + R + C; t++) begin
      @(negedge clk);
      clr = (t == 0);
      for (int c = 0; c < C; c++) a_top[c] = (t - c >= 0 && t - c < K) ? A[c][t-c] : '0;
      for (int r = 0; r < R; r++) w_left[r] = (t - r >= 0 && t - r < K) ? W[r][t-r] : '0;
    end
    @(negedge clk);
    clr = 1'b0;
    for (int r = 0; r < R; r++) begin
      for (int c = 0; c < C; c++) begin
        e = 0;
        for (int k = 0; k < K; k++) e += pair_val(A[c][k], W[r][k]);
        expm[r][c] = e;
        checks++;
        if (psum[r][c] !== e) begin
          failures++;
          $display("FAIL psum[%0d][%0d] got %0d exp %0d", r, c, psum[r][c], e);
        end
      end
    end
    // drain
    for (int i = 0; i < R; i++) begin
      for (int c = 0; c < C; c++) begin
        checks++;
        if (psum_bottom[c] !== expm[R-1-i][c]) begin
          failures++;
          $display("FAIL drain %0d col %0d got %0d exp %0d", i, c, psum_bottom[c], expm[R-1-i][c]);
        end
      end
      shift = 1'b1;
      @(negedge clk);
    end
    shift = 1'b0;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      checks++;
      if (psum[r][c] !== 0) begin failures++; $display("FAIL not empty after drain"); end
    end
  endtask

  initial begin
    shift = 1'b0;
    rst_n = 1'b0; clr = 1'b0;
    for (int c = 0; c < C; c++) a_top[c] = '0;
    for (int r = 0; r < R; r++) w_left[r] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    run_tile();
    run_tile();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
