// sparq_tc_tb -- SPARQ dense tensor core, 4 x 4 tile.
//
// Random 4 x 8 activation matrices (about 40% zeros), 8 x 4 weight matrices and 4 x 4
// addends are applied with in_valid; D must equal C plus, for every element, the sum
// over the four activation pairs of the row of the vSPARQ/bSPARQ reference value. Half
// of the steps chain a longer reduction by feeding the previous D back as C. Also
// checked: out_valid follows in_valid by one cycle, D holds while in_valid is low, and
// the reported pair cases. Two instances: the default 5opt configuration and 3-bit
// 6opt without vSPARQ.
module sparq_tc_tb;
  import sparq_pkg::*;
  import sparq_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, in_valid;
  logic [7:0] a [4][8];
  logic signed [7:0] b [8][4];
  logic signed [31:0] c [4][4];
  logic signed [31:0] d0 [4][4], d1 [4][4];
  logic ov0, ov1;
  pair_case_e pc0 [4][4], pc1 [4][4];
  int ncase [4];

  sparq_tc dut0 (.clk, .rst_n, .in_valid, .a, .b, .c, .d(d0), .out_valid(ov0), .pcase(pc0));
  sparq_tc #(.N(3), .NOPT(6), .ROUND(1'b1), .VSPARQ(1'b0)) dut1 (
    .clk, .rst_n, .in_valid, .a, .b, .c, .d(d1), .out_valid(ov1), .pcase(pc1));

  task automatic chk(string tag, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %0d exp %0d", tag, got, exp);
    end
  endtask

  function automatic int case_of(int x0, int x1);
    return (x0 == 0 && x1 == 0) ? 0 : (x1 == 0) ? 1 : (x0 == 0) ? 2 : 3;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e0 [4][4], e1 [4][4];
    bit chain;
    rst_n = 1'b0; in_valid = 1'b0;
    for (int i = 0; i < 4; i++) begin
      for (int k = 0; k < 8; k++) begin a[i][k] = '0; b[k][i] = '0; end
      for (int j = 0; j < 4; j++) begin c[i][j] = '0; e0[i][j] = 0; e1[i][j] = 0; end
    end
    for (int i = 0; i < 4; i++) ncase[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;

    for (int t = 0; t < 1500; t++) begin
      @(negedge clk);
      chain = (t > 0) && ($urandom_range(0, 1) == 1);
      in_valid = ($urandom_range(0, 5) != 0);
      for (int i = 0; i < 4; i++) for (int k = 0; k < 8; k++) a[i][k] = 8'(rand_act());
      for (int k = 0; k < 8; k++) for (int j = 0; j < 4; j++) b[k][j] = 8'(rand_wgt());
      // dut0 and dut1 share C, so a chained step feeds back dut0's D
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++)
          c[i][j] = chain ? d0[i][j] : 32'($urandom_range(0, 200000) - 100000);
      if (in_valid) begin
        for (int i = 0; i < 4; i++) begin
          for (int j = 0; j < 4; j++) begin
            e0[i][j] = int'(c[i][j]);
            e1[i][j] = int'(c[i][j]);
            for (int k = 0; k < 4; k++) begin
              e0[i][j] += pair_dot(int'(a[i][2*k]), int'(a[i][2*k+1]), int'(b[2*k][j]), int'(b[2*k+1][j]), 4, 5, 1'b1, 1'b1);
              e1[i][j] += pair_dot(int'(a[i][2*k]), int'(a[i][2*k+1]), int'(b[2*k][j]), int'(b[2*k+1][j]), 3, 6, 1'b1, 1'b0);
            end
          end
          for (int k = 0; k < 4; k++) ncase[case_of(int'(a[i][2*k]), int'(a[i][2*k+1]))]++;
        end
      end
      @(posedge clk);
      #1;
      chk("out_valid 5opt", int'(ov0), int'(in_valid));
      chk("out_valid 6opt", int'(ov1), int'(in_valid));
      for (int i = 0; i < 4; i++) begin
        for (int j = 0; j < 4; j++) begin
          chk($sformatf("d5opt[%0d][%0d]", i, j), int'(d0[i][j]), e0[i][j]);
          chk($sformatf("d6opt[%0d][%0d]", i, j), int'(d1[i][j]), e1[i][j]);
        end
        if (in_valid)
          for (int k = 0; k < 4; k++)
            chk($sformatf("pcase[%0d][%0d]", i, k), int'(pc0[i][k]),
                case_of(int'(a[i][2*k]), int'(a[i][2*k+1])));
      end
    end
    for (int i = 0; i < 4; i++) chk($sformatf("pair case %0d seen", i), int'(ncase[i] > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
