// sparq_stc_tb -- SPARQ on the sparse-tensor-core path, end to end.
//
// Dense 16-element activation vectors and 2:4-pruned weight vectors are generated;
// the testbench prunes each group of four weights to two (random positions), passes
// the two stored weights and their coordinates, and accumulates dot products of 1 to
// 6 vectors between acc_clr pulses. The accumulator must equal the sum over the
// selected activation pairs of the vSPARQ/bSPARQ reference value, out_valid must
// follow in_valid by one cycle, and the reported pair cases must match.
module sparq_stc_tb;
  import sparq_pkg::*;
  import sparq_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, in_valid, acc_clr, out_valid;
  logic [7:0] act [16];
  logic signed [7:0] wgt [8];
  logic [1:0] idx [4][2];
  logic signed [31:0] acc;
  pair_case_e pcase [4];
  int ncase [4];

  sparq_stc #(.N(4), .NOPT(5)) dut (.clk, .rst_n, .in_valid, .acc_clr, .act, .wgt, .idx,
                                    .acc, .out_valid, .pcase);

  task automatic chk(string tag, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %0d exp %0d", tag, got, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e, n, sa [8];
    pair_case_e ec [4];
    n = 0;
    rst_n = 1'b0; in_valid = 1'b0; acc_clr = 1'b0;
    for (int i = 0; i < 4; i++) ncase[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    e = 0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 4) != 0);
      acc_clr  = (n == 0);
      for (int i = 0; i < 16; i++) act[i] = 8'(rand_act());
      for (int g = 0; g < 4; g++) begin
        idx[g][0] = 2'($urandom_range(0, 2));
        idx[g][1] = 2'($urandom_range(int'(idx[g][0]) + 1, 3));
      end
      for (int i = 0; i < 8; i++) wgt[i] = 8'(rand_wgt());
      for (int i = 0; i < 8; i++) sa[i] = int'(act[4*(i/2) + int'(idx[i/2][i%2])]);
      if (in_valid) begin
        if (acc_clr) e = 0;
        for (int k = 0; k < 4; k++) begin
          e += pair_dot(sa[2*k], sa[2*k+1], int'(wgt[2*k]), int'(wgt[2*k+1]), 4, 5, 1'b1, 1'b1);
          ec[k] = (sa[2*k] == 0 && sa[2*k+1] == 0) ? PAIR_ZERO :
                  (sa[2*k+1] == 0) ? PAIR_LONE0 : (sa[2*k] == 0) ? PAIR_LONE1 : PAIR_BOTH;
        end
        n = (n == 0) ? $urandom_range(1, 6) : n - 1;
      end
      @(posedge clk);
      #1;
      chk("out_valid", int'(out_valid), int'(in_valid));
      if (in_valid) begin
        chk("acc", int'(acc), e);
        for (int k = 0; k < 4; k++) begin
          chk("pcase", int'(pcase[k]), int'(ec[k]));
          ncase[int'(ec[k])]++;
        end
      end
    end
    for (int i = 0; i < 4; i++) chk($sformatf("pair case %0d seen", i), int'(ncase[i] > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
