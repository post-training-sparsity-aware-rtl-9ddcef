// stc_selector_tb -- the 2:4 activation selector.
//
// For random activations and every combination of the two coordinates of each group
// (drawn at random, plus a full sweep on group 0), selected activation 2g+j must be
// activation 4g + idx[g][j].
module stc_selector_tb;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [7:0] act [16];
  logic [1:0] idx [4][2];
  logic [7:0] sel [8];

  stc_selector #(.GROUPS(4)) dut (.act, .idx, .sel);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 1016; t++) begin
      for (int i = 0; i < 16; i++) act[i] = 8'($urandom);
      for (int g = 0; g < 4; g++) for (int j = 0; j < 2; j++) idx[g][j] = 2'($urandom);
      if (t < 16) begin idx[0][0] = 2'(t / 4); idx[0][1] = 2'(t % 4); end
      @(posedge clk);
      for (int g = 0; g < 4; g++) begin
        for (int j = 0; j < 2; j++) begin
          checks++;
          if (sel[2*g+j] !== act[4*g + int'(idx[g][j])]) begin
            failures++;
            if (failures < 10) $display("FAIL g=%0d j=%0d", g, j);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
