// tc_dp_unit_tb -- the SPARQ tensor-core dot-product unit.
//
// Random activation pairs (with zeros) are encoded by vsparq_encoder, four pairs and
// eight random weights enter the unit with a random 32-bit third operand, and d must
// equal c_in plus the sum of the four pair values from the arithmetic reference.
// Extreme operands (all activations 255, weights -128 / 127) check the adder-tree
// widths.
module tc_dp_unit_tb;
  import sparq_pkg::*;
  import sparq_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [7:0] act [8];
  logic [15:0] a [4];
  logic signed [7:0] w [8];
  logic signed [31:0] c_in, d;
  pair_case_e pc [4];

  for (genvar k = 0; k < 4; k++) begin : g_enc
    vsparq_encoder #(.N(4), .NOPT(5)) u_enc (.a0(act[2*k]), .a1(act[2*k+1]),
                                             .lane0(a[k][7:0]), .lane1(a[k][15:8]), .pcase(pc[k]));
  end

  tc_dp_unit #(.N(4), .NOPT(5)) dut (.a, .w, .c_in, .d);

  task automatic chk(string tag, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %0d exp %0d", tag, got, exp);
    end
  endtask

  function automatic int expect_d();
    int e;
    e = int'(c_in);
    for (int k = 0; k < 4; k++)
      e += pair_dot(int'(act[2*k]), int'(act[2*k+1]), int'(w[2*k]), int'(w[2*k+1]), 4, 5, 1'b1, 1'b1);
    return e;
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      for (int i = 0; i < 8; i++) begin act[i] = 8'(rand_act()); w[i] = 8'(rand_wgt()); end
      c_in = 32'($urandom) >>> $urandom_range(0, 31);
      @(posedge clk);
      chk("d", int'(d), expect_d());
    end
    for (int s = 0; s < 2; s++) begin
      for (int i = 0; i < 8; i++) begin act[i] = 8'd255; w[i] = s ? 8'sd127 : -8'sd128; end
      c_in = s ? 32'sd1000 : -32'sd1000;
      @(posedge clk);
      chk("extreme", int'(d), expect_d());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
