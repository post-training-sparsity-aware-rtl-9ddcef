// vsparq_encoder_tb -- pair encoder checked through the multiplier it feeds.
//
// Five SPARQ configurations (5opt, 3opt, 2opt with 4-bit lanes; 6opt with 3-bit and
// 7opt with 2-bit lanes) plus the no-rounding and no-vSPARQ variants of 5opt each
// encode the same random activation pairs (about 40% zeros). Each encoded pair drives
// a sparq_mult with a random weight pair and the product must equal the arithmetic
// reference of the vSPARQ/bSPARQ rule. The reported pair case and the exact lane
// fields of a lone activation are checked directly.
module vsparq_encoder_tb;
  import sparq_pkg::*;
  import sparq_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [7:0] a0, a1;
  logic signed [7:0] w0, w1;

  // configuration table: N, NOPT, ROUND, VSPARQ
  localparam int NC = 7;
  localparam int CN [NC] = '{4, 4, 4, 3, 2, 4, 4};
  localparam int CO [NC] = '{5, 3, 2, 6, 7, 5, 5};
  localparam bit CR [NC] = '{1, 1, 1, 1, 1, 0, 1};
  localparam bit CV [NC] = '{1, 1, 1, 1, 1, 1, 0};

  int         prod  [NC];
  pair_case_e pc    [NC];
  int         lanes [NC][2];

  for (genvar i = 0; i < NC; i++) begin : g_cfg
    localparam int LW = lane_bits(CN[i], CO[i]);
    logic [LW-1:0] l0, l1;
    logic signed [16:0] p;
    vsparq_encoder #(.N(CN[i]), .NOPT(CO[i]), .ROUND(CR[i]), .VSPARQ(CV[i])) u_enc (
      .a0(a0), .a1(a1), .lane0(l0), .lane1(l1), .pcase(pc[i]));
    sparq_mult #(.N(CN[i]), .NOPT(CO[i])) u_mult (
      .x1(l0[CN[i]-1:0]), .x2(l1[CN[i]-1:0]), .w1(w0), .w2(w1),
      .mux1(l0[LW-1]), .mux2(l1[LW-1]),
      .sc1(l0[LW-2:CN[i]]), .sc2(l1[LW-2:CN[i]]), .p(p));
    assign prod[i] = int'(p);
    assign lanes[i][0] = int'(l0);
    assign lanes[i][1] = int'(l1);
  end

  task automatic chk(string tag, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s a0=%0d a1=%0d w0=%0d w1=%0d got %0d exp %0d",
                                  tag, a0, a1, w0, w1, got, exp);
    end
  endtask

  function automatic pair_case_e exp_case(int x0, int x1);
    if (x0 == 0 && x1 == 0) return PAIR_ZERO;
    if (x1 == 0) return PAIR_LONE0;
    if (x0 == 0) return PAIR_LONE1;
    return PAIR_BOTH;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 5000; t++) begin
      a0 = 8'(rand_act()); a1 = 8'(rand_act());
      w0 = 8'(rand_wgt()); w1 = 8'(rand_wgt());
      @(posedge clk);
      for (int i = 0; i < NC; i++) begin
        chk($sformatf("cfg%0d", i), prod[i],
            pair_dot(int'(a0), int'(a1), int'(w0), int'(w1), CN[i], CO[i], CR[i], CV[i]));
        chk($sformatf("case%0d", i), int'(pc[i]), int'(exp_case(int'(a0), int'(a1))));
      end
    end
    // lone activation 1001_1011 in 5opt: lane0 = {mux 0, sc 4, 1001}, lane1 = {0, 0, 1011}
    a0 = 8'h00; a1 = 8'h9B; w0 = 8'sd3; w1 = -8'sd7;
    @(posedge clk);
    chk("lone lane0", lanes[0][0], {1'b1, 3'd4, 4'h9});
    chk("lone lane1", lanes[0][1], {1'b1, 3'd0, 4'hB});
    chk("lone prod",  prod[0], 155 * -7);
    // both non-zero, 5opt: 27 -> 1110 at sc 1 on w0; 3 -> 0011 at sc 0 on w1
    a0 = 8'd27; a1 = 8'd3;
    @(posedge clk);
    chk("both lane0", lanes[0][0], {1'b0, 3'd1, 4'b1110});
    chk("both lane1", lanes[0][1], {1'b1, 3'd0, 4'b0011});
    // 3opt metadata is a 2-bit ShiftCtrl: 27 -> 0111 at placement 1 ([5:2])
    chk("3opt lane0", lanes[1][0], {1'b0, 2'd1, 4'b0111});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
