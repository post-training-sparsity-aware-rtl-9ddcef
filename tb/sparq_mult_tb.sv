// sparq_mult_tb -- checks of the SPARQ flexible multiplier.
//
// Random operands for the 5opt, 3opt and 2opt (4-bit), 6opt (3-bit) and 7opt (2-bit)
// multipliers are compared with the product computed from the equation
// 2^(sc1*step) x1 w(mux1) + 2^(sc2*step) x2 w(mux2). Then every 8-bit activation
// times every weight in a sweep is run as one 8b-8b product (upper nibble shifted by
// four, both muxes on the same weight) and must match x*w exactly, for either weight.
module sparq_mult_tb;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [3:0] x1, x2;
  logic signed [7:0] w1, w2;
  logic mux1, mux2;
  logic [2:0] sc1, sc2;
  logic signed [16:0] p5, p6, p7;
  logic signed [16:0] p3, p2;

  sparq_mult #(.N(4), .NOPT(5)) u5 (.x1, .x2, .w1, .w2, .mux1, .mux2, .sc1, .sc2, .p(p5));
  sparq_mult #(.N(4), .NOPT(3)) u3 (.x1, .x2, .w1, .w2, .mux1, .mux2,
                                    .sc1(sc1[1:0]), .sc2(sc2[1:0]), .p(p3));
  sparq_mult #(.N(4), .NOPT(2)) u2 (.x1, .x2, .w1, .w2, .mux1, .mux2,
                                    .sc1(sc1[0]), .sc2(sc2[0]), .p(p2));
  sparq_mult #(.N(3), .NOPT(6)) u6 (.x1(x1[2:0]), .x2(x2[2:0]), .w1, .w2, .mux1, .mux2, .sc1, .sc2, .p(p6));
  sparq_mult #(.N(2), .NOPT(7)) u7 (.x1(x1[1:0]), .x2(x2[1:0]), .w1, .w2, .mux1, .mux2, .sc1, .sc2, .p(p7));

  task automatic chk(string tag, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %0d exp %0d", tag, got, exp);
    end
  endtask

  function automatic int ref_p(int a, int b, int wa, int wb, int ma, int mb, int sa, int sbb, int st);
    return a * (ma != 0 ? wb : wa) * (1 << (sa * st)) + b * (mb != 0 ? wb : wa) * (1 << (sbb * st));
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 4000; t++) begin
      x1 = 4'($urandom); x2 = 4'($urandom);
      w1 = 8'($urandom); w2 = 8'($urandom);
      mux1 = 1'($urandom); mux2 = 1'($urandom);
      sc1 = 3'($urandom_range(0, 4)); sc2 = 3'($urandom_range(0, 4));
      @(posedge clk);
      chk("5opt", int'(p5), ref_p(x1, x2, w1, w2, mux1, mux2, sc1, sc2, 1));
      if (sc1[1:0] < 3 && sc2[1:0] < 3)  // 3opt has three placements, codes 0..2
        chk("3opt", int'(p3), ref_p(x1, x2, w1, w2, mux1, mux2, sc1[1:0], sc2[1:0], 2));
      chk("2opt", int'(p2), ref_p(x1, x2, w1, w2, mux1, mux2, sc1[0], sc2[0], 4));
           chk("6opt", int'(p6), ref_p(x1[2:0], x2[2:0], w1, w2, mux1, mux2, sc1, sc2, 1));
      chk("7opt", int'(p7), ref_p(x1[1:0], x2[1:0], w1, w2, mux1, mux2, sc1, sc2, 1));
    end
    // one 8b-8b product: x = {x1, x2}, shifts 4 and 0, both lanes on the same weight
    for (int x = 0; x < 256; x += 3) begin
      for (int w = -128; w < 128; w += 17) begin
        x1 = 4'(x >> 4); x2 = 4'(x); w1 = 8'(w); w2 = 8'(-w - 1);
        sc1 = 3'd4; sc2 = 3'd0; mux1 = 1'b0; mux2 = 1'b0;
        @(posedge clk);
        chk("8x8 w1", int'(p5), x * w);
        mux1 = 1'b1; mux2 = 1'b1;
        @(posedge clk);
        chk("8x8 w2", int'(p5), x * (-w - 1));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
