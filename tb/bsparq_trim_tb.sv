// bsparq_trim_tb -- exhaustive check of the bSPARQ window/rounding unit.
//
// Every 8-bit input is applied to nine configurations (4-bit window with 5, 3 and 2
// placements, with and without rounding; 3- and 2-bit windows; 6- and 4-bit windows
// used for a lone activation). The value win << shamt is compared with the
// arithmetic reference, shamt must lie on a placement, and the worked examples of the
// method (27 -> 28 with 5opt/3opt, 27 -> 32 with 2opt, 27 -> 26 without rounding,
// 33 placed at [5:2]) are checked bit by bit.
module bsparq_trim_tb;
  import sparq_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [7:0] x;

  logic [3:0] w5, w5n, w3, w2;
  logic [2:0] w3b;
  logic [1:0] w2b;
  logic [5:0] w6;

  logic [2:0] s5, s5n, s3, s2, s3b, s2b, s6;

  bsparq_trim #(.WIN(4), .STEP(1), .ROUND(1)) u5  (.x(x), .win(w5),  .shamt(s5));
  bsparq_trim #(.WIN(4), .STEP(1), .ROUND(0)) u5n (.x(x), .win(w5n), .shamt(s5n));
  bsparq_trim #(.WIN(4), .STEP(2), .ROUND(1)) u3  (.x(x), .win(w3),  .shamt(s3));
  bsparq_trim #(.WIN(4), .STEP(4), .ROUND(1)) u2  (.x(x), .win(w2),  .shamt(s2));
  bsparq_trim #(.WIN(3), .STEP(1), .ROUND(1)) u3b (.x(x), .win(w3b), .shamt(s3b));
  bsparq_trim #(.WIN(2), .STEP(1), .ROUND(1)) u2b (.x(x), .win(w2b), .shamt(s2b));
  bsparq_trim #(.WIN(6), .STEP(1), .ROUND(1)) u6  (.x(x), .win(w6),  .shamt(s6));

  task automatic chk(string tag, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s x=%0d got %0d exp %0d", tag, x, got, exp);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 256; v++) begin
      x = 8'(v);
      @(posedge clk);
      chk("5opt",    int'(w5)  << s5,  bsparq_q(v, 4, 1, 1'b1));
      chk("5opt-R",  int'(w5n) << s5n, bsparq_q(v, 4, 1, 1'b0));
      chk("3opt",    int'(w3)  << s3,  bsparq_q(v, 4, 2, 1'b1));
      chk("2opt",    int'(w2)  << s2,  bsparq_q(v, 4, 4, 1'b1));
      chk("6opt",    int'(w3b) << s3b, bsparq_q(v, 3, 1, 1'b1));
      chk("7opt",    int'(w2b) << s2b, bsparq_q(v, 2, 1, 1'b1));
      chk("lone6",   int'(w6)  << s6,  bsparq_q(v, 6, 1, 1'b1));
      chk("sh5",     int'(s5),  bsparq_shift(v, 4, 1));
      chk("sh3",     int'(s3),  bsparq_shift(v, 4, 2));
      chk("sh2",     int'(s2),  bsparq_shift(v, 4, 4));
    end
    // worked examples: 0001_1011 = 27
    x = 8'b0001_1011; @(posedge clk);
    chk("ex5 win", int'(w5), 4'b1110);  chk("ex5 sh", int'(s5), 1);
    chk("ex5 noround", int'(w5n), 4'b1101); chk("ex5 noround val", int'(w5n) << s5n, 26);
    chk("ex3 win", int'(w3), 4'b0111);  chk("ex3 sh", int'(s3), 2);
    chk("ex2 win", int'(w2), 4'b0010);  chk("ex2 sh", int'(s2), 4);
    // 0010_0001 = 33: window [5:2], scale 2^2
    x = 8'b0010_0001; @(posedge clk);
    chk("ex33 win", int'(w5), 4'b1000); chk("ex33 sh", int'(s5), 2);
    // rounding carry saturates inside the chosen window: 31 -> 1111 << 1
    x = 8'd31; @(posedge clk);
    chk("sat win", int'(w5), 4'b1111); chk("sat sh", int'(s5), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
