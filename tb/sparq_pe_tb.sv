// sparq_pe_tb -- cycle check of one SPARQ systolic-array PE.
//
// Random encoded pairs (5opt lanes) and weight pairs are applied every cycle. After
// each edge the PE must have added the pair's value (decoded independently from the
// lane fields) to its partial sum, and must show the same operands on a_out/w_out
// (one-cycle forwarding). `clr` is raised now and then and must restart the sum with
// the current product. `shift` is raised now and then and must load psum_in instead.
module sparq_pe_tb;
  import sparq_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, clr, shift;
  logic signed [31:0] psum_in;
  logic [15:0] a_in, a_out;
  logic [15:0] w_in, w_out;
  logic signed [31:0] psum;

  sparq_pe #(.N(4), .NOPT(5)) dut (.clk, .rst_n, .clr, .shift, .psum_in, .a_in, .w_in, .a_out, .w_out, .psum);

  task automatic chk(string tag, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %0d exp %0d", tag, got, exp);
    end
  endtask

  function automatic logic [7:0] rand_lane();
    return {1'($urandom), 3'($urandom_range(0, 4)), 4'($urandom)};
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint expsum;
    int v;
    rst_n = 1'b0; clr = 1'b0; shift = 1'b0; psum_in = '0; a_in = '0; w_in = '0;
    repeat (2) @(posedge clk);
    #1;
    chk("reset psum", psum, 0);
    rst_n = 1'b1;
    expsum = 0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      a_in = {rand_lane(), rand_lane()};
      w_in = 16'($urandom);
      clr  = ($urandom_range(0, 49) == 0);
      shift = ($urandom_range(0, 29) == 0);
      psum_in = 32'($urandom);
      v = lane_val(int'(a_in[7:0]), 4, 5, int'($signed(w_in[7:0])), int'($signed(w_in[15:8])))
        + lane_val(int'(a_in[15:8]), 4, 5, int'($signed(w_in[7:0])), int'($signed(w_in[15:8])));
      expsum = (clr ? 0 : expsum) + v;
      expsum = longint'(int'(expsum));  // 32-bit wrap
      if (shift) expsum = longint'(psum_in);
      @(posedge clk);
      #1;
      chk("psum", psum, expsum);
      chk("a_out", a_out, a_in);
      chk("w_out", w_out, w_in);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
