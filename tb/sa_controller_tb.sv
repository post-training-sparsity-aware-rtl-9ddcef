// sa_controller_tb -- tile sequencing of the systolic-array controller.
//
// With ROWS = 3 and COLS = 5, several tiles of different lengths and base addresses
// are started. For each: the read strobes must cover exactly len consecutive addresses
// starting at base_addr on edges s+1..s+len, clr must be high for exactly the cycle
// between edges s+1 and s+2 when clear_acc is set (and never otherwise), and done must
// pulse once, in the cycle right after edge s+len+ROWS+COLS, with busy high until then.
// An unload after a tile must hold shift and out_valid for exactly ROWS cycles with
// out_row counting down from ROWS-1.
module sa_controller_tb;
  localparam int R = 3, C = 5, D = 64;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, start, clear_acc, busy, done, rd_en, clr, unload, shift, out_valid;
  logic [1:0] out_row;
  logic [5:0] base_addr, rd_addr;
  logic [6:0] len;

  sa_controller #(.ROWS(R), .COLS(C), .DEPTH(D)) dut (.clk, .rst_n, .start, .clear_acc, .base_addr, .len, .unload,
                                                     .busy, .done, .rd_en, .rd_addr, .clr,
                                                     .shift, .out_valid, .out_row);

  task automatic chk(string tag, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %0d exp %0d", tag, got, exp);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int b, int l, bit ca);
    int edge_no, reads, clr_edges, done_edge, first_clr;
    bit addr_ok;
    @(negedge clk);
    start = 1'b1; base_addr = 6'(b); len = 7'(l); clear_acc = ca;
    @(posedge clk);          // edge s
    #1 start = 1'b0;
    edge_no = 0; reads = 0; clr_edges = 0; done_edge = -1; first_clr = -1; addr_ok = 1'b1;
    while (done_edge < 0 && edge_no < 400) begin
      // sample the signals that are in effect before edge s + edge_no + 1
      @(negedge clk);
      if (rd_en) begin
        if (rd_addr !== 6'(b + reads)) addr_ok = 1'b0;
        if (edge_no != reads) addr_ok = 1'b0;  // reads must be back to back from s+1
        reads++;
      end
      if (clr) begin
        clr_edges++;
        if (first_clr < 0) first_clr = edge_no + 1;
      end
      if (done) done_edge = edge_no;
      else if (!busy) addr_ok = 1'b0;
      @(posedge clk);
      edge_no++;
    end
    chk("reads", reads, l);
    chk("addresses", int'(addr_ok), 1);
    chk("clr cycles", clr_edges, ca ? 1 : 0);
    if (ca) chk("clr edge", first_clr, 2);
    chk("done latency", done_edge, l + R + C);
    @(negedge clk);
    chk("idle after done", int'(busy), 0);
    chk("done one cycle", int'(done), 0);
  endtask

  task automatic unload_run();
    int n;
    @(negedge clk);
    unload = 1'b1;
    @(posedge clk);
    #1 unload = 1'b0;
    n = 0;
    while (out_valid && n < 10) begin
      chk("out_row", int'(out_row), R - 1 - n);
      chk("shift with out_valid", int'(shift), 1);
      chk("busy while unloading", int'(busy), 1);
      n++;
      @(posedge clk);
      #1;
    end
    chk("unload cycles", n, R);
    chk("rd_en quiet", int'(rd_en), 0);
  endtask

  initial begin
    unload = 1'b0;
    rst_n = 1'b0; start = 1'b0; clear_acc = 1'b0; base_addr = '0; len = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    run(0, 1, 1'b1);
    run(5, 10, 1'b1);
    run(60, 12, 1'b0);   // wraps around the address space
    run(0, 64, 1'b1);
    unload_run();
    run(3, 7, 1'b1);
    unload_run();
    for (int i = 0; i < 10; i++) run($urandom_range(0, 63), $urandom_range(1, 64), 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
