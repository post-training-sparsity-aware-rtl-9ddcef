// act_buffer_tb -- write/read and skew timing of the activation buffer.
//
// Fills a 4-column, 32-entry buffer with random words, then reads a run of addresses.
// A read issued at edge t must appear on column c right after edge t+1+c (one cycle
// of read latency plus c skew stages) and zeros must appear whenever no read was
// issued. Overwriting an entry and reading it back checks the write port again.
module act_buffer_tb;
  localparam int C = 4, D = 32, PW = 16;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, wr_en, rd_en;
  logic [1:0] wr_col;
  logic [4:0] wr_addr, rd_addr;
  logic [PW-1:0] wr_data;
  logic [PW-1:0] a_top [C];
  logic [PW-1:0] model [C][D];

  act_buffer #(.COLS(C), .DEPTH(D), .PW(PW)) dut (.clk, .rst_n, .wr_en, .wr_col, .wr_addr, .wr_data,
                                                  .rd_en, .rd_addr, .a_top);

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // issued reads, recorded per edge: expected[t][c] = word that column c must show
  // after edge t + 1 + c
  logic [PW-1:0] issued [256][C];

  initial begin
    rst_n = 1'b0; wr_en = 1'b0; rd_en = 1'b0; wr_col = '0; wr_addr = '0; rd_addr = '0; wr_data = '0;
    for (int t = 0; t < 256; t++) for (int c = 0; c < C; c++) issued[t][c] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < C; c++) begin
      for (int a = 0; a < D; a++) begin
        @(negedge clk);
        wr_en = 1'b1; wr_col = 2'(c); wr_addr = 5'(a); wr_data = PW'($urandom);
        model[c][a] = wr_data;
      end
    end
    @(negedge clk);
    wr_en = 1'b0;
    // read phase: 120 cycles, reads on a random pattern
    for (int t = 0; t < 120; t++) begin
      @(negedge clk);
      if (t >= 4) begin
        // column c shows the read issued at edge (t - 1 - c), counted in this loop
        for (int c = 0; c < C; c++) begin
          checks++;
          if (a_top[c] !== issued[t-1-c][c]) begin
            failures++;
            if (failures < 10) $display("FAIL t=%0d col %0d got %h exp %h", t, c, a_top[c], issued[t-1-c][c]);
          end
        end
      end
      if (t == 60) begin  // rewrite one entry while idle
        wr_en = 1'b1; wr_col = 2'd2; wr_addr = 5'd7; wr_data = 16'hBEEF; model[2][7] = 16'hBEEF;
      end else wr_en = 1'b0;
      rd_en = (t < 110) && ($urandom_range(0, 3) != 0);
      rd_addr = 5'($urandom);
      for (int c = 0; c < C; c++) issued[t][c] = rd_en ? model[c][rd_addr] : '0;
      if (t == 61 || t == 62) begin
        rd_en = 1'b1; rd_addr = 5'd7;
        for (int c = 0; c < C; c++) issued[t][c] = model[c][7];
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
