// sa_controller -- tile sequencer of the SPARQ systolic-array engine.
//
// A tile is started by a one-cycle `start` pulse (only while idle) with the first
// buffer address `base_addr`, the number of activation/weight pairs `len` (1..DEPTH)
// and `clear_acc`. The controller then reads `len` consecutive buffer addresses, one
// per cycle, from the activation and weight buffers at once (rd_en/rd_addr), raises
// `clr` for one cycle exactly when the first operands reach PE (0,0) if clear_acc was
// set (otherwise the new products are added to the partial sums already in the array,
// so a long dot product can be split into several tiles), waits for the skewed
// wavefront to leave the array and pulses `done`. An `unload` pulse (while idle)
// drains the partial sums: `shift` is held high for ROWS cycles; in unload cycle i the
// array's bottom row shows result row ROWS-1-i, flagged by out_valid and out_row.
// Unloading replaces the partial sums, so it follows the last tile of a chain.
// Timing: start sampled at edge s; reads at edges s+1..s+len; clr high between
// edges s+1 and s+2; every psum final after edge s+len+ROWS+COLS; done high for the
// cycle that follows that edge. busy is high from edge s until done, and during an
// unload. unload sampled at edge u: out_valid is high between edges u+i and u+i+1, i = 0..ROWS-1, and the
// row shown there is shifted away at edge u+i+1.
//
// The paper describes the array but not its control; all of this sequencing is this
// design's choice, sized to the buffer latency and skew of act_buffer/weight_buffer.
module sa_controller #(
  parameter int unsigned ROWS  = 16,
  parameter int unsigned COLS  = 16,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned RW   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          clear_acc,
  input  logic [AW-1:0] base_addr,
  input  logic [AW:0]   len,
  input  logic          unload,
  output logic          busy,
  output logic          done,
  output logic          rd_en,
  output logic [AW-1:0] rd_addr,
  output logic          clr,
  output logic          shift,
  output logic          out_valid,
  output logic [RW-1:0] out_row
);

  typedef enum logic [1:0] {S_IDLE, S_STREAM, S_DRAIN, S_UNLOAD} state_e;

  localparam int unsigned DRAIN_CYC = ROWS + COLS - 1;
  localparam int unsigned DCW       = $clog2(ROWS + COLS + 1);

  state_e         state;
  logic [AW-1:0]  addr;
  logic [AW:0]    cnt;
  logic [DCW-1:0] dcnt;
  logic [RW-1:0]  ucnt;
  logic           clr_d1;

  assign busy    = (state != S_IDLE);
  assign rd_en   = (state == S_STREAM);
  assign rd_addr = addr;
  assign shift     = (state == S_UNLOAD);
  assign out_valid = (state == S_UNLOAD);
  assign out_row   = RW'(ROWS - 1) - ucnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      addr   <= '0;
      cnt    <= '0;
      dcnt   <= '0;
      ucnt   <= '0;
      clr_d1 <= 1'b0;
      clr    <= 1'b0;
      done   <= 1'b0;
    end else begin
      clr    <= clr_d1;
      clr_d1 <= 1'b0;
      done   <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start && len != '0) begin
            addr   <= base_addr;
            cnt    <= len;
            clr_d1 <= clear_acc;
            state  <= S_STREAM;
          end else if (unload) begin
            ucnt  <= '0;
            state <= S_UNLOAD;
          end
        end
        S_STREAM: begin
          addr <= addr + 1'b1;
          cnt  <= cnt - 1'b1;
          if (cnt == (AW+1)'(1)) begin
            dcnt  <= DCW'(DRAIN_CYC);
            state <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          if (dcnt == '0) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            dcnt <= dcnt - 1'b1;
          end
        end
        S_UNLOAD: begin
          ucnt <= ucnt + 1'b1;
          if (ucnt == RW'(ROWS - 1)) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Handshake rules: a tile is started only while idle, with a legal length.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("sa_controller: start while busy");
  a_unload_idle: assert property (@(posedge clk) disable iff (!rst_n) unload |-> !busy && !start)
    else $error("sa_controller: unload while busy or together with start");
  a_len_legal: assert property (@(posedge clk) disable iff (!rst_n) start |-> (len <= (AW+1)'(DEPTH)))
    else $error("sa_controller: len exceeds buffer depth");

endmodule
