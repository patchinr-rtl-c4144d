// weight_fifo: the weight queue of the data management unit.
//
// A synchronous first-word-fall-through FIFO of DEPTH entries. Each entry is
// one full weight tile for the MAC array: ROWS x COLS lanes of 32 bits
// (8192 bits for 16 x 16), i.e. the operands the array consumes in one cycle.
// Tiles arrive in the order the control FSM consumes them: layer by layer,
// output tile by output tile, input tile by input tile. The write side is a
// valid/ready handshake; the read side shows the oldest tile on `head` while
// `head_valid` is high and `pop` removes it in the same cycle. When the queue
// runs empty the controller stalls the array. Reset empties the queue.
//
// The paper keeps the weight queue in UltraRAM and gives no depth, width or
// handshake; a tile-wide word and a depth of 64 tiles (64 x 8192 bits,
// 512 Kb) are this design's choices.
module weight_fifo
  import patchinr_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  output logic   in_ready,
  input  wtile_t in_tile,
  output logic   head_valid,
  output wtile_t head,
  input  logic   pop
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  wtile_t        mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic [AW:0]   count;
  logic          do_wr, do_rd;

  assign in_ready   = (count < (AW+1)'(DEPTH));
  assign head_valid = (count != '0);
  assign do_wr      = in_valid && in_ready;
  assign do_rd      = pop && head_valid;
  assign head       = mem[rd_ptr];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= in_tile;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_wr) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (do_rd) rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  // A pop is only issued when a tile is present.
  assert property (@(posedge clk) disable iff (!rst_n) pop |-> head_valid);

endmodule
