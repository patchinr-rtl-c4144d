// coord_fifo: the coordinate queue of the data management unit.
//
// A synchronous first-word-fall-through FIFO of DEPTH entries. Each entry is
// one patch-grid query coordinate (x, y), two 32-bit lanes (FP32 values, or
// Q0.7 integers in INT8 mode). The write side is a valid/ready handshake:
// an entry is stored in a cycle where `in_valid && in_ready`. The read side
// shows the oldest entry on `head_x`/`head_y` whenever `head_valid` is high;
// `pop` removes it in the same cycle. Reset empties the queue.
//
// The paper keeps the coordinate queue in block RAM and gives no depth or
// handshake; the depth of 512 entries (one 36 Kb block RAM at 64 bits per
// entry) and the interface are this design's choices.
module coord_fifo
  import patchinr_pkg::*;
#(
  parameter int unsigned DEPTH = 512
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  word_t in_x,
  input  word_t in_y,
  output logic  head_valid,
  output word_t head_x,
  output word_t head_y,
  input  logic  pop
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [2*DATA_W-1:0] mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic [AW:0]   count;
  logic          do_wr, do_rd;

  assign in_ready   = (count < (AW+1)'(DEPTH));
  assign head_valid = (count != '0);
  assign do_wr      = in_valid && in_ready;
  assign do_rd      = pop && head_valid;
  assign {head_x, head_y} = mem[rd_ptr];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= {in_x, in_y};
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

  // A pop is only issued when an entry is present.
  assert property (@(posedge clk) disable iff (!rst_n) pop |-> head_valid);

endmodule
