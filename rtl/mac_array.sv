// mac_array: the core compute engine, a ROWS x COLS grid of processing
// elements (16 x 16 by default).
//
// One weight tile and one activation vector are accepted per cycle while
// `in_valid` is high. PE (r, c) multiplies weight w[r][c] by activation a[c],
// so row r works on output neuron r of the current output tile and column c
// on input element c of the current input tile: activation a[c] is shared by
// every PE of column c, each PE has its own weight. All ROWS*COLS products
// leave one clock later on `prod`, together with `out_valid` and the tag that
// entered with the tile. With 256 PEs at 200 MHz this is 256 MACs per cycle,
// i.e. the 102.4 GFLOP/s the paper quotes.
//
// The array size and the dual-precision PEs follow the paper. How the tile is
// mapped onto rows and columns, and that activations are shared along a
// column rather than shifted from PE to PE, are this design's choices.
module mac_array
  import patchinr_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  tag_t       in_tag,
  input  wtile_t     w_tile,
  input  avec_t      a_vec,
  output logic       out_valid,
  output tag_t       out_tag,
  output ptile_t     prod
);

  for (genvar r = 0; r < ARRAY_ROWS; r++) begin : g_row
    for (genvar c = 0; c < ARRAY_COLS; c++) begin : g_col
      pe u_pe (
        .clk  (clk),
        .rst_n(rst_n),
        .en   (in_valid),
        .mode (in_tag.mode),
        .w    (w_tile[r][c]),
        .a    (a_vec[c]),
        .prod (prod[r][c])
      );
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tag   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_tag <= in_tag;
    end
  end

endmodule
