// patchinr_top: accelerator engine for patch-based SIREN inference.
//
// A query is one coordinate of the coarse patch grid. The engine evaluates a
// fully connected network with sine activations on it and returns the
// 3*PATCH*PATCH colour values of the whole PATCH x PATCH pixel patch, so an
// H x W image needs H*W/PATCH^2 queries instead of H*W. Default network:
// NUM_LAYERS = 5 weight layers, 2 -> 512 -> 512 -> 512 -> 512 -> 12.
//
// Structure (left to right in the data path):
//   data management unit: coord_fifo (query queue), weight_fifo (weight
//     tiles), data_dispatcher (activation banks, operand routing, patch buffer)
//   control_fsm: walks layers / output tiles / input tiles
//   mac_array: 16 x 16 dual-precision PEs, one 16 x 16 weight tile per cycle
//   accum_act: row adder trees, accumulation over input tiles, sine
// The accumulator output is written back into the dispatcher and becomes the
// next layer's input; after the last layer the patch is presented on
// `out_patch` with a valid/ready handshake.
//
// Interfaces: coordinates and weight tiles enter through valid/ready ports
// (in the full system they come from DDR over AXI via a global URAM buffer,
// which are outside this module). Weight tiles must be supplied for every
// query, in issue order: for each layer, for each output tile, for each
// input tile, a ROWS x COLS tile whose element [r][c] is the weight from
// input kt*16+c to output ot*16+r; the weight from input index in_dim (the
// bias lane) is the neuron's bias. `mode` selects FP32 or INT8 and is
// sampled when a query starts. With the weights available the engine
// issues one tile per cycle; a query with the default sizes takes
// 3233 issue cycles plus 4 drain cycles per layer.
//
// The array size, the five layers, the two precisions, the FIFOs and the
// dispatcher/accumulator feedback loop follow the paper; widths, depths,
// tile order and handshakes are this design's choices.
module patchinr_top
  import patchinr_pkg::*;
#(
  parameter int unsigned PATCH       = 2,
  parameter int unsigned HIDDEN      = 512,
  parameter int unsigned NUM_LAYERS  = 5,
  parameter int unsigned IN_DIM      = 2,
  parameter int unsigned CHANNELS    = 3,
  parameter int unsigned OUT_DIM     = CHANNELS * PATCH * PATCH,
  parameter int unsigned COORD_DEPTH = 512,
  parameter int unsigned W_DEPTH     = 64,
  parameter int unsigned W_FRAC      = 5
) (
  input  logic       clk,
  input  logic       rst_n,
  input  prec_mode_e mode,
  // query coordinates
  input  logic       coord_valid,
  output logic       coord_ready,
  input  word_t      coord_x,
  input  word_t      coord_y,
  // weight tiles
  input  logic       w_valid,
  output logic       w_ready,
  input  wtile_t     w_tile,
  // reconstructed patch
  output logic       out_valid,
  input  logic       out_ready,
  output word_t      out_patch [OUT_DIM],
  // status
  output logic       busy,
  output logic       stall
);

  logic   cq_valid, cq_pop;
  word_t  cq_x, cq_y;
  logic   wq_valid, wq_pop;
  wtile_t wq_head;
  logic   issue_valid;
  tag_t   issue_tag;
  logic [3:0]  rd_layer;
  logic [15:0] rd_kt;
  avec_t  a_vec;
  logic   arr_valid;
  tag_t   arr_tag;
  ptile_t arr_prod;
  logic   res_valid;
  tag_t   res_tag;
  rvec_t  res_data;
  logic   acc_busy;

  coord_fifo #(.DEPTH(COORD_DEPTH)) u_coord_fifo (
    .clk, .rst_n,
    .in_valid(coord_valid), .in_ready(coord_ready), .in_x(coord_x), .in_y(coord_y),
    .head_valid(cq_valid), .head_x(cq_x), .head_y(cq_y), .pop(cq_pop)
  );

  weight_fifo #(.DEPTH(W_DEPTH)) u_weight_fifo (
    .clk, .rst_n,
    .in_valid(w_valid), .in_ready(w_ready), .in_tile(w_tile),
    .head_valid(wq_valid), .head(wq_head), .pop(wq_pop)
  );

  control_fsm #(
    .NUM_LAYERS(NUM_LAYERS), .HIDDEN(HIDDEN), .IN_DIM(IN_DIM), .OUT_DIM(OUT_DIM)
  ) u_ctrl (
    .clk, .rst_n,
    .mode_in(mode),
    .coord_valid(cq_valid), .coord_pop(cq_pop),
    .w_valid(wq_valid), .w_pop(wq_pop),
    .issue_valid, .issue_tag, .rd_layer, .rd_kt,
    .pipe_busy(arr_valid | acc_busy),
    .out_valid, .out_ready,
    .busy, .stall
  );

  data_dispatcher #(.HIDDEN(HIDDEN), .IN_DIM(IN_DIM), .OUT_DIM(OUT_DIM)) u_disp (
    .clk, .rst_n,
    .coord_load(cq_pop), .coord_x(cq_x), .coord_y(cq_y),
    .rd_layer, .rd_kt, .rd_mode(issue_tag.mode), .a_vec,
    .res_valid, .res_tag, .res_data,
    .patch(out_patch)
  );

  mac_array u_array (
    .clk, .rst_n,
    .in_valid(issue_valid), .in_tag(issue_tag),
    .w_tile(wq_head), .a_vec,
    .out_valid(arr_valid), .out_tag(arr_tag), .prod(arr_prod)
  );

  accum_act #(.W_FRAC(W_FRAC)) u_acc (
    .clk, .rst_n,
    .in_valid(arr_valid), .in_tag(arr_tag), .prod(arr_prod),
    .res_valid, .res_tag, .res_data,
    .busy(acc_busy)
  );

endmodule
