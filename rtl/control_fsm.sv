// control_fsm: the central controller of the accelerator.
//
// One query (one patch coordinate) is processed at a time, in five states:
//   IDLE  - wait for a coordinate; on one, pop it, load it into the
//           dispatcher and latch the precision mode for the whole query.
//   RUN   - for the current layer, issue one (output tile, input tile)
//           pair per cycle to the MAC array, output tile by output tile,
//           input tiles innermost. An issue needs a weight tile at the head
//           of the weight queue; without one the FSM waits (`stall`).
//   DRAIN - wait until the array and accumulator pipeline is empty, so the
//           next layer reads complete activations; then go to the next
//           layer, or to DONE after the output layer.
//   DONE  - present the patch (`out_valid`) until `out_ready`.
// Layer l has in_dim inputs (IN_DIM for layer 0, HIDDEN after) plus the bias
// lane, so ceil((in_dim+1)/COLS) input tiles, and out_dim outputs (HIDDEN, or
// OUT_DIM = 3*P*P for the last layer), so ceil(out_dim/ROWS) output tiles.
// With the defaults (5 layers, 2-512-512-512-512-12) a query issues
// 32 + 3*32*33 + 33 = 3233 tiles.
//
// The paper states that a central FSM synchronises the pipelined dataflow and
// manages execution states; the states and the tile order are this design's.
module control_fsm
  import patchinr_pkg::*;
#(
  parameter int unsigned NUM_LAYERS = 5,
  parameter int unsigned HIDDEN     = 512,
  parameter int unsigned IN_DIM     = 2,
  parameter int unsigned OUT_DIM    = 12
) (
  input  logic        clk,
  input  logic        rst_n,
  input  prec_mode_e  mode_in,
  // coordinate queue
  input  logic        coord_valid,
  output logic        coord_pop,
  // weight queue
  input  logic        w_valid,
  output logic        w_pop,
  // issue to the MAC array / dispatcher
  output logic        issue_valid,
  output tag_t        issue_tag,
  output logic [3:0]  rd_layer,
  output logic [15:0] rd_kt,
  // pipeline state
  input  logic        pipe_busy,
  // patch output
  output logic        out_valid,
  input  logic        out_ready,
  // status
  output logic        busy,
  output logic        stall
);

  typedef enum logic [2:0] {S_IDLE, S_RUN, S_DRAIN, S_DONE} state_e;

  state_e      state;
  logic [3:0]  layer;
  logic [15:0] ot, kt;
  prec_mode_e  mode_q;

  function automatic logic [15:0] kt_count(input logic [3:0] l);
    int unsigned in_dim;
    in_dim = (l == 4'd0) ? IN_DIM : HIDDEN;
    return 16'((in_dim + 1 + ARRAY_COLS - 1) / ARRAY_COLS);
  endfunction

  function automatic logic [15:0] ot_count(input logic [3:0] l);
    int unsigned out_dim;
    out_dim = (int'(l) == NUM_LAYERS - 1) ? OUT_DIM : HIDDEN;
    return 16'((out_dim + ARRAY_ROWS - 1) / ARRAY_ROWS);
  endfunction

  logic last_kt, last_ot, last_layer;
  assign last_kt    = (kt == kt_count(layer) - 16'd1);
  assign last_ot    = (ot == ot_count(layer) - 16'd1);
  assign last_layer = (int'(layer) == NUM_LAYERS - 1);

  assign coord_pop   = (state == S_IDLE) && coord_valid;
  assign issue_valid = (state == S_RUN) && w_valid;
  assign w_pop       = issue_valid;
  assign stall       = (state == S_RUN) && !w_valid;
  assign out_valid   = (state == S_DONE);
  assign busy        = (state != S_IDLE);
  assign rd_layer    = layer;
  assign rd_kt       = kt;

  always_comb begin
    issue_tag            = '0;
    issue_tag.first      = (kt == 16'd0);
    issue_tag.last       = last_kt;
    issue_tag.last_layer = last_layer;
    issue_tag.layer      = layer;
    issue_tag.ot         = ot;
    issue_tag.mode       = mode_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      layer  <= '0;
      ot     <= '0;
      kt     <= '0;
      mode_q <= MODE_FP32;
    end else begin
      unique case (state)
        S_IDLE: if (coord_valid) begin
          mode_q <= mode_in;
          layer  <= '0;
          ot     <= '0;
          kt     <= '0;
          state  <= S_RUN;
        end
        S_RUN: if (w_valid) begin
          if (last_kt) begin
            kt <= '0;
            if (last_ot) begin
              ot    <= '0;
              state <= S_DRAIN;
            end else begin
              ot <= ot + 16'd1;
            end
          end else begin
            kt <= kt + 16'd1;
          end
        end
        S_DRAIN: if (!pipe_busy) begin
          if (last_layer) begin
            state <= S_DONE;
          end else begin
            layer <= layer + 4'd1;
            state <= S_RUN;
          end
        end
        S_DONE: if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
