// data_dispatcher: activation storage and operand routing for the MAC array.
//
// The dispatcher holds two activation banks of BUF_DEPTH words (ping-pong),
// stored as 16 lane memories (element k in lane k%16), so one input tile is
// one read of every lane and one result vector one write of every lane.
// Layer l reads bank l%2 and its results are written to bank (l+1)%2, so
// the output of the accumulator is fed back as the input of the next layer.
// A new query starts with `coord_load`, which writes the patch coordinate
// (x, y) into lanes 0 and 1 of bank 0.
//
// Read side (combinational): for layer `rd_layer` and input tile `rd_kt`
// column c of `a_vec` carries input element k = rd_kt*COLS + c. Elements
// below the layer's input width come from the bank; element k equal to the
// input width is the constant 1 of the bias lane (FP32 1.0 or INT8 127);
// elements beyond it are 0.
// Write side: when `res_valid` is high, lane r of `res_data` belongs to
// output neuron res_tag.ot*ROWS + r. Hidden-layer results go to the next
// bank; results of the output layer go to the patch buffer `patch`, which
// holds the 3*P*P pixel values of one patch (channel-major order is decided
// by the weights loaded for the output layer).
//
// The paper names a dispatcher that routes the synchronized coordinate and
// weight streams into the compute engine, and its block diagram returns the
// accumulator output to it. The ping-pong banks, the bias lane and the patch
// buffer are this design's choices.
module data_dispatcher
  import patchinr_pkg::*;
#(
  parameter int unsigned HIDDEN  = 512,
  parameter int unsigned IN_DIM  = 2,
  parameter int unsigned OUT_DIM = 12
) (
  input  logic        clk,
  input  logic        rst_n,
  // query coordinate
  input  logic        coord_load,
  input  word_t       coord_x,
  input  word_t       coord_y,
  // read port towards the array
  input  logic [3:0]  rd_layer,
  input  logic [15:0] rd_kt,
  input  prec_mode_e  rd_mode,
  output avec_t       a_vec,
  // results from the accumulator
  input  logic        res_valid,
  input  tag_t        res_tag,
  input  rvec_t       res_data,
  // finished patch
  output word_t       patch [OUT_DIM]
);

  localparam int unsigned BUF_DEPTH = (HIDDEN > IN_DIM) ? HIDDEN : IN_DIM;
  // each bank is split into one memory per lane: element k lives in lane
  // k % 16 at row k / 16, so a tile read or a result write touches every
  // lane once
  localparam int unsigned ROWS_PER_BANK = (BUF_DEPTH + ARRAY_COLS - 1) / ARRAY_COLS;
  localparam int unsigned RAW = $clog2(2 * ROWS_PER_BANK);

  logic [RAW-1:0] rd_addr, wr_addr;
  logic           res_wr;
  int unsigned    in_dim;

  assign in_dim  = (rd_layer == 4'd0) ? IN_DIM : HIDDEN;
  // bank select is the low address bit
  assign rd_addr = RAW'({rd_kt, rd_layer[0]});
  assign wr_addr = coord_load ? RAW'(0) : RAW'({res_tag.ot, ~res_tag.layer[0]});
  assign res_wr  = res_valid && !res_tag.last_layer;

  for (genvar c = 0; c < ARRAY_COLS; c++) begin : g_lane
    word_t lane_mem [2 ** RAW];
    word_t rd_data;
    logic  we;
    word_t wd;
    int unsigned k;

    assign k  = int'(rd_kt) * ARRAY_COLS + c;
    assign we = (coord_load && c < 2) ||
                (!coord_load && res_wr && int'(res_tag.ot) * ARRAY_COLS + c < HIDDEN);
    assign wd = coord_load ? ((c == 0) ? coord_x : coord_y) : res_data[c];

    always_ff @(posedge clk) begin
      if (we) lane_mem[wr_addr] <= wd;
    end
    assign rd_data = lane_mem[rd_addr];

    always_comb begin
      if (k < in_dim)       a_vec[c] = rd_data;
      else if (k == in_dim) a_vec[c] = (rd_mode == MODE_FP32) ? FP32_ONE : INT8_ONE;
      else                  a_vec[c] = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < OUT_DIM; i++) patch[i] <= '0;
    end else if (res_valid && res_tag.last_layer) begin
      for (int r = 0; r < ARRAY_ROWS; r++) begin
        if (int'(res_tag.ot) * ARRAY_ROWS + r < OUT_DIM)
          patch[int'(res_tag.ot) * ARRAY_ROWS + r] <= res_data[r];
      end
    end
  end

endmodule
