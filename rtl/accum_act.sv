// accum_act: the unified accumulator and activation unit.
//
// It receives all products of the MAC array each cycle. For every array row
// an adder tree (four levels for 16 columns) reduces the row's products to
// one partial dot product, which is accumulated over the input tiles of the
// current output tile: the tile tagged `first` loads the accumulator, later
// tiles add to it. The bias is not added here; it arrives as the weight of a
// constant-1 input lane and is part of the dot product.
//
// When the tile tagged `last` has been accumulated, the next stage applies
// the activation to all rows at once and raises `res_valid` for one cycle:
//   hidden layers, FP32: y = sin(acc) via FP32 -> Q7.24 -> sine -> FP32;
//   hidden layers, INT8: acc has 7 + W_FRAC fractional bits; it is shifted
//                        to Q7.24, passed through the sine, and rounded and
//                        saturated to Q0.7;
//   output layer,  FP32: y = acc (linear output);
//   output layer,  INT8: y = acc >> W_FRAC, rounded, saturated to Q0.7.
// Timing: products arriving at cycle t give a result at t+2 (for the last
// tile). `busy` is high while a result is still on its way.
//
// From the paper: the PE outputs go to a unified accumulator that aggregates
// vectors and applies the nonlinear activation (SIREN's sine). The adder-tree
// shape comes from the accelerator block diagram. The INT8 scaling, the
// bias-as-weight scheme and the two-stage timing are this design's choices.
module accum_act
  import patchinr_pkg::*;
#(
  parameter int unsigned W_FRAC = 5   // fractional bits of INT8 weights
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  tag_t   in_tag,
  input  ptile_t prod,
  output logic   res_valid,
  output tag_t   res_tag,
  output rvec_t  res_data,
  output logic   busy
);

  localparam int unsigned SHIFT_TO_SIN = SIN_IN_FRAC - 7 - W_FRAC;

  rvec_t acc;
  rvec_t row_sum;
  rvec_t act_d;
  logic  pre_valid;
  tag_t  pre_tag;
  logic signed [31:0] sin_in  [ARRAY_ROWS];
  logic signed [31:0] sin_out [ARRAY_ROWS];

  // Adder tree over one row: FP32 or integer.
  function automatic word_t row_tree(input logic [ARRAY_COLS-1:0][DATA_W-1:0] p,
                                     input prec_mode_e m);
    word_t lvl [ARRAY_COLS];
    int    n;
    for (int i = 0; i < ARRAY_COLS; i++) lvl[i] = p[i];
    n = ARRAY_COLS;
    while (n > 1) begin
      for (int i = 0; i < n / 2; i++) begin
        if (m == MODE_FP32) lvl[i] = fp_add(lvl[2*i], lvl[2*i+1]);
        else                lvl[i] = lvl[2*i] + lvl[2*i+1];
      end
      if (n % 2 == 1) lvl[n/2] = lvl[n-1];
      n = (n + 1) / 2;
    end
    return lvl[0];
  endfunction

  always_comb begin
    for (int r = 0; r < ARRAY_ROWS; r++) row_sum[r] = row_tree(prod[r], in_tag.mode);
  end

  // Stage 1: accumulate over input tiles.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      pre_valid <= 1'b0;
      pre_tag   <= '0;
    end else begin
      pre_valid <= in_valid && in_tag.last;
      if (in_valid) begin
        for (int r = 0; r < ARRAY_ROWS; r++) begin
          if (in_tag.first)                acc[r] <= row_sum[r];
          else if (in_tag.mode == MODE_FP32) acc[r] <= fp_add(acc[r], row_sum[r]);
          else                             acc[r] <= acc[r] + row_sum[r];
        end
        if (in_tag.last) pre_tag <= in_tag;
      end
    end
  end

  // Stage 2: activation.
  for (genvar r = 0; r < ARRAY_ROWS; r++) begin : g_sin
    logic signed [63:0] wide;
    logic signed [31:0] int_fix;
    assign wide    = 64'(signed'(acc[r])) <<< SHIFT_TO_SIN;
    assign int_fix = (wide > 64'sh7FFF_FFFF)       ? 32'sh7FFF_FFFF :
                     (wide < -64'sh8000_0000)      ? -32'sh8000_0000 : 32'(wide);
    assign sin_in[r] = (pre_tag.mode == MODE_FP32) ? fp_to_fix(acc[r], int'(SIN_IN_FRAC))
                                                   : int_fix;
    sine_unit u_sin (.x(sin_in[r]), .y(sin_out[r]));
  end

  always_comb begin
    for (int r = 0; r < ARRAY_ROWS; r++) begin
      if (pre_tag.last_layer) begin
        if (pre_tag.mode == MODE_FP32) act_d[r] = acc[r];
        else act_d[r] = sat8((signed'(acc[r]) + (32'sd1 <<< (W_FRAC - 1))) >>> W_FRAC);
      end else begin
        if (pre_tag.mode == MODE_FP32) act_d[r] = fix_to_fp(sin_out[r], int'(SIN_OUT_FRAC));
        else act_d[r] = sat8((sin_out[r] + (32'sd1 <<< (SIN_OUT_FRAC - 8))) >>> (SIN_OUT_FRAC - 7));
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_valid <= 1'b0;
      res_tag   <= '0;
      res_data  <= '0;
    end else begin
      res_valid <= pre_valid;
      if (pre_valid) begin
        res_tag  <= pre_tag;
        res_data <= act_d;
      end
    end
  end

  assign busy = pre_valid | res_valid;

endmodule
