// tb_data_dispatcher: loads a coordinate, writes layer results back as the
// accumulator would, and checks the activation vectors read for the next
// layer (bank ping-pong, bias lane, zero padding past the bias lane, a
// hidden width that is not a multiple of 16) and the patch buffer.
module tb_data_dispatcher;
  import patchinr_pkg::*;

  localparam int HIDDEN = 40, IN_DIM = 2, OUT_DIM = 12;
  logic clk = 0, rst_n = 0, coord_load = 0, res_valid = 0;
  word_t coord_x = '0, coord_y = '0;
  logic [3:0] rd_layer = '0;
  logic [15:0] rd_kt = '0;
  prec_mode_e rd_mode = MODE_FP32;
  avec_t a_vec;
  tag_t res_tag = '0;
  rvec_t res_data = '0;
  word_t patch [OUT_DIM];
  int checks = 0, failures = 0;
  word_t model [HIDDEN];

  data_dispatcher #(.HIDDEN(HIDDEN), .IN_DIM(IN_DIM), .OUT_DIM(OUT_DIM)) dut (
    .clk, .rst_n, .coord_load, .coord_x, .coord_y, .rd_layer, .rd_kt, .rd_mode, .a_vec,
    .res_valid, .res_tag, .res_data, .patch);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  task automatic write_layer(input int layer, input bit last, input int n_out);
    for (int ot = 0; ot < (n_out + 15) / 16; ot++) begin
      @(negedge clk);
      res_valid = 1;
      res_tag = '0;
      res_tag.layer = 4'(layer);
      res_tag.last_layer = last;
      res_tag.ot = 16'(ot);
      for (int r = 0; r < ARRAY_ROWS; r++) begin
        res_data[r] = $urandom;
        if (!last && ot * 16 + r < HIDDEN) model[ot * 16 + r] = res_data[r];
        if (last && ot * 16 + r < OUT_DIM) model[ot * 16 + r] = res_data[r];
      end
    end
    @(negedge clk); res_valid = 0;
  endtask

  task automatic read_layer(input int layer, input prec_mode_e m);
    int in_dim;
    in_dim = (layer == 0) ? IN_DIM : HIDDEN;
    for (int kt = 0; kt < (in_dim + 1 + 15) / 16; kt++) begin
      @(negedge clk);
      rd_layer = 4'(layer); rd_kt = 16'(kt); rd_mode = m;
      #1;
      for (int c = 0; c < ARRAY_COLS; c++) begin
        int k;
        word_t e;
        k = kt * 16 + c;
        if (k < in_dim) e = model[k];
        else if (k == in_dim) e = (m == MODE_FP32) ? 32'h3F80_0000 : 32'd127;
        else e = '0;
        check(a_vec[c] == e, $sformatf("layer %0d k %0d got %h exp %h", layer, k, a_vec[c], e));
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int q = 0; q < 3; q++) begin
      prec_mode_e m;
      m = (q == 1) ? MODE_INT8 : MODE_FP32;
      @(negedge clk);
      coord_load = 1; coord_x = $urandom; coord_y = $urandom;
      model[0] = coord_x; model[1] = coord_y;
      @(negedge clk); coord_load = 0;
      read_layer(0, m);
      write_layer(0, 0, HIDDEN);
      read_layer(1, m);
      write_layer(1, 0, HIDDEN);
      read_layer(2, m);
      write_layer(2, 0, HIDDEN);
      read_layer(3, m);
      write_layer(3, 1, OUT_DIM);
      for (int i = 0; i < OUT_DIM; i++) check(patch[i] == model[i], $sformatf("patch %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
