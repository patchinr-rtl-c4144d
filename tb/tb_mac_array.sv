// tb_mac_array: drives random weight tiles and activation vectors into the
// 16 x 16 array and checks every product one cycle later against a real-
// number (FP32) or integer (INT8) reference, together with the tag and the
// valid flag that travel with the tile.
module tb_mac_array;
  import patchinr_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  tag_t in_tag = '0, out_tag;
  wtile_t w_tile = '0;
  avec_t a_vec = '0;
  ptile_t prod;
  int checks = 0, failures = 0;

  mac_array dut (.clk, .rst_n, .in_valid, .in_tag, .w_tile, .a_vec, .out_valid, .out_tag, .prod);

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

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 40; it++) begin
      prec_mode_e m;
      m = (it % 2 == 0) ? MODE_FP32 : MODE_INT8;
      @(negedge clk);
      in_valid = 1;
      in_tag = '0;
      in_tag.mode = m;
      in_tag.ot = 16'(it);
      in_tag.first = it[0];
      for (int r = 0; r < ARRAY_ROWS; r++)
        for (int c = 0; c < ARRAY_COLS; c++)
          w_tile[r][c] = (m == MODE_FP32) ? rand_fp(2.0) : sext8(8'($urandom));
      for (int c = 0; c < ARRAY_COLS; c++)
        a_vec[c] = (m == MODE_FP32) ? rand_fp(2.0) : sext8(8'($urandom));
      @(posedge clk); #1;
      check(out_valid && out_tag == in_tag, "valid/tag");
      for (int r = 0; r < ARRAY_ROWS; r++)
        for (int c = 0; c < ARRAY_COLS; c++) begin
          if (m == MODE_FP32) begin
            real rf;
            rf = fp2real(w_tile[r][c]) * fp2real(a_vec[c]);
            check(absr(fp2real(prod[r][c]) - rf) <= absr(rf) * 1.2e-7,
                  $sformatf("fp r%0d c%0d", r, c));
          end else begin
            check(signed'(prod[r][c]) == int'(signed'(w_tile[r][c][7:0])) * int'(signed'(a_vec[c][7:0])),
                  $sformatf("int r%0d c%0d", r, c));
          end
        end
    end
    @(negedge clk); in_valid = 0;
    @(posedge clk); #1;
    check(!out_valid, "valid drops");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
