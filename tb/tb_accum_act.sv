// tb_accum_act: feeds groups of product tiles (first ... last) into the
// accumulator and checks, for every row, the activated result against an
// independent reference: real-number sums and $sin for FP32, exact integer
// sums with $sin for INT8, in hidden-layer (sine) and output-layer (linear)
// form. Also checks that the result appears exactly two cycles after the
// last tile and that `busy` covers that time.
module tb_accum_act;
  import patchinr_pkg::*;
  import tb_fp_pkg::*;

  localparam int W_FRAC = 5;
  localparam int KT = 3;

  logic clk = 0, rst_n = 0, in_valid = 0, res_valid, busy;
  tag_t in_tag = '0, res_tag;
  ptile_t prod = '0;
  rvec_t res_data;
  int checks = 0, failures = 0;

  accum_act #(.W_FRAC(W_FRAC)) dut (.clk, .rst_n, .in_valid, .in_tag, .prod,
                                    .res_valid, .res_tag, .res_data, .busy);

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
    real    fsum [ARRAY_ROWS];
    real    fabs [ARRAY_ROWS];
    longint isum [ARRAY_ROWS];
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 24; it++) begin
      prec_mode_e m;
      bit ll;
      int iscale;
      m  = (it % 2 == 0) ? MODE_FP32 : MODE_INT8;
      ll = (it % 4 >= 2);
      iscale = (it % 8 >= 4) ? 4000 : 300;
      foreach (fsum[r]) begin fsum[r] = 0.0; fabs[r] = 0.0; isum[r] = 0; end
      for (int kt = 0; kt < KT; kt++) begin
        @(negedge clk);
        in_valid = 1;
        in_tag = '0;
        in_tag.mode = m;
        in_tag.first = (kt == 0);
        in_tag.last = (kt == KT - 1);
        in_tag.last_layer = ll;
        in_tag.ot = 16'(it);
        for (int r = 0; r < ARRAY_ROWS; r++)
          for (int c = 0; c < ARRAY_COLS; c++) begin
            if (m == MODE_FP32) begin
              prod[r][c] = rand_fp(0.4);
              fsum[r] += fp2real(prod[r][c]);
              fabs[r] += absr(fp2real(prod[r][c]));
            end else begin
              int v;
              v = int'($urandom_range(0, 2 * iscale)) - iscale;
              prod[r][c] = word_t'(v);
              isum[r] += v;
            end
          end
      end
      @(negedge clk); in_valid = 0;
      check(!res_valid && busy, "result not before 2 cycles, busy");
      @(posedge clk); #1;
      check(res_valid && res_tag.ot == 16'(it) && res_tag.last_layer == ll, "result after 2 cycles");
      for (int r = 0; r < ARRAY_ROWS; r++) begin
        if (m == MODE_FP32) begin
          real got;
          got = fp2real(res_data[r]);
          if (ll) check(absr(got - fsum[r]) <= 1.0e-6 * fabs[r] + 1.0e-9,
                        $sformatf("fp lin r%0d got %f exp %f", r, got, fsum[r]));
          else    check(absr(got - $sin(fsum[r])) <= 1.0e-4,
                        $sformatf("fp sin r%0d got %f exp %f", r, got, $sin(fsum[r])));
        end else begin
          int exp_v, got_v;
          got_v = signed'(res_data[r]);
          if (ll) begin
            exp_v = int'((isum[r] + 16) >>> W_FRAC);
            if (exp_v > 127) exp_v = 127;
            if (exp_v < -127) exp_v = -127;
            check(got_v == exp_v, $sformatf("int lin r%0d got %0d exp %0d", r, got_v, exp_v));
          end else begin
            real s;
            s = $sin(real'(isum[r]) / real'(1 << (7 + W_FRAC))) * 128.0;
            exp_v = (s >= 0.0) ? $rtoi(s + 0.5) : -$rtoi(-s + 0.5);
            if (exp_v > 127) exp_v = 127;
            if (exp_v < -127) exp_v = -127;
            check(got_v - exp_v <= 1 && exp_v - got_v <= 1,
                  $sformatf("int sin r%0d got %0d exp %0d", r, got_v, exp_v));
          end
        end
      end
      @(posedge clk); #1;
      check(!res_valid && !busy, "single result pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
