// tb_pe: checks one processing element in both precisions.
// FP32 products are compared with the real-number product (relative error
// at most one unit in the last place); INT8 products must be exact. Also
// checks the one-cycle latency and that the register holds while en is low.
module tb_pe;
  import patchinr_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 0, rst_n = 0, en = 0;
  prec_mode_e mode = MODE_FP32;
  word_t w = '0, a = '0, prod;
  int checks = 0, failures = 0;

  pe dut (.clk, .rst_n, .en, .mode, .w, .a, .prod);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    real ref_p, got, tol;
    word_t held;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // FP32
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      mode = MODE_FP32; en = 1;
      w = rand_fp(4.0); a = rand_fp(4.0);
      if (i == 0) w = 32'd0;
      ref_p = fp2real(w) * fp2real(a);
      @(posedge clk); #1;
      got = fp2real(prod);
      tol = absr(ref_p) * 1.2e-7;
      check(absr(got - ref_p) <= tol, $sformatf("fp32 %h*%h=%h", w, a, prod));
    end
    // hold with en low
    @(negedge clk); held = prod; en = 0; w = rand_fp(1.0); a = rand_fp(1.0);
    @(posedge clk); #1;
    check(prod == held, "hold");
    // INT8
    for (int i = 0; i < 500; i++) begin
      logic signed [7:0] wi, ai;
      @(negedge clk);
      mode = MODE_INT8; en = 1;
      wi = 8'($urandom); ai = 8'($urandom);
      w = {{24{wi[7]}}, wi}; a = {{24{ai[7]}}, ai};
      @(posedge clk); #1;
      check(signed'(prod) == int'(wi) * int'(ai), $sformatf("int8 %0d*%0d=%0d", wi, ai, signed'(prod)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
