// pe: one processing element of the core MAC array.
//
// Each cycle in which `en` is high the PE multiplies its weight lane by its
// activation lane and stores the product in its local register, which
// drives `prod`. An input multiplexer selects between the two arithmetic
// modes the accelerator supports: an FP32 multiplier (round to nearest even,
// subnormals flushed to zero) and an INT8 x INT8 -> 16-bit multiplier whose
// product is sign-extended to the 32-bit lane. The product appears one clock
// after the operands. Reset clears the register.
//
// Following the paper: a PE is a multiplier with input multiplexers and local
// registers, and it supports FP32 and INT8. This design's choice: the
// reduction of products (the "accumulate" half of the MAC) is done by the
// adder trees of the accumulator unit, not inside the PE.
module pe
  import patchinr_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  input  prec_mode_e mode,
  input  word_t      w,
  input  word_t      a,
  output word_t      prod
);

  word_t prod_d;

  always_comb begin
    unique case (mode)
      MODE_FP32: prod_d = fp_mul(w, a);
      MODE_INT8: prod_d = word_t'(signed'(w[7:0]) * signed'(a[7:0]));
      default:   prod_d = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  prod <= '0;
    else if (en) prod <= prod_d;
  end

endmodule
