// tb_sine_unit: compares the fixed-point sine with $sin over the input range
// (random points in +-100 rad plus the fold points 0, +-pi/2, +-pi).
module tb_sine_unit;
  logic signed [31:0] x, y;
  int checks = 0, failures = 0;
  real maxerr = 0.0;

  sine_unit dut (.x, .y);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic try_x(input real xr);
    real got, err;
    x = 32'(longint'(xr * 16777216.0));
    #1;
    got = real'(y) / 1073741824.0;
    err = got - $sin(real'(x) / 16777216.0);
    if (err < 0.0) err = -err;
    if (err > maxerr) maxerr = err;
    checks++;
    if (err > 2.0e-5) begin
      failures++;
      $display("FAIL x=%f got=%f", xr, got);
    end
  endtask

  initial begin
    real pts[5] = '{0.0, 1.5707963, -1.5707963, 3.1415926, -3.1415926};
    foreach (pts[i]) try_x(pts[i]);
    for (int i = 0; i < 3000; i++)
      try_x(((real'($urandom) / 4294967296.0) * 2.0 - 1.0) * ((i < 1500) ? 4.0 : 100.0));
    $display("max abs error %e", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
