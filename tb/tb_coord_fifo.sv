// tb_coord_fifo: random pushes and pops against a queue model; checks the
// head entry, empty/full flags, that pushes into a full queue are refused,
// and that order is kept across pointer wrap-around.
module tb_coord_fifo;
  import patchinr_pkg::*;

  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, head_valid, pop = 0;
  word_t in_x = '0, in_y = '0, head_x, head_y;
  int checks = 0, failures = 0;
  logic [63:0] model [$];
  bit saw_full = 0;
  bit accept;

  coord_fifo #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_x, .in_y,
                                   .head_valid, .head_x, .head_y, .pop);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
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
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      // compare outputs with the model
      check(head_valid == (model.size() != 0), "head_valid");
      check(in_ready == (model.size() < DEPTH), "in_ready");
      if (model.size() != 0) check({head_x, head_y} == model[0], "head data");
      if (model.size() == DEPTH) saw_full = 1;
      in_valid = ($urandom_range(0, 99) < ((i / 500) % 2 == 0 ? 70 : 30));
      in_x = $urandom; in_y = $urandom;
      pop = head_valid && ($urandom_range(0, 99) < ((i / 500) % 2 == 0 ? 30 : 70));
      #1 accept = in_valid && in_ready;
      @(posedge clk);
      if (pop) void'(model.pop_front());
      if (accept) model.push_back({in_x, in_y});
    end
    check(saw_full, "queue reached full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
