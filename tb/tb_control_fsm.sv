// tb_control_fsm: runs the controller with a small network (3 layers,
// 2 -> 40 -> 40 -> 12) against a model of the pipeline behind it. Checks the
// order and tags of every issued tile, that an issue happens exactly when a
// weight tile is available (stall otherwise), that no tile of a layer is
// issued before the previous layer has left the pipeline, the precision
// latch, the patch handshake, and the issue count per query. With weights
// always present, tiles of one layer must issue on consecutive cycles.
module tb_control_fsm;
  import patchinr_pkg::*;

  localparam int NUM_LAYERS = 3, HIDDEN = 40, IN_DIM = 2, OUT_DIM = 12;
  localparam int PIPE = 3;  // array + accumulator stages modelled

  logic clk = 0, rst_n = 0;
  prec_mode_e mode_in = MODE_FP32;
  logic coord_valid = 0, coord_pop, w_valid = 0, w_pop, issue_valid, pipe_busy;
  tag_t issue_tag;
  logic [3:0] rd_layer;
  logic [15:0] rd_kt;
  logic out_valid, out_ready = 0, busy, stall;
  logic [PIPE-1:0] pipe = '0;
  int checks = 0, failures = 0, stalls = 0;

  control_fsm #(.NUM_LAYERS(NUM_LAYERS), .HIDDEN(HIDDEN), .IN_DIM(IN_DIM), .OUT_DIM(OUT_DIM)) dut (
    .clk, .rst_n, .mode_in, .coord_valid, .coord_pop, .w_valid, .w_pop, .issue_valid,
    .issue_tag, .rd_layer, .rd_kt, .pipe_busy, .out_valid, .out_ready, .busy, .stall);

  always #5 clk = ~clk;
  assign pipe_busy = |pipe;
  always_ff @(posedge clk) pipe <= {pipe[PIPE-2:0], issue_valid};

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
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  task automatic run_query(input prec_mode_e m, input int w_prob);
    int n_issue, gaps;
    @(negedge clk);
    coord_valid = 1; mode_in = m;
    #1 check(coord_pop, "pop coordinate");
    @(negedge clk);
    coord_valid = 0; mode_in = (m == MODE_FP32) ? MODE_INT8 : MODE_FP32;  // must be ignored
    n_issue = 0;
    for (int l = 0; l < NUM_LAYERS; l++) begin
      int in_dim, out_dim, first_gap;
      in_dim  = (l == 0) ? IN_DIM : HIDDEN;
      out_dim = (l == NUM_LAYERS - 1) ? OUT_DIM : HIDDEN;
      first_gap = 1;
      gaps = 0;
      for (int ot = 0; ot < (out_dim + 15) / 16; ot++)
        for (int kt = 0; kt < (in_dim + 1 + 15) / 16; kt++) begin
          // wait for the issue
          forever begin
            w_valid = ($urandom_range(0, 99) < w_prob);
            #1;
            if (issue_valid) break;
            if (busy && rd_layer == 4'(l) && !first_gap) gaps++;
            if (stall) stalls++;
            check(!(w_valid && rd_layer == 4'(l) && !pipe_busy && !issue_valid && !first_gap),
                  "issue withheld with a tile available");
            @(negedge clk);
          end
          if (first_gap) check(!pipe_busy, $sformatf("layer %0d starts with pipeline empty", l));
          first_gap = 0;
          check(w_pop && rd_layer == 4'(l) && rd_kt == 16'(kt) &&
                issue_tag.layer == 4'(l) && issue_tag.ot == 16'(ot) &&
                issue_tag.first == (kt == 0) &&
                issue_tag.last == (kt == (in_dim + 1 + 15) / 16 - 1) &&
                issue_tag.last_layer == (l == NUM_LAYERS - 1) && issue_tag.mode == m,
                $sformatf("issue l%0d ot%0d kt%0d", l, ot, kt));
          n_issue++;
          @(negedge clk);
        end
      if (w_prob == 100) check(gaps == 0, "back-to-back issue within a layer");
    end
    w_valid = 0;
    check(n_issue == 1 * 3 + 1 * 3 * 3 + 1 * 3, "issue count");  // 3 + 9 + 3 = 15 for these sizes
    // wait for the patch
    while (!out_valid) @(negedge clk);
    check(!pipe_busy, "patch only after pipeline drained");
    repeat (3) begin
      @(negedge clk);
      check(out_valid, "patch held until accepted");
    end
    out_ready = 1;
    @(negedge clk);
    out_ready = 0;
    check(!out_valid && !busy, "idle after handshake");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_query(MODE_FP32, 100);
    run_query(MODE_INT8, 40);
    run_query(MODE_FP32, 70);
    check(stalls > 0, "stall happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
