// tb_patchinr_p8: the patch-size workload at 8 x 8 patches (192 outputs per
// query, 12 output tiles) on a narrow network (2 -> 24 -> ... -> 192), four
// queries in both precisions against the reference network. Apart from the
// sizes and the mechanism counts (only the precision switch is required) it
// is the same test as tb_patchinr_top:
//
// The testbench builds a random SIREN (weights drawn as in SIREN's
// initialisation, with the frequency factor folded into the first layer),
// streams its weight tiles into the engine once per query, sends patch
// coordinates in both precisions and compares every returned patch with a
// reference network evaluated here: real arithmetic and $sin for FP32,
// integer arithmetic with the same INT8 scaling for INT8.
// It counts the mechanisms of the design and fails if one never happens:
// weight-queue stalls, weight-queue back-pressure, coordinate queueing while
// busy, output back-pressure, precision switches between queries, and
// multi-tile output layers. With the weight queue never empty it also
// checks the query latency: issue cycles + 4 drain cycles per layer + 1.
module tb_patchinr_p8;
  import patchinr_pkg::*;
  import tb_fp_pkg::*;

  // reduced network: 2 -> 24 -> 24 -> 24 -> 24 -> 192 (PATCH = 8)
  localparam int PATCH = 8, HIDDEN = 24, NUM_LAYERS = 5;
  localparam int N_QUERY = 4;
  localparam bit GAPS = 1;         // random gaps in the weight stream
  localparam int WATCHDOG = 200000;
  localparam int IN_DIM = 2, OUT_DIM = 3 * PATCH * PATCH, W_FRAC = 5;

  logic clk = 0, rst_n = 0;
  prec_mode_e mode = MODE_FP32;
  logic coord_valid = 0, coord_ready, w_valid = 0, w_ready, out_valid, out_ready = 0, busy, stall;
  word_t coord_x = '0, coord_y = '0;
  wtile_t w_tile = '0;
  word_t out_patch [OUT_DIM];

  patchinr_top #(.PATCH(PATCH), .HIDDEN(HIDDEN), .NUM_LAYERS(NUM_LAYERS)) dut (
    .clk, .rst_n, .mode, .coord_valid, .coord_ready, .coord_x, .coord_y,
    .w_valid, .w_ready, .w_tile, .out_valid, .out_ready, .out_patch, .busy, .stall);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_stall = 0, n_wfull = 0, n_outbp = 0, n_queued = 0, n_switch = 0;
  longint cycle = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- network
  function automatic int in_dim(input int l);
    return (l == 0) ? IN_DIM : HIDDEN;
  endfunction
  function automatic int out_dim(input int l);
    return (l == NUM_LAYERS - 1) ? OUT_DIM : HIDDEN;
  endfunction
  // weight (l, o, i); i == in_dim(l) is the bias
  function automatic int widx(input int l, input int o, input int i);
    int base;
    base = 0;
    for (int k = 0; k < l; k++) base += out_dim(k) * (in_dim(k) + 1);
    return base + o * (in_dim(l) + 1) + i;
  endfunction

  word_t wf [];   // FP32 weights (bit patterns)
  word_t wi [];   // INT8 weights (sign-extended)
  prec_mode_e qmode [N_QUERY];
  word_t qx [N_QUERY], qy [N_QUERY];
  int issues_per_query;

  function automatic int tiles_per_query();
    int n;
    n = 0;
    for (int l = 0; l < NUM_LAYERS; l++)
      n += ((out_dim(l) + 15) / 16) * ((in_dim(l) + 1 + 15) / 16);
    return n;
  endfunction

  initial begin
    int total;
    total = widx(NUM_LAYERS, 0, 0);
    wf = new[total];
    wi = new[total];
    for (int l = 0; l < NUM_LAYERS; l++)
      for (int o = 0; o < out_dim(l); o++)
        for (int i = 0; i <= in_dim(l); i++) begin
          real bound;
          int ib;
          // SIREN init: first layer U(-1/in, 1/in) * 30, others U(+-sqrt(6/in))
          bound = (l == 0) ? 30.0 / in_dim(l) : $sqrt(6.0 / in_dim(l));
          wf[widx(l, o, i)] = rand_fp(bound);
          ib = (l == 0) ? 127 : 8;
          wi[widx(l, o, i)] = sext8(8'(int'($urandom_range(0, 2 * ib)) - ib));
        end
    issues_per_query = tiles_per_query();
    for (int q = 0; q < N_QUERY; q++) begin
      real x, y;
      qmode[q] = (q % 3 == 1) ? MODE_INT8 : MODE_FP32;
      x = (real'($urandom) / 4294967296.0) * 2.0 - 1.0;
      y = (real'($urandom) / 4294967296.0) * 2.0 - 1.0;
      if (qmode[q] == MODE_FP32) begin
        qx[q] = real2fp(x); qy[q] = real2fp(y);
      end else begin
        qx[q] = sext8(8'(int'(x * 127.0))); qy[q] = sext8(8'(int'(y * 127.0)));
      end
    end
  end

  // reference models
  task automatic ref_fp32(input int q, output real res []);
    real a [], b [];
    a = new[2];
    a[0] = fp2real(qx[q]); a[1] = fp2real(qy[q]);
    for (int l = 0; l < NUM_LAYERS; l++) begin
      b = new[out_dim(l)];
      for (int o = 0; o < out_dim(l); o++) begin
        real s;
        s = fp2real(wf[widx(l, o, in_dim(l))]);
        for (int i = 0; i < in_dim(l); i++) s += fp2real(wf[widx(l, o, i)]) * a[i];
        b[o] = (l == NUM_LAYERS - 1) ? s : $sin(s);
      end
      a = b;
    end
    res = a;
  endtask

  task automatic ref_int8(input int q, output int res []);
    int a [], b [];
    a = new[2];
    a[0] = signed'(qx[q]); a[1] = signed'(qy[q]);
    for (int l = 0; l < NUM_LAYERS; l++) begin
      b = new[out_dim(l)];
      for (int o = 0; o < out_dim(l); o++) begin
        longint s;
        int v;
        s = longint'(signed'(wi[widx(l, o, in_dim(l))])) * 127;
        for (int i = 0; i < in_dim(l); i++) s += longint'(signed'(wi[widx(l, o, i)])) * a[i];
        if (l == NUM_LAYERS - 1) begin
          v = int'((s + (1 << (W_FRAC - 1))) >>> W_FRAC);
        end else begin
          real r;
          r = $sin(real'(s) / real'(1 << (7 + W_FRAC))) * 128.0;
          v = (r >= 0.0) ? $rtoi(r + 0.5) : -$rtoi(-r + 0.5);
        end
        if (v > 127) v = 127;
        if (v < -127) v = -127;
        b[o] = v;
      end
      a = b;
    end
    res = a;
  endtask

  // ---------------------------------------------------------------- drivers
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (stall) n_stall++;
    if (w_valid && !w_ready) n_wfull++;
    if (out_valid && !out_ready) n_outbp++;
  end

  // weight stream: the whole network once per query, in issue order
  initial begin
    wait (rst_n);
    for (int q = 0; q < N_QUERY; q++)
      for (int l = 0; l < NUM_LAYERS; l++)
        for (int ot = 0; ot < (out_dim(l) + 15) / 16; ot++)
          for (int kt = 0; kt < (in_dim(l) + 1 + 15) / 16; kt++) begin
            wtile_t t;
            for (int r = 0; r < ARRAY_ROWS; r++)
              for (int c = 0; c < ARRAY_COLS; c++) begin
                int o, i;
                o = ot * 16 + r; i = kt * 16 + c;
                if (o < out_dim(l) && i <= in_dim(l))
                  t[r][c] = (qmode[q] == MODE_FP32) ? wf[widx(l, o, i)] : wi[widx(l, o, i)];
                else
                  t[r][c] = '0;
              end
            // optional gap; a long one in query 2 lets the queue run dry
            if ((GAPS && $urandom_range(0, 99) < 10) || (q == 2 && l == 2 && ot == 0 && kt == 0)) begin
              @(negedge clk);
              w_valid = 0;
              repeat ((q == 2 && l == 2 && ot == 0 && kt == 0) ? 100 : $urandom_range(1, 3)) @(negedge clk);
            end else begin
              @(negedge clk);
            end
            // present the tile; it is taken at the first rising edge with w_ready
            w_valid = 1; w_tile = t;
            #1;
            while (!w_ready) begin
              @(negedge clk);
              #1;
            end
          end
    @(negedge clk);
    w_valid = 0;
  end

  // coordinates: all queries pushed early, so later ones wait in the queue
  initial begin
    wait (rst_n);
    for (int q = 0; q < N_QUERY; q++) begin
      @(negedge clk);
      coord_valid = 1; coord_x = qx[q]; coord_y = qy[q];
      #1;
      while (!coord_ready) begin
        @(negedge clk);
        #1;
      end
    end
    @(negedge clk);
    coord_valid = 0;
  end

  // the engine latches the mode at the start of a query: present the mode of
  // the query at the head of the queue
  int q_started = 0;
  always @(negedge clk) mode = qmode[(q_started < N_QUERY) ? q_started : N_QUERY - 1];
  always @(posedge clk) if (dut.cq_pop) q_started <= q_started + 1;

  // results
  initial begin
    longint t_start;
    real    fref [];
    int     iref [];
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int q = 0; q < N_QUERY; q++) begin
      while (!dut.cq_pop) @(negedge clk);
      t_start = cycle;
      if (q > 0 && dut.u_coord_fifo.count > 1) n_queued++;
      if (q > 0 && qmode[q] != qmode[q - 1]) n_switch++;
      do @(negedge clk); while (!out_valid);
      // the weight queue never ran dry in query 0 when gaps are off
      if (!GAPS && q == 0)
        check(cycle - t_start == longint'(1 + issues_per_query + 4 * NUM_LAYERS),
              $sformatf("latency %0d expected %0d", cycle - t_start, 1 + issues_per_query + 4 * NUM_LAYERS));
      // hold the patch for a few cycles (output back-pressure)
      repeat ((q == 3) ? 100 : q % 3) @(negedge clk);
      if (qmode[q] == MODE_FP32) begin
        real maxe;
        ref_fp32(q, fref);
        maxe = 0.0;
        for (int i = 0; i < OUT_DIM; i++) begin
          real e;
          e = absr(fp2real(out_patch[i]) - fref[i]);
          if (e > maxe) maxe = e;
          check(e <= 2.0e-3, $sformatf("q%0d fp32 out %0d got %f exp %f", q, i, fp2real(out_patch[i]), fref[i]));
        end
        $display("query %0d FP32: max abs error %e over %0d values", q, maxe, OUT_DIM);
      end else begin
        int maxe;
        ref_int8(q, iref);
        maxe = 0;
        for (int i = 0; i < OUT_DIM; i++) begin
          int e;
          e = signed'(out_patch[i]) - iref[i];
          if (e < 0) e = -e;
          if (e > maxe) maxe = e;
          check(e <= 2, $sformatf("q%0d int8 out %0d got %0d exp %0d", q, i, signed'(out_patch[i]), iref[i]));
        end
        $display("query %0d INT8: max abs error %0d LSB over %0d values", q, maxe, OUT_DIM);
      end
      out_ready = 1;
      @(negedge clk);
      out_ready = 0;
    end
    $display("mechanisms: weight stalls=%0d weight-queue full=%0d output back-pressure=%0d queued coordinates=%0d precision switches=%0d output tiles/query=%0d",
             n_stall, n_wfull, n_outbp, n_queued, n_switch, (OUT_DIM + 15) / 16);
    check(n_switch > 0, "precision switch happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
