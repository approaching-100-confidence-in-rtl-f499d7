// tb_reliable_sketch: end-to-end test of the ReliableSketch pipeline at reduced size.
//
// Two pipelines run on the same request stream: the plain one (D = 7 layers of
// buckets) and one with the mice filter as layer 1. Both use W = 128 buckets
// (layer widths 64 32 16 8 4 2 1; with the filter 2 x 32 counters, then
// 61 31 16 8 4 2), LAMBDA = 25 (thresholds 15 6 2 0 0 0 0) and an
// 8-entry emergency stack, so that with ~1000 skewed flows every mechanism happens
// often: hits, NO votes, ID replacement, locked buckets passing keys on, write
// forwarding, keys reaching the last layer, emergency pushes, a full stack dropping
// keys, stack pops, mice-filter absorb and pass, raw bucket reads.
//
// For every request the testbench checks, against rs_model_pkg:
//   - the result appears exactly 41 cycles (6 + 5*D) after the request;
//   - estimate, MPE, layer and emergency flag equal the model's;
//   - for a query of a key that never reached the stack: the true count lies in
//     [est - mpe, est] and mpe <= LAMBDA (the paper's guarantee).
// The stack is checked against a LIFO model cycle by cycle. Each mechanism must
// have happened at least once.
module tb_reliable_sketch;
  import rs_pkg::*;
  import rs_model_pkg::*;

  localparam int unsigned D      = 7;
  localparam int unsigned W      = 128;
  localparam int unsigned LAMBDA = 25;
  localparam int unsigned SD     = 8;
  localparam int unsigned LAT    = 6 + 5 * D;
  localparam int unsigned NOPS   = 8000;

  logic clk = 1'b0;
  logic rst_n;
  logic in_valid;
  op_e  in_op;
  logic [KEY_W-1:0] in_key;
  logic pop;

  int checks = 0;
  int failures = 0;
  int cycle = 0;
  int true_cnt [int];
  bit stacked  [int];   // keys that were pushed to the emergency stack (per instance)
  bit stacked1 [int];

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  typedef struct {
    int          cyc;
    op_e         op;
    bit          is_query;
    logic [31:0] key;
    mres_t       r;
    int          truth;
  } exp_t;

  for (genvar g = 0; g < 2; g++) begin : g_inst
    logic ready, out_valid, out_emerg, pop_valid, full;
    op_e  out_op;
    logic [KEY_W-1:0] out_key, pop_key;
    logic [EST_W-1:0] out_est, out_mpe;
    logic [LAYER_W-1:0] out_layer;
    logic [$clog2(SD+1)-1:0] count;
    logic [15:0] dropped;
    layer_ev_t [D-1:0] ev;

    reliable_sketch #(.D(D), .W(W), .LAMBDA(LAMBDA), .USE_MICE_FILTER(g == 1),
                      .STACK_DEPTH(SD)) dut (
      .clk(clk), .rst_n(rst_n), .ready_o(ready),
      .in_valid_i(in_valid), .in_op_i(in_op), .in_key_i(in_key),
      .out_valid_o(out_valid), .out_op_o(out_op), .out_key_o(out_key),
      .out_est_o(out_est), .out_mpe_o(out_mpe), .out_layer_o(out_layer),
      .out_emergency_o(out_emerg),
      .pop_i(pop), .pop_valid_o(pop_valid), .pop_key_o(pop_key),
      .stack_count_o(count), .stack_full_o(full), .stack_dropped_o(dropped),
      .layer_ev_o(ev));

    sketch_model model;
    exp_t expq[$];
    logic [31:0] stk[$];
    int  stk_drop = 0;
    bit  exp_pop_v = 0;
    logic [31:0] exp_pop_k;
    // mechanism counters
    int n_hit = 0, n_vote = 0, n_replace = 0, n_pass = 0, n_bypass = 0, n_last = 0;
    int n_push = 0, n_drop = 0, n_pop = 0, n_query = 0, n_absorb = 0, n_fpass = 0;
    int n_read = 0;
    int n_interval = 0;

    // with the filter, layers 2..7 share the 121 buckets left after the filter's
    // 2 x 32 8-bit counters (7 buckets' worth): ceil(121 / 2^(i-1))
    initial begin
      if (g == 0) model = new(D, '{64, 32, 16, 8, 4, 2, 1}, '{15, 6, 2, 0, 0, 0, 0}, 1'b0);
      else        model = new(D, '{64, 61, 31, 16, 8, 4, 2}, '{15, 6, 2, 0, 0, 0, 0}, 1'b1);
    end

    always @(negedge clk) begin
      if (rst_n) begin
        for (int j = 0; j < D; j++) begin
          if (g == 1 && j == 0) begin
            if (ev[j].hit) n_absorb++;
            if (ev[j].pass) n_fpass++;
          end else begin
            if (ev[j].hit) n_hit++;
            if (ev[j].vote) n_vote++;
            if (ev[j].replace) n_replace++;
            if (ev[j].pass) n_pass++;
          end
          if (ev[j].bypass) n_bypass++;
        end
        // stack: pop result from the previous cycle
        check(pop_valid == exp_pop_v, "pop_valid");
        if (exp_pop_v) begin
          check(pop_key == exp_pop_k, $sformatf("popped %h exp %h", pop_key, exp_pop_k));
          n_pop++;
        end
        check(32'(count) == stk.size() && 32'(dropped) == stk_drop, "stack count/drops");
        if (out_valid) begin
          exp_t x;
          if (expq.size() == 0) check(0, "result without request");
          else begin
            x = expq.pop_front();
            check(cycle - x.cyc == LAT, $sformatf("latency %0d", cycle - x.cyc));
            check(out_key == x.r.key && out_op == x.op, "key/op");
            check(64'(out_est) == x.r.est && 64'(out_mpe) == x.r.mpe &&
                  32'(out_layer) == x.r.layer && out_emerg == x.r.emergency,
                  $sformatf("inst %0d key %h q=%0d: got est=%0d mpe=%0d layer=%0d em=%b exp est=%0d mpe=%0d layer=%0d em=%b",
                            g, x.key, x.is_query, out_est, out_mpe, out_layer, out_emerg,
                            x.r.est, x.r.mpe, x.r.layer, x.r.emergency));
            if (x.op == OP_READ) n_read++;
            else if (x.is_query) begin
              n_query++;
              if (!x.r.emergency && !(g == 0 ? stacked.exists(int'(x.key)) : stacked1.exists(int'(x.key)))) begin
                n_interval++;
                check(longint'(out_est) - longint'(out_mpe) <= x.truth && x.truth <= longint'(out_est)
                      && out_mpe <= LAMBDA,
                      $sformatf("interval key %h true %0d est %0d mpe %0d", x.key, x.truth, out_est, out_mpe));
              end
            end else if (out_layer == LAYER_W'(D)) n_last++;
          end
        end
        // stack model: the push of this cycle's result and the pop now driven
        // take effect together at the next clock edge
        begin
          bit do_push;
          do_push   = out_valid && out_emerg && out_op == OP_INSERT;
          exp_pop_v = pop && stk.size() > 0;
          if (do_push && pop && stk.size() > 0) begin
            exp_pop_k = stk.pop_back();
            stk.push_back(out_key);
          end else if (pop && stk.size() > 0) begin
            exp_pop_k = stk.pop_back();
          end else if (do_push && stk.size() < SD) begin
            stk.push_back(out_key);
          end else if (do_push) begin
            stk_drop++;
            n_drop++;
          end
          if (do_push) n_push++;
        end
      end
    end
  end

  // issue one request to both pipelines
  task automatic send(bit is_query, logic [31:0] key);
    exp_t x0, x1;
    in_valid = 1'b1;
    in_op    = is_query ? OP_QUERY : OP_INSERT;
    in_key   = key;
    x0.cyc = cycle; x0.is_query = is_query; x0.key = key;
    x0.op = is_query ? OP_QUERY : OP_INSERT;
    x0.truth = true_cnt.exists(int'(key)) ? true_cnt[int'(key)] : 0;
    x1 = x0;
    x0.r = g_inst[0].model.apply(is_query, key);
    x1.r = g_inst[1].model.apply(is_query, key);
    if (!is_query) begin
      true_cnt[int'(key)] = x0.truth + 1;
      if (x0.r.emergency) stacked[int'(key)] = 1;
      if (x1.r.emergency) stacked1[int'(key)] = 1;
    end
    g_inst[0].expq.push_back(x0);
    g_inst[1].expq.push_back(x1);
  endtask

  // raw read of bucket idx in layer l by both pipelines
  task automatic send_read(int l, int idx);
    exp_t x0, x1;
    in_valid = 1'b1;
    in_op    = OP_READ;
    in_key   = read_addr(8'(l), 24'(idx));
    x0.cyc = cycle; x0.is_query = 1'b0; x0.key = in_key; x0.op = OP_READ; x0.truth = 0;
    x1 = x0;
    x0.r = g_inst[0].model.read(l, idx);
    x1.r = g_inst[1].model.read(l, idx);
    g_inst[0].expq.push_back(x0);
    g_inst[1].expq.push_back(x1);
  endtask

  initial begin
    in_valid = 1'b0;
    in_op    = OP_INSERT;
    in_key   = '0;
    pop      = 1'b0;
    rst_n    = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!g_inst[0].ready && !g_inst[1].ready, "busy clearing after reset");
    wait (g_inst[0].ready && g_inst[1].ready);
    check(cycle < 80, $sformatf("clear took %0d cycles", cycle));
    for (int n = 0; n < NOPS; n++) begin
      logic [31:0] key;
      int sel;
      @(negedge clk);
      in_valid = 1'b0;
      pop      = ($urandom % 9 == 0);
      if ($urandom % 10 == 0) continue;            // idle cycle
      if ($urandom % 25 == 0) begin                // raw read, sometimes out of range
        send_read(int'($urandom % (D + 2)), int'($urandom % 80));
        continue;
      end
      sel = $urandom % (1 << (1 + $urandom % 10)); // skewed flow sizes
      key = 32'h0A00_0000 + 32'(sel * 2654435761);
      send(($urandom % 5 == 0), key);
    end
    @(negedge clk);
    in_valid = 1'b0;
    // query every flow once at the end
    foreach (true_cnt[k]) begin
      @(negedge clk);
      pop = 1'b0;
      send(1'b1, 32'(k));
    end
    @(negedge clk);
    in_valid = 1'b0;
    pop = 1'b1;
    repeat (LAT + SD + 4) @(negedge clk);
    pop = 1'b0;
    @(negedge clk);

    for (int g = 0; g < 2; g++) begin
      // mechanism coverage
      int c[13];
      string nm[13];
      nm = '{"hit", "vote", "replace", "pass", "bypass", "last layer", "stack push",
             "stack drop", "pop", "query", "filter absorb", "filter pass", "raw read"};
      if (g == 0) c = '{g_inst[0].n_hit, g_inst[0].n_vote, g_inst[0].n_replace, g_inst[0].n_pass,
                         g_inst[0].n_bypass, g_inst[0].n_last, g_inst[0].n_push, g_inst[0].n_drop,
                         g_inst[0].n_pop, g_inst[0].n_query, 1, 1, g_inst[0].n_read};
      else        c = '{g_inst[1].n_hit, g_inst[1].n_vote, g_inst[1].n_replace, g_inst[1].n_pass,
                         g_inst[1].n_bypass, g_inst[1].n_last, g_inst[1].n_push, g_inst[1].n_drop,
                         g_inst[1].n_pop, g_inst[1].n_query, g_inst[1].n_absorb, g_inst[1].n_fpass,
                         g_inst[1].n_read};
      for (int i = 0; i < 13; i++) begin
        check(c[i] > 0, $sformatf("instance %0d: mechanism '%s' never happened", g, nm[i]));
        $display("instance %0d  %-14s %0d", g, nm[i], c[i]);
      end
    end
    check(g_inst[0].expq.size() == 0 && g_inst[1].expq.size() == 0, "all requests answered");
    check(g_inst[0].n_interval > 100 && g_inst[1].n_interval > 100, "interval checks made");
    $display("flows=%0d interval checks=%0d/%0d", true_cnt.size(), g_inst[0].n_interval,
             g_inst[1].n_interval);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
