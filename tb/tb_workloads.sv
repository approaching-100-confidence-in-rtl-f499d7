// tb_workloads: the default-size pipeline on streams shaped like the paper's datasets.
//
// The real traces are not available, so each stream is synthetic with the size of
// one dataset: 10M packets over about 0.4M flows (IP trace), 0.3M flows (web
// stream) and 20K flows (Hadoop). Flow indices are drawn log-uniformly
// (index uniform below 2^r, r uniform), which gives a heavy-tailed, roughly
// Zipf(1) flow size distribution. PKT_DIV scales the packet counts down
// (PKT_DIV = 1 is the full 10M packets per dataset).
//
// Two pipelines see the same stream: g_inst[0] is the top at its defaults (the
// hardware configuration: bucket layers only), g_inst[1] the same top with the mice
// filter in place of layer 1 (the configuration of the software experiments).
// For each dataset: reset and clear the sketches, insert the whole stream back to
// back (one packet per cycle), then query every flow once. Each query must come
// back 41 cycles later and, unless the flow went to the emergency stack, its
// interval [est - mpe, est] must hold the true count with mpe <= 25. Reported per
// dataset and pipeline: flows, outliers (|est - true| > 25), average absolute
// error (AAE), average MPE, inserts per final layer and emergency pushes.
module tb_workloads;
  import rs_pkg::*;

  localparam int unsigned D       = 7;
  localparam int unsigned LAMBDA  = 25;
  localparam int unsigned LAT     = 41;
  localparam int unsigned PKT_DIV = 1;

  logic clk = 1'b0;
  logic rst_n;
  logic in_valid;
  op_e  in_op;
  logic [KEY_W-1:0] in_key;

  int checks = 0;
  int failures = 0;
  longint cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  function automatic logic [31:0] key_of(int idx);
    return 32'h0A00_0000 ^ 32'(idx * 2654435761);
  endfunction

  // shared per-run state: true count per flow index
  int cnt[];

  for (genvar g = 0; g < 2; g++) begin : g_inst
    logic ready, out_valid, out_emerg, pop_valid, full;
    op_e  out_op;
    logic [KEY_W-1:0] out_key, pop_key;
    logic [EST_W-1:0] out_est, out_mpe;
    logic [LAYER_W-1:0] out_layer;
    logic [10:0] count;
    logic [15:0] dropped;
    layer_ev_t [D-1:0] ev;

    if (g == 0) begin : g_default
      reliable_sketch dut (
        .clk(clk), .rst_n(rst_n), .ready_o(ready),
        .in_valid_i(in_valid), .in_op_i(in_op), .in_key_i(in_key),
        .out_valid_o(out_valid), .out_op_o(out_op), .out_key_o(out_key),
        .out_est_o(out_est), .out_mpe_o(out_mpe), .out_layer_o(out_layer),
        .out_emergency_o(out_emerg),
        .pop_i(1'b0), .pop_valid_o(pop_valid), .pop_key_o(pop_key),
        .stack_count_o(count), .stack_full_o(full), .stack_dropped_o(dropped),
        .layer_ev_o(ev));
    end else begin : g_filter
      reliable_sketch #(.USE_MICE_FILTER(1'b1)) dut (
        .clk(clk), .rst_n(rst_n), .ready_o(ready),
        .in_valid_i(in_valid), .in_op_i(in_op), .in_key_i(in_key),
        .out_valid_o(out_valid), .out_op_o(out_op), .out_key_o(out_key),
        .out_est_o(out_est), .out_mpe_o(out_mpe), .out_layer_o(out_layer),
        .out_emergency_o(out_emerg),
        .pop_i(1'b0), .pop_valid_o(pop_valid), .pop_key_o(pop_key),
        .stack_count_o(count), .stack_full_o(full), .stack_dropped_o(dropped),
        .layer_ev_o(ev));
    end

    bit     em[logic [31:0]];  // keys that reached the emergency stack
    longint sent_cyc[$];
    int     sent_idx[$];
    int     n_outlier, n_pushed, n_q;
    longint sum_abs, sum_mpe;
    int     layer_hist[16];

    function automatic void clear_stats();
      em.delete();
      n_outlier = 0; n_pushed = 0; n_q = 0; sum_abs = 0; sum_mpe = 0;
      foreach (layer_hist[i]) layer_hist[i] = 0;
    endfunction

    always @(negedge clk) begin
      if (rst_n && out_valid) begin
        if (out_op == OP_INSERT) begin
          void'(sent_cyc.pop_front());
          void'(sent_idx.pop_front());
          layer_hist[int'(out_layer)]++;
          if (out_emerg) begin
            n_pushed++;
            em[out_key] = 1;
          end
        end else begin
          longint c, t, err;
          int idx;
          c   = sent_cyc.pop_front();
          idx = sent_idx.pop_front();
          t   = longint'(cnt[idx]);
          n_q++;
          err = longint'(out_est) - t;
          if (err < 0) err = -err;
          check(cycle - c == longint'(LAT), "query latency");
          check(out_key == key_of(idx), "query key");
          sum_abs += err;
          sum_mpe += longint'(out_mpe);
          if (err > longint'(LAMBDA)) n_outlier++;
          if (!out_emerg && !em.exists(key_of(idx)))
            check(longint'(out_est) - longint'(out_mpe) <= t && t <= longint'(out_est) &&
                  out_mpe <= LAMBDA,
                  $sformatf("inst %0d flow %0d true %0d est %0d mpe %0d", g, idx, t,
                            out_est, out_mpe));
        end
      end
    end
  end

  task automatic push_req(int idx);
    g_inst[0].sent_cyc.push_back(cycle);
    g_inst[0].sent_idx.push_back(idx);
    g_inst[1].sent_cyc.push_back(cycle);
    g_inst[1].sent_idx.push_back(idx);
  endtask

  task automatic run(string name, int npkts, int nflows);
    int bits;
    int n_flows;
    string nm[2];
    int    nq[2], no[2], np[2];
    longint sa[2], sm[2];
    cnt = new[nflows];
    foreach (cnt[i]) cnt[i] = 0;
    g_inst[0].clear_stats();
    g_inst[1].clear_stats();
    bits = $clog2(nflows) + 1;
    in_valid = 1'b0;
    rst_n    = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    wait (g_inst[0].ready && g_inst[1].ready);
    for (int n = 0; n < npkts; n++) begin
      int idx;
      @(negedge clk);
      idx = $urandom % (1 << ($urandom % bits));
      if (idx >= nflows) idx = $urandom % nflows;
      cnt[idx]++;
      in_valid = 1'b1;
      in_op    = OP_INSERT;
      in_key   = key_of(idx);
      push_req(idx);
    end
    // the emergency flag of an insert is known only at the output: wait for all
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LAT + 2) @(negedge clk);
    check(g_inst[0].sent_cyc.size() == 0 && g_inst[1].sent_cyc.size() == 0,
          "all inserts done");
    // keys that reached the stack are queried too, but their interval is not checked
    n_flows = 0;
    for (int i = 0; i < nflows; i++) begin
      if (cnt[i] == 0) continue;
      n_flows++;
      @(negedge clk);
      in_valid = 1'b1;
      in_op    = OP_QUERY;
      in_key   = key_of(i);
      push_req(i);
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LAT + 2) @(negedge clk);
    nm = '{"default", "mice filter"};
    nq = '{g_inst[0].n_q, g_inst[1].n_q};
    no = '{g_inst[0].n_outlier, g_inst[1].n_outlier};
    np = '{g_inst[0].n_pushed, g_inst[1].n_pushed};
    sa = '{g_inst[0].sum_abs, g_inst[1].sum_abs};
    sm = '{g_inst[0].sum_mpe, g_inst[1].sum_mpe};
    for (int g = 0; g < 2; g++) begin
      check(nq[g] == n_flows, "all queries answered");
      $display("%s (%s): packets=%0d flows=%0d outliers=%0d AAE=%0.3f avg_mpe=%0.3f emergency_pushes=%0d",
               name, nm[g], npkts, n_flows, no[g], real'(sa[g]) / n_flows,
               real'(sm[g]) / n_flows, np[g]);
    end
    $write("%s (default): inserts ending in layer 1..%0d:", name, D + 1);
    for (int i = 1; i <= D + 1; i++) $write(" %0d", g_inst[0].layer_hist[i]);
    $write("\n%s (mice filter): inserts ending in layer 1..%0d:", name, D + 1);
    for (int i = 1; i <= D + 1; i++) $write(" %0d", g_inst[1].layer_hist[i]);
    $write("\n");
  endtask

  initial begin
    in_valid = 1'b0;
    in_op    = OP_INSERT;
    in_key   = '0;
    run("ip_trace", 10_000_000 / PKT_DIV, 400_000);
    run("web_stream", 10_000_000 / PKT_DIV, 300_000);
    run("hadoop", 10_000_000 / PKT_DIV, 20_000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40_000_000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
