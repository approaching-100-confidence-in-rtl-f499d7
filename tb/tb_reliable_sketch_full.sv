// tb_reliable_sketch_full: the ReliableSketch pipeline at its default size.
//
// The top is instantiated with no parameter overrides: D = 7 layers holding
// 1 MB of 80-bit buckets (widths 52429 26215 13108 6554 3277 1639 820),
// LAMBDA = 25 (thresholds 15 6 2 0 0 0 0), no mice filter, a 1024-entry stack.
// After the memory clear (52429 cycles), a synthetic skewed stream of NPKTS
// packets over up to NFLOWS flows is inserted back to back with queries mixed in;
// then every flow is queried once. Every result is compared with rs_model_pkg,
// the latency must be 41 cycles, and every query of a key that never reached the
// stack must bracket the true count with mpe <= 25. The run also reports how many
// flows ended in each layer and how many keys needed the emergency stack. At the
// end, 64 random buckets of every layer are read out raw and compared with the
// model's buckets.
module tb_reliable_sketch_full;
  import rs_pkg::*;
  import rs_model_pkg::*;

  localparam int unsigned D      = 7;
  localparam int unsigned LAMBDA = 25;
  localparam int unsigned LAT    = 41;
  localparam int unsigned NPKTS  = 400000;
  localparam int unsigned NFLOWS = 100000;

  logic clk = 1'b0;
  logic rst_n;
  logic in_valid;
  op_e  in_op;
  logic [KEY_W-1:0] in_key;
  logic pop = 1'b0;

  logic ready, out_valid, out_emerg, pop_valid, full;
  op_e  out_op;
  logic [KEY_W-1:0] out_key, pop_key;
  logic [EST_W-1:0] out_est, out_mpe;
  logic [LAYER_W-1:0] out_layer;
  logic [10:0] count;
  logic [15:0] dropped;
  layer_ev_t [D-1:0] ev;

  reliable_sketch dut (
    .clk(clk), .rst_n(rst_n), .ready_o(ready),
    .in_valid_i(in_valid), .in_op_i(in_op), .in_key_i(in_key),
    .out_valid_o(out_valid), .out_op_o(out_op), .out_key_o(out_key),
    .out_est_o(out_est), .out_mpe_o(out_mpe), .out_layer_o(out_layer),
    .out_emergency_o(out_emerg),
    .pop_i(pop), .pop_valid_o(pop_valid), .pop_key_o(pop_key),
    .stack_count_o(count), .stack_full_o(full), .stack_dropped_o(dropped),
    .layer_ev_o(ev));

  int checks = 0;
  int failures = 0;
  int cycle = 0;
  int true_cnt [int];
  bit stacked  [int];
  int last_layer [int];   // layer that took each flow's latest packet
  int layer_hist [D+2];

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
    bit          is_query;
    logic [31:0] key;
    mres_t       r;
    int          truth;
  } exp_t;

  sketch_model model;
  exp_t expq[$];
  int n_query = 0, n_interval = 0, n_pushed = 0, n_bypass = 0, n_pass = 0, n_replace = 0;
  int max_mpe = 0;

  initial model = new(D, '{52429, 26215, 13108, 6554, 3277, 1639, 820},
                      '{15, 6, 2, 0, 0, 0, 0}, 1'b0);

  always @(negedge clk) begin
    if (rst_n) begin
      for (int j = 0; j < D; j++) begin
        if (ev[j].bypass) n_bypass++;
        if (ev[j].pass) n_pass++;
        if (ev[j].replace) n_replace++;
      end
      if (out_valid) begin
        exp_t x;
        if (expq.size() == 0) check(0, "result without request");
        else begin
          x = expq.pop_front();
          check(cycle - x.cyc == LAT, $sformatf("latency %0d", cycle - x.cyc));
          check(out_key == x.key && (out_op == OP_QUERY) == x.is_query, "key/op");
          check(64'(out_est) == x.r.est && 64'(out_mpe) == x.r.mpe &&
                32'(out_layer) == x.r.layer && out_emerg == x.r.emergency,
                $sformatf("key %h q=%0d: got est=%0d mpe=%0d layer=%0d em=%b exp est=%0d mpe=%0d layer=%0d em=%b",
                          x.key, x.is_query, out_est, out_mpe, out_layer, out_emerg,
                          x.r.est, x.r.mpe, x.r.layer, x.r.emergency));
          if (x.is_query) begin
            n_query++;
            if (!x.r.emergency && !stacked.exists(int'(x.key))) begin
              n_interval++;
              if (int'(out_mpe) > max_mpe) max_mpe = int'(out_mpe);
              check(longint'(out_est) - longint'(out_mpe) <= x.truth && x.truth <= longint'(out_est)
                    && out_mpe <= LAMBDA,
                    $sformatf("interval key %h true %0d est %0d mpe %0d", x.key, x.truth, out_est, out_mpe));
            end
          end else if (out_emerg) n_pushed++;
        end
      end
    end
  end

  task automatic send(bit is_query, logic [31:0] key);
    exp_t x;
    in_valid = 1'b1;
    in_op    = is_query ? OP_QUERY : OP_INSERT;
    in_key   = key;
    x.cyc = cycle; x.is_query = is_query; x.key = key;
    x.truth = true_cnt.exists(int'(key)) ? true_cnt[int'(key)] : 0;
    x.r = model.apply(is_query, key);
    if (!is_query) begin
      true_cnt[int'(key)] = x.truth + 1;
      last_layer[int'(key)] = x.r.layer;
      if (x.r.emergency) stacked[int'(key)] = 1;
    end
    expq.push_back(x);
  endtask

  int n_read = 0;

  task automatic send_read(int l, int idx);
    exp_t x;
    in_valid = 1'b1;
    in_op    = OP_READ;
    in_key   = read_addr(8'(l), 24'(idx));
    x.cyc = cycle; x.is_query = 1'b0; x.truth = 0;
    x.r   = model.read(l, idx);
    x.key = x.r.key;
    expq.push_back(x);
    n_read++;
  endtask

  initial begin
    in_valid = 1'b0;
    in_op    = OP_INSERT;
    in_key   = '0;
    rst_n    = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!ready, "busy clearing after reset");
    wait (ready);
    check(cycle > 52429 && cycle < 52450, $sformatf("clear took %0d cycles", cycle));
    for (int n = 0; n < NPKTS; n++) begin
      int sel, r;
      @(negedge clk);
      // skewed flow choice: the flow index is uniform within a random number of bits
      r   = $urandom % 17;
      sel = $urandom % (1 << r);
      if (sel >= NFLOWS) sel = sel % NFLOWS;
      send(($urandom % 8 == 0), 32'h0A00_0000 ^ 32'(sel * 2654435761));
    end
    foreach (true_cnt[k]) begin
      @(negedge clk);
      send(1'b1, 32'(k));
    end
    for (int l = 1; l <= D; l++) begin
      for (int n = 0; n < 64; n++) begin
        @(negedge clk);
        send_read(l, int'($urandom % (52429 >> (l - 1))));
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LAT + 4) @(negedge clk);

    foreach (last_layer[k]) layer_hist[last_layer[k]]++;
    for (int i = 1; i <= D + 1; i++) $display("flows ending in layer %0d: %0d", i, layer_hist[i]);
    $display("packets=%0d flows=%0d queries=%0d interval checks=%0d max mpe=%0d stack pushes=%0d",
             NPKTS, true_cnt.size(), n_query, n_interval, max_mpe, n_pushed);
    $display("events: replace=%0d pass=%0d bypass=%0d", n_replace, n_pass, n_bypass);
    check(expq.size() == 0, "all requests answered");
    check(n_interval > 1000, "interval checks made");
    check(n_replace > 0 && n_pass > 0 && n_bypass > 0, "replacement, locking and forwarding happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
