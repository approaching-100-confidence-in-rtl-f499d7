// tb_es_layer: checks one layer of Error-Sensible buckets against a software model.
//
// Two layers run side by side on the same stimulus: one with a lock threshold of 3
// and one with threshold 0 (an exact layer, as the deepest layers of the default
// configuration are). The hash input is chosen so that only a handful of buckets
// are used and back-to-back requests often hit the same bucket, which exercises
// the write forwarding. The model applies each request in issue order; every output
// must match it field by field (active, estimate, MPE, layer, events) exactly 5
// cycles after the request. Memory clearing after reset is checked by querying
// every bucket first. Raw bucket reads (OP_READ) are mixed in, aimed at either
// layer, at both in-range and out-of-range indices, and must return the model's
// bucket including writes still in flight.
module tb_es_layer;
  import rs_pkg::*;

  localparam int unsigned BUCKETS = 5;
  localparam int unsigned NH      = 2;
  localparam int unsigned LAT     = 5;
  localparam int unsigned NKEYS   = 9;

  logic clk = 1'b0;
  logic rst_n;
  req_t req_i;
  logic [NH-1:0][HASH_W-1:0] hashes_i;
  logic      rdy_a, rdy_b;
  req_t      out_a, out_b;
  layer_ev_t ev_a, ev_b;
  logic [NH-1:0][HASH_W-1:0] ho_a, ho_b;

  int checks = 0;
  int failures = 0;
  int n_bypass = 0, n_replace = 0, n_pass = 0, n_hit = 0, n_vote = 0;

  es_layer #(.BUCKETS(BUCKETS), .LAMBDA(3), .LAYER(2), .NH(NH), .HSEL(1)) dut_a (
    .clk(clk), .rst_n(rst_n), .ready_o(rdy_a), .req_i(req_i), .hashes_i(hashes_i),
    .req_o(out_a), .hashes_o(ho_a), .ev_o(ev_a));

  es_layer #(.BUCKETS(BUCKETS), .LAMBDA(0), .LAYER(5), .NH(NH), .HSEL(1)) dut_b (
    .clk(clk), .rst_n(rst_n), .ready_o(rdy_b), .req_i(req_i), .hashes_i(hashes_i),
    .req_o(out_b), .hashes_o(ho_b), .ev_o(ev_b));

  always #5 clk = ~clk;

  typedef struct {
    logic [31:0] id;
    int          yes;
    int          no;
  } mb_t;

  typedef struct {
    int        cyc;
    req_t      r;
    layer_ev_t ev;
    logic [NH-1:0][HASH_W-1:0] h;
  } exp_t;

  mb_t  model_a [BUCKETS];
  mb_t  model_b [BUCKETS];
  exp_t exp_a[$], exp_b[$];
  int   cycle = 0;
  int   outputs = 0;

  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  // Reference behaviour of one bucket for one request.
  task automatic model_step(ref mb_t b, input int lambda, input int layer,
                                     input req_t r, output req_t o, output layer_ev_t e);
    o = r;
    e = '0;
    if (!(r.valid && r.active) || r.op == OP_READ) return;
    o.layer = LAYER_W'(layer);
    if (r.op == OP_INSERT) begin
      if (b.yes == 0) begin
        b.id = r.key; b.yes = 1; b.no = 0; o.active = 0; e.replace = 1;
      end else if (b.id == r.key) begin
        b.yes++; o.active = 0; e.hit = 1;
      end else if (b.no >= lambda) begin
        e.pass = 1;
      end else begin
        b.no++;
        if (b.no > b.yes) begin
          int t = b.yes;
          b.yes = b.no; b.no = t; b.id = r.key; e.replace = 1;
        end else e.vote = 1;
        o.active = 0;
      end
    end else begin
      if (b.yes != 0 && b.id == r.key) begin
        o.est = r.est + b.yes; o.mpe = r.mpe + b.no; o.active = 0;
      end else begin
        o.est = r.est + b.no; o.mpe = r.mpe + b.no;
        o.active = (b.yes != 0) && (b.no >= lambda);
        e.pass = o.active;
      end
    end
  endtask

  function automatic logic [31:0] hash_for(int idx);
    // any hash in [idx, idx+1) * 2^32 / BUCKETS maps to bucket idx
    longint unsigned lo = (longint'(idx) << 32) / BUCKETS + 1;
    return 32'(lo + ($urandom % 1000));
  endfunction

  task automatic compare(string nm, req_t got, layer_ev_t gev,
                                  logic [NH-1:0][HASH_W-1:0] gh, ref exp_t q[$]);
    exp_t x;
    if (q.size() == 0) begin
      check(0, {nm, ": output without request"});
      return;
    end
    x = q.pop_front();
    check(cycle - x.cyc == LAT, $sformatf("%s latency %0d", nm, cycle - x.cyc));
    check(got == x.r, $sformatf("%s key %h op %0d: got act=%b est=%0d mpe=%0d layer=%0d exp act=%b est=%0d mpe=%0d layer=%0d",
          nm, x.r.key, x.r.op, got.active, got.est, got.mpe, got.layer,
          x.r.active, x.r.est, x.r.mpe, x.r.layer));
    check(gev.hit == x.ev.hit && gev.vote == x.ev.vote && gev.replace == x.ev.replace &&
          gev.pass == x.ev.pass, $sformatf("%s events got %b exp %b", nm, gev, x.ev));
    check(gh == x.h, {nm, ": hashes carried"});
  endtask

  always @(negedge clk) begin
    if (rst_n && out_a.valid) begin
      outputs++;
      compare("A", out_a, ev_a, ho_a, exp_a);
      if (ev_a.bypass) n_bypass++;
      if (ev_a.replace) n_replace++;
      if (ev_a.pass) n_pass++;
      if (ev_a.hit) n_hit++;
      if (ev_a.vote) n_vote++;
    end
    if (rst_n && out_b.valid) compare("B", out_b, ev_b, ho_b, exp_b);
  end

  task automatic send(op_e op, logic [31:0] key, int idx, bit active);
    exp_t xa, xb;
    @(negedge clk);
    req_i        = '0;
    req_i.valid  = 1'b1;
    req_i.op     = op;
    req_i.key    = key;
    req_i.active = active;
    req_i.est    = 32'($urandom % 50);
    req_i.mpe    = 32'($urandom % 20);
    req_i.layer  = 1;
    hashes_i[0]  = $urandom;
    hashes_i[1]  = hash_for(idx);
    xa.cyc = cycle; xa.h = hashes_i;
    xb.cyc = cycle; xb.h = hashes_i;
    model_step(model_a[idx], 3, 2, req_i, xa.r, xa.ev);
    model_step(model_b[idx], 0, 5, req_i, xb.r, xb.ev);
    exp_a.push_back(xa);
    exp_b.push_back(xb);
  endtask

  // model of a raw read as seen by one layer
  function automatic req_t model_read(mb_t m[BUCKETS], int layer, req_t r, int tl, int ti);
    req_t o;
    o = r;
    if (tl != layer) return o;
    o.layer  = LAYER_W'(layer);
    o.active = 1'b0;
    if (ti >= BUCKETS) begin
      o.key = '0; o.est = '0; o.mpe = '0;
    end else begin
      o.key = m[ti].id; o.est = 32'(m[ti].yes); o.mpe = 32'(m[ti].no);
    end
    return o;
  endfunction

  int n_read = 0;

  task automatic send_read(int tl, int ti);
    exp_t xa, xb;
    @(negedge clk);
    req_i        = '0;
    req_i.valid  = 1'b1;
    req_i.op     = OP_READ;
    req_i.key    = read_addr(8'(tl), 24'(ti));
    req_i.active = 1'b1;
    req_i.layer  = 1;
    hashes_i[0]  = $urandom;
    hashes_i[1]  = $urandom;
    xa.cyc = cycle; xa.h = hashes_i; xa.ev = '0;
    xb.cyc = cycle; xb.h = hashes_i; xb.ev = '0;
    xa.r = model_read(model_a, 2, req_i, tl, ti);
    xb.r = model_read(model_b, 5, req_i, tl, ti);
    if (tl == 2 || tl == 5) n_read++;
    exp_a.push_back(xa);
    exp_b.push_back(xb);
  endtask

  task automatic idle();
    @(negedge clk);
    req_i = '0;
  endtask

  initial begin
    req_i    = '0;
    hashes_i = '0;
    for (int i = 0; i < BUCKETS; i++) begin
      model_a[i] = '{id: 0, yes: 0, no: 0};
      model_b[i] = '{id: 0, yes: 0, no: 0};
    end
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!rdy_a && !rdy_b, "not ready while clearing");
    wait (rdy_a && rdy_b);
    // cleared memory reads as empty
    for (int i = 0; i < BUCKETS; i++) send(OP_QUERY, 32'h1000 + i, i, 1'b1);
    // inactive requests pass untouched
    send(OP_INSERT, 32'h77, 0, 1'b0);
    // random traffic: few keys, few buckets, mostly back to back
    for (int n = 0; n < 3000; n++) begin
      int idx;
      logic [31:0] key;
      idx = (n % 7 < 4) ? 0 : $urandom % BUCKETS;
      key = 32'h100 + ($urandom % NKEYS);
      if ($urandom % 8 == 0) idle();
      if ($urandom % 10 == 0) begin
        send_read(($urandom % 2) ? 2 : (($urandom % 4 == 0) ? 3 : 5),
                  ($urandom % 8 == 0) ? BUCKETS + ($urandom % 100) : idx);
        continue;
      end
      send(($urandom % 3 == 0) ? OP_QUERY : OP_INSERT, key, idx, 1'b1);
    end
    idle();
    repeat (LAT + 3) @(posedge clk);
    check(exp_a.size() == 0 && exp_b.size() == 0, "all requests answered");
    check(n_bypass > 0,  "forwarding exercised");
    check(n_replace > 0, "replacement exercised");
    check(n_pass > 0,    "locking exercised");
    check(n_hit > 0,     "hit exercised");
    check(n_vote > 0,    "vote exercised");
    check(n_read > 0,    "raw reads exercised");
    $display("events: bypass=%0d replace=%0d pass=%0d hit=%0d vote=%0d outputs=%0d",
             n_bypass, n_replace, n_pass, n_hit, n_vote, outputs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
