// tb_mice_filter: checks the two-array mice filter against a software model.
//
// Hashes are driven so that each key maps to a chosen pair of counters, with only a
// few counters in play so that keys share counters, counters reach the threshold
// and back-to-back requests hit the same counter (write forwarding). The model
// applies each request in issue order; every output must match it exactly 5 cycles
// after the request: stop or pass on, estimate and MPE for queries, events.
// Raw counter reads (OP_READ) at in-range and out-of-range indices, and reads aimed
// at another layer (which must pass untouched), are mixed in.
module tb_mice_filter;
  import rs_pkg::*;

  localparam int unsigned COUNTERS = 4;
  localparam int unsigned LAMBDA   = 6;
  localparam int unsigned NH       = 3;
  localparam int unsigned LAT      = 5;

  logic clk = 1'b0;
  logic rst_n;
  req_t req_i, req_o;
  logic rdy;
  layer_ev_t ev;
  logic [NH-1:0][HASH_W-1:0] hashes_i, hashes_o;

  int checks = 0;
  int failures = 0;
  int n_bypass = 0, n_absorb = 0, n_pass = 0, n_qpass = 0;

  mice_filter #(.COUNTERS(COUNTERS), .CNT_W(4), .LAMBDA(LAMBDA), .LAYER(1), .NH(NH),
                .HSEL1(0), .HSEL2(2)) dut (
    .clk(clk), .rst_n(rst_n), .ready_o(rdy), .req_i(req_i), .hashes_i(hashes_i),
    .req_o(req_o), .hashes_o(hashes_o), .ev_o(ev));

  always #5 clk = ~clk;

  typedef struct {
    int        cyc;
    req_t      r;
    layer_ev_t ev;
  } exp_t;

  int   f1 [COUNTERS];
  int   f2 [COUNTERS];
  exp_t expq[$];
  int   cycle = 0;

  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  function automatic logic [31:0] hash_for(int idx);
    longint unsigned lo = (longint'(idx) << 32) / COUNTERS + 1;
    return 32'(lo + ($urandom % 1000));
  endfunction

  always @(negedge clk) begin
    if (rst_n && req_o.valid) begin
      exp_t x;
      if (expq.size() == 0) check(0, "output without request");
      else begin
        x = expq.pop_front();
        check(cycle - x.cyc == LAT, $sformatf("latency %0d", cycle - x.cyc));
        check(req_o == x.r, $sformatf("key %h op %0d: got act=%b est=%0d mpe=%0d exp act=%b est=%0d mpe=%0d",
              x.r.key, x.r.op, req_o.active, req_o.est, req_o.mpe, x.r.active, x.r.est, x.r.mpe));
        check(ev.hit == x.ev.hit && ev.pass == x.ev.pass, "events");
        if (ev.bypass) n_bypass++;
        if (ev.hit) n_absorb++;
        if (ev.pass && x.r.op == OP_INSERT) n_pass++;
        if (ev.pass && x.r.op == OP_QUERY) n_qpass++;
      end
    end
  end

  task automatic send(op_e op, logic [31:0] key, int i1, int i2);
    exp_t x;
    int m;
    @(negedge clk);
    req_i        = '0;
    req_i.valid  = 1'b1;
    req_i.op     = op;
    req_i.key    = key;
    req_i.active = 1'b1;
    hashes_i[0]  = hash_for(i1);
    hashes_i[1]  = $urandom;
    hashes_i[2]  = hash_for(i2);
    x.cyc = cycle;
    x.r   = req_i;
    x.ev  = '0;
    x.r.layer = 1;
    m = (f1[i1] < f2[i2]) ? f1[i1] : f2[i2];
    if (m < LAMBDA) begin
      x.r.active = 1'b0;
      if (op == OP_INSERT) begin
        if (f1[i1] == m) f1[i1]++;
        if (f2[i2] == m) f2[i2]++;
        x.ev.hit = 1'b1;
      end else begin
        x.r.est = m;
        x.r.mpe = m;
      end
    end else begin
      x.ev.pass = 1'b1;
      if (op == OP_QUERY) begin
        x.r.est = LAMBDA;
        x.r.mpe = LAMBDA;
      end
    end
    expq.push_back(x);
  endtask

  int n_read = 0;

  task automatic send_read(int tl, int ti);
    exp_t x;
    @(negedge clk);
    req_i        = '0;
    req_i.valid  = 1'b1;
    req_i.op     = OP_READ;
    req_i.key    = read_addr(8'(tl), 24'(ti));
    req_i.active = 1'b1;
    hashes_i[0]  = $urandom;
    hashes_i[1]  = $urandom;
    hashes_i[2]  = $urandom;
    x.cyc = cycle;
    x.r   = req_i;
    x.ev  = '0;
    if (tl == 1) begin
      n_read++;
      x.r.layer  = 1;
      x.r.active = 1'b0;
      x.r.est    = (ti < COUNTERS) ? 32'(f1[ti]) : 0;
      x.r.mpe    = (ti < COUNTERS) ? 32'(f2[ti]) : 0;
    end
    expq.push_back(x);
  endtask

  initial begin
    req_i    = '0;
    hashes_i = '0;
    for (int i = 0; i < COUNTERS; i++) begin f1[i] = 0; f2[i] = 0; end
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!rdy, "not ready while clearing");
    wait (rdy);
    for (int i = 0; i < COUNTERS; i++) send(OP_QUERY, i, i, i);
    for (int n = 0; n < 1500; n++) begin
      int k;
      k = $urandom % 12;
      if ($urandom % 6 == 0) begin
        @(negedge clk);
        req_i = '0;
      end
      if ($urandom % 10 == 0) begin
        send_read(($urandom % 4 == 0) ? 2 : 1, $urandom % (COUNTERS + 2));
        continue;
      end
      // key k always maps to the same counter pair; the twelve pairs differ, so
      // the two counters of a key often hold different values
      send(($urandom % 3 == 0) ? OP_QUERY : OP_INSERT, 32'h500 + k, k % COUNTERS,
           (k + k / COUNTERS) % COUNTERS);
    end
    @(negedge clk);
    req_i = '0;
    repeat (LAT + 3) @(posedge clk);
    check(expq.size() == 0, "all requests answered");
    check(n_bypass > 0, "forwarding exercised");
    check(n_absorb > 0, "absorb exercised");
    check(n_pass > 0,   "insert pass exercised");
    check(n_qpass > 0,  "query pass exercised");
    check(n_read > 0,   "raw reads exercised");
    $display("events: bypass=%0d absorb=%0d pass=%0d qpass=%0d", n_bypass, n_absorb, n_pass, n_qpass);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
