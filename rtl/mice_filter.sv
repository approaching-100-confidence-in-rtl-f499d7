// mice_filter: optional first stage that absorbs small flows before the bucket layers.
//
// Two arrays F1 and F2 of COUNTERS small counters each (CNT_W bits), one hash per
// array. A key maps to C1 = F1[h1(e)] and C2 = F2[h2(e)]; let m = min(C1, C2).
//   insert: m <  LAMBDA -> the key is a mouse: every mapped counter equal to m is
//                          incremented (conservative update), the key stops here
//           m == LAMBDA -> both counters are full: the key goes on to layer 2
//   query:  m <  LAMBDA -> est += m, mpe += m, stop
//           m == LAMBDA -> est += LAMBDA, mpe += LAMBDA, go on to layer 2
//   read:  OP_READ addressed to this layer returns est = F1[index], mpe = F2[index]
//          (zero past the last counter) and stops; reads for other layers pass.
// Counters never pass LAMBDA, so the filter adds at most LAMBDA (= lambda_1) to any
// key's error, the same bound as the bucket layer it replaces. The two arrays, the
// conservative update and "both counters at lambda_1 => pass" follow the paper; the
// query rule and the raw read are this design's.
//
// Timing matches es_layer exactly (LATENCY = 5, one request per cycle, two-entry
// write forwarding per array, memory cleared after reset while ready_o is low), so
// either block can be layer 1 of the pipeline.
// The filter has no bucket to vote on or replace, so the vote and replace bits of
// ev_o are always 0; they are kept so that ev_o has the layer event type.
module mice_filter
  import rs_pkg::*;
#(
  parameter int unsigned COUNTERS = 26215,
  parameter int unsigned CNT_W    = 8,
  parameter int unsigned LAMBDA   = 15,
  parameter int unsigned LAYER    = 1,
  parameter int unsigned NH       = 9,
  parameter int unsigned HSEL1    = 7,
  parameter int unsigned HSEL2    = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  output logic                      ready_o,
  input  req_t                      req_i,
  input  logic [NH-1:0][HASH_W-1:0] hashes_i,
  output req_t                      req_o,
  output logic [NH-1:0][HASH_W-1:0] hashes_o,
  output layer_ev_t                 ev_o
);

  localparam int unsigned IW = idx_bits(COUNTERS);
  typedef logic [IW-1:0]    idx_t;
  typedef logic [CNT_W-1:0] cnt_t;

  if (LAMBDA >= (1 << CNT_W)) begin : g_bad_lambda
    $error("mice_filter: LAMBDA does not fit the counters");
  end
  if (HSEL1 >= NH || HSEL2 >= NH) begin : g_bad_hsel
    $error("mice_filter: HSEL out of range");
  end

  cnt_t f1 [COUNTERS];
  cnt_t f2 [COUNTERS];

  req_t s1, s2, s3, s4;
  idx_t a1, a2, a3, a4, b1, b2, b3, b4;
  logic [NH-1:0][HASH_W-1:0] h1, h2, h3, h4;
  cnt_t ra3, ra4, rb3, rb4;
  logic r1, r2, r3, r4;          // OP_READ aimed at this layer
  logic z1, z2, z3, z4;          // ... with an index beyond the last counter

  logic w1_v, w2_v;
  idx_t w1_a, w2_a, w1_b, w2_b;
  cnt_t w1_ca, w2_ca, w1_cb, w2_cb;

  logic clr_busy;
  idx_t clr_idx;

  function automatic idx_t range_reduce(logic [HASH_W-1:0] h);
    logic [63:0] p;
    p = 64'(h) * 64'(COUNTERS);
    return idx_t'(p >> 32);
  endfunction

  logic rd_here, rd_oob;
  idx_t rd_idx;
  assign rd_here = req_i.op == OP_READ && 32'(req_i.key[KEY_W-1:RD_IDX_W]) == LAYER;
  assign rd_oob  = 32'(req_i.key[RD_IDX_W-1:0]) >= COUNTERS;
  assign rd_idx  = rd_oob ? '0 : idx_t'(req_i.key);

  always_ff @(posedge clk) begin
    s1 <= req_i;
    a1 <= rd_here ? rd_idx : range_reduce(hashes_i[HSEL1]);
    b1 <= rd_here ? rd_idx : range_reduce(hashes_i[HSEL2]);
    r1 <= rd_here; z1 <= rd_here && rd_oob;
    h1 <= hashes_i;
    s2 <= s1; a2 <= a1; b2 <= b1; h2 <= h1; r2 <= r1; z2 <= z1;
    s3 <= s2; a3 <= a2; b3 <= b2; h3 <= h2; r3 <= r2; z3 <= z2; ra3 <= f1[a2]; rb3 <= f2[b2];
    s4 <= s3; a4 <= a3; b4 <= b3; h4 <= h3; r4 <= r3; z4 <= z3; ra4 <= ra3;    rb4 <= rb3;
    if (!rst_n) begin
      s1.valid <= 1'b0;
      s2.valid <= 1'b0;
      s3.valid <= 1'b0;
      s4.valid <= 1'b0;
    end
  end

  cnt_t      ca, cb, na, nb;
  logic      we;
  req_t      res;
  layer_ev_t ev;

  always_comb begin
    cnt_t m;
    logic fwd_a, fwd_b;

    ca = ra4;
    cb = rb4;
    fwd_a = 1'b0;
    fwd_b = 1'b0;
    if (w1_v && w1_a == a4)      begin ca = w1_ca; fwd_a = 1'b1; end
    else if (w2_v && w2_a == a4) begin ca = w2_ca; fwd_a = 1'b1; end
    if (w1_v && w1_b == b4)      begin cb = w1_cb; fwd_b = 1'b1; end
    else if (w2_v && w2_b == b4) begin cb = w2_cb; fwd_b = 1'b1; end

    m   = (ca < cb) ? ca : cb;
    na  = ca;
    nb  = cb;
    we  = 1'b0;
    res = s4;
    ev  = '0;

    if (s4.valid && s4.active && (s4.op != OP_READ || r4)) begin
      res.layer = LAYER_W'(LAYER);
      ev.bypass = fwd_a || fwd_b;
      if (s4.op == OP_READ) begin
        // raw counters: F1[index] as estimate, F2[index] as MPE
        res.est    = z4 ? '0 : EST_W'(ca);
        res.mpe    = z4 ? '0 : EST_W'(cb);
        res.active = 1'b0;
      end else if (32'(m) < LAMBDA) begin
        res.active = 1'b0;
        if (s4.op == OP_INSERT) begin
          if (ca == m) na = ca + 1'b1;
          if (cb == m) nb = cb + 1'b1;
          we     = 1'b1;
          ev.hit = 1'b1;
        end else begin
          res.est = s4.est + EST_W'(m);
          res.mpe = s4.mpe + EST_W'(m);
        end
      end else begin
        ev.pass = 1'b1;
        if (s4.op == OP_QUERY) begin
          res.est = s4.est + EST_W'(LAMBDA);
          res.mpe = s4.mpe + EST_W'(LAMBDA);
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (clr_busy) begin
      f1[clr_idx] <= '0;
      f2[clr_idx] <= '0;
    end else if (we) begin
      f1[a4] <= na;
      f2[b4] <= nb;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      w1_v     <= 1'b0;
      w2_v     <= 1'b0;
      clr_busy <= 1'b1;
      clr_idx  <= '0;
    end else begin
      w1_v <= we;   w1_a <= a4;   w1_b <= b4;   w1_ca <= na;    w1_cb <= nb;
      w2_v <= w1_v; w2_a <= w1_a; w2_b <= w1_b; w2_ca <= w1_ca; w2_cb <= w1_cb;
      if (clr_busy) begin
        if (32'(clr_idx) == COUNTERS - 1) clr_busy <= 1'b0;
        clr_idx <= clr_idx + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    req_o    <= res;
    hashes_o <= h4;
    ev_o     <= ev;
    if (!rst_n) begin
      req_o.valid <= 1'b0;
      ev_o        <= '0;
    end
  end

  assign ready_o = !clr_busy;

  a_no_req_while_clearing: assert property (@(posedge clk) disable iff (!rst_n)
    req_i.valid |-> !clr_busy);

endmodule
