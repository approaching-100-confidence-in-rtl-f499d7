// es_layer: one layer of Error-Sensible buckets (bucket memory + update pipeline).
//
// Every bucket holds a candidate flow ID, a YES counter (packets of ID) and a NO
// counter (packets of other flows that hit the bucket). NO bounds the error of
// whatever the bucket reports, so once NO reaches the layer's threshold LAMBDA the
// bucket is locked: its ID can no longer change and keys other than ID pass on to
// the next layer.
//
// Insert of key e into bucket B = mem[h(e)]:
//   B empty (YES = 0)      -> ID = e, YES = 1                      (recorded here)
//   B.ID == e              -> YES += 1                             (recorded here)
//   B locked (NO >= LAMBDA)-> bucket unchanged, e goes on          (pass)
//   otherwise              -> NO += 1; if NO now exceeds YES, ID = e and
//                             YES/NO swap                          (recorded here)
// Query of key e adds to the running estimate / maximum possible error (MPE):
//   B.ID == e              -> est += YES, mpe += NO, stop
//   otherwise              -> est += NO,  mpe += NO, go on only if B is locked
// Raw read (OP_READ, key = {layer, index}, addressed to this layer): the bucket at
// that index is returned as key = ID, est = YES, mpe = NO (all zero for an index
// past the last bucket) and the request stops. OP_READ requests for other layers
// pass through untouched.
// The field set, the replacement rule (replace when NO >= YES) and locking by a
// per-layer threshold follow the paper; the exact order of the steps above, the
// lock test "NO >= LAMBDA" and the empty-bucket test are this design's reading of it;
// the raw read port is this design's way to let a controller read the sketch out.
//
// Pipeline, a new request every cycle, LATENCY = 5 cycles from req_i to req_o:
//   s1: index = (hash * BUCKETS) >> 32 (multiply-shift range reduction)
//   s2: address register
//   s3: memory read data
//   s4: memory output register; compute; write back at the end of the cycle
// The two requests ahead of a request write the bucket after it was read, so their
// writes are kept in a two-entry history and forwarded (the "bypass" event).
// After reset the memory is cleared, one bucket per cycle; ready_o rises when done
// and requests must not be sent before.
module es_layer
  import rs_pkg::*;
#(
  parameter int unsigned BUCKETS = 52429,
  parameter int unsigned LAMBDA  = 15,
  parameter int unsigned LAYER   = 1,
  parameter int unsigned NH      = 7,
  parameter int unsigned HSEL    = 0
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

  localparam int unsigned IW = idx_bits(BUCKETS);
  typedef logic [IW-1:0] idx_t;

  // NO never exceeds LAMBDA except through a swap, and a swap only moves a YES
  // value below LAMBDA into NO, so NO_W bits suffice.
  if (LAMBDA >= (1 << NO_W)) begin : g_bad_lambda
    $error("es_layer: LAMBDA does not fit the NO counter");
  end
  if (HSEL >= NH) begin : g_bad_hsel
    $error("es_layer: HSEL out of range");
  end

  bucket_t mem [BUCKETS];

  // ---------------- pipeline registers ----------------
  req_t s1, s2, s3, s4;
  idx_t i1, i2, i3, i4;
  logic r1, r2, r3, r4;          // OP_READ aimed at this layer
  logic z1, z2, z3, z4;          // ... with an index beyond the last bucket
  logic [NH-1:0][HASH_W-1:0] h1, h2, h3, h4;
  bucket_t rd3, rd4;

  // write history (writes at the last and the second-to-last clock edge)
  logic    w1_v, w2_v;
  idx_t    w1_i, w2_i;
  bucket_t w1_d, w2_d;

  // clear sweep after reset
  logic clr_busy;
  idx_t clr_idx;

  function automatic idx_t range_reduce(logic [HASH_W-1:0] h);
    logic [63:0] p;
    p = 64'(h) * 64'(BUCKETS);
    return idx_t'(p >> 32);
  endfunction

  logic rd_here, rd_oob;
  assign rd_here = req_i.op == OP_READ && 32'(req_i.key[KEY_W-1:RD_IDX_W]) == LAYER;
  assign rd_oob  = 32'(req_i.key[RD_IDX_W-1:0]) >= BUCKETS;

  always_ff @(posedge clk) begin
    s1 <= req_i;  h1 <= hashes_i;
    i1 <= !rd_here ? range_reduce(hashes_i[HSEL]) : rd_oob ? '0 : idx_t'(req_i.key);
    r1 <= rd_here; z1 <= rd_here && rd_oob;
    s2 <= s1;     i2 <= i1;  h2 <= h1;  r2 <= r1;  z2 <= z1;
    s3 <= s2;     i3 <= i2;  h3 <= h2;  r3 <= r2;  z3 <= z2;  rd3 <= mem[i2];
    s4 <= s3;     i4 <= i3;  h4 <= h3;  r4 <= r3;  z4 <= z3;  rd4 <= rd3;
    if (!rst_n) begin
      s1.valid <= 1'b0;
      s2.valid <= 1'b0;
      s3.valid <= 1'b0;
      s4.valid <= 1'b0;
    end
  end

  // ---------------- compute (stage s4) ----------------
  bucket_t   cur, nb;
  logic      we;
  req_t      res;
  layer_ev_t ev;

  always_comb begin
    logic empty, match, locked;
    logic [NO_W:0] n_inc;

    // forwarding of the two writes the memory read could not see
    cur       = rd4;
    ev        = '0;
    if (w1_v && w1_i == i4)      cur = w1_d;
    else if (w2_v && w2_i == i4) cur = w2_d;

    empty  = (cur.yes == '0);
    match  = !empty && (cur.id == s4.key);
    locked = !empty && (33'(cur.no) + 33'd1 > 33'(LAMBDA));   // NO >= LAMBDA
    n_inc  = {1'b0, cur.no} + 1'b1;

    nb  = cur;
    we  = 1'b0;
    res = s4;

    if (s4.valid && s4.active && (s4.op != OP_READ || r4)) begin
      res.layer = LAYER_W'(LAYER);
      ev.bypass = (w1_v && w1_i == i4) || (w2_v && w2_i == i4);
      if (s4.op == OP_READ) begin
        // raw bucket: ID in the key field, YES as estimate, NO as MPE
        res.key    = z4 ? '0 : cur.id;
        res.est    = z4 ? '0 : EST_W'(cur.yes);
        res.mpe    = z4 ? '0 : EST_W'(cur.no);
        res.active = 1'b0;
      end else if (s4.op == OP_INSERT) begin
        if (match) begin
          nb.yes     = (&cur.yes) ? cur.yes : cur.yes + 1'b1;
          we         = 1'b1;
          res.active = 1'b0;
          ev.hit     = 1'b1;
        end else if (locked) begin
          ev.pass    = 1'b1;
        end else if (YES_W'(n_inc) > cur.yes) begin
          nb.id      = s4.key;
          nb.yes     = YES_W'(n_inc);
          nb.no      = cur.yes[NO_W-1:0];
          we         = 1'b1;
          res.active = 1'b0;
          ev.replace = 1'b1;
        end else begin
          nb.no      = n_inc[NO_W-1:0];
          we         = 1'b1;
          res.active = 1'b0;
          ev.vote    = 1'b1;
        end
      end else begin
        if (match) begin
          res.est    = s4.est + EST_W'(cur.yes);
          res.mpe    = s4.mpe + EST_W'(cur.no);
          res.active = 1'b0;
        end else begin
          res.est    = s4.est + EST_W'(cur.no);
          res.mpe    = s4.mpe + EST_W'(cur.no);
          res.active = locked;
          ev.pass    = locked;
        end
      end
    end
  end

  // ---------------- memory write, history, clear ----------------
  always_ff @(posedge clk) begin
    if (clr_busy) begin
      mem[clr_idx] <= '0;
    end else if (we) begin
      mem[i4] <= nb;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      w1_v     <= 1'b0;
      w2_v     <= 1'b0;
      clr_busy <= 1'b1;
      clr_idx  <= '0;
    end else begin
      w1_v <= we;  w1_i <= i4;  w1_d <= nb;
      w2_v <= w1_v; w2_i <= w1_i; w2_d <= w1_d;
      if (clr_busy) begin
        if (32'(clr_idx) == BUCKETS - 1) clr_busy <= 1'b0;
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

  // A request must not enter while the memory is being cleared.
  a_no_req_while_clearing: assert property (@(posedge clk) disable iff (!rst_n)
    req_i.valid |-> !clr_busy);

endmodule
