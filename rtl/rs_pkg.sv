// rs_pkg: types and sizing functions shared by the ReliableSketch pipeline.
//
// A request (req_t) travels down the pipeline: the hash unit, then one stage per
// layer, then the emergency stack. It carries the operation (insert or query), the
// 32-bit flow key, an "active" bit that stays set while the key still has to visit
// the next layer, and, for queries, the running estimate and its maximum possible
// error (MPE). Each bucket holds ID (32 bits), YES (32 bits) and NO (16 bits), the
// field widths of the paper's software implementation.
//
// Layer sizes follow the paper's configuration rule:
//   w_i      = ceil (W      * (R_w - 1)       / R_w^i)
//   lambda_i = floor(Lambda * (R_lambda - 1) / R_lambda^i)
// with the ratios given as NUM/DEN fractions so that R_lambda = 2.5 is exact.
package rs_pkg;

  localparam int unsigned KEY_W   = 32;
  localparam int unsigned YES_W   = 32;
  localparam int unsigned NO_W    = 16;
  localparam int unsigned HASH_W  = 32;
  localparam int unsigned EST_W   = 32;
  localparam int unsigned LAYER_W = 5;

  typedef logic [HASH_W-1:0] hash_t;   // one 32-bit Murmur hash

  // OP_READ returns one raw bucket (or one pair of filter counters) for a control
  // processor that reads the sketch out at the end of a measurement period. Its
  // key is an address: bits [31:24] the layer (1..D), bits [23:0] the index.
  typedef enum logic [1:0] {
    OP_INSERT = 2'd0,
    OP_QUERY  = 2'd1,
    OP_READ   = 2'd2
  } op_e;

  localparam int unsigned RD_IDX_W = 24;

  function automatic logic [KEY_W-1:0] read_addr(logic [7:0] layer, logic [RD_IDX_W-1:0] index);
    return {layer, index};
  endfunction

  typedef struct packed {
    logic [KEY_W-1:0] id;
    logic [YES_W-1:0] yes;
    logic [NO_W-1:0]  no;
  } bucket_t;

  // layer: for an insert, the layer that recorded the key (D+1 when every layer
  // was locked); for a query, the last layer that was read.
  typedef struct packed {
    logic               valid;
    op_e                op;
    logic [KEY_W-1:0]   key;
    logic               active;
    logic [EST_W-1:0]   est;
    logic [EST_W-1:0]   mpe;
    logic [LAYER_W-1:0] layer;
  } req_t;

  // Per-cycle event flags of one layer, for performance counters and tests.
  typedef struct packed {
    logic hit;      // key matched the bucket ID (insert: YES+1)
    logic vote;     // insert: NO+1 without replacement
    logic replace;  // insert: NO+1 overtook YES, ID replaced
    logic pass;     // key met a locked bucket and goes on to the next layer
    logic bypass;   // bucket value taken from an in-flight write, not memory
  } layer_ev_t;

  function automatic longint unsigned ipow(longint unsigned b, int unsigned e);
    longint unsigned r = 1;
    for (int unsigned k = 0; k < e; k++) r = r * b;
    return r;
  endfunction

  // w_i = ceil(W (R-1) / R^i), R = num/den, i counted from 1.
  function automatic int unsigned layer_width(longint unsigned w_total, int unsigned i,
                                              longint unsigned num, longint unsigned den);
    longint unsigned n, d, r;
    n = w_total * (num - den) * ipow(den, i - 1);
    d = ipow(num, i);
    r = (n + d - 1) / d;
    return (r == 0) ? 1 : 32'(r);
  endfunction

  // lambda_i = floor(Lambda (R-1) / R^i), R = num/den, i counted from 1.
  function automatic int unsigned layer_lambda(longint unsigned lam_total, int unsigned i,
                                               longint unsigned num, longint unsigned den);
    longint unsigned n, d;
    n = lam_total * (num - den) * ipow(den, i - 1);
    d = ipow(num, i);
    return 32'(n / d);
  endfunction

  function automatic int unsigned idx_bits(int unsigned n);
    return (n <= 1) ? 1 : $clog2(n);
  endfunction

endpackage
