// reliable_sketch: pipelined ReliableSketch, one insert or query per clock.
//
// ReliableSketch counts packets per flow with a per-flow error bound it can report:
// every answer is an interval [est - mpe, est] that contains the true count, and mpe
// stays below the user threshold LAMBDA unless a key had to go to the emergency
// stack. It does so with D layers of Error-Sensible buckets whose sizes and lock
// thresholds shrink geometrically:
//   w_i      = ceil (W      * (R_w - 1) / R_w^i)            (R_w = RW_NUM/RW_DEN)
//   lambda_i = floor(LAMBDA * (R_l - 1) / R_l^i)            (R_l = RL_NUM/RL_DEN)
// so that sum(lambda_i) <= LAMBDA. A key walks down the layers until a bucket
// accepts it; a key refused by all D layers is pushed onto the emergency stack.
//
// Structure (all stages registered, no stalls):
//   rs_hash (6 cycles) -> layer 1 .. layer D (5 cycles each) -> result + stack push
// Insert and query latency is 6 + 5*D cycles: 41 for the default D = 7, the
// insertion latency the paper reports for its FPGA version. With USE_MICE_FILTER = 1
// layer 1 is replaced by the two-array mice filter (same timing), and the memory
// it saves goes to layers 2..D: they share W_REST = W - (filter bits / bucket
// bits) buckets as w'_i = ceil(W_REST (R_w - 1) / R_w^(i-1)). The paper says the
// saved space should move to the other layers; this split is this design's.
//
// Defaults are the paper's: 1 MB of 80-bit buckets (W = 104857), LAMBDA = 25,
// R_w = 2, R_lambda = 2.5, D = 7. The FPGA version has no mice filter, so it is
// off by default.
//
// Interface: after reset each layer clears its memory (max w_i cycles); send
// requests only while ready_o is high. in_op_i selects insert or query. For every
// request, out_valid_o pulses 6 + 5*D cycles later with the key, the estimate, the
// MPE, the layer that took (insert) or answered (query) the key, and out_emergency_o
// when the key went past the last layer (insert: pushed to the stack; query: the
// count of that key may be partly held in the stack). The stack is drained with
// pop_i. OP_READ with in_key_i = read_addr(layer, index) reads one raw bucket
// through the same pipeline (same 41-cycle latency, interleaved freely with
// traffic): out_key_o = ID, out_est_o = YES, out_mpe_o = NO (for the mice filter:
// its two counters). A read naming no existing layer returns with
// out_emergency_o set. This is how a control processor reads the whole sketch at
// the end of a measurement period, for the network-wide uses (aggregation across
// switches, heavy-hitter and drop detection) that run in software.
module reliable_sketch
  import rs_pkg::*;
#(
  parameter int unsigned D               = 7,
  parameter int unsigned W               = 104857,
  parameter int unsigned LAMBDA          = 25,
  parameter int unsigned RW_NUM          = 2,
  parameter int unsigned RW_DEN          = 1,
  parameter int unsigned RL_NUM          = 5,
  parameter int unsigned RL_DEN          = 2,
  parameter bit          USE_MICE_FILTER = 1'b0,
  parameter int unsigned FILTER_CNT_W    = 8,
  parameter int unsigned STACK_DEPTH     = 1024
) (
  input  logic                               clk,
  input  logic                               rst_n,
  output logic                               ready_o,
  // request
  input  logic                               in_valid_i,
  input  op_e                                in_op_i,
  input  logic [KEY_W-1:0]                   in_key_i,
  // result
  output logic                               out_valid_o,
  output op_e                                out_op_o,
  output logic [KEY_W-1:0]                   out_key_o,
  output logic [EST_W-1:0]                   out_est_o,
  output logic [EST_W-1:0]                   out_mpe_o,
  output logic [LAYER_W-1:0]                 out_layer_o,
  output logic                               out_emergency_o,
  // emergency stack, drained by a control processor
  input  logic                               pop_i,
  output logic                               pop_valid_o,
  output logic [KEY_W-1:0]                   pop_key_o,
  output logic [$clog2(STACK_DEPTH+1)-1:0]   stack_count_o,
  output logic                               stack_full_o,
  output logic [15:0]                        stack_dropped_o,
  // per-layer events, for performance counters
  output layer_ev_t [D-1:0]                  layer_ev_o
);

  localparam int unsigned NH      = USE_MICE_FILTER ? D + 1 : D;
  // With the filter, layer 1's bucket memory is mostly freed: the filter takes
  // 2 x ceil(w_1/2) counters of FILTER_CNT_W bits. The rest of the budget, in
  // buckets (W_REST), is split over layers 2..D by the same geometric rule,
  // restarted at layer 2.
  localparam int unsigned W1      = layer_width(64'(W), 1, 64'(RW_NUM), 64'(RW_DEN));
  localparam int unsigned FBITS   = 2 * ((W1 + 1) / 2) * FILTER_CNT_W;
  localparam int unsigned W_REST  = W - (FBITS + $bits(bucket_t) - 1) / $bits(bucket_t);

  if (D < 1 || D > 30) begin : g_bad_d
    $error("reliable_sketch: D must be 1..30");
  end

  req_t                      rq [D+1];
  logic [NH-1:0][HASH_W-1:0] hh [D+1];
  logic [D-1:0]              layer_ready;
  req_t                      in_req;

  always_comb begin
    in_req        = '0;
    in_req.valid  = in_valid_i && ready_o;
    in_req.op     = in_op_i;
    in_req.key    = in_key_i;
    in_req.active = 1'b1;
  end

  rs_hash #(.NH(NH)) u_hash (
    .clk      (clk),
    .rst_n    (rst_n),
    .req_i    (in_req),
    .req_o    (rq[0]),
    .hashes_o (hh[0])
  );

  for (genvar j = 0; j < D; j++) begin : g_layer
    localparam int unsigned WI = (USE_MICE_FILTER && j > 0)
                               ? layer_width(64'(W_REST), j,     64'(RW_NUM), 64'(RW_DEN))
                               : layer_width(64'(W),      j + 1, 64'(RW_NUM), 64'(RW_DEN));
    localparam int unsigned LI = layer_lambda(64'(LAMBDA), j + 1, 64'(RL_NUM), 64'(RL_DEN));
    if (j == 0 && USE_MICE_FILTER) begin : g_filter
      mice_filter #(
        .COUNTERS ((WI + 1) / 2),
        .CNT_W    (FILTER_CNT_W),
        .LAMBDA   (LI),
        .LAYER    (1),
        .NH       (NH),
        .HSEL1    (0),
        .HSEL2    (D)
      ) u_filter (
        .clk      (clk),
        .rst_n    (rst_n),
        .ready_o  (layer_ready[j]),
        .req_i    (rq[j]),
        .hashes_i (hh[j]),
        .req_o    (rq[j+1]),
        .hashes_o (hh[j+1]),
        .ev_o     (layer_ev_o[j])
      );
    end else begin : g_es
      es_layer #(
        .BUCKETS (WI),
        .LAMBDA  (LI),
        .LAYER   (j + 1),
        .NH      (NH),
        .HSEL    (j)
      ) u_layer (
        .clk      (clk),
        .rst_n    (rst_n),
        .ready_o  (layer_ready[j]),
        .req_i    (rq[j]),
        .hashes_i (hh[j]),
        .req_o    (rq[j+1]),
        .hashes_o (hh[j+1]),
        .ev_o     (layer_ev_o[j])
      );
    end
  end

  assign ready_o = &layer_ready;

  // ---------------- result and emergency path ----------------
  req_t fin;
  logic to_stack;

  assign fin      = rq[D];
  assign to_stack = fin.valid && fin.active && (fin.op == OP_INSERT);

  emergency_stack #(.DEPTH(STACK_DEPTH)) u_stack (
    .clk        (clk),
    .rst_n      (rst_n),
    .push_i     (to_stack),
    .push_key_i (fin.key),
    .pop_i      (pop_i),
    .pop_valid_o(pop_valid_o),
    .pop_key_o  (pop_key_o),
    .count_o    (stack_count_o),
    .full_o     (stack_full_o),
    .dropped_o  (stack_dropped_o)
  );

  assign out_valid_o     = fin.valid;
  assign out_op_o        = fin.op;
  assign out_key_o       = fin.key;
  assign out_est_o       = fin.est;
  assign out_mpe_o       = fin.mpe;
  assign out_emergency_o = fin.valid && fin.active;
  assign out_layer_o     = to_stack ? LAYER_W'(D + 1) : fin.layer;

endmodule
