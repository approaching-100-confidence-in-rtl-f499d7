// rs_hash: pipelined 32-bit MurmurHash3 of the flow key, one hash per bucket array.
//
// The paper's software uses 32-bit Murmur hashing; the FPGA version has a separate
// hash module whose internals are not described. This unit computes
// MurmurHash3_x86_32 of the 4-byte key once per array, each with its own seed
// (seed = SEED_BASE + array index), so that the layers hash independently. The
// request is delayed alongside so that req_o and hashes_o line up.
//
// Pipeline (one multiply per stage, a new key every cycle, LATENCY = 6 cycles):
//   1: k = key * c1
//   2: k = rotl(k,15) * c2
//   3: h = rotl(seed ^ k, 13) * 5 + 0xe6546b64, then h ^= 4 (length), h ^= h >> 16
//   4: h = h * 0x85ebca6b
//   5: h = (h ^ h >> 13) * 0xc2b2ae35
//   6: h = h ^ h >> 16
// The stage split and the seeds are this design's choice.
module rs_hash
  import rs_pkg::*;
#(
  parameter int unsigned NH        = 7,
  parameter int unsigned SEED_BASE = 32'h0000_0001
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  req_t                   req_i,
  output req_t                   req_o,
  output logic [NH-1:0][HASH_W-1:0] hashes_o
);

  localparam int unsigned LATENCY = 6;
  localparam logic [31:0] C1 = 32'hcc9e2d51;
  localparam logic [31:0] C2 = 32'h1b873593;

  function automatic logic [31:0] rotl(logic [31:0] x, int unsigned r);
    return (x << r) | (x >> (32 - r));
  endfunction

  req_t req_q [LATENCY];
  logic [31:0] k1_q, k2_q;
  logic [NH-1:0][31:0] h3_q, h4_q, h5_q, h6_q;

  // Request delay line: only the valid bit is reset.
  always_ff @(posedge clk) begin
    for (int s = 0; s < LATENCY; s++) begin
      req_q[s] <= (s == 0) ? req_i : req_q[s-1];
      if (!rst_n) req_q[s].valid <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    logic [31:0] t;
    k1_q <= req_i.key * C1;
    k2_q <= rotl(k1_q, 15) * C2;
    for (int j = 0; j < NH; j++) begin
      t = rotl((SEED_BASE + j) ^ k2_q, 13);
      t = t * 32'd5 + 32'he6546b64;
      t = t ^ 32'd4;
      h3_q[j] <= t ^ (t >> 16);
      h4_q[j] <= h3_q[j] * 32'h85ebca6b;
      h5_q[j] <= (h4_q[j] ^ (h4_q[j] >> 13)) * 32'hc2b2ae35;
      h6_q[j] <= h5_q[j] ^ (h5_q[j] >> 16);
    end
  end

  assign req_o    = req_q[LATENCY-1];
  assign hashes_o = h6_q;

endmodule
