// tb_rs_hash: checks the pipelined MurmurHash3 unit.
//
// A byte-at-a-time software MurmurHash3_x86_32 (written independently of the RTL's
// word form) gives the expected value of every hash slot. Three published test
// vectors of MurmurHash3_x86_32 check that software model first. Keys are sent one
// per cycle with random gaps; each result must come out exactly 6 cycles after its
// request, with the request fields unchanged.
module tb_rs_hash;
  import rs_pkg::*;

  localparam int unsigned NH   = 4;
  localparam logic [31:0] SEED = 32'h9747b28c;
  localparam int unsigned LAT  = 6;

  logic clk = 1'b0;
  logic rst_n;
  req_t req_i, req_o;
  logic [NH-1:0][HASH_W-1:0] hashes_o;

  int checks = 0;
  int failures = 0;

  rs_hash #(.NH(NH), .SEED_BASE(SEED)) dut (
    .clk(clk), .rst_n(rst_n), .req_i(req_i), .req_o(req_o), .hashes_o(hashes_o)
  );

  always #5 clk = ~clk;

  function automatic logic [31:0] murmur_bytes(logic [31:0] key, logic [31:0] seed);
    logic [7:0]  b [4];
    logic [31:0] h, k;
    for (int i = 0; i < 4; i++) b[i] = key[8*i +: 8];
    k = {b[3], b[2], b[1], b[0]};
    k = k * 32'hcc9e2d51;
    k = {k[16:0], k[31:17]};
    k = k * 32'h1b873593;
    h = seed ^ k;
    h = {h[18:0], h[31:19]};
    h = h * 5 + 32'he6546b64;
    h = h ^ 32'd4;
    h = h ^ {16'b0, h[31:16]};
    h = h * 32'h85ebca6b;
    h = h ^ {13'b0, h[31:13]};
    h = h * 32'hc2b2ae35;
    h = h ^ {16'b0, h[31:16]};
    return h;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // expected results, indexed by issue cycle
  typedef struct {
    int          cyc;
    logic [31:0] key;
  } sent_t;
  sent_t sent[$];
  int cycle = 0;
  int outputs = 0;

  always @(posedge clk) cycle <= cycle + 1;

  always @(negedge clk) begin
    if (rst_n && req_o.valid) begin
      sent_t s;
      outputs++;
      if (sent.size() == 0) begin
        check(0, "output without request");
      end else begin
        s = sent.pop_front();
        check(cycle - s.cyc == LAT, $sformatf("latency %0d", cycle - s.cyc));
        check(req_o.key == s.key && req_o.op == OP_QUERY && req_o.est == 32'(s.key) + 1,
              "request fields carried");
        for (int j = 0; j < NH; j++)
          check(hashes_o[j] == murmur_bytes(s.key, SEED + j),
                $sformatf("key %h slot %0d got %h exp %h", s.key, j, hashes_o[j],
                          murmur_bytes(s.key, SEED + j)));
      end
    end
  end

  initial begin
    // the software model against published MurmurHash3_x86_32 vectors
    check(murmur_bytes(32'h61616161, 32'h9747b28c) == 32'h5a97808a, "vector aaaa");
    check(murmur_bytes(32'h64636261, 32'h9747b28c) == 32'hf0478627, "vector abcd");
    check(murmur_bytes(32'h00000000, 32'h00000000) == 32'h2362f9de, "vector 0000");

    req_i = '0;
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      req_i = '0;
      if (n < 4 || ($urandom % 4) != 0) begin
        req_i.valid = 1'b1;
        req_i.op    = OP_QUERY;
        req_i.key   = (n == 0) ? 32'h61616161 : (n == 1) ? 32'h64636261 : $urandom;
        req_i.est   = req_i.key + 1;
        sent.push_back('{cyc: cycle, key: req_i.key});
      end
    end
    @(negedge clk);
    req_i = '0;
    repeat (LAT + 3) @(posedge clk);
    check(sent.size() == 0, "all requests answered");
    check(outputs > 250, "enough outputs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
