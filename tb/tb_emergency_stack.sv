// tb_emergency_stack: checks the emergency stack against a queue model.
//
// Random pushes and pops (including both in one cycle) on a small stack fill it to
// full, drop keys while full, and drain it to empty. Every popped key must be the
// model's top of stack and appear exactly one cycle after the pop; count, full
// and the drop counter are compared every cycle.
module tb_emergency_stack;
  import rs_pkg::*;

  localparam int unsigned DEPTH = 8;

  logic clk = 1'b0;
  logic rst_n;
  logic push, pop, pop_valid, full;
  logic [KEY_W-1:0] push_key, pop_key;
  logic [$clog2(DEPTH+1)-1:0] count;
  logic [15:0] dropped;

  int checks = 0;
  int failures = 0;
  int n_full = 0, n_drop = 0, n_both = 0, n_empty_pop = 0;

  emergency_stack #(.DEPTH(DEPTH)) dut (
    .clk(clk), .rst_n(rst_n), .push_i(push), .push_key_i(push_key), .pop_i(pop),
    .pop_valid_o(pop_valid), .pop_key_o(pop_key), .count_o(count), .full_o(full),
    .dropped_o(dropped));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  logic [KEY_W-1:0] model[$];
  int   model_drop = 0;
  bit   exp_valid = 0;
  logic [KEY_W-1:0] exp_key;

  initial begin
    push = 0; pop = 0; push_key = '0;
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 2000; n++) begin
      int phase;
      phase = (n / 200) % 3;   // 0: mostly push, 1: mostly pop, 2: mixed
      @(negedge clk);
      // outputs of the previous cycle
      check(pop_valid == exp_valid, "pop_valid");
      if (exp_valid) check(pop_key == exp_key, $sformatf("pop key %h exp %h", pop_key, exp_key));
      check(32'(count) == model.size(), $sformatf("count %0d exp %0d", count, model.size()));
      check(full == (model.size() == DEPTH), "full");
      check(32'(dropped) == model_drop, "dropped");
      // new stimulus
      push     = (phase == 0) ? ($urandom % 4 != 0) : (phase == 1) ? ($urandom % 5 == 0) : $urandom % 2;
      pop      = (phase == 1) ? ($urandom % 4 != 0) : (phase == 0) ? ($urandom % 6 == 0) : $urandom % 2;
      push_key = $urandom;
      exp_valid = pop && model.size() > 0;
      if (pop && model.size() == 0) n_empty_pop++;
      if (push && pop && model.size() > 0) begin
        exp_key = model.pop_back();
        model.push_back(push_key);
        n_both++;
      end else if (pop && model.size() > 0) begin
        exp_key = model.pop_back();
      end else if (push && model.size() < DEPTH) begin
        model.push_back(push_key);
      end else if (push) begin
        model_drop++;
        n_drop++;
      end
      if (model.size() == DEPTH) n_full++;
    end
    @(negedge clk);
    push = 0; pop = 0;
    check(n_full > 0 && n_drop > 0 && n_both > 0 && n_empty_pop > 0, "all cases exercised");
    $display("cases: full=%0d drop=%0d push+pop=%0d empty_pop=%0d", n_full, n_drop, n_both, n_empty_pop);
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
