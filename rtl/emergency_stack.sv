// emergency_stack: last-resort store for keys that no layer could take.
//
// In rare cases a key meets a locked bucket in every layer. The paper hands such
// keys to an "emergency solution"; its FPGA version uses a small stack. This stack
// holds up to DEPTH keys (one block RAM of 1024 x 32 bits by default) for a control
// processor to drain.
//
// Interface and timing:
//   push_i/push_key_i : store a key (from the end of the pipeline), one per cycle
//   pop_i             : request the top key; pop_valid_o/pop_key_o follow one
//                       cycle later. A pop on an empty stack returns nothing.
//   Push and pop in the same cycle return the old top and store the new key in
//   its place (depth unchanged).
//   count_o           : keys held; full_o when count_o == DEPTH
//   dropped_o         : keys lost because the stack was full (saturating)
// Depth, the pop protocol and the drop-on-full policy are this design's choices.
module emergency_stack #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned KEY_W = 32
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         push_i,
  input  logic [KEY_W-1:0]             push_key_i,
  input  logic                         pop_i,
  output logic                         pop_valid_o,
  output logic [KEY_W-1:0]             pop_key_o,
  output logic [$clog2(DEPTH+1)-1:0]   count_o,
  output logic                         full_o,
  output logic [15:0]                  dropped_o
);

  localparam int unsigned CW = $clog2(DEPTH + 1);
  localparam int unsigned AW = (DEPTH <= 1) ? 1 : $clog2(DEPTH);

  logic [KEY_W-1:0] mem [DEPTH];
  logic [CW-1:0]    sp;      // number of keys held; top is mem[sp-1]
  logic             empty;
  logic [AW-1:0]    top;

  assign empty  = (sp == '0);
  assign full_o = (32'(sp) == DEPTH);
  assign top    = AW'(sp - 1'b1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sp          <= '0;
      pop_valid_o <= 1'b0;
      dropped_o   <= '0;
    end else begin
      pop_valid_o <= pop_i && !empty;
      if (pop_i && !empty) pop_key_o <= mem[top];
      if (push_i && pop_i && !empty) begin
        mem[top] <= push_key_i;
      end else if (pop_i && !empty) begin
        sp <= sp - 1'b1;
      end else if (push_i && !full_o) begin
        mem[AW'(sp)] <= push_key_i;
        sp <= sp + 1'b1;
      end else if (push_i) begin
        if (!(&dropped_o)) dropped_o <= dropped_o + 1'b1;
      end
    end
  end

  assign count_o = sp;

  a_sp_in_range: assert property (@(posedge clk) disable iff (!rst_n) 32'(sp) <= DEPTH);

endmodule
