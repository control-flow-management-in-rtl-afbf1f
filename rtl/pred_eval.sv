// pred_eval: per-thread predicate evaluation for control-flow instructions.
//
// A Turing control-flow instruction may carry a guard predicate ('@P0' before the opcode)
// and a predicate as its first operand ('!P1'), each optionally negated. A thread executes
// the instruction when both hold, so '@P0 INST !P1' acts for the threads with P0 true and P1
// false. A predicate that is absent counts as true, which makes an unpredicated instruction
// act for every thread. Predicate registers hold one bit per thread of the warp.
// Purely combinational. The AND of the two predicates follows the paper; passing the
// predicates in as already-read register values is this design's interface choice.
module pred_eval #(
  parameter int unsigned WARP_SIZE = hanoi_pkg::DEF_WARP_SIZE
) (
  input  logic                 g_en_i,   // guard predicate present
  input  logic                 g_neg_i,  // guard predicate negated
  input  logic [WARP_SIZE-1:0] g_val_i,  // guard predicate register value
  input  logic                 o_en_i,   // operand predicate present
  input  logic                 o_neg_i,  // operand predicate negated
  input  logic [WARP_SIZE-1:0] o_val_i,  // operand predicate register value
  output logic [WARP_SIZE-1:0] mask_o    // threads for which the instruction takes effect
);
  logic [WARP_SIZE-1:0] g_term, o_term;

  always_comb begin
    g_term = g_en_i ? (g_neg_i ? ~g_val_i : g_val_i) : '1;
    o_term = o_en_i ? (o_neg_i ? ~o_val_i : o_val_i) : '1;
    mask_o = g_term & o_term;
  end
endmodule
