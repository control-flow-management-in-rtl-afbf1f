// hanoi_pkg: types and default sizes shared by the Hanoi control flow management unit.
//
// Hanoi keeps, per warp, a Warp Split (WS) stack of paths to run, a Reconvergence (REC)
// stack of pending reconvergence points, a few Bx registers holding reconvergence masks,
// and two thread masks (waiting, finished). The sizes below are the ones of a Turing-class
// SM: 32 threads per warp, 8 Bx registers, 32 WS entries and 31 REC entries. The PC width
// of 32 bits is inferred from the quoted 432-byte storage budget; the 16-byte instruction
// step is the size of a Turing machine instruction. The instruction encoding (cf_op_e) is
// this design's own: the machine encoding of the control-flow instructions is not public.
package hanoi_pkg;

  localparam int unsigned DEF_WARP_SIZE = 32;
  localparam int unsigned DEF_PC_W      = 32;
  localparam int unsigned DEF_NUM_BX    = 8;
  localparam int unsigned DEF_WS_DEPTH  = 32;
  localparam int unsigned DEF_REC_DEPTH = 31;
  localparam int unsigned DEF_PC_STEP   = 16;
  localparam int unsigned BX_ID_W       = $clog2(DEF_NUM_BX);

  // Kind of instruction reported back to the CFU after it executed.
  typedef enum logic [3:0] {
    OP_OTHER    = 4'd0,   // any non-control-flow instruction: PC advances
    OP_BRA      = 4'd1,   // (conditional) branch to target
    OP_EXIT     = 4'd2,   // terminate the threads whose predicate holds
    OP_BSSY     = 4'd3,   // Bx <= active mask, push REC (target is the BSYNC's PC)
    OP_BSYNC    = 4'd4,   // wait at the reconvergence point on top of REC
    OP_BREAK    = 4'd5,   // remove predicated threads from Bx
    OP_BMOV_B2R = 4'd6,   // Rx <= Bx, Bx invalidated
    OP_BMOV_R2B = 4'd7,   // Bx <= Rx & ~finished, Bx valid
    OP_WARPSYNC = 4'd8,   // synchronise the threads of a register/immediate mask
    OP_YIELD    = 4'd9,   // switch to the sibling path if there is one
    OP_CALL     = 4'd10,  // jump to target
    OP_RET      = 4'd11   // jump to target (return address read from registers)
  } cf_op_e;

  // WS stack operations (one per cycle).
  typedef enum logic [2:0] {
    WS_NOP     = 3'd0,
    WS_SET_TOP = 3'd1,   // top <= a
    WS_PUSH    = 3'd2,   // push a
    WS_POP     = 3'd3,   // pop
    WS_SPLIT   = 3'd4,   // top <= a, then push b above it
    WS_SWAP    = 3'd5    // exchange top two; the old top gets PC a_pc
  } ws_op_e;

  // Executed-instruction update sent from the execute stage to the CFU.
  typedef struct packed {
    cf_op_e                   op;
    logic [DEF_PC_W-1:0]      pc;      // PC of the executed instruction (checked against the WS top)
    logic [DEF_PC_W-1:0]      target;  // BRA/CALL/RET target, BSSY reconvergence (BSYNC) PC
    logic [BX_ID_W-1:0]       bx_id;   // Bx operand (BSSY, BREAK, BMOV)
  } cfu_update_t;

  // One-cycle pulses of the mechanisms of a CFU, for observation and performance counters.
  typedef struct packed {
    logic diverge;        // BRA split a path in two
    logic reconverge;     // REC top reconverged with a non-empty mask
    logic reconv_empty;   // REC top retired with an empty mask
    logic yield_swap;     // YIELD switched to the sibling path
    logic yield_nop;      // YIELD found no sibling
    logic brk;            // BREAK removed threads from a Bx register
    logic bmov_out;       // BMOV B->R spilled a Bx register
    logic bmov_in;        // BMOV R->B restored a Bx register
    logic exit_partial;   // EXIT finished only part of the path
    logic exit_path;      // EXIT finished the whole path
    logic ws_alloc;       // WARPSYNC allocated a Bx register and pushed REC
    logic ws_join;        // WARPSYNC found its REC entry already present
    logic partial_sync;   // BSYNC/WARPSYNC with some threads predicated off
  } cfu_event_t;

  typedef struct packed {
    logic ws_overflow;
    logic rec_overflow;
    logic bx_alloc_fail;  // WARPSYNC found no free Bx register
    logic pc_mismatch;    // update PC differs from the WS top PC
  } cfu_error_t;

endpackage
