// hanoi_cfu: Hanoi control flow management unit for one warp.
//
// Decides which threads of the warp are active and which instruction they run next. It
// holds a Warp Split (WS) stack of paths, a Reconvergence (REC) stack of pending
// reconvergence points, NUM_BX Bx registers with reconvergence masks, and the waiting and
// finished thread masks. The WS top is the running path: its PC goes to fetch and its mask
// to issue. After each instruction of the warp executes, the core reports it on the update
// port and the unit applies the instruction's effect on the control state:
//   BRA       all predicated threads taken / none: top PC <= target / PC+step. Otherwise
//             the path splits: the path with more threads is pushed last and runs first;
//             on a tie the taken path runs first.
//   BSSY      Bx <= top active mask (valid); push REC (BSYNC PC + step, Bx).
//   BSYNC     threads join the waiting mask and their path ends (WS pop).
//   WARPSYNC  like BSYNC; the first group to arrive also allocates a free Bx register with
//             the instruction's mask and pushes REC (PC + step, that Bx).
//   BREAK     Bx &= ~predicated threads.
//   BMOV      B->R: Bx value out to the register file, Bx invalidated.
//             R->B: Bx <= register value & ~finished, valid.
//   EXIT      predicated threads finish: added to finished, removed from every Bx; the
//             path ends if none is left.
//   YIELD     if the top two paths are siblings (their union lies inside the REC top's
//             reconvergence mask) they swap, else it acts as a NOP.
//   CALL/RET  top PC <= target.   Any other instruction: top PC <= PC + step.
// Threads of the path whose predicate is false continue at PC + step for BSYNC, WARPSYNC
// and EXIT. Reconvergence: whenever the REC top's Bx register is valid and its mask lies
// inside the waiting mask, the unit spends one cycle popping REC, invalidating that Bx,
// clearing those threads from waiting and pushing (REC PC, mask) on WS; issue and updates
// wait during that cycle.
//
// Interface and timing: issue_valid_o/pc_o/active_mask_o are combinational from state.
// The core keeps one instruction of the warp in flight: it issues when issue_valid_o is
// high and returns the update (upd_valid_i with upd_i and the evaluated predicate mask)
// before issuing the next one. An update is taken on a clock edge with upd_ready_o high;
// the new PC is visible the next cycle. bmov_data_o is valid in the update cycle of a
// BMOV B->R. The instruction semantics and the WS/REC/Bx/mask organisation follow the
// paper; the tie-break, the REC PC of BSSY (BSYNC + step), the empty-mask reconvergence,
// the handshake and the opcode encoding are this design's choices.
module hanoi_cfu #(
  parameter int unsigned WARP_SIZE = hanoi_pkg::DEF_WARP_SIZE,
  parameter int unsigned NUM_BX    = hanoi_pkg::DEF_NUM_BX,
  parameter int unsigned WS_DEPTH  = hanoi_pkg::DEF_WS_DEPTH,
  parameter int unsigned REC_DEPTH = hanoi_pkg::DEF_REC_DEPTH,
  parameter int unsigned PC_STEP   = hanoi_pkg::DEF_PC_STEP,
  localparam int unsigned PC_W     = hanoi_pkg::DEF_PC_W,
  localparam int unsigned IDW      = $clog2(NUM_BX),
  localparam int unsigned WSCW     = $clog2(WS_DEPTH + 1),
  localparam int unsigned RCW      = $clog2(REC_DEPTH + 1),
  localparam int unsigned PCNTW    = $clog2(WARP_SIZE + 1)
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  // warp launch
  input  logic                    launch_i,
  input  logic [PC_W-1:0]         launch_pc_i,
  input  logic [WARP_SIZE-1:0]    launch_mask_i,
  // to fetch (Fig. 3 item 1) and issue (item 2)
  output logic                    issue_valid_o,
  output logic [PC_W-1:0]         pc_o,
  output logic [WARP_SIZE-1:0]    active_mask_o,
  // executed-instruction update (item 3)
  input  logic                    upd_valid_i,
  output logic                    upd_ready_o,
  input  hanoi_pkg::cfu_update_t  upd_i,
  input  logic [WARP_SIZE-1:0]    upd_pred_i,   // threads whose predicates hold
  input  logic [WARP_SIZE-1:0]    upd_rdata_i,  // Rx value (BMOV R->B) or WARPSYNC mask
  output logic [WARP_SIZE-1:0]    bmov_data_o,  // Bx value for BMOV B->R
  // status
  output logic                    done_o,       // every thread has finished
  output logic                    stalled_o,    // threads left but no path and no reconvergence
  output hanoi_pkg::cfu_error_t   error_o,
  output hanoi_pkg::cfu_event_t   event_o,
  output logic [WSCW-1:0]         ws_count_o,
  output logic [RCW-1:0]          rec_count_o,
  output logic [WARP_SIZE-1:0]    waiting_o,
  output logic [WARP_SIZE-1:0]    finished_o
);
  import hanoi_pkg::*;

  // ---------------------------------------------------------------- state blocks
  ws_op_e               ws_op;
  logic [PC_W-1:0]      ws_a_pc, ws_b_pc, ws_top_pc, ws_sec_pc;
  logic [WARP_SIZE-1:0] ws_a_mask, ws_b_mask, ws_top_mask, ws_sec_mask;
  logic [WSCW-1:0]      ws_count;
  logic                 ws_ovf;

  logic                 rec_push, rec_pop, rec_ovf;
  logic [PC_W-1:0]      rec_push_pc, rec_top_pc;
  logic [IDW-1:0]       rec_push_id, rec_top_id;
  logic [RCW-1:0]       rec_count;

  logic                 bx_wr, bx_brk, bx_inv, bx_exit;
  logic [IDW-1:0]       bx_wr_id, bx_brk_id, bx_inv_id, bx_rb_id, bx_alloc_id;
  logic [WARP_SIZE-1:0] bx_wr_mask, bx_brk_bits, bx_exit_bits;
  logic [WARP_SIZE-1:0] bx_ra_mask, bx_rb_mask;
  logic                 bx_ra_valid, bx_rb_valid, bx_alloc_ok;

  logic [WARP_SIZE-1:0] wait_set, wait_clr, fin_set, waiting, finished;

  ws_stack #(.WARP_SIZE(WARP_SIZE), .PC_W(PC_W), .DEPTH(WS_DEPTH)) u_ws (
    .clk_i, .rst_ni, .init_i(launch_i), .op_i(ws_op),
    .a_pc_i(ws_a_pc), .a_mask_i(ws_a_mask), .b_pc_i(ws_b_pc), .b_mask_i(ws_b_mask),
    .top_pc_o(ws_top_pc), .top_mask_o(ws_top_mask), .sec_pc_o(ws_sec_pc),
    .sec_mask_o(ws_sec_mask), .count_o(ws_count), .overflow_o(ws_ovf));

  rec_stack #(.PC_W(PC_W), .NUM_BX(NUM_BX), .DEPTH(REC_DEPTH)) u_rec (
    .clk_i, .rst_ni, .clear_i(launch_i), .push_i(rec_push), .push_pc_i(rec_push_pc),
    .push_id_i(rec_push_id), .pop_i(rec_pop), .top_pc_o(rec_top_pc), .top_id_o(rec_top_id),
    .count_o(rec_count), .overflow_o(rec_ovf));

  bx_regfile #(.WARP_SIZE(WARP_SIZE), .NUM_BX(NUM_BX)) u_bx (
    .clk_i, .rst_ni, .clear_i(launch_i),
    .wr_en_i(bx_wr), .wr_id_i(bx_wr_id), .wr_mask_i(bx_wr_mask),
    .brk_en_i(bx_brk), .brk_id_i(bx_brk_id), .brk_bits_i(bx_brk_bits),
    .inv_en_i(bx_inv), .inv_id_i(bx_inv_id),
    .exit_en_i(bx_exit), .exit_bits_i(bx_exit_bits),
    .ra_id_i(rec_top_id), .ra_mask_o(bx_ra_mask), .ra_valid_o(bx_ra_valid),
    .rb_id_i(bx_rb_id), .rb_mask_o(bx_rb_mask), .rb_valid_o(bx_rb_valid),
    .alloc_ok_o(bx_alloc_ok), .alloc_id_o(bx_alloc_id));

  status_masks #(.WARP_SIZE(WARP_SIZE)) u_masks (
    .clk_i, .rst_ni, .init_i(launch_i), .init_fin_i(~launch_mask_i),
    .wait_set_i(wait_set), .wait_clr_i(wait_clr), .fin_set_i(fin_set),
    .waiting_o(waiting), .finished_o(finished));

  // ---------------------------------------------------------------- control
  logic                 ws_empty, rec_empty, reconv_go, do_upd;
  logic [WARP_SIZE-1:0] exec, rest;
  logic [PC_W-1:0]      next_pc;
  logic [PCNTW-1:0]     n_exec, n_rest;
  logic                 siblings, ws_known;
  logic                 pc_mis_q, alloc_fail_q, pc_mis, alloc_fail;

  always_comb begin
    ws_empty  = (ws_count == '0);
    rec_empty = (rec_count == '0);
    // Reconvergence check of the REC top, done before the WS top is scheduled.
    reconv_go = !rec_empty && bx_ra_valid && ((bx_ra_mask & ~waiting) == '0);
    do_upd    = upd_valid_i && !reconv_go && !ws_empty && !launch_i;

    exec    = ws_top_mask & upd_pred_i;
    rest    = ws_top_mask & ~exec;
    next_pc = ws_top_pc + PC_W'(PC_STEP);
    n_exec  = PCNTW'($countones(exec));
    n_rest  = PCNTW'($countones(rest));
    siblings = (ws_count > WSCW'(1)) && !rec_empty && bx_ra_valid &&
               (((ws_top_mask | ws_sec_mask) & ~bx_ra_mask) == '0);
    // WARPSYNC: is its reconvergence point already the REC top (a later group)?
    ws_known = !rec_empty && (rec_top_pc == next_pc);

    ws_op = WS_NOP;
    ws_a_pc = next_pc;   ws_a_mask = ws_top_mask;
    ws_b_pc = upd_i.target; ws_b_mask = exec;
    rec_push = 1'b0; rec_push_pc = '0; rec_push_id = upd_i.bx_id[IDW-1:0]; rec_pop = 1'b0;
    bx_wr = 1'b0;  bx_wr_id = upd_i.bx_id[IDW-1:0]; bx_wr_mask = ws_top_mask;
    bx_brk = 1'b0; bx_brk_id = upd_i.bx_id[IDW-1:0]; bx_brk_bits = exec;
    bx_inv = 1'b0; bx_inv_id = upd_i.bx_id[IDW-1:0];
    bx_exit = 1'b0; bx_exit_bits = exec;
    bx_rb_id = upd_i.bx_id[IDW-1:0];
    wait_set = '0; wait_clr = '0; fin_set = '0;
    pc_mis = 1'b0; alloc_fail = 1'b0;
    event_o = '0;

    if (launch_i) begin
      ws_a_pc   = launch_pc_i;   // the whole warp starts as one path
      ws_a_mask = launch_mask_i;
    end else if (reconv_go) begin
      rec_pop   = 1'b1;
      bx_inv    = 1'b1;
      bx_inv_id = rec_top_id;
      wait_clr  = bx_ra_mask;
      if (bx_ra_mask != '0) begin
        ws_op     = WS_PUSH;
        ws_a_pc   = rec_top_pc;
        ws_a_mask = bx_ra_mask;
        event_o.reconverge = 1'b1;
      end else begin
        event_o.reconv_empty = 1'b1;
      end
    end else if (do_upd) begin
      pc_mis = (upd_i.pc != ws_top_pc);
      ws_op  = WS_SET_TOP;   // default: advance the running path
      unique case (upd_i.op)
        OP_BRA: begin
          if (exec == '0) begin
            ws_a_pc = next_pc;
          end else if (rest == '0) begin
            ws_a_pc = upd_i.target;
          end else begin
            // Divergence: the larger path runs first (pushed last); a tie favours taken.
            ws_op = WS_SPLIT;
            event_o.diverge = 1'b1;
            if (n_exec >= n_rest) begin
              ws_a_pc = next_pc;      ws_a_mask = rest;
              ws_b_pc = upd_i.target; ws_b_mask = exec;
            end else begin
              ws_a_pc = upd_i.target; ws_a_mask = exec;
              ws_b_pc = next_pc;      ws_b_mask = rest;
            end
          end
        end
        OP_CALL, OP_RET: ws_a_pc = upd_i.target;
        OP_BSSY: begin
          bx_wr       = 1'b1;
          bx_wr_mask  = ws_top_mask;
          rec_push    = 1'b1;
          rec_push_pc = upd_i.target + PC_W'(PC_STEP);
        end
        OP_BSYNC, OP_WARPSYNC: begin
          if (exec != '0) begin
            wait_set = exec;
            if (rest == '0) begin
              ws_op = WS_POP;
            end else begin
              ws_a_mask = rest;
              event_o.partial_sync = 1'b1;
            end
            if (upd_i.op == OP_WARPSYNC) begin
              if (ws_known) begin
                event_o.ws_join = 1'b1;
              end else if (bx_alloc_ok) begin
                bx_wr       = 1'b1;
                bx_wr_id    = bx_alloc_id;
                bx_wr_mask  = upd_rdata_i & ~finished;
                rec_push    = 1'b1;
                rec_push_pc = next_pc;
                rec_push_id = bx_alloc_id;
                event_o.ws_alloc = 1'b1;
              end else begin
                alloc_fail = 1'b1;
              end
            end
          end
        end
        OP_BREAK: begin
          bx_brk = (exec != '0);
          event_o.brk = (exec != '0);
        end
        OP_BMOV_B2R: begin
          bx_inv = 1'b1;
          event_o.bmov_out = 1'b1;
        end
        OP_BMOV_R2B: begin
          bx_wr      = 1'b1;
          bx_wr_mask = upd_rdata_i & ~finished;
          event_o.bmov_in = 1'b1;
        end
        OP_EXIT: begin
          if (exec != '0) begin
            fin_set = exec;
            bx_exit = 1'b1;
            if (rest == '0) begin
              ws_op = WS_POP;
              event_o.exit_path = 1'b1;
            end else begin
              ws_a_mask = rest;
              event_o.exit_partial = 1'b1;
            end
          end
        end
        OP_YIELD: begin
          if (siblings) begin
            ws_op = WS_SWAP;     // old top resumes after the YIELD
            event_o.yield_swap = 1'b1;
          end else begin
            event_o.yield_nop = 1'b1;
          end
        end
        default: ;   // OP_OTHER: advance
      endcase
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pc_mis_q     <= 1'b0;
      alloc_fail_q <= 1'b0;
    end else if (launch_i) begin
      pc_mis_q     <= 1'b0;
      alloc_fail_q <= 1'b0;
    end else begin
      pc_mis_q     <= pc_mis_q | pc_mis;
      alloc_fail_q <= alloc_fail_q | alloc_fail;
    end
  end

  // ---------------------------------------------------------------- outputs
  always_comb begin
    issue_valid_o = !ws_empty && !reconv_go;
    pc_o          = ws_top_pc;
    active_mask_o = ws_top_mask;
    upd_ready_o   = !reconv_go && !ws_empty && !launch_i;
    bmov_data_o   = bx_rb_mask;
    done_o        = ws_empty && (finished == '1);
    stalled_o     = ws_empty && !reconv_go && (finished != '1);
    error_o.ws_overflow   = ws_ovf;
    error_o.rec_overflow  = rec_ovf;
    error_o.bx_alloc_fail = alloc_fail_q;
    error_o.pc_mismatch   = pc_mis_q;
    ws_count_o    = ws_count;
    rec_count_o   = rec_count;
    waiting_o     = waiting;
    finished_o    = finished;
  end

  // Handshake rules: an update is only sent while the warp has a path to run.
  a_upd_has_path: assert property (@(posedge clk_i) disable iff (!rst_ni)
    upd_valid_i && !launch_i |-> !ws_empty) else $error("hanoi_cfu: update with no path");
  a_upd_pc: assert property (@(posedge clk_i) disable iff (!rst_ni)
    do_upd |-> upd_i.pc == ws_top_pc) else $error("hanoi_cfu: update PC is not the WS top PC");
  a_upd_hold: assert property (@(posedge clk_i) disable iff (!rst_ni)
    upd_valid_i && !upd_ready_o && !launch_i && !ws_empty |=> upd_valid_i)
    else $error("hanoi_cfu: update dropped before it was accepted");

  logic unused_ok;
  assign unused_ok = ^{bx_rb_valid, ws_sec_pc};
endmodule
