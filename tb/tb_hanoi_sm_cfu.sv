// tb_hanoi_sm_cfu: end-to-end test of the SM's control flow management at full size
// (32 warps of 32 threads, 4 schedulers, 8 Bx registers, 32-entry WS, 31-entry REC).
//
// The testbench models the rest of the SIMT core: each of the 4 schedulers picks, round
// robin, one of its warps that the CFU offers, "executes" the instruction at that warp's
// PC from a small program table (setting predicate registers, taking a spinlock, storing
// BMOV results in a per-thread R0) and returns the update with the raw predicate operands.
// Five programs run side by side, warp w running program w mod 5:
//   NEST   nested divergence, BMOV spill/restore of B0 through R0
//   EARLY  reconvergence earlier than the post-dominator, BREAK
//   SPIN   spinlock loop that needs YIELD to finish
//   WSYNC  WARPSYNC from two groups, predicated EXIT, CALL/RET, BMOV filtering
//   DEEP   32-way divergence that fills the WS stack to 32 entries
// Per warp it records, for every PC, how often it ran and with which mask, and compares
// with expectations worked out from the programs (reconvergence points must run once with
// the whole warp, each thread enters the critical section once and alone, ...). Warps 25
// and up start with only half their threads (mask 0f0f0f0f). It also counts each mechanism
// (divergence, reconvergence, YIELD swap and NOP, BREAK, BMOV both ways, partial and whole
// EXIT, WARPSYNC allocate and join, reconvergence cycles, full WS, several ports active in
// one cycle) and counts a failure for any that never happened.
module tb_hanoi_sm_cfu;
  import hanoi_pkg::*;

  localparam int NW = 32, NS = 4, WS = 32, NPC = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              launch_valid;
  logic [4:0]        launch_warp;
  logic [31:0]       launch_pc;
  logic [WS-1:0]     launch_mask;
  logic [NW-1:0]     w_issue, w_done, w_stalled;
  logic [31:0]       w_pc [NW];
  logic [WS-1:0]     w_mask [NW];
  logic [NS-1:0]     upd_valid, upd_ready, g_en, g_neg, o_en, o_neg;
  logic [4:0]        upd_warp [NS];
  cfu_update_t       upd [NS];
  logic [WS-1:0]     g_val [NS], o_val [NS], rdata [NS], bmov [NS];
  cfu_error_t        w_err [NW];
  cfu_event_t        w_ev [NW];
  logic [5:0]        w_wsc [NW];
  logic [4:0]        w_recc [NW];
  logic [WS-1:0]     w_wait [NW], w_fin [NW];

  hanoi_sm_cfu dut (
    .clk_i(clk), .rst_ni(rst_n),
    .launch_valid_i(launch_valid), .launch_warp_i(launch_warp), .launch_pc_i(launch_pc),
    .launch_mask_i(launch_mask),
    .warp_issue_valid_o(w_issue), .warp_pc_o(w_pc), .warp_mask_o(w_mask),
    .upd_valid_i(upd_valid), .upd_ready_o(upd_ready), .upd_warp_i(upd_warp), .upd_i(upd),
    .upd_g_en_i(g_en), .upd_g_neg_i(g_neg), .upd_g_val_i(g_val),
    .upd_o_en_i(o_en), .upd_o_neg_i(o_neg), .upd_o_val_i(o_val),
    .upd_rdata_i(rdata), .upd_bmov_data_o(bmov),
    .warp_done_o(w_done), .warp_stalled_o(w_stalled), .warp_error_o(w_err),
    .warp_event_o(w_ev), .warp_ws_count_o(w_wsc), .warp_rec_count_o(w_recc),
    .warp_waiting_o(w_wait), .warp_finished_o(w_fin));

  // ------------------------------------------------------------------ programs
  typedef enum int { P_NEST, P_EARLY, P_SPIN, P_WSYNC, P_DEEP } prog_e;
  typedef enum int { K_CF, K_SETP0, K_SETP1, K_CAS, K_CRIT, K_SETR0 } kind_e;
  typedef enum int { PS_NONE, PS_P0, PS_NP0, PS_P1, PS_NP1, PS_TIDPC } psel_e;
  typedef enum int { F_MOD4_GE2, F_MOD4_EQ3, F_MOD4_EQ1, F_HALF } fn_e;

  typedef struct {
    kind_e  kind;
    cf_op_e op;
    int     tgt;
    int     bx;
    psel_e  g;      // guard predicate
    fn_e    fn;     // predicate function for K_SETP*
    bit     o_p1;   // operand predicate P1 ('BRA P1, target')
  } ins_t;

  function automatic ins_t I(kind_e k, cf_op_e op = OP_OTHER, int tgt = 0, int bx = 0,
                             psel_e g = PS_NONE, fn_e fn = F_HALF);
    ins_t r;
    r.kind = k; r.op = op; r.tgt = tgt; r.bx = bx; r.g = g; r.fn = fn; r.o_p1 = 1'b0;
    return r;
  endfunction

  function automatic ins_t fetch(prog_e p, int i);
    ins_t n;
    n = I(K_CF);
    case (p)
      P_NEST: case (i)
        0: n = I(K_SETP0, OP_OTHER, 0, 0, PS_NONE, F_MOD4_GE2);
        1: n = I(K_SETP1, OP_OTHER, 0, 0, PS_NONE, F_MOD4_EQ3);
        2: n = I(K_CF, OP_BSSY, 12, 0);          // A: BSSY B0 -> F
        3: n = I(K_CF, OP_BMOV_B2R, 0, 0);       // A: BMOV R0, B0
        4: n = I(K_CF, OP_BRA, 7, 0, PS_P0);     // A: @P0 BRA B
        5: n = I(K_CF, OP_OTHER);                // G
        6: n = I(K_CF, OP_BRA, 11);
        7: n = I(K_CF, OP_BSSY, 10, 0);          // B: BSSY B0 -> E
        8: n = I(K_CF, OP_BRA, 16, 0, PS_P1);    // B: @P1 BRA C
        9: n = I(K_CF, OP_OTHER);                // D
        10: n = I(K_CF, OP_BSYNC, 0, 0);         // E
        11: n = I(K_CF, OP_BMOV_R2B, 0, 0);      // F: BMOV B0, R0
        12: n = I(K_CF, OP_BSYNC, 0, 0);         // F: BSYNC B0
        13: n = I(K_CF, OP_OTHER);               // H
        14: n = I(K_CF, OP_EXIT);
        16: n = I(K_CF, OP_OTHER);               // C
        17: n = I(K_CF, OP_BRA, 10);
        default: ;
      endcase
      P_EARLY: case (i)
        0: n = I(K_SETP0, OP_OTHER, 0, 0, PS_NONE, F_MOD4_GE2);
        1: n = I(K_SETP1, OP_OTHER, 0, 0, PS_NONE, F_MOD4_EQ1);
        2: n = I(K_CF, OP_BSSY, 9, 1);           // A: BSSY B1 -> D
        3: n = I(K_CF, OP_BSSY, 8, 0);           // A: BSSY B0 -> B
        4: n = I(K_CF, OP_BRA, 8, 0, PS_P0);     // A: @P0 BRA B
        5: n = I(K_CF, OP_BREAK, 0, 0, PS_NP1);  // C: @!P1 BREAK B0
        6: begin                                 // C: BRA P1, B (operand form of @P1 BRA B)
          n = I(K_CF, OP_BRA, 8);
          n.o_p1 = 1'b1;
        end
        7: n = I(K_CF, OP_BRA, 9);
        8: n = I(K_CF, OP_BSYNC, 0, 0);          // B
        9: n = I(K_CF, OP_BSYNC, 0, 1);          // D
        10: n = I(K_CF, OP_OTHER);               // E
        11: n = I(K_CF, OP_EXIT);
        default: ;
      endcase
      P_SPIN: case (i)
        0: n = I(K_CF, OP_OTHER);                // A: *mutex = 0
        1: n = I(K_CF, OP_BSSY, 6, 0);           // A: BSSY B0 -> E
        2: n = I(K_CF, OP_YIELD);                // B
        3: n = I(K_CAS);                         // C: P0 = atomicCAS(...)
        4: n = I(K_CF, OP_BRA, 2, 0, PS_NP0);    // C: @!P0 BRA B
        5: n = I(K_CRIT);                        // D: critical section, release
        6: n = I(K_CF, OP_BSYNC, 0, 0);          // E
        7: n = I(K_CF, OP_OTHER);
        8: n = I(K_CF, OP_EXIT);
        default: ;
      endcase
      P_WSYNC: case (i)
        0: n = I(K_SETP0, OP_OTHER, 0, 0, PS_NONE, F_HALF);
        1: n = I(K_CF, OP_BRA, 3, 0, PS_P0);
        2: n = I(K_CF, OP_OTHER);
        3: n = I(K_CF, OP_WARPSYNC);             // WARPSYNC 0xffffffff
        4: n = I(K_CF, OP_OTHER);
        5: n = I(K_SETP1, OP_OTHER, 0, 0, PS_NONE, F_MOD4_EQ3);
        6: n = I(K_CF, OP_EXIT, 0, 0, PS_P1);    // @P1 EXIT
        7: n = I(K_CF, OP_CALL, 20);
        8: n = I(K_SETR0);                       // R0 = 0xffffffff
        9: n = I(K_CF, OP_BMOV_R2B, 0, 5);       // BMOV B5, R0
        10: n = I(K_CF, OP_BMOV_B2R, 0, 5);      // BMOV R0, B5
        11: n = I(K_CF, OP_EXIT);
        20: n = I(K_CF, OP_OTHER);
        21: n = I(K_CF, OP_RET, 8);
        default: ;
      endcase
      P_DEEP: begin
        if (i == 0) n = I(K_CF, OP_BSSY, 33, 0);
        else if (i <= 31) n = I(K_CF, OP_BRA, 33, 0, PS_TIDPC);   // @(tid==i-1) BRA S
        else if (i == 33) n = I(K_CF, OP_BSYNC, 0, 0);
        else if (i == 35) n = I(K_CF, OP_EXIT);
      end
      default: ;
    endcase
    return n;
  endfunction

  function automatic logic [WS-1:0] fn_mask(fn_e f);
    logic [WS-1:0] m;
    for (int t = 0; t < WS; t++)
      case (f)
        F_MOD4_GE2: m[t] = (t % 4) >= 2;
        F_MOD4_EQ3: m[t] = (t % 4) == 3;
        F_MOD4_EQ1: m[t] = (t % 4) == 1;
        default:    m[t] = t < 16;
      endcase
    return m;
  endfunction

  // ------------------------------------------------------------------ core model state
  prog_e         prog [NW];
  logic [WS-1:0] lmask [NW];
  logic [WS-1:0] p0 [NW], p1 [NW];
  logic [WS-1:0] r0 [NW][WS];
  int            lock_owner [NW];
  int            crit_cnt [NW][WS];
  int            visits [NW][NPC];
  logic [WS-1:0] first_mask [NW][NPC];
  logic [WS-1:0] or_mask [NW][NPC];
  int            max_wsc [NW];
  int            rr [NS];
  int            pend_b2r [NS];
  logic [WS-1:0] pend_act [NS];

  int checks = 0, failures = 0;
  int n_div, n_rec, n_recempty, n_yswap, n_ynop, n_brk, n_bout, n_bin, n_exitp, n_exitw;
  int n_walloc, n_wjoin, n_recwait, n_multi, n_full_ws;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Drive one update for warp w on port s, modelling the instruction's effect.
  task automatic execute(input int s, input int w);
    ins_t          in;
    int            i;
    logic [WS-1:0] act;
    i   = int'(w_pc[w] / 16);
    act = w_mask[w];
    in  = fetch(prog[w], i);
    if (i < NPC) begin
      if (visits[w][i] == 0) first_mask[w][i] = act;
      visits[w][i]++;
      or_mask[w][i] |= act;
    end
    upd_valid[s] = 1'b1;
    upd_warp[s]  = 5'(w);
    upd[s].op    = (in.kind == K_CF) ? in.op : OP_OTHER;
    upd[s].pc    = w_pc[w];
    upd[s].target = 32'(in.tgt * 16);
    upd[s].bx_id = BX_ID_W'(in.bx);
    g_en[s] = 1'b0; g_neg[s] = 1'b0; g_val[s] = '0;
    o_en[s] = 1'b0; o_neg[s] = 1'b0; o_val[s] = '0;
    rdata[s] = '0;
    case (in.g)
      PS_P0:  begin g_en[s] = 1; g_val[s] = p0[w]; end
      PS_NP0: begin g_en[s] = 1; g_neg[s] = 1; g_val[s] = p0[w]; end
      PS_P1:  begin g_en[s] = 1; g_val[s] = p1[w]; end
      PS_NP1: begin g_en[s] = 1; g_neg[s] = 1; g_val[s] = p1[w]; end
      PS_TIDPC: begin g_en[s] = 1; g_val[s] = WS'(1) << (i - 1); end
      default: ;
    endcase
    if (in.o_p1) begin o_en[s] = 1; o_val[s] = p1[w]; end
    case (in.kind)
      K_SETP0: p0[w] = (p0[w] & ~act) | (fn_mask(in.fn) & act);
      K_SETP1: p1[w] = (p1[w] & ~act) | (fn_mask(in.fn) & act);
      K_CAS: begin
        // the highest-numbered active thread wins a free lock
        p0[w] = p0[w] & ~act;
        if (lock_owner[w] < 0)
          for (int t = WS - 1; t >= 0; t--)
            if (act[t] && lock_owner[w] < 0) begin
              lock_owner[w] = t;
              p0[w][t] = 1'b1;
            end
      end
      K_CRIT: begin
        for (int t = 0; t < WS; t++) if (act[t]) begin
          crit_cnt[w][t]++;
          check(lock_owner[w] == t, $sformatf("warp %0d thread %0d in critical section without the lock", w, t));
        end
        lock_owner[w] = -1;
      end
      K_SETR0: for (int t = 0; t < WS; t++) if (act[t]) r0[w][t] = '1;
      default: ;
    endcase
    if (in.kind == K_CF && in.op == OP_WARPSYNC) rdata[s] = '1;
    if (in.kind == K_CF && in.op == OP_BMOV_R2B) begin
      int lo;
      lo = -1;
      for (int t = WS - 1; t >= 0; t--) if (act[t]) lo = t;
      rdata[s] = r0[w][lo];
      for (int t = 0; t < WS; t++) if (act[t])
        check(r0[w][t] == r0[w][lo], "BMOV source equal in all active threads");
    end
    pend_b2r[s] = (in.kind == K_CF && in.op == OP_BMOV_B2R) ? w : -1;
    pend_act[s] = act;
  endtask

  // After the updates of a cycle are driven: all must be accepted; BMOV B->R results
  // are written to R0 of the active threads.
  task automatic finish_cycle();
    #1;
    for (int s = 0; s < NS; s++) if (upd_valid[s]) begin
      check(upd_ready[s], $sformatf("port %0d update accepted", s));
      if (pend_b2r[s] >= 0)
        for (int t = 0; t < WS; t++) if (pend_act[s][t]) r0[pend_b2r[s]][t] = bmov[s];
    end
  endtask

  // ------------------------------------------------------------------ event counting
  always @(posedge clk) if (rst_n) begin
    int active_ports;
    active_ports = 0;
    for (int s = 0; s < NS; s++) active_ports += int'(upd_valid[s]);
    if (active_ports > 1) n_multi++;
    for (int w = 0; w < NW; w++) begin
      n_div      += int'(w_ev[w].diverge);
      n_rec      += int'(w_ev[w].reconverge);
      n_recempty += int'(w_ev[w].reconv_empty);
      n_yswap    += int'(w_ev[w].yield_swap);
      n_ynop     += int'(w_ev[w].yield_nop);
      n_brk      += int'(w_ev[w].brk);
      n_bout     += int'(w_ev[w].bmov_out);
      n_bin      += int'(w_ev[w].bmov_in);
      n_exitp    += int'(w_ev[w].exit_partial);
      n_exitw    += int'(w_ev[w].exit_path);
      n_walloc   += int'(w_ev[w].ws_alloc);
      n_wjoin    += int'(w_ev[w].ws_join);
      if (!w_issue[w] && !w_done[w] && !w_stalled[w]) n_recwait++;
      if (int'(w_wsc[w]) > max_wsc[w]) max_wsc[w] = int'(w_wsc[w]);
      if (w_wsc[w] == 6'd32) n_full_ws++;
    end
  end

  initial begin
    #20000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cycles;
    n_div = 0; n_rec = 0; n_recempty = 0; n_yswap = 0; n_ynop = 0; n_brk = 0; n_bout = 0;
    n_bin = 0; n_exitp = 0; n_exitw = 0; n_walloc = 0; n_wjoin = 0; n_recwait = 0;
    n_multi = 0; n_full_ws = 0;
    launch_valid = 0; launch_warp = 0; launch_pc = 0; launch_mask = 0;
    upd_valid = '0; g_en = '0; g_neg = '0; o_en = '0; o_neg = '0;
    for (int s = 0; s < NS; s++) begin
      upd_warp[s] = 5'(s); upd[s] = '0; g_val[s] = '0; o_val[s] = '0; rdata[s] = '0; rr[s] = 0;
    end
    for (int w = 0; w < NW; w++) begin
      prog[w] = prog_e'(w % 5);
      lmask[w] = (w >= 25) ? 32'h0f0f_0f0f : 32'hffff_ffff;
      p0[w] = '0; p1[w] = '0; lock_owner[w] = -1; max_wsc[w] = 0;
      for (int t = 0; t < WS; t++) begin r0[w][t] = '0; crit_cnt[w][t] = 0; end
      for (int i = 0; i < NPC; i++) begin visits[w][i] = 0; first_mask[w][i] = '0; or_mask[w][i] = '0; end
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    check(&w_done && !(|w_issue), "all warps idle after reset");
    for (int w = 0; w < NW; w++) begin
      launch_valid = 1'b1; launch_warp = 5'(w); launch_pc = '0; launch_mask = lmask[w];
      @(negedge clk);
    end
    launch_valid = 1'b0;

    cycles = 0;
    while (!(&w_done) && cycles < 20000) begin
      for (int s = 0; s < NS; s++) begin
        upd_valid[s] = 1'b0;
        for (int k = 0; k < NW / NS; k++) begin
          int w;
          w = s + NS * ((rr[s] + k) % (NW / NS));
          if (!upd_valid[s] && w_issue[w]) begin
            execute(s, w);
            rr[s] = (rr[s] + k + 1) % (NW / NS);
          end
        end
      end
      finish_cycle();
      @(negedge clk);
      cycles++;
    end
    upd_valid = '0;
    $display("all warps finished after %0d cycles", cycles);

    // ---------------------------------------------------------------- per-warp checks
    for (int w = 0; w < NW; w++) begin
      logic [WS-1:0] m;
      m = lmask[w];
      check(w_done[w] && !w_stalled[w], $sformatf("warp %0d done", w));
      check(w_err[w] == '0, $sformatf("warp %0d no error", w));
      check(w_wsc[w] == 0 && w_recc[w] == 0, $sformatf("warp %0d stacks empty", w));
      check(w_fin[w] == '1 && w_wait[w] == '0, $sformatf("warp %0d all finished, none waiting", w));
      case (prog[w])
        P_NEST: begin
          check(visits[w][13] == 1 && first_mask[w][13] == m, $sformatf("NEST w%0d: H once with all threads", w));
          check(visits[w][16] == 1 && first_mask[w][16] == (32'h8888_8888 & m), $sformatf("NEST w%0d: C", w));
          check(visits[w][9] == 1 && first_mask[w][9] == (32'h4444_4444 & m), $sformatf("NEST w%0d: D", w));
          check(visits[w][5] == 1 && first_mask[w][5] == (32'h3333_3333 & m), $sformatf("NEST w%0d: G", w));
          check(visits[w][11] == 2 && first_mask[w][11] == (32'hcccc_cccc & m), $sformatf("NEST w%0d: F reached by B-side first", w));
          check(visits[w][10] == 2, $sformatf("NEST w%0d: E BSYNC by C and D", w));
        end
        P_EARLY: begin
          check(visits[w][9] == 2 && first_mask[w][9] == (32'heeee_eeee & m), $sformatf("EARLY w%0d: D first with threads 1..3 of each group", w));
          check(or_mask[w][9] == m, $sformatf("EARLY w%0d: D reached by all", w));
          check(visits[w][8] == 2 && first_mask[w][8] == (32'hcccc_cccc & m), $sformatf("EARLY w%0d: B", w));
          check(visits[w][10] == 1 && first_mask[w][10] == m, $sformatf("EARLY w%0d: E once with all threads", w));
        end
        P_SPIN: begin
          int nact;
          nact = $countones(m);
          check(visits[w][5] == nact, $sformatf("SPIN w%0d: %0d critical sections (got %0d)", w, nact, visits[w][5]));
          for (int t = 0; t < WS; t++)
            check(crit_cnt[w][t] == int'(m[t]), $sformatf("SPIN w%0d thread %0d: critical section once", w, t));
          check(visits[w][7] == 1 && first_mask[w][7] == m, $sformatf("SPIN w%0d: reconverged after the lock", w));
        end
        P_WSYNC: begin
          check(visits[w][4] == 1 && first_mask[w][4] == m, $sformatf("WSYNC w%0d: synchronised once", w));
          check(visits[w][20] == 1 && first_mask[w][20] == (32'h7777_7777 & m), $sformatf("WSYNC w%0d: CALL after EXIT", w));
          check(visits[w][8] == 1, $sformatf("WSYNC w%0d: RET", w));
          for (int t = 0; t < WS; t++) if (m[t] && (t % 4) != 3)
            check(r0[w][t] == (32'h7777_7777 & m), $sformatf("WSYNC w%0d: BMOV dropped finished threads (%h)", w, r0[w][t]));
        end
        P_DEEP: begin
          check(visits[w][34] == 1 && first_mask[w][34] == m, $sformatf("DEEP w%0d: reconverged with all threads", w));
          check(visits[w][33] == $countones(m), $sformatf("DEEP w%0d: every thread reached S alone", w));
          if (m == '1) check(max_wsc[w] == 32, $sformatf("DEEP w%0d: WS reached 32 entries (%0d)", w, max_wsc[w]));
        end
        default: ;
      endcase
    end

    $display("mechanisms: diverge=%0d reconverge=%0d reconv_empty=%0d yield_swap=%0d yield_nop=%0d break=%0d",
             n_div, n_rec, n_recempty, n_yswap, n_ynop, n_brk);
    $display("            bmov_out=%0d bmov_in=%0d exit_partial=%0d exit_path=%0d warpsync_alloc=%0d warpsync_join=%0d",
             n_bout, n_bin, n_exitp, n_exitw, n_walloc, n_wjoin);
    $display("            reconvergence_cycles=%0d multi_port_cycles=%0d full_ws_cycles=%0d",
             n_recwait, n_multi, n_full_ws);
    check(n_div > 0, "mechanism: divergence");
    check(n_rec > 0, "mechanism: reconvergence");
    check(n_yswap > 0, "mechanism: YIELD swap");
    check(n_ynop > 0, "mechanism: YIELD without sibling");
    check(n_brk > 0, "mechanism: BREAK");
    check(n_bout > 0 && n_bin > 0, "mechanism: BMOV both ways");
    check(n_exitp > 0 && n_exitw > 0, "mechanism: partial and whole-path EXIT");
    check(n_walloc > 0 && n_wjoin > 0, "mechanism: WARPSYNC allocate and join");
    check(n_recwait > 0, "mechanism: issue withheld for reconvergence");
    check(n_multi > 0, "mechanism: several schedulers updating in one cycle");
    check(n_full_ws > 0, "mechanism: WS stack full (32 paths)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
