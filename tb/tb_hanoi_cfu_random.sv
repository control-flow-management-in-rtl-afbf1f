// tb_hanoi_cfu_random: random instruction streams on one warp's control flow management
// unit, checked every cycle against a behavioural model of the Hanoi state.
//
// The model keeps the WS stack, REC stack, Bx registers, waiting and finished masks as
// plain arrays and applies the instruction semantics directly. Each cycle the testbench
// compares the unit's offered PC and mask, issue/ready, stack depths, waiting and
// finished masks and done/stalled with the model. It then picks a random
// instruction for the running path with a random predicate and sends it. The stream
// covers BRA (uniform and divergent), BSSY, BSYNC, WARPSYNC, BREAK, both BMOV
// directions, EXIT, YIELD, CALL/RET and plain instructions. Random streams often
// deadlock (threads wait for a point that can never complete) or finish; the warp is
// then relaunched with a new random thread mask, and now and then relaunched in the
// middle of a run. Branches that would overflow the WS stack and BSSYs that would
// overflow the REC stack are turned into uniform branches and plain instructions.
// Counts of divergence, reconvergence (including cascades and empty ones), YIELD swaps
// and WARPSYNC joins are printed, and each must occur. Runs at the default sizes. A Bx
// register read by BMOV after it was invalidated returns its last mask, as in the unit.
module tb_hanoi_cfu_random;
  import hanoi_pkg::*;

  localparam int WS = 32, NBX = 8, WSD = 32, RECD = 31, STEP = 16;
  localparam int N_UPD = 200000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              launch;
  logic [31:0]       launch_pc;
  logic [WS-1:0]     launch_mask;
  logic              issue_valid, upd_valid, upd_ready, done, stalled;
  logic [31:0]       pc;
  logic [WS-1:0]     amask, upd_pred, upd_rdata, bmov_data, waiting, finished;
  cfu_update_t       upd;
  cfu_error_t        err;
  cfu_event_t        ev;
  logic [5:0]        ws_count;
  logic [4:0]        rec_count;

  hanoi_cfu dut (
    .clk_i(clk), .rst_ni(rst_n),
    .launch_i(launch), .launch_pc_i(launch_pc), .launch_mask_i(launch_mask),
    .issue_valid_o(issue_valid), .pc_o(pc), .active_mask_o(amask),
    .upd_valid_i(upd_valid), .upd_ready_o(upd_ready), .upd_i(upd),
    .upd_pred_i(upd_pred), .upd_rdata_i(upd_rdata), .bmov_data_o(bmov_data),
    .done_o(done), .stalled_o(stalled), .error_o(err), .event_o(ev),
    .ws_count_o(ws_count), .rec_count_o(rec_count), .waiting_o(waiting), .finished_o(finished));

  // ---------------------------------------------------------------- model state
  int            m_wn, m_rn;
  logic [31:0]   m_wpc [WSD];
  logic [WS-1:0] m_wmk [WSD];
  logic [31:0]   m_rpc [RECD];
  int            m_rid [RECD];
  logic          m_bv [NBX];
  logic [WS-1:0] m_bm [NBX];
  logic [WS-1:0] m_wait, m_fin;

  int checks = 0, failures = 0;
  int n_upd = 0, n_launch = 0, n_done = 0, n_stall = 0;
  int n_div = 0, n_rec = 0, n_rec_empty = 0, n_cascade = 0, n_yswap = 0, n_ynop = 0;
  int n_walloc = 0, n_wjoin = 0, n_brk = 0, n_exitp = 0, n_wsfull = 0, n_recfull = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 20) $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  function automatic int popc(input logic [WS-1:0] m);
    return $countones(m);
  endfunction

  function automatic bit m_reconv();
    return m_rn > 0 && m_bv[m_rid[m_rn-1]] && ((m_bm[m_rid[m_rn-1]] & ~m_wait) == '0);
  endfunction

  task automatic m_launch(input logic [31:0] lpc, input logic [WS-1:0] lm);
    m_wn = 1; m_wpc[0] = lpc; m_wmk[0] = lm;
    m_rn = 0;
    for (int i = 0; i < NBX; i++) m_bv[i] = 1'b0;   // masks keep their old values
    m_wait = '0; m_fin = ~lm;
  endtask

  task automatic compare(input string where);
    bit ivalid;
    ivalid = (m_wn > 0) && !m_reconv();
    check(issue_valid == ivalid, $sformatf("%s: issue_valid %0d want %0d", where, issue_valid, ivalid));
    check(upd_ready == ivalid, $sformatf("%s: upd_ready %0d want %0d", where, upd_ready, ivalid));
    check(int'(ws_count) == m_wn && int'(rec_count) == m_rn,
          $sformatf("%s: depths %0d/%0d want %0d/%0d", where, ws_count, rec_count, m_wn, m_rn));
    check(waiting == m_wait && finished == m_fin,
          $sformatf("%s: waiting/finished %h/%h want %h/%h", where, waiting, finished, m_wait, m_fin));
    if (m_wn > 0)
      check(pc == m_wpc[m_wn-1] && amask == m_wmk[m_wn-1],
            $sformatf("%s: top %h/%h want %h/%h", where, pc, amask, m_wpc[m_wn-1], m_wmk[m_wn-1]));
    check(done == (m_wn == 0 && m_fin == '1), $sformatf("%s: done", where));
    check(stalled == (m_wn == 0 && !m_reconv() && m_fin != '1), $sformatf("%s: stalled", where));
    check(!err.ws_overflow && !err.rec_overflow && !err.pc_mismatch, $sformatf("%s: error flags", where));
  endtask

  // A random predicate over the running path: all, none or a random subset.
  function automatic logic [WS-1:0] rand_pred(input logic [WS-1:0] top);
    int k;
    k = $urandom_range(0, 7);
    if (k < 2) return '1;
    if (k < 3) return '0;
    if (k < 4) return top & ~(top - 1);   // lowest thread only
    return $urandom;
  endfunction

  // Targets come from a small PC range so WARPSYNC groups sometimes meet.
  function automatic logic [31:0] rand_pc();
    return 32'($urandom_range(0, 63) * STEP);
  endfunction

  bit          prev_was_reconv;

  initial begin
    #50000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    launch = 0; launch_pc = 0; launch_mask = 0; upd_valid = 0; upd = '0;
    upd_pred = '0; upd_rdata = '0;
    m_launch('0, '1);
    for (int i = 0; i < NBX; i++) m_bm[i] = '0;     // reset clears the masks
    m_wn = 0; m_fin = '1;
    prev_was_reconv = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    #1;
    // reset: nothing runs, every thread counts as finished
    check(!issue_valid && done && ws_count == 0 && rec_count == 0, "reset state");
    @(negedge clk);

    while (n_upd < N_UPD) begin
      upd_valid = 1'b0;
      launch = 1'b0;
      #1;
      compare("cycle");
      // relaunch when the warp finished or deadlocked, and now and then mid-run
      if ((m_wn == 0 && !m_reconv()) || $urandom_range(0, 999) == 0) begin
        logic [WS-1:0] lm;
        if (m_wn == 0) begin
          if (m_fin == '1) n_done++; else n_stall++;
        end
        lm = $urandom;
        if ($urandom_range(0, 3) == 0) lm = '1;
        if (lm == '0) lm = 32'h1;
        launch = 1'b1; launch_pc = rand_pc(); launch_mask = lm;
        @(negedge clk);
        m_launch(launch_pc, lm);
        n_launch++;
        prev_was_reconv = 0;
        continue;
      end
      if (m_reconv()) begin
        // the unit spends this cycle on the reconvergence
        int id;
        logic [WS-1:0] rm;
        id = m_rid[m_rn-1];
        rm = m_bm[id];
        if (prev_was_reconv) n_cascade++;
        if (rm != '0) begin
          m_wpc[m_wn] = m_rpc[m_rn-1]; m_wmk[m_wn] = rm; m_wn++;
          n_rec++;
        end else begin
          n_rec_empty++;
        end
        m_rn--;
        m_bv[id] = 1'b0;
        m_wait &= ~rm;
        prev_was_reconv = 1;
        @(negedge clk);
        continue;
      end
      prev_was_reconv = 0;

      // ------------------------------------------------ pick and send one instruction
      begin
        int k, top, sel_bx;
        logic [WS-1:0] tm, pr, ex, rs, rd;
        logic [31:0] tpc, npc, tgt;
        cf_op_e op;
        top = m_wn - 1;
        tm = m_wmk[top]; tpc = m_wpc[top]; npc = tpc + STEP;
        pr = rand_pred(tm);
        ex = tm & pr; rs = tm & ~ex;
        tgt = rand_pc();
        sel_bx = $urandom_range(0, NBX - 1);
        rd = $urandom;
        k = $urandom_range(0, 99);
        if      (k < 28) op = OP_BRA;
        else if (k < 40) op = OP_BSSY;
        else if (k < 54) op = OP_BSYNC;
        else if (k < 60) op = OP_WARPSYNC;
        else if (k < 66) op = OP_BREAK;
        else if (k < 70) op = OP_BMOV_B2R;
        else if (k < 75) op = OP_BMOV_R2B;
        else if (k < 78) op = OP_EXIT;
        else if (k < 86) op = OP_YIELD;
        else if (k < 88) op = OP_CALL;
        else if (k < 90) op = OP_RET;
        else             op = OP_OTHER;
        // Let later groups meet an earlier group's WARPSYNC: branches sometimes jump to
        // the instruction of the REC top's point, and a path standing there syncs.
        if (m_rn > 0 && $urandom_range(0, 3) == 0) tgt = m_rpc[m_rn-1] - STEP;
        if (m_rn > 0 && npc == m_rpc[m_rn-1] && $urandom_range(0, 1) == 0) op = OP_WARPSYNC;
        // keep the stacks within their sizes
        if (op == OP_BRA && ex != '0 && rs != '0 && m_wn == WSD) begin
          pr = '1; ex = tm; rs = '0; n_wsfull++;
        end
        if (op == OP_BSSY && m_rn == RECD) begin op = OP_OTHER; n_recfull++; end
        if (op == OP_WARPSYNC && m_rn == RECD) op = OP_OTHER;

        upd_valid  = 1'b1;
        upd.op     = op;
        upd.pc     = tpc;
        upd.target = tgt;
        upd.bx_id  = BX_ID_W'(sel_bx);
        upd_pred   = pr;
        upd_rdata  = rd;
        #1;
        check(upd_ready, "update accepted");
        if (op == OP_BMOV_B2R)
          check(bmov_data == m_bm[sel_bx], $sformatf("BMOV data %h want %h", bmov_data, m_bm[sel_bx]));

        // ------------------------------------------------ model update
        case (op)
          OP_BRA: begin
            if (ex == '0) m_wpc[top] = npc;
            else if (rs == '0) m_wpc[top] = tgt;
            else begin
              n_div++;
              if (popc(ex) >= popc(rs)) begin
                m_wpc[top] = npc; m_wmk[top] = rs;
                m_wpc[top+1] = tgt; m_wmk[top+1] = ex;
              end else begin
                m_wpc[top] = tgt; m_wmk[top] = ex;
                m_wpc[top+1] = npc; m_wmk[top+1] = rs;
              end
              m_wn++;
            end
          end
          OP_CALL, OP_RET: m_wpc[top] = tgt;
          OP_BSSY: begin
            m_bv[sel_bx] = 1'b1; m_bm[sel_bx] = tm;
            m_rpc[m_rn] = tgt + STEP; m_rid[m_rn] = sel_bx; m_rn++;
            m_wpc[top] = npc;
          end
          OP_BSYNC, OP_WARPSYNC: begin
            if (ex == '0) m_wpc[top] = npc;
            else begin
              bit known;
              int fb;
              known = (m_rn > 0) && (m_rpc[m_rn-1] == npc);
              m_wait |= ex;
              if (rs == '0) m_wn--;
              else begin m_wpc[top] = npc; m_wmk[top] = rs; end
              if (op == OP_WARPSYNC) begin
                if (known) n_wjoin++;
                else begin
                  fb = -1;
                  for (int i = NBX - 1; i >= 0; i--) if (!m_bv[i]) fb = i;
                  if (fb >= 0) begin
                    m_bv[fb] = 1'b1; m_bm[fb] = rd & ~m_fin;
                    m_rpc[m_rn] = npc; m_rid[m_rn] = fb; m_rn++;
                    n_walloc++;
                  end
                end
              end
            end
          end
          OP_BREAK: begin
            m_bm[sel_bx] &= ~ex;
            m_wpc[top] = npc;
            if (ex != '0) n_brk++;
          end
          OP_BMOV_B2R: begin m_bv[sel_bx] = 1'b0; m_wpc[top] = npc; end
          OP_BMOV_R2B: begin m_bv[sel_bx] = 1'b1; m_bm[sel_bx] = rd & ~m_fin; m_wpc[top] = npc; end
          OP_EXIT: begin
            if (ex == '0) m_wpc[top] = npc;
            else begin
              m_fin |= ex;
              for (int i = 0; i < NBX; i++) m_bm[i] &= ~ex;
              if (rs == '0) m_wn--;
              else begin m_wpc[top] = npc; m_wmk[top] = rs; n_exitp++; end
            end
          end
          OP_YIELD: begin
            int id;
            bit sib;
            sib = 0;
            if (m_wn > 1 && m_rn > 0) begin
              id = m_rid[m_rn-1];
              sib = m_bv[id] && (((m_wmk[top] | m_wmk[top-1]) & ~m_bm[id]) == '0);
            end
            if (sib) begin
              logic [WS-1:0] t;
              t = m_wmk[top];
              m_wpc[top] = m_wpc[top-1]; m_wmk[top] = m_wmk[top-1];
              m_wpc[top-1] = npc;        m_wmk[top-1] = t;
              n_yswap++;
            end else begin
              m_wpc[top] = npc;
              n_ynop++;
            end
          end
          default: m_wpc[top] = npc;
        endcase
        n_upd++;
        @(negedge clk);
      end
    end
    upd_valid = 1'b0;

    $display("updates=%0d launches=%0d finished=%0d deadlocked=%0d", n_upd, n_launch, n_done, n_stall);
    $display("diverge=%0d reconverge=%0d reconv_empty=%0d cascades=%0d yield_swap=%0d yield_nop=%0d",
             n_div, n_rec, n_rec_empty, n_cascade, n_yswap, n_ynop);
    $display("warpsync_alloc=%0d warpsync_join=%0d break=%0d exit_partial=%0d ws_full=%0d rec_full=%0d",
             n_walloc, n_wjoin, n_brk, n_exitp, n_wsfull, n_recfull);
    check(n_div > 0,       "divergence happened");
    check(n_rec > 0,       "reconvergence happened");
    check(n_rec_empty > 0, "empty reconvergence happened");
    check(n_cascade > 0,   "cascaded reconvergence happened");
    check(n_yswap > 0,     "YIELD swap happened");
    check(n_walloc > 0,    "WARPSYNC allocation happened");
    check(n_wjoin > 0,     "WARPSYNC join happened");
    check(n_exitp > 0,     "partial EXIT happened");
    check(n_done > 0,      "a warp finished");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
