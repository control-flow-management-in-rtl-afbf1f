// tb_hanoi_cfu: self-checking test of one warp's control flow management unit.
//
// Plays the role of the SIMT core: waits until the unit offers a path, checks the PC and
// active mask it offers against a hand-derived trace, then returns the executed
// instruction with its predicate mask. The traces are the execution examples of the
// design description, on a warp whose first four threads exist (the rest are absent):
//   1. the state snapshot of the microarchitecture example (two WS paths, two REC entries,
//      B0=1110, B1=1100, waiting=1000, finished=0001) built by a short program (the
//      stack depths and the masks are checked there; the stack entries and Bx contents
//      show in the reconvergences that follow), then a
//      YIELD there that must not switch paths (the two paths are not siblings);
//   2. nested divergence with a BMOV spill/restore of B0 through R0;
//   3. reconvergence earlier than the immediate post-dominator with BREAK;
//   4. the spinlock loop where YIELD switches to the sibling path;
//   5. WARPSYNC from two groups, partial EXIT, BMOV filtering of finished threads,
//      CALL/RET.
// Each step also checks how many cycles the unit withheld the path (one per
// reconvergence). PCs are written in units of the 16-byte instruction step.
module tb_hanoi_cfu;
  import hanoi_pkg::*;

  localparam int unsigned WS = 32;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
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

  int checks = 0, failures = 0;
  int n_div = 0, n_rec = 0, n_yswap = 0, n_ynop = 0, n_brk = 0, n_bout = 0, n_bin = 0;
  int n_walloc = 0, n_wjoin = 0, n_exitp = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s (t=%0t pc=%0d mask=%h)", what, $time, pc / 16, amask);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    n_div   += int'(ev.diverge);
    n_rec   += int'(ev.reconverge);
    n_yswap += int'(ev.yield_swap);
    n_ynop  += int'(ev.yield_nop);
    n_brk   += int'(ev.brk);
    n_bout  += int'(ev.bmov_out);
    n_bin   += int'(ev.bmov_in);
    n_walloc += int'(ev.ws_alloc);
    n_wjoin += int'(ev.ws_join);
    n_exitp += int'(ev.exit_partial);
  end

  // One instruction: expect (pc, mask) offered after exp_wait withheld cycles, then
  // return op with predicate mask pred, target tgt, Bx id bx, register value rd.
  // For BMOV B->R, rd is the value the unit must return.
  task automatic step(input int epc, input logic [3:0] emask, input cf_op_e op,
                      input int tgt = 0, input int bx = 0, input logic [3:0] pred = 4'hf,
                      input logic [3:0] rd = 4'h0, input int exp_wait = 0);
    int w;
    w = 0;
    while (!issue_valid && w < 20) begin
      w++;
      @(negedge clk);
    end
    check(issue_valid, $sformatf("path offered at step pc=%0d", epc));
    if (!issue_valid) return;   // nothing to execute: skip, the trace is already wrong
    check(pc == 32'(epc * 16), $sformatf("pc: got %0d want %0d", pc / 16, epc));
    check(amask == WS'(emask), $sformatf("mask at pc=%0d: got %h want %h", epc, amask, emask));
    check(w == exp_wait, $sformatf("withheld cycles at pc=%0d: got %0d want %0d", epc, w, exp_wait));
    upd_valid = 1'b1;
    upd.op    = op;
    upd.pc    = pc;
    upd.target = 32'(tgt * 16);
    upd.bx_id = BX_ID_W'(bx);
    upd_pred  = {{(WS-4){1'b1}}, pred};
    upd_rdata = WS'(rd);
    #1;
    check(upd_ready, "update accepted");
    if (op == OP_BMOV_B2R) check(bmov_data == WS'(rd), $sformatf("BMOV data %h want %h", bmov_data, rd));
    @(negedge clk);
    upd_valid = 1'b0;
  endtask

  task automatic start(input logic [3:0] m);
    @(negedge clk);
    launch = 1'b1; launch_pc = '0; launch_mask = WS'(m);
    @(negedge clk);
    launch = 1'b0;
  endtask

  task automatic expect_done();
    int w;
    w = 0;
    while (!done && w < 5) begin w++; @(negedge clk); end
    check(done, "warp done");
    check(!stalled, "not stalled");
    check(err == '0, "no error flags");
    check(rec_count == 0 && ws_count == 0, "stacks empty at end");
  endtask

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    launch = 0; launch_pc = 0; launch_mask = 0; upd_valid = 0; upd = '0;
    upd_pred = '0; upd_rdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    check(done && !issue_valid, "idle after reset");

    // ---------------- 1. microarchitecture snapshot (WS 20/0100 over 50/0010) -------
    // Builds the example state: path {2} at 20 over path {1} at 50, REC (100,B1) over
    // (31,B0), B0=1110, B1=1100, thread 3 waiting, thread 0 finished.
    start(4'hf);
    step(0, 4'hf, OP_BSSY, 30);                    // B0=1111, REC (31,B0)
    step(1, 4'hf, OP_EXIT, 0, 0, 4'h1);            // thread 0 exits, B0=1110
    step(2, 4'he, OP_BRA, 50, 0, 4'h2);            // thread 1 -> 50, {2,3} continue on top
    step(3, 4'hc, OP_BSSY, 99, 1);                 // B1=1100, REC (100,B1)
    step(4, 4'hc, OP_BRA, 60, 0, 4'h8);            // tie: thread 3 (taken) first
    step(60, 4'h8, OP_BSYNC, 0, 1);                // thread 3 waits
    step(5, 4'h4, OP_BRA, 20);                     // thread 2 jumps to 20
    #1;
    check(ws_count == 2 && rec_count == 2, "snapshot: 2 WS and 2 REC entries");
    check(waiting == WS'(4'h8), "snapshot: waiting 1000");
    check(finished == ~WS'(4'he), "snapshot: finished 0001 (+ absent threads)");
    step(20, 4'h4, OP_YIELD);                      // not siblings: NOP
    step(21, 4'h4, OP_BRA, 60);
    step(60, 4'h4, OP_BSYNC, 0, 1, 4'hf, 4'h0, 0); // {2,3} waiting -> reconverge at 100
    step(100, 4'hc, OP_BSYNC, 0, 0, 4'hf, 4'h0, 1);// wait at B0 point (1110)
    step(50, 4'h2, OP_BRA, 30);
    step(30, 4'h2, OP_BSYNC);                      // 1110 complete -> reconverge at 31
    step(31, 4'he, OP_EXIT, 0, 0, 4'hf, 4'h0, 1);
    expect_done();

    // ---------------- 2. nested divergence with BMOV -----------------------------------
    start(4'hf);
    step(0, 4'hf, OP_BSSY, 12, 0);                 // A: BSSY B0 (reconverge at F's BSYNC)
    step(1, 4'hf, OP_BMOV_B2R, 0, 0, 4'hf, 4'hf);  // A: BMOV R0,B0 -> 1111
    step(2, 4'hf, OP_BRA, 5, 0, 4'hc);             // A: @P0 BRA B, {2,3} taken
    step(5, 4'hc, OP_BSSY, 10, 0);                 // B: BSSY B0 = 1100
    step(6, 4'hc, OP_BRA, 9, 0, 4'h8);             // B: @P1 BRA C, {3} taken
    step(9, 4'h8, OP_OTHER);                       // C
    step(10, 4'h8, OP_BSYNC);                      // E
    step(7, 4'h4, OP_OTHER);                       // D
    step(8, 4'h4, OP_BRA, 10);
    step(10, 4'h4, OP_BSYNC);                      // E: {2,3} reconverge
    step(11, 4'hc, OP_BMOV_R2B, 0, 0, 4'hf, 4'hf, 1); // F: BMOV B0,R0
    step(12, 4'hc, OP_BSYNC);                      // F: BSYNC B0 (1111)
    step(3, 4'h3, OP_OTHER);                       // G
    step(4, 4'h3, OP_BRA, 11);
    step(11, 4'h3, OP_BMOV_R2B, 0, 0, 4'hf, 4'hf);
    step(12, 4'h3, OP_BSYNC);
    step(13, 4'hf, OP_EXIT, 0, 0, 4'hf, 4'h0, 1);  // H with all threads
    expect_done();

    // ---------------- 3. early reconvergence with BREAK --------------------------------
    start(4'hf);
    step(0, 4'hf, OP_BSSY, 7, 1);                  // A: BSSY B1 (D)
    step(1, 4'hf, OP_BSSY, 6, 0);                  // A: BSSY B0 (B)
    step(2, 4'hf, OP_BRA, 6, 0, 4'hc);             // A: @P0 BRA B
    step(6, 4'hc, OP_BSYNC);                       // B: {2,3} wait at B0
    step(3, 4'h3, OP_BREAK, 0, 0, 4'hd);           // C: @!P1 BREAK B0 removes thread 0
    step(4, 4'h3, OP_BRA, 6, 0, 4'h2);             // C: @P1 BRA B, thread 1
    step(6, 4'h2, OP_BSYNC);                       // B: 1110 complete
    step(7, 4'he, OP_BSYNC, 0, 0, 4'hf, 4'h0, 1);  // D with threads 1..3
    step(5, 4'h1, OP_BRA, 7);                      // thread 0 to D
    step(7, 4'h1, OP_BSYNC);
    step(8, 4'hf, OP_EXIT, 0, 0, 4'hf, 4'h0, 1);   // E with all threads
    expect_done();

    // ---------------- 4. spinlock with YIELD -------------------------------------------
    start(4'hf);
    step(0, 4'hf, OP_OTHER);                       // A: *mutex = 0
    step(1, 4'hf, OP_BSSY, 6, 0);                  // A: BSSY B0 (E)
    step(2, 4'hf, OP_YIELD);                       // B: no sibling
    step(3, 4'hf, OP_OTHER);                       // C: CAS, thread 3 wins
    step(4, 4'hf, OP_BRA, 2, 0, 4'h7);             // C: @!P0 BRA B
    step(2, 4'h7, OP_YIELD);                       // B: switch to sibling D
    step(5, 4'h8, OP_OTHER);                       // D: critical section, release
    step(6, 4'h8, OP_BSYNC);                       // E
    step(3, 4'h7, OP_OTHER);                       // C: thread 2 wins
    step(4, 4'h7, OP_BRA, 2, 0, 4'h3);
    step(2, 4'h3, OP_YIELD);
    step(5, 4'h4, OP_OTHER);
    step(6, 4'h4, OP_BSYNC);
    step(3, 4'h3, OP_OTHER);                       // thread 1 wins
    step(4, 4'h3, OP_BRA, 2, 0, 4'h1);             // tie: taken {0} first
    step(2, 4'h1, OP_YIELD);
    step(5, 4'h2, OP_OTHER);
    step(6, 4'h2, OP_BSYNC);
    step(3, 4'h1, OP_OTHER);                       // thread 0 wins
    step(4, 4'h1, OP_BRA, 2, 0, 4'h0);             // nobody loops
    step(5, 4'h1, OP_OTHER);
    step(6, 4'h1, OP_BSYNC);
    step(7, 4'hf, OP_EXIT, 0, 0, 4'hf, 4'h0, 1);
    expect_done();

    // ---------------- 5. WARPSYNC, partial EXIT, BMOV filter, CALL/RET ----------------
    start(4'hf);
    step(0, 4'hf, OP_BRA, 3, 0, 4'h3);             // tie: {0,1} taken first
    step(3, 4'h3, OP_WARPSYNC, 0, 0, 4'hf, 4'hf);  // first group: allocate B0, push REC
    step(1, 4'hc, OP_OTHER);
    step(2, 4'hc, OP_BRA, 3);
    step(3, 4'hc, OP_WARPSYNC, 0, 0, 4'hf, 4'hf);  // second group joins
    step(4, 4'hf, OP_EXIT, 0, 0, 4'h1, 4'h0, 1);   // thread 0 exits, rest continue
    step(5, 4'he, OP_BMOV_R2B, 0, 3, 4'hf, 4'hf);  // B3 <= 1111 & ~finished
    step(6, 4'he, OP_BMOV_B2R, 0, 3, 4'hf, 4'he);  // reads 1110
    step(7, 4'he, OP_CALL, 40);
    step(40, 4'he, OP_OTHER);
    step(41, 4'he, OP_RET, 8);
    step(8, 4'he, OP_WARPSYNC, 0, 0, 4'hf, 4'hf);  // mask names finished thread 0
    step(9, 4'he, OP_BSYNC, 0, 0, 4'h0, 4'h0, 1);  // predicated off: just advances
    step(10, 4'he, OP_EXIT);
    expect_done();

    check(n_div == 10 && n_rec == 9, "divergences 10, reconvergences 9");
    check(n_yswap == 3 && n_ynop == 2, "YIELD swaps 3, NOPs 2");
    check(n_brk == 1 && n_bout == 2 && n_bin == 3, "BREAK 1, BMOV out 2, BMOV in 3");
    check(n_walloc == 2 && n_wjoin == 1 && n_exitp == 2, "WARPSYNC alloc 2/join 1, partial EXIT 2");
    $display("events: div=%0d rec=%0d yswap=%0d ynop=%0d brk=%0d bout=%0d bin=%0d walloc=%0d wjoin=%0d exitp=%0d",
             n_div, n_rec, n_yswap, n_ynop, n_brk, n_bout, n_bin, n_walloc, n_wjoin, n_exitp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
