// tb_ws_stack: random operation sequences on the WS stack against a reference stack kept
// in testbench arrays. Checks top and second entries and the count after every cycle,
// drives it to its full depth (32 entries, one per thread of a fully diverged warp) and
// checks that launch loads a single path.
module tb_ws_stack;
  import hanoi_pkg::*;
  localparam int unsigned D = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic init;
  ws_op_e op;
  logic [31:0] a_pc, b_pc, top_pc, sec_pc;
  logic [31:0] a_mask, b_mask, top_mask, sec_mask;
  logic [5:0]  count;
  logic        ovf;

  ws_stack dut (.clk_i(clk), .rst_ni(rst_n), .init_i(init), .op_i(op),
    .a_pc_i(a_pc), .a_mask_i(a_mask), .b_pc_i(b_pc), .b_mask_i(b_mask),
    .top_pc_o(top_pc), .top_mask_o(top_mask), .sec_pc_o(sec_pc), .sec_mask_o(sec_mask),
    .count_o(count), .overflow_o(ovf));

  logic [31:0] rpc [D], rmask [D];
  int n = 0;
  bit rovf = 0;
  int checks = 0, failures = 0, max_n = 0;

  task automatic cmp(input string what);
    checks++;
    if (count != 6'(n) || ovf != rovf ||
        (n > 0 && (top_pc != rpc[n-1] || top_mask != rmask[n-1])) ||
        (n > 1 && (sec_pc != rpc[n-2] || sec_mask != rmask[n-2]))) begin
      failures++;
      $display("FAIL %s: n=%0d count=%0d top=%h/%h want %h/%h", what, n, count, top_pc, top_mask,
               n > 0 ? rpc[n-1] : 0, n > 0 ? rmask[n-1] : 0);
    end
  endtask

  task automatic do_op(input ws_op_e o);
    op = o; a_pc = $urandom; a_mask = $urandom; b_pc = $urandom; b_mask = $urandom;
    @(posedge clk); #1;
    case (o)
      WS_SET_TOP: begin rpc[n-1] = a_pc; rmask[n-1] = a_mask; end
      WS_PUSH: if (n == D) rovf = 1; else begin rpc[n] = a_pc; rmask[n] = a_mask; n++; end
      WS_POP: n--;
      WS_SPLIT: begin
        rpc[n-1] = a_pc; rmask[n-1] = a_mask;
        if (n == D) rovf = 1; else begin rpc[n] = b_pc; rmask[n] = b_mask; n++; end
      end
      WS_SWAP: begin
        logic [31:0] tp, tm;
        tp = rpc[n-1]; tm = rmask[n-1];
        rpc[n-1] = rpc[n-2]; rmask[n-1] = rmask[n-2];
        rpc[n-2] = a_pc; rmask[n-2] = tm;
      end
      default: ;
    endcase
    if (n > max_n) max_n = n;
    op = WS_NOP;
    cmp(o.name());
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    init = 0; op = WS_NOP; a_pc = 0; a_mask = 0; b_pc = 0; b_mask = 0;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    cmp("reset");
    // launch
    init = 1; a_pc = 32'h100; a_mask = 32'hffff_ffff;
    @(posedge clk); #1; init = 0;
    n = 1; rpc[0] = 32'h100; rmask[0] = '1;
    cmp("init");
    for (int i = 0; i < 3000; i++) begin
      int r;
      ws_op_e o;
      r = $urandom_range(0, 99);
      if (n == 0) o = WS_PUSH;
      else if (r < 20) o = WS_SET_TOP;
      else if (r < 45) o = (n == D) ? WS_POP : WS_PUSH;
      else if (r < 65) o = WS_POP;
      else if (r < 82) o = (n == D) ? WS_SET_TOP : WS_SPLIT;
      else o = (n > 1) ? WS_SWAP : WS_SET_TOP;
      do_op(o);
    end
    // fill to the full depth of a fully diverged warp, then unwind with swaps
    while (n < D) do_op((n % 2 == 0) ? WS_SPLIT : WS_PUSH);
    for (int i = 0; i < 10; i++) do_op(WS_SWAP);
    while (n > 0) do_op(WS_POP);
    checks++;
    if (max_n != D) begin failures++; $display("FAIL: never reached depth %0d (max %0d)", D, max_n); end
    $display("max depth %0d", max_n);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
