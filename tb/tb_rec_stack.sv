// tb_rec_stack: random push/pop sequences on the REC stack against a reference stack in
// testbench arrays; checks the top (PC, Bx ID) and count every cycle, fills it to its full
// depth of 31 entries and checks that launch empties it.
module tb_rec_stack;
  localparam int unsigned D = 31;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, push, pop, ovf;
  logic [31:0] push_pc, top_pc;
  logic [2:0]  push_id, top_id;
  logic [4:0]  count;

  rec_stack dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .push_i(push),
    .push_pc_i(push_pc), .push_id_i(push_id), .pop_i(pop), .top_pc_o(top_pc),
    .top_id_o(top_id), .count_o(count), .overflow_o(ovf));

  logic [31:0] rpc [D];
  logic [2:0]  rid [D];
  int n = 0, checks = 0, failures = 0, max_n = 0;

  task automatic cmp(input string what);
    checks++;
    if (count != 5'(n) || ovf || (n > 0 && (top_pc != rpc[n-1] || top_id != rid[n-1]))) begin
      failures++;
      $display("FAIL %s: n=%0d count=%0d top=%h/%0d", what, n, count, top_pc, top_id);
    end
  endtask

  task automatic do_op(input bit is_push);
    push = is_push; pop = !is_push; push_pc = $urandom; push_id = 3'($urandom);
    @(posedge clk); #1;
    if (is_push) begin rpc[n] = push_pc; rid[n] = push_id; n++; end
    else n--;
    if (n > max_n) max_n = n;
    push = 0; pop = 0;
    cmp(is_push ? "push" : "pop");
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; push = 0; pop = 0; push_pc = 0; push_id = 0;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    cmp("reset");
    for (int i = 0; i < 2000; i++) begin
      bit p;
      p = ($urandom_range(0, 99) < 55);
      if (n == 0) p = 1;
      if (n == D) p = 0;
      do_op(p);
    end
    while (n < D) do_op(1);
    checks++;
    if (max_n != D) begin failures++; $display("FAIL: depth %0d never reached", D); end
    clear = 1; @(posedge clk); #1; clear = 0; n = 0;
    cmp("clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
