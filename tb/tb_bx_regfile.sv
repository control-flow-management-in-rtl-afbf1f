// tb_bx_regfile: random mixes of write, BREAK bit clear, invalidate and EXIT clear on the
// eight Bx registers against a reference model in testbench arrays, with the update order
// "clears first, a write wins". Checks both read ports for every register and the
// allocator (lowest-numbered invalid register) every cycle, including the worked example
// '@P0 BREAK !P1, B0' turning 1111 into 1110, and launch invalidating all registers.
module tb_bx_regfile;
  localparam int unsigned N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, wr_en, brk_en, inv_en, exit_en;
  logic [2:0] wr_id, brk_id, inv_id, ra_id, rb_id, alloc_id;
  logic [31:0] wr_mask, brk_bits, exit_bits, ra_mask, rb_mask;
  logic ra_valid, rb_valid, alloc_ok;

  bx_regfile dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear),
    .wr_en_i(wr_en), .wr_id_i(wr_id), .wr_mask_i(wr_mask),
    .brk_en_i(brk_en), .brk_id_i(brk_id), .brk_bits_i(brk_bits),
    .inv_en_i(inv_en), .inv_id_i(inv_id), .exit_en_i(exit_en), .exit_bits_i(exit_bits),
    .ra_id_i(ra_id), .ra_mask_o(ra_mask), .ra_valid_o(ra_valid),
    .rb_id_i(rb_id), .rb_mask_o(rb_mask), .rb_valid_o(rb_valid),
    .alloc_ok_o(alloc_ok), .alloc_id_o(alloc_id));

  logic [31:0] rm [N];
  bit rv [N];
  int checks = 0, failures = 0;

  task automatic cmp_all(input string what);
    int lo;
    lo = -1;
    for (int i = N - 1; i >= 0; i--) if (!rv[i]) lo = i;
    for (int i = 0; i < N; i++) begin
      ra_id = 3'(i); rb_id = 3'(N - 1 - i);
      #1;
      checks++;
      if (ra_mask != rm[i] || ra_valid != rv[i] || rb_mask != rm[N-1-i] || rb_valid != rv[N-1-i]) begin
        failures++;
        $display("FAIL %s: B%0d = %b/%h want %b/%h", what, i, ra_valid, ra_mask, rv[i], rm[i]);
      end
    end
    checks++;
    if (alloc_ok != (lo >= 0) || (lo >= 0 && alloc_id != 3'(lo))) begin
      failures++;
      $display("FAIL %s: alloc %b/%0d want %0d", what, alloc_ok, alloc_id, lo);
    end
  endtask

  task automatic cycle();
    @(posedge clk); #1;
    for (int i = 0; i < N; i++) begin
      if (exit_en) rm[i] &= ~exit_bits;
      if (brk_en && brk_id == 3'(i)) rm[i] &= ~brk_bits;
      if (inv_en && inv_id == 3'(i)) rv[i] = 0;
      if (wr_en && wr_id == 3'(i)) begin rm[i] = wr_mask; rv[i] = 1; end
    end
    wr_en = 0; brk_en = 0; inv_en = 0; exit_en = 0;
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; wr_en = 0; brk_en = 0; inv_en = 0; exit_en = 0;
    wr_id = 0; brk_id = 0; inv_id = 0; ra_id = 0; rb_id = 0;
    wr_mask = 0; brk_bits = 0; exit_bits = 0;
    for (int i = 0; i < N; i++) begin rm[i] = 0; rv[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    cmp_all("reset");
    // worked example: B0 = 1111, '@P0 BREAK !P1, B0' with only thread 0 selected
    wr_en = 1; wr_id = 0; wr_mask = 32'hf; cycle();
    brk_en = 1; brk_id = 0; brk_bits = 32'h1; cycle();
    checks++;
    ra_id = 0; #1;
    if (ra_mask != 32'he) begin failures++; $display("FAIL: BREAK example"); end
    cmp_all("break example");
    for (int it = 0; it < 1500; it++) begin
      wr_en = ($urandom_range(0, 3) == 0);   wr_id = 3'($urandom);  wr_mask = $urandom;
      brk_en = ($urandom_range(0, 3) == 0);  brk_id = 3'($urandom); brk_bits = $urandom & $urandom;
      inv_en = ($urandom_range(0, 3) == 0);  inv_id = 3'($urandom);
      exit_en = ($urandom_range(0, 9) == 0); exit_bits = $urandom & $urandom & $urandom;
      cycle();
      cmp_all("random");
    end
    clear = 1; @(posedge clk); #1; clear = 0;
    for (int i = 0; i < N; i++) rv[i] = 0;
    cmp_all("clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
