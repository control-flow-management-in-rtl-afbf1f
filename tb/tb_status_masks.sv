// tb_status_masks: random set/clear traffic on the waiting and finished masks against a
// reference model ("waiting <= (waiting & ~clr) | set; finished <= finished | set"),
// plus reset (no threads: all finished) and launch loading.
module tb_status_masks;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic init;
  logic [31:0] init_fin, wset, wclr, fset, waiting, finished;
  logic [31:0] rw, rf;
  int checks = 0, failures = 0;

  status_masks dut (.clk_i(clk), .rst_ni(rst_n), .init_i(init), .init_fin_i(init_fin),
    .wait_set_i(wset), .wait_clr_i(wclr), .fin_set_i(fset),
    .waiting_o(waiting), .finished_o(finished));

  task automatic cmp(input string what);
    checks++;
    if (waiting != rw || finished != rf) begin
      failures++;
      $display("FAIL %s: %h/%h want %h/%h", what, waiting, finished, rw, rf);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    init = 0; init_fin = 0; wset = 0; wclr = 0; fset = 0;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    rw = 0; rf = '1;
    cmp("reset");
    for (int it = 0; it < 1000; it++) begin
      init = ($urandom_range(0, 49) == 0); init_fin = $urandom;
      wset = $urandom & $urandom; wclr = $urandom & ~wset; fset = $urandom & $urandom & $urandom;
      @(posedge clk); #1;
      if (init) begin rw = 0; rf = init_fin; end
      else begin rw = (rw & ~wclr) | wset; rf = rf | fset; end
      init = 0;
      cmp("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
