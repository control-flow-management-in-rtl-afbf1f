// tb_pred_eval: checks the predicate unit on all 16 combinations of present/negated
// guard and operand predicates, with random predicate register values, against the rule
// "a thread acts when the (possibly negated) guard and operand predicates both hold; an
// absent predicate holds". Includes the two worked examples of the instruction
// descriptions: '@P0 INST !P1' and '@!P0 BRA P1'.
module tb_pred_eval;
  localparam int unsigned WS = 32;
  logic          g_en, g_neg, o_en, o_neg;
  logic [WS-1:0] g_val, o_val, mask;
  int checks = 0, failures = 0;

  pred_eval dut (.g_en_i(g_en), .g_neg_i(g_neg), .g_val_i(g_val),
                 .o_en_i(o_en), .o_neg_i(o_neg), .o_val_i(o_val), .mask_o(mask));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 400; it++) begin
      logic [WS-1:0] want;
      {g_en, g_neg, o_en, o_neg} = 4'(it);
      g_val = $urandom; o_val = $urandom;
      #1;
      for (int t = 0; t < WS; t++) begin
        bit g, o;
        g = !g_en || (g_val[t] != g_neg);
        o = !o_en || (o_val[t] != o_neg);
        want[t] = g && o;
      end
      checks++;
      if (mask !== want) begin
        failures++;
        $display("FAIL: en/neg=%b%b%b%b got %h want %h", g_en, g_neg, o_en, o_neg, mask, want);
      end
    end
    // '@P0 INST !P1': threads with P0 true and P1 false.
    g_en = 1; g_neg = 0; g_val = 32'h0000_000c; o_en = 1; o_neg = 1; o_val = 32'h0000_0006;
    #1; checks++; if (mask !== 32'h0000_0008) begin failures++; $display("FAIL: @P0 INST !P1"); end
    // '@!P0 BRA P1': threads with P0 false and P1 true.
    g_en = 1; g_neg = 1; o_en = 1; o_neg = 0;
    #1; checks++; if (mask !== 32'h0000_0002) begin failures++; $display("FAIL: @!P0 BRA P1"); end
    // unpredicated: all threads
    g_en = 0; o_en = 0;
    #1; checks++; if (mask !== '1) begin failures++; $display("FAIL: unpredicated"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
