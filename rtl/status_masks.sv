// status_masks: the waiting and finished masks of one warp.
//
// waiting: threads that executed BSYNC/WARPSYNC and wait at the current reconvergence
//          point (the REC top). Set by BSYNC/WARPSYNC, cleared for the threads that
//          reconverge.
// finished: threads that executed EXIT. Set by EXIT; loaded at warp launch with the threads
//          the warp does not have, so that they are never waited for.
// Set and clear of the same waiting bit in one cycle: the set wins (never happens in the
// controller). The two masks follow the paper; the launch loading is this design's choice.
module status_masks #(
  parameter int unsigned WARP_SIZE = hanoi_pkg::DEF_WARP_SIZE
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 init_i,       // warp launch
  input  logic [WARP_SIZE-1:0] init_fin_i,   // finished mask loaded at launch
  input  logic [WARP_SIZE-1:0] wait_set_i,
  input  logic [WARP_SIZE-1:0] wait_clr_i,
  input  logic [WARP_SIZE-1:0] fin_set_i,
  output logic [WARP_SIZE-1:0] waiting_o,
  output logic [WARP_SIZE-1:0] finished_o
);
  logic [WARP_SIZE-1:0] wait_q, fin_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wait_q <= '0;
      fin_q  <= '1;   // no threads: everything finished
    end else if (init_i) begin
      wait_q <= '0;
      fin_q  <= init_fin_i;
    end else begin
      wait_q <= (wait_q & ~wait_clr_i) | wait_set_i;
      fin_q  <= fin_q | fin_set_i;
    end
  end

  assign waiting_o  = wait_q;
  assign finished_o = fin_q;
endmodule
