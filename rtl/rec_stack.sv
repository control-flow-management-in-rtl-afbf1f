// rec_stack: the Reconvergence (REC) stack of one warp.
//
// Each entry is a pending reconvergence point: the PC the reconverged threads continue
// from and the ID of the Bx register that holds its reconvergence mask. The mask itself
// lives in the Bx register, not in the entry, so BREAK can still edit the mask of an entry
// that is not on top, and several entries can share one Bx register. Reconvergences happen
// in stack order: only the top entry is ever checked. Pushed by BSSY and by the first
// WARPSYNC of a group; popped when its threads reconverge. One push or one pop per cycle
// (push wins if both are asked, which the controller never does). The entry format follows
// the paper; the register-array storage is this design's choice. A push on a full stack
// is dropped and sets the sticky overflow flag.
module rec_stack #(
  parameter int unsigned PC_W   = hanoi_pkg::DEF_PC_W,
  parameter int unsigned NUM_BX = hanoi_pkg::DEF_NUM_BX,
  parameter int unsigned DEPTH  = hanoi_pkg::DEF_REC_DEPTH,
  localparam int unsigned IDW   = $clog2(NUM_BX),
  localparam int unsigned CW    = $clog2(DEPTH + 1),
  localparam int unsigned IW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            clear_i,    // empty the stack (warp launch)
  input  logic            push_i,
  input  logic [PC_W-1:0] push_pc_i,
  input  logic [IDW-1:0]  push_id_i,
  input  logic            pop_i,
  output logic [PC_W-1:0] top_pc_o,
  output logic [IDW-1:0]  top_id_o,
  output logic [CW-1:0]   count_o,
  output logic            overflow_o
);
  logic [PC_W-1:0] pc_q [DEPTH];
  logic [IDW-1:0]  id_q [DEPTH];
  logic [CW-1:0]   cnt_q;
  logic            ovf_q;
  logic [IW-1:0]   top_idx, wr_idx;
  logic            full, has_top;

  always_comb begin
    has_top    = (cnt_q != '0);
    full       = (cnt_q == CW'(DEPTH));
    top_idx    = has_top ? IW'(cnt_q - CW'(1)) : '0;
    wr_idx     = IW'(cnt_q);
    top_pc_o   = has_top ? pc_q[top_idx] : '0;
    top_id_o   = has_top ? id_q[top_idx] : '0;
    count_o    = cnt_q;
    overflow_o = ovf_q;
  end

  always_ff @(posedge clk_i) begin
    if (!clear_i && push_i && !full) begin
      pc_q[wr_idx] <= push_pc_i;
      id_q[wr_idx] <= push_id_i;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cnt_q <= '0;
      ovf_q <= 1'b0;
    end else if (clear_i) begin
      cnt_q <= '0;
      ovf_q <= 1'b0;
    end else if (push_i) begin
      if (full) ovf_q <= 1'b1;
      else      cnt_q <= cnt_q + CW'(1);
    end else if (pop_i && has_top) begin
      cnt_q <= cnt_q - CW'(1);
    end
  end

  a_no_overflow: assert property (@(posedge clk_i) disable iff (!rst_ni)
    !clear_i && push_i |-> !full) else $error("rec_stack: push on a full stack");
  a_no_underflow: assert property (@(posedge clk_i) disable iff (!rst_ni)
    !clear_i && pop_i |-> has_top) else $error("rec_stack: pop of an empty stack");
  a_not_both: assert property (@(posedge clk_i) disable iff (!rst_ni)
    !(push_i && pop_i)) else $error("rec_stack: push and pop in one cycle");
endmodule
