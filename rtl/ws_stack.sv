// ws_stack: the Warp Split (WS) stack of one warp.
//
// Each entry is a path still to be executed: the PC of its next instruction and the mask of
// the threads that follow it. The top entry is the path in execution; paths run in stack
// order. One operation per cycle:
//   WS_SET_TOP  top <= (a_pc, a_mask)          ordinary instruction, partial EXIT/BSYNC
//   WS_PUSH     push (a_pc, a_mask)            reconvergence
//   WS_POP      pop                            whole path reached BSYNC/WARPSYNC/EXIT
//   WS_SPLIT    top <= a, then push b          divergent branch (b runs first)
//   WS_SWAP     exchange the top two entries;  YIELD to the sibling path; the yielding
//               the old top gets PC a_pc       path resumes after the YIELD
// The top and the entry below it are read combinationally. The entry format and the
// operations follow the paper; the register-array storage and the split/swap encodings
// are this design's choices. At warp launch (init_i) the stack is loaded with the one
// path of the whole warp. A push on a full stack is dropped and sets the sticky
// overflow flag; an assertion reports it in simulation.
module ws_stack #(
  parameter int unsigned WARP_SIZE = hanoi_pkg::DEF_WARP_SIZE,
  parameter int unsigned PC_W      = hanoi_pkg::DEF_PC_W,
  parameter int unsigned DEPTH     = hanoi_pkg::DEF_WS_DEPTH,
  localparam int unsigned CW       = $clog2(DEPTH + 1),
  localparam int unsigned IW       = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic                  init_i,      // warp launch: stack <= {(a_pc, a_mask)}; wins over op_i
  input  hanoi_pkg::ws_op_e     op_i,
  input  logic [PC_W-1:0]       a_pc_i,
  input  logic [WARP_SIZE-1:0]  a_mask_i,
  input  logic [PC_W-1:0]       b_pc_i,
  input  logic [WARP_SIZE-1:0]  b_mask_i,
  output logic [PC_W-1:0]       top_pc_o,
  output logic [WARP_SIZE-1:0]  top_mask_o,
  output logic [PC_W-1:0]       sec_pc_o,
  output logic [WARP_SIZE-1:0]  sec_mask_o,
  output logic [CW-1:0]         count_o,
  output logic                  overflow_o
);
  import hanoi_pkg::*;

  logic [PC_W-1:0]      pc_q   [DEPTH];
  logic [WARP_SIZE-1:0] mask_q [DEPTH];
  logic [CW-1:0]        cnt_q;
  logic                 ovf_q;

  logic [IW-1:0] top_idx, sec_idx, wr_idx;
  logic          full, has_top, has_sec;

  always_comb begin
    has_top = (cnt_q != '0);
    has_sec = (cnt_q > CW'(1));
    full    = (cnt_q == CW'(DEPTH));
    top_idx = has_top ? IW'(cnt_q - CW'(1)) : '0;
    wr_idx  = IW'(cnt_q);
    sec_idx = has_sec ? IW'(cnt_q - CW'(2)) : '0;
    top_pc_o   = has_top ? pc_q[top_idx]   : '0;
    top_mask_o = has_top ? mask_q[top_idx] : '0;
    sec_pc_o   = has_sec ? pc_q[sec_idx]   : '0;
    sec_mask_o = has_sec ? mask_q[sec_idx] : '0;
    count_o    = cnt_q;
    overflow_o = ovf_q;
  end

  // Storage: no reset needed, an entry is only read below the stack pointer.
  always_ff @(posedge clk_i) begin
    if (init_i) begin
      pc_q[0]   <= a_pc_i;
      mask_q[0] <= a_mask_i;
    end else begin
      unique case (op_i)
        WS_SET_TOP: if (has_top) begin
          pc_q[top_idx]   <= a_pc_i;
          mask_q[top_idx] <= a_mask_i;
        end
        WS_PUSH: if (!full) begin
          pc_q[wr_idx]   <= a_pc_i;
          mask_q[wr_idx] <= a_mask_i;
        end
        WS_SPLIT: if (has_top) begin
          pc_q[top_idx]   <= a_pc_i;
          mask_q[top_idx] <= a_mask_i;
          if (!full) begin
            pc_q[wr_idx]   <= b_pc_i;
            mask_q[wr_idx] <= b_mask_i;
          end
        end
        WS_SWAP: if (has_sec) begin
          pc_q[top_idx]   <= pc_q[sec_idx];
          mask_q[top_idx] <= mask_q[sec_idx];
          pc_q[sec_idx]   <= a_pc_i;
          mask_q[sec_idx] <= mask_q[top_idx];
        end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cnt_q <= '0;
      ovf_q <= 1'b0;
    end else if (init_i) begin
      cnt_q <= (a_mask_i != '0) ? CW'(1) : '0;
      ovf_q <= 1'b0;
    end else begin
      unique case (op_i)
        WS_PUSH:  if (full) ovf_q <= 1'b1; else cnt_q <= cnt_q + CW'(1);
        WS_SPLIT: if (has_top) begin
          if (full) ovf_q <= 1'b1; else cnt_q <= cnt_q + CW'(1);
        end
        WS_POP:   if (has_top) cnt_q <= cnt_q - CW'(1);
        default: ;
      endcase
    end
  end

  a_no_overflow: assert property (@(posedge clk_i) disable iff (!rst_ni)
    !init_i && (op_i == WS_PUSH || (op_i == WS_SPLIT && has_top)) |-> !full)
    else $error("ws_stack: push on a full stack");
  a_no_underflow: assert property (@(posedge clk_i) disable iff (!rst_ni)
    !init_i && (op_i == WS_POP || op_i == WS_SET_TOP || op_i == WS_SPLIT) |-> has_top)
    else $error("ws_stack: operation on an empty stack");
endmodule
