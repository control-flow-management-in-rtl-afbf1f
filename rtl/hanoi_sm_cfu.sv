// hanoi_sm_cfu: control flow management of one SM, one Hanoi unit per warp.
//
// Every warp resident on the SM has a dedicated control flow management unit
// (hanoi_cfu). Each unit gives the fetch stage the PC of its warp's running path and the
// issue stage that path's active mask. The issue schedulers return executed instructions
// on NUM_SCHED update ports, one per scheduler; warp w belongs to scheduler w mod
// NUM_SCHED, so each port carries at most one update per cycle for one of its warps. Each
// port has a predicate unit that turns the instruction's raw predicate operands into the
// per-thread execute mask, and returns the BMOV B->R value to the register file in the
// update cycle. Warps are started by the launch port. Per warp, the status outputs give
// done/stalled, sticky errors, mechanism events, both stack depths and the waiting and
// finished masks.
//
// Timing: outputs per warp are combinational from that warp's state; an update is taken
// at the clock edge when upd_valid_i and upd_ready_o are high on its port. The sizes (32
// warps of 32 threads, 4 schedulers) are the SM configuration the paper evaluates; one
// unit per warp follows the paper; the fixed warp-to-scheduler mapping and the port
// layout are this design's choices.
module hanoi_sm_cfu #(
  parameter int unsigned NUM_WARPS = 32,
  parameter int unsigned NUM_SCHED = 4,
  parameter int unsigned WARP_SIZE = hanoi_pkg::DEF_WARP_SIZE,
  parameter int unsigned NUM_BX    = hanoi_pkg::DEF_NUM_BX,
  parameter int unsigned WS_DEPTH  = hanoi_pkg::DEF_WS_DEPTH,
  parameter int unsigned REC_DEPTH = hanoi_pkg::DEF_REC_DEPTH,
  parameter int unsigned PC_STEP   = hanoi_pkg::DEF_PC_STEP,
  localparam int unsigned PC_W     = hanoi_pkg::DEF_PC_W,
  localparam int unsigned WIDW     = (NUM_WARPS > 1) ? $clog2(NUM_WARPS) : 1,
  localparam int unsigned WSCW     = $clog2(WS_DEPTH + 1),
  localparam int unsigned RCW      = $clog2(REC_DEPTH + 1)
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  // warp launch
  input  logic                    launch_valid_i,
  input  logic [WIDW-1:0]         launch_warp_i,
  input  logic [PC_W-1:0]         launch_pc_i,
  input  logic [WARP_SIZE-1:0]    launch_mask_i,
  // per warp: to fetch and issue
  output logic [NUM_WARPS-1:0]    warp_issue_valid_o,
  output logic [PC_W-1:0]         warp_pc_o        [NUM_WARPS],
  output logic [WARP_SIZE-1:0]    warp_mask_o      [NUM_WARPS],
  // per scheduler: executed-instruction updates
  input  logic [NUM_SCHED-1:0]    upd_valid_i,
  output logic [NUM_SCHED-1:0]    upd_ready_o,
  input  logic [WIDW-1:0]         upd_warp_i       [NUM_SCHED],
  input  hanoi_pkg::cfu_update_t  upd_i            [NUM_SCHED],
  input  logic [NUM_SCHED-1:0]    upd_g_en_i,      // guard predicate present
  input  logic [NUM_SCHED-1:0]    upd_g_neg_i,     // guard predicate negated
  input  logic [WARP_SIZE-1:0]    upd_g_val_i      [NUM_SCHED],
  input  logic [NUM_SCHED-1:0]    upd_o_en_i,      // operand predicate present
  input  logic [NUM_SCHED-1:0]    upd_o_neg_i,     // operand predicate negated
  input  logic [WARP_SIZE-1:0]    upd_o_val_i      [NUM_SCHED],
  input  logic [WARP_SIZE-1:0]    upd_rdata_i      [NUM_SCHED],
  output logic [WARP_SIZE-1:0]    upd_bmov_data_o  [NUM_SCHED],
  // per warp: status
  output logic [NUM_WARPS-1:0]    warp_done_o,
  output logic [NUM_WARPS-1:0]    warp_stalled_o,
  output hanoi_pkg::cfu_error_t   warp_error_o     [NUM_WARPS],
  output hanoi_pkg::cfu_event_t   warp_event_o     [NUM_WARPS],
  output logic [WSCW-1:0]         warp_ws_count_o  [NUM_WARPS],
  output logic [RCW-1:0]          warp_rec_count_o [NUM_WARPS],
  output logic [WARP_SIZE-1:0]    warp_waiting_o   [NUM_WARPS],
  output logic [WARP_SIZE-1:0]    warp_finished_o  [NUM_WARPS]
);
  import hanoi_pkg::*;

  logic [WARP_SIZE-1:0] pred_mask [NUM_SCHED];
  logic [NUM_WARPS-1:0] w_ready;
  logic [WARP_SIZE-1:0] w_bmov [NUM_WARPS];

  for (genvar s = 0; s < NUM_SCHED; s++) begin : g_port
    pred_eval #(.WARP_SIZE(WARP_SIZE)) u_pred (
      .g_en_i(upd_g_en_i[s]), .g_neg_i(upd_g_neg_i[s]), .g_val_i(upd_g_val_i[s]),
      .o_en_i(upd_o_en_i[s]), .o_neg_i(upd_o_neg_i[s]), .o_val_i(upd_o_val_i[s]),
      .mask_o(pred_mask[s]));

    // Ready and BMOV data come from the addressed warp.
    always_comb begin
      upd_ready_o[s]     = 1'b0;
      upd_bmov_data_o[s] = '0;
      for (int w = s; w < NUM_WARPS; w += NUM_SCHED) begin
        if (upd_warp_i[s] == WIDW'(w)) begin
          upd_ready_o[s]     = w_ready[w];
          upd_bmov_data_o[s] = w_bmov[w];
        end
      end
    end

    a_port_owns_warp: assert property (@(posedge clk_i) disable iff (!rst_ni)
      upd_valid_i[s] |-> (int'(upd_warp_i[s]) % NUM_SCHED == s) && (int'(upd_warp_i[s]) < NUM_WARPS))
      else $error("hanoi_sm_cfu: port %0d got an update for warp %0d", s, upd_warp_i[s]);
  end

  for (genvar w = 0; w < NUM_WARPS; w++) begin : g_warp
    localparam int unsigned S = w % NUM_SCHED;
    logic sel, launch;
    assign sel    = upd_valid_i[S] && (upd_warp_i[S] == WIDW'(w));
    assign launch = launch_valid_i && (launch_warp_i == WIDW'(w));

    hanoi_cfu #(
      .WARP_SIZE(WARP_SIZE), .NUM_BX(NUM_BX), .WS_DEPTH(WS_DEPTH),
      .REC_DEPTH(REC_DEPTH), .PC_STEP(PC_STEP)
    ) u_cfu (
      .clk_i, .rst_ni,
      .launch_i(launch), .launch_pc_i(launch_pc_i), .launch_mask_i(launch_mask_i),
      .issue_valid_o(warp_issue_valid_o[w]), .pc_o(warp_pc_o[w]), .active_mask_o(warp_mask_o[w]),
      .upd_valid_i(sel), .upd_ready_o(w_ready[w]), .upd_i(upd_i[S]),
      .upd_pred_i(pred_mask[S]), .upd_rdata_i(upd_rdata_i[S]), .bmov_data_o(w_bmov[w]),
      .done_o(warp_done_o[w]), .stalled_o(warp_stalled_o[w]),
      .error_o(warp_error_o[w]), .event_o(warp_event_o[w]),
      .ws_count_o(warp_ws_count_o[w]), .rec_count_o(warp_rec_count_o[w]),
      .waiting_o(warp_waiting_o[w]), .finished_o(warp_finished_o[w]));
  end
endmodule
