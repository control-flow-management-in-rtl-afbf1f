// bx_regfile: the Bx registers of one warp.
//
// NUM_BX registers, each a reconvergence mask (one bit per thread that must meet at the
// reconvergence point) and a valid bit. Updates, all applied at the clock edge:
//   wr      Bx[wr_id] <= wr_mask, valid        BSSY, BMOV R->B, WARPSYNC allocation
//   brk     Bx[brk_id] &= ~brk_bits            BREAK
//   inv     valid[inv_id] <= 0                 BMOV B->R, reconvergence
//   exit    every Bx &= ~exit_bits             EXIT (finished threads leave all masks)
// If several name one register, bit clears are applied first and a write wins over
// everything. Two combinational read ports: A for the REC top, B for BMOV B->R. The
// allocator points to the lowest-numbered invalid register (for WARPSYNC). The register
// content and the update rules follow the paper; the port structure, the update order and
// the lowest-first allocation are this design's choices. All registers reset to invalid.
module bx_regfile #(
  parameter int unsigned WARP_SIZE = hanoi_pkg::DEF_WARP_SIZE,
  parameter int unsigned NUM_BX    = hanoi_pkg::DEF_NUM_BX,
  localparam int unsigned IDW      = $clog2(NUM_BX)
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 clear_i,      // invalidate all (warp launch)
  input  logic                 wr_en_i,
  input  logic [IDW-1:0]       wr_id_i,
  input  logic [WARP_SIZE-1:0] wr_mask_i,
  input  logic                 brk_en_i,
  input  logic [IDW-1:0]       brk_id_i,
  input  logic [WARP_SIZE-1:0] brk_bits_i,
  input  logic                 inv_en_i,
  input  logic [IDW-1:0]       inv_id_i,
  input  logic                 exit_en_i,
  input  logic [WARP_SIZE-1:0] exit_bits_i,
  input  logic [IDW-1:0]       ra_id_i,
  output logic [WARP_SIZE-1:0] ra_mask_o,
  output logic                 ra_valid_o,
  input  logic [IDW-1:0]       rb_id_i,
  output logic [WARP_SIZE-1:0] rb_mask_o,
  output logic                 rb_valid_o,
  output logic                 alloc_ok_o,
  output logic [IDW-1:0]       alloc_id_o
);
  logic [WARP_SIZE-1:0] mask_q [NUM_BX];
  logic [NUM_BX-1:0]    valid_q;

  always_comb begin
    ra_mask_o  = mask_q[ra_id_i];
    ra_valid_o = valid_q[ra_id_i];
    rb_mask_o  = mask_q[rb_id_i];
    rb_valid_o = valid_q[rb_id_i];
    alloc_ok_o = 1'b0;
    alloc_id_o = '0;
    for (int i = NUM_BX - 1; i >= 0; i--) begin
      if (!valid_q[i]) begin
        alloc_ok_o = 1'b1;
        alloc_id_o = IDW'(i);
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q <= '0;
      for (int i = 0; i < NUM_BX; i++) mask_q[i] <= '0;
    end else if (clear_i) begin
      valid_q <= '0;
    end else begin
      for (int i = 0; i < NUM_BX; i++) begin
        logic [WARP_SIZE-1:0] m;
        m = mask_q[i];
        if (exit_en_i) m = m & ~exit_bits_i;
        if (brk_en_i && brk_id_i == IDW'(i)) m = m & ~brk_bits_i;
        if (inv_en_i && inv_id_i == IDW'(i)) valid_q[i] <= 1'b0;
        if (wr_en_i && wr_id_i == IDW'(i)) begin
          m = wr_mask_i;
          valid_q[i] <= 1'b1;
        end
        mask_q[i] <= m;
      end
    end
  end
endmodule
