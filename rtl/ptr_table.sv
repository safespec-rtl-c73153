// ptr_table: the shadow-pointer field added to the load queue (data side, one slot per
// load-queue entry) or to the reorder buffer (instruction side, one slot per ROB entry).
//
// When an access completes, the access unit records in the instruction's slot whether it
// allocated a shadow cache entry and a shadow TLB entry, and their indices. When the
// instruction commits, up to RD_W slots are read in the same cycle (combinational read)
// and the pointers are sent to the shadow structures to move those entries to the
// committed state. A slot is written only by an access that allocated shadow entries.
// A pointer left behind by a squashed instruction is harmless: the shadow structure
// only commits an entry whose recorded owner is the committing instruction. Reset
// clears all flags. The field layout is this design's choice.
module ptr_table #(
  parameter int unsigned SLOTS = 72,
  parameter int unsigned C_W   = 7,     // shadow cache index width
  parameter int unsigned T_W   = 7,     // shadow TLB index width
  parameter int unsigned RD_W  = 6,
  localparam int unsigned SLOT_W = $clog2(SLOTS)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         wr_valid,
  input  logic [SLOT_W-1:0]            wr_slot,
  input  logic                         wr_has_c,
  input  logic [C_W-1:0]               wr_c_idx,
  input  logic                         wr_has_t,
  input  logic [T_W-1:0]               wr_t_idx,
  input  logic [RD_W-1:0][SLOT_W-1:0]  rd_slot,
  output logic [RD_W-1:0]              rd_has_c,
  output logic [RD_W-1:0][C_W-1:0]     rd_c_idx,
  output logic [RD_W-1:0]              rd_has_t,
  output logic [RD_W-1:0][T_W-1:0]     rd_t_idx
);

  typedef struct packed {
    logic           has_c;
    logic [C_W-1:0] c_idx;
    logic           has_t;
    logic [T_W-1:0] t_idx;
  } slot_t;

  slot_t slot_q [SLOTS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < SLOTS; i++) slot_q[i] <= '0;
    end else if (wr_valid) begin
      slot_q[wr_slot] <= '{has_c: wr_has_c, c_idx: wr_c_idx, has_t: wr_has_t, t_idx: wr_t_idx};
    end
  end

  always_comb begin
    for (int r = 0; r < RD_W; r++) begin
      rd_has_c[r] = slot_q[rd_slot[r]].has_c;
      rd_c_idx[r] = slot_q[rd_slot[r]].c_idx;
      rd_has_t[r] = slot_q[rd_slot[r]].has_t;
      rd_t_idx[r] = slot_q[rd_slot[r]].t_idx;
    end
  end

  a_slot_in_range: assert property (@(posedge clk) disable iff (!rst_n)
                                    wr_valid |-> int'(wr_slot) < SLOTS);

endmodule
