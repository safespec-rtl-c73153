// shadow_table: a shadow structure that holds speculative state apart from the
// committed caches and TLBs (shadow d-cache, shadow i-cache, shadow dTLB, shadow iTLB).
//
// Each entry holds a key (line address or virtual page number), a payload (cache line
// or translation), the ROB index of the instruction that brought it in (its owner) and
// a state: FREE, SPEC (owner still speculative) or CMT (owner committed, waiting to be
// copied into the committed structure).
//
//  * Fill: associative. An allocation takes the lowest-numbered FREE entry in the same
//    cycle and returns its index, which the caller stores next to the instruction in the
//    load queue or ROB; afterwards the entry is addressed by that index like a lookup table.
//  * Lookup (combinational): a SPEC entry is visible only to its owner and to younger
//    instructions (ROB age at or above the owner's); every instruction in flight after a
//    squash lies on one path, so this is the "same execution branch" rule. CMT entries
//    are visible to all. The lowest-numbered matching entry wins.
//  * Commit (CM_W ports): marks entry idx CMT if its owner is the committing ROB index;
//    a stale pointer therefore does nothing. Wait-for-commit policy.
//  * Squash: frees every SPEC entry whose owner is at or younger than sq_rob. Nothing of
//    it reaches the committed structure.
//  * Drain: offers the lowest-numbered CMT entry; dr_ready frees it (one per cycle).
//  * Store update: a committed store also writes its bytes into every matching entry, so
//    no entry keeps data older than the committed cache.
// Allocation blocks (al_ready low) when no entry is FREE; the design sizes the tables for
// the worst case so that this cannot be used as a covert channel between speculative paths.
// Reset empties the table. The one-entry-per-cycle drain is this design's choice.
module shadow_table
  import safespec_pkg::*;
#(
  parameter int unsigned ENTRIES = 72,
  parameter int unsigned KEY_W   = LADDR_W,
  parameter int unsigned DATA_W  = LINE_W,
  parameter int unsigned ROB_N   = 224,
  parameter int unsigned CM_W    = 6,
  localparam int unsigned IDX_W  = (ENTRIES > 1) ? $clog2(ENTRIES) : 1,
  localparam int unsigned ROB_W  = $clog2(ROB_N),
  localparam int unsigned CNT_W  = $clog2(ENTRIES + 1),
  localparam int unsigned BE_W   = DATA_W / 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ROB_W-1:0]  rob_head,
  // lookup
  input  logic [KEY_W-1:0]  lk_key,
  input  logic [ROB_W-1:0]  lk_rob,
  output logic              lk_hit,
  output logic [IDX_W-1:0]  lk_idx,
  output logic [DATA_W-1:0] lk_data,
  // allocate
  input  logic              al_valid,
  input  logic [KEY_W-1:0]  al_key,
  input  logic [DATA_W-1:0] al_data,
  input  logic [ROB_W-1:0]  al_rob,
  output logic              al_ready,
  output logic [IDX_W-1:0]  al_idx,
  // commit (wait-for-commit)
  input  logic [CM_W-1:0]             cm_valid,
  input  logic [CM_W-1:0][IDX_W-1:0]  cm_idx,
  input  logic [CM_W-1:0][ROB_W-1:0]  cm_rob,
  // squash
  input  logic              sq_valid,
  input  logic [ROB_W-1:0]  sq_rob,
  // drain to the committed structure
  output logic              dr_valid,
  output logic [KEY_W-1:0]  dr_key,
  output logic [DATA_W-1:0] dr_data,
  input  logic              dr_ready,
  // committed store update
  input  logic              st_valid,
  input  logic [KEY_W-1:0]  st_key,
  input  logic [DATA_W-1:0] st_data,
  input  logic [BE_W-1:0]   st_be,
  output logic [CNT_W-1:0]  occupancy
);

  typedef enum logic [1:0] {E_FREE = 2'd0, E_SPEC = 2'd1, E_CMT = 2'd2} est_e;

  est_e              st_q   [ENTRIES];
  logic [KEY_W-1:0]  key_q  [ENTRIES];
  logic [ROB_W-1:0]  own_q  [ENTRIES];
  logic [DATA_W-1:0] data_q [ENTRIES];

  // ---- lookup -----------------------------------------------------------------
  always_comb begin
    lk_hit  = 1'b0;
    lk_idx  = '0;
    lk_data = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (key_q[i] == lk_key &&
          (st_q[i] == E_CMT ||
           (st_q[i] == E_SPEC &&
            rob_age(lk_rob, rob_head, ROB_N) >= rob_age(own_q[i], rob_head, ROB_N)))) begin
        lk_hit  = 1'b1;
        lk_idx  = IDX_W'(i);
        lk_data = data_q[i];
      end
    end
  end

  // ---- free entry and drain selection -----------------------------------------
  always_comb begin
    al_ready = 1'b0;
    al_idx   = '0;
    dr_valid = 1'b0;
    dr_key   = '0;
    dr_data  = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (st_q[i] == E_FREE) begin
        al_ready = 1'b1;
        al_idx   = IDX_W'(i);
      end
      if (st_q[i] == E_CMT) begin
        dr_valid = 1'b1;
        dr_key   = key_q[i];
        dr_data  = data_q[i];
      end
    end
  end

  // index of the entry being drained (same priority as above)
  logic [IDX_W-1:0] dr_idx;
  always_comb begin
    dr_idx = '0;
    for (int i = ENTRIES - 1; i >= 0; i--)
      if (st_q[i] == E_CMT) dr_idx = IDX_W'(i);
  end

  always_comb begin
    occupancy = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (st_q[i] != E_FREE) occupancy = occupancy + CNT_W'(1);
  end

  // ---- state update -----------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) begin
        st_q[i]  <= E_FREE;
        key_q[i] <= '0;
        own_q[i] <= '0;
      end
    end else begin
      for (int i = 0; i < ENTRIES; i++) begin
        // squash: annul speculative entries owned by squashed instructions
        if (sq_valid && st_q[i] == E_SPEC &&
            rob_age(own_q[i], rob_head, ROB_N) >= rob_age(sq_rob, rob_head, ROB_N))
          st_q[i] <= E_FREE;
        // commit: owner retired, entry becomes committed state
        for (int c = 0; c < CM_W; c++)
          if (cm_valid[c] && cm_idx[c] == IDX_W'(i) && st_q[i] == E_SPEC &&
              own_q[i] == cm_rob[c])
            st_q[i] <= E_CMT;
      end
      if (dr_valid && dr_ready) st_q[dr_idx] <= E_FREE;
      if (al_valid && al_ready) begin
        st_q[al_idx]  <= E_SPEC;
        key_q[al_idx] <= al_key;
        own_q[al_idx] <= al_rob;
      end
    end
  end

  // payload storage (no reset needed: read only while the entry is not FREE)
  logic [DATA_W-1:0] st_mask;
  always_comb
    for (int b = 0; b < BE_W; b++) st_mask[8*b +: 8] = {8{st_be[b]}};

  always_ff @(posedge clk) begin
    for (int i = 0; i < ENTRIES; i++)
      if (al_valid && al_ready && al_idx == IDX_W'(i))
        data_q[i] <= al_data;
      else if (st_valid && st_q[i] != E_FREE && key_q[i] == st_key)
        data_q[i] <= (data_q[i] & ~st_mask) | (st_data & st_mask);
  end

  // callers hold an allocation until an entry is free
  a_alloc_ready: assert property (@(posedge clk) disable iff (!rst_n) al_valid |-> al_ready);

endmodule
