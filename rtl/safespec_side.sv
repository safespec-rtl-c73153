// safespec_side: one side (instruction fetch or data load) of the SafeSpec cache and TLB
// path. It owns the committed L1 cache and TLB of that side, the shadow cache and shadow
// TLB that sit beside them, the shadow-pointer field of the load queue (data side) or ROB
// (instruction side), and two delayed-effect filters (line reads, page walks).
//
// Access (one at a time; req_ready is high only when idle):
//   1. Translate: committed TLB, else a visible shadow TLB entry, else a page walk.
//      A walk reply is written to the shadow TLB, owned by the requesting instruction,
//      never to the TLB, and the lookup is repeated.
//   2. Read: committed L1, else a visible shadow cache entry, else a line read from the
//      next level; the returned line goes to the shadow cache, owned by the requester.
//   3. Respond with the 64-byte line, its source, and perm_fault when a user-mode
//      access reaches a supervisor page. As in an unprotected core the faulting access
//      still executes speculatively; the fault is taken at commit, and because the line
//      it brought in stays in the shadow cache, the squash that follows removes it.
//   A hit responds HIT_LAT cycles after the request is accepted (same latency for the
//   L1 and the shadow structures); a miss responds one cycle after its line is written
//   to the shadow cache. A response that allocated shadow entries writes their indices
//   into the instruction's pointer slot; one that allocated nothing leaves the slot as is.
// Commit (wait-for-commit): for each committing instruction the slot is read and the
//   shadow entries it allocated become committed; they then drain one per cycle and per
//   structure into the L1 / TLB. A drained line is also announced on inst_* so that the
//   inclusive outer levels can install it.
// Squash: frees the shadow entries of every instruction at or younger than sq_rob,
//   kills the access in progress if it is one of them, and marks its outstanding read or
//   walk dead in the filter, so a late reply is dropped.
// Stores (data side): a committed store's bytes are merged into the L1 line if present
// and into every shadow copy of the line. The single access port, the
// stall-on-full behaviour and the reply ordering are this design's choices.
module safespec_side
  import safespec_pkg::*;
#(
  parameter int unsigned ROB_N     = 224,
  parameter int unsigned SLOTS     = 72,   // load queue (data) or ROB (instruction)
  parameter int unsigned SHC_N     = 72,   // shadow cache entries
  parameter int unsigned SHT_N     = 72,   // shadow TLB entries
  parameter int unsigned L1_SETS   = 64,
  parameter int unsigned L1_WAYS   = 8,
  parameter int unsigned TLB_SETS  = 16,
  parameter int unsigned TLB_WAYS  = 4,
  parameter int unsigned HIT_LAT   = 4,
  parameter int unsigned TXNS      = 8,
  parameter int unsigned CM_W      = 6,
  localparam int unsigned ROB_W    = $clog2(ROB_N),
  localparam int unsigned SLOT_W   = $clog2(SLOTS),
  localparam int unsigned ID_W     = (TXNS > 1) ? $clog2(TXNS) : 1,
  localparam int unsigned SHC_W    = $clog2(SHC_N),
  localparam int unsigned SHT_W    = $clog2(SHT_N)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [ROB_W-1:0]           rob_head,
  // access request
  input  logic                       req_valid,
  output logic                       req_ready,
  input  logic [VADDR_W-1:0]         req_vaddr,
  input  logic [ROB_W-1:0]           req_rob,
  input  logic [SLOT_W-1:0]          req_slot,
  input  logic                       req_user,
  // access response
  output logic                       rsp_valid,
  output logic [ROB_W-1:0]           rsp_rob,
  output logic [SLOT_W-1:0]          rsp_slot,
  output line_t                      rsp_line,
  output laddr_t                     rsp_laddr,
  output src_e                       rsp_src,
  output logic                       rsp_perm_fault,
  // commit and squash
  input  logic [CM_W-1:0]            cm_valid,
  input  logic [CM_W-1:0][ROB_W-1:0] cm_rob,
  input  logic [CM_W-1:0][SLOT_W-1:0] cm_slot,
  input  logic                       sq_valid,
  input  logic [ROB_W-1:0]           sq_rob,
  // committed stores
  input  logic                       st_valid,
  input  laddr_t                     st_laddr,
  input  line_t                      st_data,
  input  logic [LINE_W/8-1:0]        st_be,
  // next-level line reads
  output logic                       mem_req_valid,
  input  logic                       mem_req_ready,
  output laddr_t                     mem_req_laddr,
  output logic [ID_W-1:0]            mem_req_id,
  input  logic                       mem_rsp_valid,
  input  logic [ID_W-1:0]            mem_rsp_id,
  input  line_t                      mem_rsp_data,
  // install of committed lines in the outer levels
  output logic                       inst_valid,
  output laddr_t                     inst_laddr,
  // page walker
  output logic                       walk_req_valid,
  input  logic                       walk_req_ready,
  output vpn_t                       walk_req_vpn,
  output logic [ID_W-1:0]            walk_req_id,
  input  logic                       walk_rsp_valid,
  input  logic [ID_W-1:0]            walk_rsp_id,
  input  pte_t                       walk_rsp_pte,
  input  logic                       walk_rsp_fault,
  // status
  output logic [$clog2(SHC_N+1)-1:0] shc_occupancy,
  output logic [$clog2(SHT_N+1)-1:0] sht_occupancy,
  output logic                       mem_dropped,
  output logic                       walk_dropped
);

  typedef enum logic [2:0] {
    S_IDLE, S_LOOKUP, S_WALK, S_TFILL, S_MEM, S_CFILL, S_HOLD, S_RESP
  } state_e;

  state_e              state_q;
  logic [VADDR_W-1:0]  r_vaddr;
  logic [ROB_W-1:0]    r_rob;
  logic [SLOT_W-1:0]   r_slot;
  logic                r_user;
  pte_t                r_pte;
  laddr_t              r_laddr;
  line_t               r_line;
  src_e                r_src;
  logic                r_pfault;
  logic                r_has_c, r_has_t;
  logic [SHC_W-1:0]    r_c_idx;
  logic [SHT_W-1:0]    r_t_idx;
  logic                r_issued;
  logic [7:0]          r_cnt;

  vpn_t r_vpn;
  assign r_vpn = r_vaddr[VADDR_W-1:PAGE_OFF_W];

  // ---- committed TLB and shadow TLB ------------------------------------------
  logic tlb_hit, stlb_hit;
  pte_t tlb_pte, stlb_pte;
  logic [SHT_W-1:0] stlb_idx;
  logic sht_al_valid, sht_al_ready;
  logic [SHT_W-1:0] sht_al_idx;
  logic sht_dr_valid;
  vpn_t sht_dr_key;
  pte_t sht_dr_pte;
  logic [CM_W-1:0] sht_cm_valid, shc_cm_valid;
  logic [CM_W-1:0][SHT_W-1:0] pt_t_idx;
  logic [CM_W-1:0][SHC_W-1:0] pt_c_idx;
  logic [CM_W-1:0] pt_has_c, pt_has_t;

  assoc_store #(.SETS(TLB_SETS), .WAYS(TLB_WAYS), .KEY_W(VPN_W), .DATA_W($bits(pte_t))) u_tlb (
    .clk, .rst_n,
    .lk_key(r_vpn), .lk_hit(tlb_hit), .lk_data(tlb_pte),
    .fill_valid(sht_dr_valid), .fill_key(sht_dr_key), .fill_data(sht_dr_pte),
    .wr_valid(1'b0), .wr_key('0), .wr_data('0), .wr_be('0)
  );

  shadow_table #(.ENTRIES(SHT_N), .KEY_W(VPN_W), .DATA_W($bits(pte_t)), .ROB_N(ROB_N),
                 .CM_W(CM_W)) u_shadow_tlb (
    .clk, .rst_n, .rob_head,
    .lk_key(r_vpn), .lk_rob(r_rob), .lk_hit(stlb_hit), .lk_idx(stlb_idx), .lk_data(stlb_pte),
    .al_valid(sht_al_valid), .al_key(r_vpn), .al_data(r_pte), .al_rob(r_rob),
    .al_ready(sht_al_ready), .al_idx(sht_al_idx),
    .cm_valid(sht_cm_valid), .cm_idx(pt_t_idx), .cm_rob,
    .sq_valid, .sq_rob,
    .dr_valid(sht_dr_valid), .dr_key(sht_dr_key), .dr_data(sht_dr_pte), .dr_ready(1'b1),
    .st_valid(1'b0), .st_key('0), .st_data('0), .st_be('0),
    .occupancy(sht_occupancy)
  );

  // ---- translation result in the LOOKUP cycle ------------------------------------
  pte_t   cur_pte;
  logic   cur_xlat;
  laddr_t cur_laddr;
  always_comb begin
    cur_xlat = tlb_hit | stlb_hit;
    cur_pte  = tlb_hit ? tlb_pte : stlb_pte;
  end
  assign cur_laddr = {cur_pte.ppn, r_vaddr[PAGE_OFF_W-1:LINE_OFF_W]};

  // ---- committed L1 and shadow cache ---------------------------------------------
  logic   l1_hit, sc_hit;
  line_t  l1_line, sc_line;
  logic [SHC_W-1:0] sc_idx;
  logic   shc_al_valid, shc_al_ready;
  logic [SHC_W-1:0] shc_al_idx;
  logic   shc_dr_valid;
  laddr_t shc_dr_key;
  line_t  shc_dr_line;

  assoc_store #(.SETS(L1_SETS), .WAYS(L1_WAYS), .KEY_W(LADDR_W), .DATA_W(LINE_W)) u_l1 (
    .clk, .rst_n,
    .lk_key(cur_laddr), .lk_hit(l1_hit), .lk_data(l1_line),
    .fill_valid(shc_dr_valid), .fill_key(shc_dr_key), .fill_data(shc_dr_line),
    .wr_valid(st_valid), .wr_key(st_laddr), .wr_data(st_data), .wr_be(st_be)
  );

  shadow_table #(.ENTRIES(SHC_N), .KEY_W(LADDR_W), .DATA_W(LINE_W), .ROB_N(ROB_N),
                 .CM_W(CM_W)) u_shadow_cache (
    .clk, .rst_n, .rob_head,
    .lk_key(cur_laddr), .lk_rob(r_rob), .lk_hit(sc_hit), .lk_idx(sc_idx), .lk_data(sc_line),
    .al_valid(shc_al_valid), .al_key(r_laddr), .al_data(r_line), .al_rob(r_rob),
    .al_ready(shc_al_ready), .al_idx(shc_al_idx),
    .cm_valid(shc_cm_valid), .cm_idx(pt_c_idx), .cm_rob,
    .sq_valid, .sq_rob,
    .dr_valid(shc_dr_valid), .dr_key(shc_dr_key), .dr_data(shc_dr_line), .dr_ready(1'b1),
    .st_valid, .st_key(st_laddr), .st_data, .st_be,
    .occupancy(shc_occupancy)
  );

  assign inst_valid = shc_dr_valid;
  assign inst_laddr = shc_dr_key;

  // ---- delayed-effect filters ----------------------------------------------------
  logic mf_ready, mf_live, wf_ready, wf_live;
  logic [ID_W-1:0] mf_id, wf_id;
  logic [ROB_W-1:0] mf_rob, wf_rob;
  laddr_t mf_meta;
  vpn_t   wf_meta;

  assign mem_req_valid  = (state_q == S_MEM) && !r_issued && mf_ready;
  assign mem_req_laddr  = r_laddr;
  assign mem_req_id     = mf_id;
  assign walk_req_valid = (state_q == S_WALK) && !r_issued && wf_ready;
  assign walk_req_vpn   = r_vpn;
  assign walk_req_id    = wf_id;

  miss_filter #(.TXNS(TXNS), .ROB_N(ROB_N), .META_W(LADDR_W)) u_mem_filter (
    .clk, .rst_n, .rob_head,
    .is_valid(mem_req_valid && mem_req_ready), .is_rob(r_rob), .is_meta(r_laddr),
    .is_ready(mf_ready), .is_id(mf_id),
    .sq_valid, .sq_rob,
    .rs_valid(mem_rsp_valid), .rs_id(mem_rsp_id), .rs_live(mf_live), .rs_rob(mf_rob),
    .rs_meta(mf_meta), .outstanding(), .dropped(mem_dropped)
  );

  miss_filter #(.TXNS(TXNS), .ROB_N(ROB_N), .META_W(VPN_W)) u_walk_filter (
    .clk, .rst_n, .rob_head,
    .is_valid(walk_req_valid && walk_req_ready), .is_rob(r_rob), .is_meta(r_vpn),
    .is_ready(wf_ready), .is_id(wf_id),
    .sq_valid, .sq_rob,
    .rs_valid(walk_rsp_valid), .rs_id(walk_rsp_id), .rs_live(wf_live), .rs_rob(wf_rob),
    .rs_meta(wf_meta), .outstanding(), .dropped(walk_dropped)
  );

  // ---- pointer field (load queue / ROB) ------------------------------------------
  ptr_table #(.SLOTS(SLOTS), .C_W(SHC_W), .T_W(SHT_W), .RD_W(CM_W)) u_ptr (
    .clk, .rst_n,
    .wr_valid(rsp_valid && (r_has_c || r_has_t)), .wr_slot(r_slot),
    .wr_has_c(r_has_c), .wr_c_idx(r_c_idx), .wr_has_t(r_has_t), .wr_t_idx(r_t_idx),
    .rd_slot(cm_slot), .rd_has_c(pt_has_c), .rd_c_idx(pt_c_idx),
    .rd_has_t(pt_has_t), .rd_t_idx(pt_t_idx)
  );
  assign shc_cm_valid = cm_valid & pt_has_c;
  assign sht_cm_valid = cm_valid & pt_has_t;

  // ---- access state machine ------------------------------------------------------
  logic killed;
  assign killed = sq_valid && state_q != S_IDLE &&
                  rob_age(r_rob, rob_head, ROB_N) >= rob_age(sq_rob, rob_head, ROB_N);

  assign req_ready      = (state_q == S_IDLE);
  assign sht_al_valid   = (state_q == S_TFILL) && sht_al_ready && !killed;
  assign shc_al_valid   = (state_q == S_CFILL) && shc_al_ready && !killed;
  assign rsp_valid      = (state_q == S_RESP) && !killed;
  assign rsp_rob        = r_rob;
  assign rsp_slot       = r_slot;
  assign rsp_line       = r_line;
  assign rsp_laddr      = r_laddr;
  assign rsp_src        = r_src;
  assign rsp_perm_fault = r_pfault;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= S_IDLE;
      r_vaddr  <= '0;
      r_rob    <= '0;
      r_slot   <= '0;
      r_user   <= 1'b0;
      r_pte    <= '0;
      r_laddr  <= '0;
      r_line   <= '0;
      r_src    <= SRC_L1;
      r_pfault <= 1'b0;
      r_has_c  <= 1'b0;
      r_has_t  <= 1'b0;
      r_c_idx  <= '0;
      r_t_idx  <= '0;
      r_issued <= 1'b0;
      r_cnt    <= '0;
    end else begin
      if (r_cnt != 8'hff) r_cnt <= r_cnt + 8'd1;
      if (killed) begin
        state_q <= S_IDLE;
      end else begin
        unique case (state_q)
          S_IDLE: if (req_valid) begin
            state_q  <= S_LOOKUP;
            r_vaddr  <= req_vaddr;
            r_rob    <= req_rob;
            r_slot   <= req_slot;
            r_user   <= req_user;
            r_pfault <= 1'b0;
            r_has_c  <= 1'b0;
            r_has_t  <= 1'b0;
            r_issued <= 1'b0;
            r_cnt    <= 8'd1;
          end
          S_LOOKUP: begin
            r_issued <= 1'b0;
            if (!cur_xlat) begin
              state_q <= S_WALK;
            end else begin
              r_pte    <= cur_pte;
              r_laddr  <= cur_laddr;
              r_pfault <= r_user && !cur_pte.user;
              if (l1_hit || sc_hit) begin
                r_line  <= l1_hit ? l1_line : sc_line;
                r_src   <= l1_hit ? SRC_L1 : SRC_SHADOW;
                state_q <= (32'(r_cnt) + 1 >= HIT_LAT) ? S_RESP : S_HOLD;
              end else begin
                state_q <= S_MEM;
              end
            end
          end
          S_WALK: begin
            if (walk_req_valid && walk_req_ready) r_issued <= 1'b1;
            if (walk_rsp_valid && wf_live) begin
              if (walk_rsp_fault) begin
                r_src   <= SRC_FAULT;
                r_line  <= '0;
                r_laddr <= '0;
                state_q <= S_RESP;
              end else begin
                r_pte   <= walk_rsp_pte;
                state_q <= S_TFILL;
              end
            end
          end
          S_TFILL: if (sht_al_ready) begin
            r_has_t <= 1'b1;
            r_t_idx <= sht_al_idx;
            state_q <= S_LOOKUP;
          end
          S_MEM: begin
            if (mem_req_valid && mem_req_ready) r_issued <= 1'b1;
            if (mem_rsp_valid && mf_live) begin
              r_line  <= mem_rsp_data;
              state_q <= S_CFILL;
            end
          end
          S_CFILL: if (shc_al_ready) begin
            r_has_c <= 1'b1;
            r_c_idx <= shc_al_idx;
            r_src   <= SRC_FILL;
            state_q <= S_RESP;
          end
          S_HOLD: if (32'(r_cnt) + 1 >= HIT_LAT) state_q <= S_RESP;
          S_RESP: state_q <= S_IDLE;
          default: state_q <= S_IDLE;
        endcase
      end
    end
  end

  // a live reply always belongs to the access in progress
  a_mem_reply_owner: assert property (@(posedge clk) disable iff (!rst_n)
      (mem_rsp_valid && mf_live) |-> (state_q == S_MEM && mf_rob == r_rob && mf_meta == r_laddr));
  a_walk_reply_owner: assert property (@(posedge clk) disable iff (!rst_n)
      (walk_rsp_valid && wf_live) |-> (state_q == S_WALK && wf_rob == r_rob && wf_meta == r_vpn));

endmodule
