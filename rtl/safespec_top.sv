// safespec_top: the SafeSpec-protected cache and TLB hierarchy of one out-of-order core.
//
// Speculative instructions never change the committed caches or TLBs. Every line or
// translation that an instruction brings in while it is speculative is held in a shadow
// structure beside the committed one, owned by that instruction; it is copied into the
// committed structure only when the instruction retires (wait-for-commit) and is
// discarded when the instruction is squashed. Two sides are built from the same unit:
//   u_iside: L1 i-cache + iTLB with shadow i-cache and shadow iTLB; pointers kept per
//            ROB entry. Each fetch is tagged with the ROB index its first instruction
//            will occupy.
//   u_dside: L1 d-cache + dTLB with shadow d-cache and shadow dTLB; pointers kept per
//            load-queue entry. Committed stores update the d-cache directly (stores
//            never enter the shadow state).
// Sizes are the worst case for a core with a 224-entry ROB and a 72-entry load queue:
// the shadow i-cache and iTLB have one entry per ROB entry, the shadow d-cache and dTLB
// one per load-queue entry, so instructions in flight can never contend for shadow space.
// The committed structures are 32 KB 8-way L1s with 64-byte lines and 64-entry TLBs;
// hits in either the L1 or the shadow cache answer in 4 cycles.
// Commit: up to CM_W instructions per cycle (cm_*); cm_is_load selects the data side.
// Squash: sq_rob and every younger instruction. The next-level memory and the page
// walker are outside this block: their request/reply ports are brought out, each side
// with its own transaction ids; inst_* announce lines committed into an L1 so that the
// inclusive outer levels can install them.
module safespec_top
  import safespec_pkg::*;
#(
  parameter int unsigned ROB_N     = 224,
  parameter int unsigned LQ_N      = 72,
  parameter int unsigned SHIC_N    = 224,
  parameter int unsigned SHITLB_N  = 224,
  parameter int unsigned SHDC_N    = 72,
  parameter int unsigned SHDTLB_N  = 72,
  parameter int unsigned L1_SETS   = 64,
  parameter int unsigned L1_WAYS   = 8,
  parameter int unsigned TLB_SETS  = 16,
  parameter int unsigned TLB_WAYS  = 4,
  parameter int unsigned HIT_LAT   = 4,
  parameter int unsigned TXNS      = 8,
  parameter int unsigned CM_W      = 6,
  localparam int unsigned ROB_W    = $clog2(ROB_N),
  localparam int unsigned LQ_W     = $clog2(LQ_N),
  localparam int unsigned ID_W     = (TXNS > 1) ? $clog2(TXNS) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [ROB_W-1:0]            rob_head,
  // instruction fetch
  input  logic                        if_req_valid,
  output logic                        if_req_ready,
  input  logic [VADDR_W-1:0]          if_req_vaddr,
  input  logic [ROB_W-1:0]            if_req_rob,
  input  logic                        if_req_user,
  output logic                        if_rsp_valid,
  output logic [ROB_W-1:0]            if_rsp_rob,
  output line_t                       if_rsp_line,
  output src_e                        if_rsp_src,
  output logic                        if_rsp_perm_fault,
  // loads
  input  logic                        ld_req_valid,
  output logic                        ld_req_ready,
  input  logic [VADDR_W-1:0]          ld_req_vaddr,
  input  logic [ROB_W-1:0]            ld_req_rob,
  input  logic [LQ_W-1:0]             ld_req_lq,
  input  logic                        ld_req_user,
  output logic                        ld_rsp_valid,
  output logic [ROB_W-1:0]            ld_rsp_rob,
  output logic [LQ_W-1:0]             ld_rsp_lq,
  output line_t                       ld_rsp_line,
  output laddr_t                      ld_rsp_laddr,
  output src_e                        ld_rsp_src,
  output logic                        ld_rsp_perm_fault,
  // retirement and squash
  input  logic [CM_W-1:0]             cm_valid,
  input  logic [CM_W-1:0][ROB_W-1:0]  cm_rob,
  input  logic [CM_W-1:0]             cm_is_load,
  input  logic [CM_W-1:0][LQ_W-1:0]   cm_lq,
  input  logic                        sq_valid,
  input  logic [ROB_W-1:0]            sq_rob,
  // committed stores (physical line address, byte enables)
  input  logic                        st_valid,
  input  laddr_t                      st_laddr,
  input  line_t                       st_data,
  input  logic [LINE_W/8-1:0]         st_be,
  // next level, instruction side
  output logic                        imem_req_valid,
  input  logic                        imem_req_ready,
  output laddr_t                      imem_req_laddr,
  output logic [ID_W-1:0]             imem_req_id,
  input  logic                        imem_rsp_valid,
  input  logic [ID_W-1:0]             imem_rsp_id,
  input  line_t                       imem_rsp_data,
  output logic                        iinst_valid,
  output laddr_t                      iinst_laddr,
  // next level, data side
  output logic                        dmem_req_valid,
  input  logic                        dmem_req_ready,
  output laddr_t                      dmem_req_laddr,
  output logic [ID_W-1:0]             dmem_req_id,
  input  logic                        dmem_rsp_valid,
  input  logic [ID_W-1:0]             dmem_rsp_id,
  input  line_t                       dmem_rsp_data,
  output logic                        dinst_valid,
  output laddr_t                      dinst_laddr,
  // page walker, instruction side
  output logic                        iwalk_req_valid,
  input  logic                        iwalk_req_ready,
  output vpn_t                        iwalk_req_vpn,
  output logic [ID_W-1:0]             iwalk_req_id,
  input  logic                        iwalk_rsp_valid,
  input  logic [ID_W-1:0]             iwalk_rsp_id,
  input  pte_t                        iwalk_rsp_pte,
  input  logic                        iwalk_rsp_fault,
  // page walker, data side
  output logic                        dwalk_req_valid,
  input  logic                        dwalk_req_ready,
  output vpn_t                        dwalk_req_vpn,
  output logic [ID_W-1:0]             dwalk_req_id,
  input  logic                        dwalk_rsp_valid,
  input  logic [ID_W-1:0]             dwalk_rsp_id,
  input  pte_t                        dwalk_rsp_pte,
  input  logic                        dwalk_rsp_fault,
  // occupancy and dropped replies, for monitoring
  output logic [$clog2(SHIC_N+1)-1:0]   shic_occupancy,
  output logic [$clog2(SHITLB_N+1)-1:0] shitlb_occupancy,
  output logic [$clog2(SHDC_N+1)-1:0]   shdc_occupancy,
  output logic [$clog2(SHDTLB_N+1)-1:0] shdtlb_occupancy,
  output logic                        dropped_reply
);

  logic i_mem_drop, i_walk_drop, d_mem_drop, d_walk_drop;
  assign dropped_reply = i_mem_drop | i_walk_drop | d_mem_drop | d_walk_drop;

  laddr_t if_rsp_laddr_unused;
  logic [ROB_W-1:0] if_rsp_slot_unused;

  safespec_side #(
    .ROB_N(ROB_N), .SLOTS(ROB_N), .SHC_N(SHIC_N), .SHT_N(SHITLB_N),
    .L1_SETS(L1_SETS), .L1_WAYS(L1_WAYS), .TLB_SETS(TLB_SETS), .TLB_WAYS(TLB_WAYS),
    .HIT_LAT(HIT_LAT), .TXNS(TXNS), .CM_W(CM_W)
  ) u_iside (
    .clk, .rst_n, .rob_head,
    .req_valid(if_req_valid), .req_ready(if_req_ready), .req_vaddr(if_req_vaddr),
    .req_rob(if_req_rob), .req_slot(if_req_rob), .req_user(if_req_user),
    .rsp_valid(if_rsp_valid), .rsp_rob(if_rsp_rob), .rsp_slot(if_rsp_slot_unused),
    .rsp_line(if_rsp_line), .rsp_laddr(if_rsp_laddr_unused), .rsp_src(if_rsp_src),
    .rsp_perm_fault(if_rsp_perm_fault),
    .cm_valid, .cm_rob, .cm_slot(cm_rob),
    .sq_valid, .sq_rob,
    .st_valid(1'b0), .st_laddr('0), .st_data('0), .st_be('0),
    .mem_req_valid(imem_req_valid), .mem_req_ready(imem_req_ready),
    .mem_req_laddr(imem_req_laddr), .mem_req_id(imem_req_id),
    .mem_rsp_valid(imem_rsp_valid), .mem_rsp_id(imem_rsp_id), .mem_rsp_data(imem_rsp_data),
    .inst_valid(iinst_valid), .inst_laddr(iinst_laddr),
    .walk_req_valid(iwalk_req_valid), .walk_req_ready(iwalk_req_ready),
    .walk_req_vpn(iwalk_req_vpn), .walk_req_id(iwalk_req_id),
    .walk_rsp_valid(iwalk_rsp_valid), .walk_rsp_id(iwalk_rsp_id),
    .walk_rsp_pte(iwalk_rsp_pte), .walk_rsp_fault(iwalk_rsp_fault),
    .shc_occupancy(shic_occupancy), .sht_occupancy(shitlb_occupancy),
    .mem_dropped(i_mem_drop), .walk_dropped(i_walk_drop)
  );

  safespec_side #(
    .ROB_N(ROB_N), .SLOTS(LQ_N), .SHC_N(SHDC_N), .SHT_N(SHDTLB_N),
    .L1_SETS(L1_SETS), .L1_WAYS(L1_WAYS), .TLB_SETS(TLB_SETS), .TLB_WAYS(TLB_WAYS),
    .HIT_LAT(HIT_LAT), .TXNS(TXNS), .CM_W(CM_W)
  ) u_dside (
    .clk, .rst_n, .rob_head,
    .req_valid(ld_req_valid), .req_ready(ld_req_ready), .req_vaddr(ld_req_vaddr),
    .req_rob(ld_req_rob), .req_slot(ld_req_lq), .req_user(ld_req_user),
    .rsp_valid(ld_rsp_valid), .rsp_rob(ld_rsp_rob), .rsp_slot(ld_rsp_lq),
    .rsp_line(ld_rsp_line), .rsp_laddr(ld_rsp_laddr), .rsp_src(ld_rsp_src),
    .rsp_perm_fault(ld_rsp_perm_fault),
    .cm_valid(cm_valid & cm_is_load), .cm_rob, .cm_slot(cm_lq),
    .sq_valid, .sq_rob,
    .st_valid, .st_laddr, .st_data, .st_be,
    .mem_req_valid(dmem_req_valid), .mem_req_ready(dmem_req_ready),
    .mem_req_laddr(dmem_req_laddr), .mem_req_id(dmem_req_id),
    .mem_rsp_valid(dmem_rsp_valid), .mem_rsp_id(dmem_rsp_id), .mem_rsp_data(dmem_rsp_data),
    .inst_valid(dinst_valid), .inst_laddr(dinst_laddr),
    .walk_req_valid(dwalk_req_valid), .walk_req_ready(dwalk_req_ready),
    .walk_req_vpn(dwalk_req_vpn), .walk_req_id(dwalk_req_id),
    .walk_rsp_valid(dwalk_rsp_valid), .walk_rsp_id(dwalk_rsp_id),
    .walk_rsp_pte(dwalk_rsp_pte), .walk_rsp_fault(dwalk_rsp_fault),
    .shc_occupancy(shdc_occupancy), .sht_occupancy(shdtlb_occupancy),
    .mem_dropped(d_mem_drop), .walk_dropped(d_walk_drop)
  );

endmodule
