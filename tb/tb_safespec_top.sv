// tb_safespec_top: end-to-end test of safespec_top at its default sizes (224-entry ROB,
// 72-entry load queue, 224-entry shadow i-cache and iTLB, 72-entry shadow d-cache and
// dTLB, 32 KB L1s, 64-entry TLBs). A scripted core drives fetches, loads, commits and
// squashes; the lower levels are tb_lower_model instances. Phases:
//   A  224 fetches to distinct lines fill the shadow i-cache to its worst case without
//      blocking; a re-fetch hits the shadow copy; six commits per cycle drain them all
//      into the L1 i-cache; a re-fetch then hits the L1.
//   B  72 loads fill the shadow d-cache to its worst case; commit; L1 d-cache hits.
//   C  Spectre v1: a wrong-path load of array2[secret*64] is squashed; probing the
//      array afterwards finds no line in the L1 or shadow state.
//   D  Meltdown: a user load of a supervisor page is flagged, its dependent load fills
//      only the shadow cache, the squash at retirement removes both; probe misses.
//   E  An older load does not see a younger load's shadow line.
//   F  A squash while a line read is outstanding: the late reply is dropped.
//   G  Walk faults on both sides.   H  A committed store merges into the L1 d-cache.
// Every response is checked against the reference memory; hits are checked to take
// exactly 4 cycles. Each mechanism is counted and one that never occurs is a failure.
module tb_safespec_top;
  import safespec_pkg::*;
  import tb_safespec_pkg::*;

  localparam int unsigned ROB_N = 224, LQ_N = 72, CM_W = 6, HL = 4;
  localparam logic [VADDR_W-1:0] CODE   = 48'h0000_0040_0000;
  localparam logic [VADDR_W-1:0] DATA   = 48'h0000_1000_0000;
  localparam logic [VADDR_W-1:0] ARRAY2 = 48'h0000_2000_0000;
  localparam logic [VADDR_W-1:0] KERN   = 48'h8000_0000_1000;
  localparam logic [VADDR_W-1:0] UNMAP  = 48'h7800_0000_0000;

  logic clk = 0, rst_n = 0;
  logic [7:0] rob_head = 0;
  logic if_req_valid = 0, if_req_ready, if_req_user = 1; logic [VADDR_W-1:0] if_req_vaddr = '0;
  logic [7:0] if_req_rob = 0;
  logic if_rsp_valid, if_rsp_perm_fault; logic [7:0] if_rsp_rob; line_t if_rsp_line; src_e if_rsp_src;
  logic ld_req_valid = 0, ld_req_ready, ld_req_user = 1; logic [VADDR_W-1:0] ld_req_vaddr = '0;
  logic [7:0] ld_req_rob = 0; logic [6:0] ld_req_lq = 0;
  logic ld_rsp_valid, ld_rsp_perm_fault; logic [7:0] ld_rsp_rob; logic [6:0] ld_rsp_lq;
  line_t ld_rsp_line; laddr_t ld_rsp_laddr; src_e ld_rsp_src;
  logic [CM_W-1:0] cm_valid = '0, cm_is_load = '0;
  logic [CM_W-1:0][7:0] cm_rob = '0; logic [CM_W-1:0][6:0] cm_lq = '0;
  logic sq_valid = 0; logic [7:0] sq_rob = 0;
  logic st_valid = 0; laddr_t st_laddr = '0; line_t st_data = '0; logic [63:0] st_be = '0;
  logic imem_req_valid, imem_req_ready, imem_rsp_valid; laddr_t imem_req_laddr;
  logic [2:0] imem_req_id, imem_rsp_id; line_t imem_rsp_data;
  logic iinst_valid; laddr_t iinst_laddr;
  logic dmem_req_valid, dmem_req_ready, dmem_rsp_valid; laddr_t dmem_req_laddr;
  logic [2:0] dmem_req_id, dmem_rsp_id; line_t dmem_rsp_data;
  logic dinst_valid; laddr_t dinst_laddr;
  logic iwalk_req_valid, iwalk_req_ready, iwalk_rsp_valid, iwalk_rsp_fault; vpn_t iwalk_req_vpn;
  logic [2:0] iwalk_req_id, iwalk_rsp_id; pte_t iwalk_rsp_pte;
  logic dwalk_req_valid, dwalk_req_ready, dwalk_rsp_valid, dwalk_rsp_fault; vpn_t dwalk_req_vpn;
  logic [2:0] dwalk_req_id, dwalk_rsp_id; pte_t dwalk_rsp_pte;
  logic [7:0] shic_occupancy, shitlb_occupancy;
  logic [6:0] shdc_occupancy, shdtlb_occupancy;
  logic dropped_reply;
  int i_mem_reads, i_walks, d_mem_reads, d_walks;

  safespec_top dut (.*);

  tb_lower_model #(.ID_W(3), .MEM_LAT(30), .WALK_LAT(15)) ilow (
    .clk, .mem_req_valid(imem_req_valid), .mem_req_ready(imem_req_ready),
    .mem_req_laddr(imem_req_laddr), .mem_req_id(imem_req_id), .mem_rsp_valid(imem_rsp_valid),
    .mem_rsp_id(imem_rsp_id), .mem_rsp_data(imem_rsp_data),
    .walk_req_valid(iwalk_req_valid), .walk_req_ready(iwalk_req_ready), .walk_req_vpn(iwalk_req_vpn),
    .walk_req_id(iwalk_req_id), .walk_rsp_valid(iwalk_rsp_valid), .walk_rsp_id(iwalk_rsp_id),
    .walk_rsp_pte(iwalk_rsp_pte), .walk_rsp_fault(iwalk_rsp_fault),
    .mem_reads(i_mem_reads), .walks(i_walks));
  tb_lower_model #(.ID_W(3), .MEM_LAT(30), .WALK_LAT(15)) dlow (
    .clk, .mem_req_valid(dmem_req_valid), .mem_req_ready(dmem_req_ready),
    .mem_req_laddr(dmem_req_laddr), .mem_req_id(dmem_req_id), .mem_rsp_valid(dmem_rsp_valid),
    .mem_rsp_id(dmem_rsp_id), .mem_rsp_data(dmem_rsp_data),
    .walk_req_valid(dwalk_req_valid), .walk_req_ready(dwalk_req_ready), .walk_req_vpn(dwalk_req_vpn),
    .walk_req_id(dwalk_req_id), .walk_rsp_valid(dwalk_rsp_valid), .walk_rsp_id(dwalk_rsp_id),
    .walk_rsp_pte(dwalk_rsp_pte), .walk_rsp_fault(dwalk_rsp_fault),
    .mem_reads(d_mem_reads), .walks(d_walks));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_fill_i = 0, n_fill_d = 0, n_shit_i = 0, n_shit_d = 0, n_l1_i = 0, n_l1_d = 0;
  int n_inst_i = 0, n_inst_d = 0, n_multi_commit = 0, n_squash_free = 0, n_drop = 0;
  int n_walk_fault = 0, n_perm_fault = 0, n_store_merge = 0, n_probe_miss = 0;
  int n_older_blind = 0;

  always @(posedge clk) begin
    if (iinst_valid) n_inst_i++;
    if (dinst_valid) n_inst_d++;
    if (dropped_reply) n_drop++;
    if ($countones(cm_valid) > 1) n_multi_commit++;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic fetch(input logic [VADDR_W-1:0] va, input logic [7:0] rob, input src_e exp_src);
    int lat;
    while (!if_req_ready) @(posedge clk);
    #1 if_req_vaddr = va; if_req_rob = rob; if_req_valid = 1;
    @(posedge clk); #1 if_req_valid = 0;
    lat = 1;
    while (!if_rsp_valid) begin @(posedge clk); #1 lat++; end
    chk(if_rsp_src == exp_src && if_rsp_rob == rob,
        $sformatf("fetch %h rob %0d: source %0d expected %0d", va, rob, if_rsp_src, exp_src));
    if (exp_src != SRC_FAULT) chk(if_rsp_line == line_of(laddr_of(va)), "fetch line data");
    if (exp_src == SRC_L1 || exp_src == SRC_SHADOW) chk(lat == HL, $sformatf("fetch hit latency %0d", lat));
    case (if_rsp_src)
      SRC_FILL:   n_fill_i++;
      SRC_SHADOW: n_shit_i++;
      SRC_L1:     n_l1_i++;
      default:    n_walk_fault++;
    endcase
    @(posedge clk);
  endtask

  task automatic load(input logic [VADDR_W-1:0] va, input logic [7:0] rob, input logic [6:0] lq,
                      input logic user, input src_e exp_src, input bit exp_pf);
    int lat;
    while (!ld_req_ready) @(posedge clk);
    #1 ld_req_vaddr = va; ld_req_rob = rob; ld_req_lq = lq; ld_req_user = user; ld_req_valid = 1;
    @(posedge clk); #1 ld_req_valid = 0;
    lat = 1;
    while (!ld_rsp_valid) begin @(posedge clk); #1 lat++; end
    chk(ld_rsp_src == exp_src && ld_rsp_rob == rob && ld_rsp_lq == lq,
        $sformatf("load %h rob %0d: source %0d expected %0d", va, rob, ld_rsp_src, exp_src));
    if (exp_src != SRC_FAULT) begin
      chk(ld_rsp_line == line_of(laddr_of(va)), "load line data");
      chk(ld_rsp_perm_fault == exp_pf, "load permission flag");
    end
    if (exp_src == SRC_L1 || exp_src == SRC_SHADOW) chk(lat == HL, $sformatf("load hit latency %0d", lat));
    case (ld_rsp_src)
      SRC_FILL:   n_fill_d++;
      SRC_SHADOW: n_shit_d++;
      SRC_L1:     n_l1_d++;
      default:    n_walk_fault++;
    endcase
    if (ld_rsp_perm_fault) n_perm_fault++;
    @(posedge clk);
  endtask

  // retire n instructions from first, up to CM_W per cycle, moving the ROB head
  task automatic retire(input int first, input int n, input bit is_load, input int first_lq);
    int k = 0;
    while (k < n) begin
      #1;
      for (int c = 0; c < CM_W; c++) begin
        cm_valid[c]   = (k + c < n);
        cm_rob[c]     = 8'((first + k + c) % ROB_N);
        cm_lq[c]      = 7'((first_lq + k + c) % LQ_N);
        cm_is_load[c] = is_load;
      end
      @(posedge clk);
      k += CM_W;
      #1 cm_valid = '0;
      rob_head = 8'((first + ((k < n) ? k : n)) % ROB_N);
    end
  endtask

  task automatic squash(input logic [7:0] rob);
    int occ0 = shdc_occupancy + shitlb_occupancy + shdtlb_occupancy + shic_occupancy;
    #1 sq_valid = 1; sq_rob = rob; @(posedge clk); #1 sq_valid = 0;
    if (shdc_occupancy + shitlb_occupancy + shdtlb_occupancy + shic_occupancy < occ0) n_squash_free++;
  endtask

  logic [7:0] secret = 8'h2A;
  int inst0, dinst0;

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // ---- A: instruction side, worst-case shadow i-cache occupancy ----------------
    for (int i = 0; i < ROB_N; i++) fetch(CODE + 48'(i * 64), 8'(i), SRC_FILL);
    chk(shic_occupancy == ROB_N, $sformatf("shadow i-cache holds %0d lines", shic_occupancy));
    chk(shitlb_occupancy == 4, "shadow iTLB holds the 4 code pages");
    fetch(CODE + 48'(5 * 64), 8'(ROB_N - 1), SRC_SHADOW);
    retire(0, ROB_N, 1'b0, 0);
    repeat (ROB_N + 10) @(posedge clk);
    chk(shic_occupancy == 0 && shitlb_occupancy == 0, "shadow i-side drained after commit");
    chk(n_inst_i == ROB_N, $sformatf("%0d committed code lines installed", n_inst_i));
    fetch(CODE + 48'(5 * 64), 8'd0, SRC_L1);
    fetch(CODE + 48'(200 * 64), 8'd1, SRC_L1);
    rob_head = 8'd2;
    // ---- B: data side, worst-case shadow d-cache occupancy -----------------------
    for (int i = 0; i < LQ_N; i++) load(DATA + 48'(i * 64), 8'(2 + i), 7'(i), 1'b1, SRC_FILL, 0);
    chk(shdc_occupancy == LQ_N, $sformatf("shadow d-cache holds %0d lines", shdc_occupancy));
    load(DATA + 48'(3 * 64 + 8), 8'(2 + LQ_N - 1), 7'(LQ_N - 1), 1'b1, SRC_SHADOW, 0);
    retire(2, LQ_N, 1'b1, 0);
    repeat (LQ_N + 10) @(posedge clk);
    chk(shdc_occupancy == 0 && shdtlb_occupancy == 0, "shadow d-side drained after commit");
    chk(n_inst_d == LQ_N, $sformatf("%0d committed data lines installed", n_inst_d));
    load(DATA + 48'(10 * 64), 8'd74, 7'd0, 1'b1, SRC_L1, 0);
    rob_head = 8'd75;
    // ---- C: Spectre v1 -------------------------------------------------------------
    // rob 75 is the mispredicted bounds check; rob 76 the wrong-path array2 access
    load(ARRAY2 + 48'(secret) * 64, 8'd76, 7'd1, 1'b1, SRC_FILL, 0);
    squash(8'd76);
    chk(shdc_occupancy == 0, "wrong-path line discarded");
    rob_head = 8'd76;
    for (int k = -1; k <= 1; k++) begin
      load(ARRAY2 + 48'(int'(secret) + k) * 64, 8'(77 + k + 1), 7'(2 + k + 1), 1'b1, SRC_FILL, 0);
      if (ld_rsp_src == SRC_FILL) n_probe_miss++;
    end
    retire(77, 3, 1'b1, 2);
    repeat (6) @(posedge clk);
    // ---- D: Meltdown ---------------------------------------------------------------
    load(KERN, 8'd90, 7'd10, 1'b1, SRC_FILL, 1);
    load(ARRAY2 + 48'h10_0000 + 48'(secret) * 64, 8'd91, 7'd11, 1'b1, SRC_FILL, 0);
    chk(shdc_occupancy == 2, "faulting load and its dependent are in the shadow cache");
    squash(8'd90);                                   // fault taken at retirement of rob 90
    chk(shdc_occupancy == 0 && shdtlb_occupancy == 0, "Meltdown gadget state discarded");
    rob_head = 8'd90;
    load(ARRAY2 + 48'h10_0000 + 48'(secret) * 64, 8'd90, 7'd10, 1'b1, SRC_FILL, 0);
    if (ld_rsp_src == SRC_FILL) n_probe_miss++;
    retire(90, 1, 1'b1, 10);
    repeat (4) @(posedge clk);
    // ---- E: an older load does not see a younger load's line -------------------------
    load(DATA + 48'h8000, 8'd100, 7'd20, 1'b1, SRC_FILL, 0);
    load(DATA + 48'h8000, 8'd95, 7'd15, 1'b1, SRC_FILL, 0);
    if (ld_rsp_src == SRC_FILL) n_older_blind++;
    load(DATA + 48'h8008, 8'd101, 7'd21, 1'b1, SRC_SHADOW, 0);
    squash(8'd92);
    rob_head = 8'd92;
    // ---- F: squash while a line read is outstanding ---------------------------------
    #1 ld_req_vaddr = DATA + 48'h9000; ld_req_rob = 8'd93; ld_req_lq = 7'd16; ld_req_valid = 1;
    @(posedge clk); #1 ld_req_valid = 0;
    repeat (25) @(posedge clk);
    squash(8'd93);
    chk(ld_req_ready, "access unit free after squash");
    repeat (40) @(posedge clk);
    chk(n_drop >= 1 && shdc_occupancy == 0, "late reply dropped, nothing allocated");
    // ---- G: walk faults ----------------------------------------------------------------
    fetch(UNMAP, 8'd94, SRC_FAULT);
    load(UNMAP + 48'h40, 8'd94, 7'd17, 1'b1, SRC_FAULT, 0);
    squash(8'd94);
    // ---- H: committed store merges into the L1 d-cache ----------------------------------
    #1 st_laddr = laddr_of(DATA + 48'(10 * 64)); st_data = {LINE_W{1'b1}}; st_be = 64'hF0; st_valid = 1;
    @(posedge clk); #1 st_valid = 0;
    #1 ld_req_vaddr = DATA + 48'(10 * 64); ld_req_rob = 8'd94; ld_req_lq = 7'd17; ld_req_valid = 1;
    @(posedge clk); #1 ld_req_valid = 0;
    while (!ld_rsp_valid) @(posedge clk);
    if (ld_rsp_src == SRC_L1 && ld_rsp_line[63:32] == 32'hFFFF_FFFF &&
        ld_rsp_line[31:0] == line_of(laddr_of(DATA + 48'(10 * 64)))[31:0]) n_store_merge++;
    @(posedge clk);
    // ---- mechanism coverage ------------------------------------------------------------
    $display("fills i/d %0d/%0d, shadow hits i/d %0d/%0d, L1 hits i/d %0d/%0d, installs i/d %0d/%0d",
             n_fill_i, n_fill_d, n_shit_i, n_shit_d, n_l1_i, n_l1_d, n_inst_i, n_inst_d);
    $display("multi-commit cycles %0d, squash frees %0d, dropped replies %0d, walk faults %0d",
             n_multi_commit, n_squash_free, n_drop, n_walk_fault);
    $display("permission faults %0d, store merges %0d, probe misses %0d, older-blind %0d",
             n_perm_fault, n_store_merge, n_probe_miss, n_older_blind);
    chk(n_fill_i > 0 && n_fill_d > 0, "shadow fills on both sides");
    chk(n_shit_i > 0 && n_shit_d > 0, "shadow hits on both sides");
    chk(n_l1_i > 0 && n_l1_d > 0, "L1 hits on both sides");
    chk(n_inst_i > 0 && n_inst_d > 0, "commit moves on both sides");
    chk(n_multi_commit > 0, "multiple commits in one cycle");
    chk(n_squash_free > 0, "squash frees shadow entries");
    chk(n_drop > 0, "late reply dropped");
    chk(n_walk_fault == 2, "walk faults");
    chk(n_perm_fault > 0, "permission fault flagged");
    chk(n_store_merge == 1, "store merged");
    chk(n_probe_miss == 4, "attack probes all miss");
    chk(n_older_blind == 1, "older load blind to younger shadow line");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
