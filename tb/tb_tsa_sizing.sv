// tb_tsa_sizing: why the shadow structures are sized for the worst case. safespec_top is
// built here with an undersized shadow d-cache of SHDC_SMALL = 24 lines; the default is
// 72, one per load-queue entry. The covert channel is the blocking one. A path that will
// retire has loaded line A. A mispredicted path reads a secret bit, and if the bit is 1
// it fills the shadow d-cache with 23 more lines. A spy load on the retiring path, older
// than the mispredicted branch, then misses on line X. When the shadow d-cache is full,
// its fill must wait until the misprediction is resolved (squash at a fixed time), so
// its latency reveals the bit. The test measures the spy latency for both bit values and
// checks that they differ at this size. tb_tsa_attack runs the same attack at the
// default size, where no difference can appear.
module tb_tsa_sizing;
  import safespec_pkg::*;
  import tb_safespec_pkg::*;

  localparam int unsigned SHDC_SMALL = 24;
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
  logic [4:0] shdc_occupancy;
  logic [6:0] shdtlb_occupancy;
  logic dropped_reply;
  int i_mem_reads, i_walks, d_mem_reads, d_walks;

  safespec_top #(.SHDC_N(SHDC_SMALL)) dut_small (.*);

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

  localparam logic [VADDR_W-1:0] LINE_A = 48'h0000_0500_0000;
  localparam logic [VADDR_W-1:0] LINE_X = 48'h0000_0500_0F00;
  localparam logic [VADDR_W-1:0] FILLER = 48'h0000_0500_1000;
  localparam int SQUASH_AT = 150;
  int spy_lat [2];

  task automatic run(input int bit_val);
    #1 rst_n = 0; rob_head = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    load(LINE_A, 8'd1, 7'd0, 1'b1, SRC_FILL, 0);
    // rob 3: mispredicted branch; rob 4 reads the secret bit; rob 5.. Trojan loads
    if (bit_val == 1)
      for (int i = 0; i < SHDC_SMALL - 1; i++)
        load(FILLER + 48'(i * 64), 8'(5 + i), 7'(3 + i), 1'b1, SRC_FILL, 0);
    chk(shdc_occupancy == ((bit_val == 1) ? SHDC_SMALL : 1), "shadow d-cache occupancy before the spy");
    // spy (rob 2, retiring path) misses on X; the branch resolves SQUASH_AT cycles later
    fork
      begin
        int lat = 0;
        #1 ld_req_vaddr = LINE_X; ld_req_rob = 8'd2; ld_req_lq = 7'd1; ld_req_valid = 1;
        @(posedge clk); #1 ld_req_valid = 0;
        while (!ld_rsp_valid) begin @(posedge clk); #1 lat++; end
        spy_lat[bit_val] = lat + 1;
        chk(ld_rsp_src == SRC_FILL && ld_rsp_line == line_of(laddr_of(LINE_X)), "spy load data");
        if (ld_rsp_src == SRC_FILL) n_fill_d++;
      end
      begin
        repeat (SQUASH_AT) @(posedge clk);
        squash(8'd3);
      end
    join
    @(posedge clk);
  endtask

  initial begin
    run(0);
    run(1);
    $display("spy latency: %0d cycles (bit 0), %0d cycles (bit 1)", spy_lat[0], spy_lat[1]);
    chk(spy_lat[0] < SQUASH_AT, "spy not delayed when the shadow d-cache has room");
    chk(spy_lat[1] > SQUASH_AT, "spy delayed until the squash when the shadow d-cache is full");
    chk(n_squash_free == 1, $sformatf("squash freed Trojan lines once (%0d)", n_squash_free));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
