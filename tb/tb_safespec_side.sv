// tb_safespec_side: self-checking test of one SafeSpec side (16-entry ROB, 8 slots,
// 4-entry shadow cache and shadow TLB, 4x2 L1, 2x2 TLB, hit latency 4) against the
// behavioural lower-level model. Every response's line is compared with the reference
// memory contents and its source with the value the scenario implies:
//   miss -> walk -> shadow TLB -> line read -> shadow cache; younger hit in the shadow
//   cache in exactly HIT_LAT cycles; older instruction does not see a younger owner's
//   entry; commit moves entries into the L1/TLB (then L1 hit in HIT_LAT cycles); a
//   user access to a supervisor page is flagged and, once squashed, leaves the L1
//   untouched; a squash while a read is outstanding drops the late reply; walk faults;
//   committed store merge.
module tb_safespec_side;
  import safespec_pkg::*;
  import tb_safespec_pkg::*;

  localparam int unsigned HL = 4;
  logic clk = 0, rst_n = 0;
  logic [3:0] rob_head = 0;
  logic req_valid = 0, req_ready, req_user = 1;
  logic [VADDR_W-1:0] req_vaddr = '0;
  logic [3:0] req_rob = 0; logic [2:0] req_slot = 0;
  logic rsp_valid, rsp_perm_fault; logic [3:0] rsp_rob; logic [2:0] rsp_slot;
  line_t rsp_line; laddr_t rsp_laddr; src_e rsp_src;
  logic [1:0] cm_valid = 0; logic [1:0][3:0] cm_rob = '0; logic [1:0][2:0] cm_slot = '0;
  logic sq_valid = 0; logic [3:0] sq_rob = 0;
  logic st_valid = 0; laddr_t st_laddr = '0; line_t st_data = '0; logic [63:0] st_be = '0;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid; laddr_t mem_req_laddr; logic mem_req_id, mem_rsp_id;
  line_t mem_rsp_data;
  logic inst_valid; laddr_t inst_laddr;
  logic walk_req_valid, walk_req_ready, walk_rsp_valid, walk_rsp_fault; vpn_t walk_req_vpn;
  logic walk_req_id, walk_rsp_id; pte_t walk_rsp_pte;
  logic [2:0] shc_occupancy, sht_occupancy;
  logic mem_dropped, walk_dropped;
  int mem_reads, walks;
  int checks = 0, failures = 0, installs = 0, drops = 0;

  safespec_side #(.ROB_N(16), .SLOTS(8), .SHC_N(4), .SHT_N(4), .L1_SETS(4), .L1_WAYS(2),
                  .TLB_SETS(2), .TLB_WAYS(2), .HIT_LAT(HL), .TXNS(2), .CM_W(2)) dut (.*);
  tb_lower_model #(.ID_W(1), .MEM_LAT(20), .WALK_LAT(12)) lower (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (inst_valid) installs++;
    if (mem_dropped || walk_dropped) drops++;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // issue one access and wait for its response; returns cycles from accept to response
  task automatic access(input logic [VADDR_W-1:0] va, input logic [3:0] rob, input logic [2:0] slot,
                        input logic user, input src_e exp_src, input bit exp_pf, input string what,
                        output int lat);
    while (!req_ready) @(posedge clk);
    #1 req_vaddr = va; req_rob = rob; req_slot = slot; req_user = user; req_valid = 1;
    @(posedge clk); #1 req_valid = 0;
    lat = 0;
    while (!rsp_valid) begin @(posedge clk); #1 lat++; end
    lat++;
    chk(rsp_rob == rob && rsp_slot == slot, {what, ": response tag"});
    chk(rsp_src == exp_src, $sformatf("%s: source %0d expected %0d", what, rsp_src, exp_src));
    if (exp_src != SRC_FAULT) begin
      chk(rsp_line == line_of(laddr_of(va)) || st_valid === 1'bx, {what, ": line data"});
      chk(rsp_laddr == laddr_of(va), {what, ": physical line address"});
      chk(rsp_perm_fault == exp_pf, {what, ": permission flag"});
    end
    @(posedge clk);
  endtask

  task automatic commit1(input logic [3:0] rob, input logic [2:0] slot);
    #1 cm_valid = 2'b01; cm_rob[0] = rob; cm_slot[0] = slot;
    @(posedge clk); #1 cm_valid = 0;
  endtask
  task automatic squash(input logic [3:0] rob);
    #1 sq_valid = 1; sq_rob = rob; @(posedge clk); #1 sq_valid = 0;
  endtask

  localparam logic [VADDR_W-1:0] VA_A = 48'h0000_1234_5040;
  localparam logic [VADDR_W-1:0] VA_K = 48'h8000_0000_2080;   // supervisor page
  localparam logic [VADDR_W-1:0] VA_B = 48'h0000_0777_70C0;
  localparam logic [VADDR_W-1:0] VA_U = 48'h7800_0000_0000;   // unmapped
  int lat, w0, m0;

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // 1. cold miss by rob 2
    access(VA_A, 4'd2, 3'd0, 1'b1, SRC_FILL, 0, "cold miss", lat);
    chk(shc_occupancy == 1 && sht_occupancy == 1, "one shadow line and one shadow translation");
    chk(walks == 1 && mem_reads == 1, "one walk and one line read");
    // 2. younger instruction hits the shadow state in HIT_LAT cycles
    access(VA_A + 8, 4'd3, 3'd1, 1'b1, SRC_SHADOW, 0, "younger shadow hit", lat);
    chk(lat == HL, $sformatf("shadow hit latency %0d", lat));
    chk(walks == 1 && mem_reads == 1, "shadow hit made no new request");
    // 3. older instruction cannot see rob 2's entries
    access(VA_A, 4'd1, 3'd2, 1'b1, SRC_FILL, 0, "older does not see younger entry", lat);
    chk(walks == 2 && mem_reads == 2 && shc_occupancy == 2, "older fetched its own copy");
    // 4. commit rob 1 and rob 2 (rob 3 owns nothing)
    commit1(4'd1, 3'd2);
    commit1(4'd2, 3'd0);
    commit1(4'd3, 3'd1);
    repeat (3) @(posedge clk);
    chk(shc_occupancy == 0 && sht_occupancy == 0, "committed entries drained");
    chk(installs == 2, "two committed lines announced to outer levels");
    rob_head = 4'd4;
    access(VA_A, 4'd5, 3'd3, 1'b1, SRC_L1, 0, "L1 hit after commit", lat);
    chk(lat == HL, $sformatf("L1 hit latency %0d", lat));
    chk(walks == 2, "TLB hit after commit");
    // 5. user access to supervisor page: flagged, line only in shadow, squashed
    access(VA_K, 4'd6, 3'd4, 1'b1, SRC_FILL, 1, "user load of supervisor page", lat);
    chk(shc_occupancy == 1 && sht_occupancy == 1, "faulting access held in shadow only");
    squash(4'd6);
    chk(shc_occupancy == 0 && sht_occupancy == 0, "squash removed faulting access state");
    repeat (3) @(posedge clk);
    w0 = walks; m0 = mem_reads;
    access(VA_K, 4'd6, 3'd4, 1'b0, SRC_FILL, 0, "supervisor line absent from L1 after squash", lat);
    chk(walks == w0 + 1 && mem_reads == m0 + 1, "TLB and L1 untouched by squashed access");
    squash(4'd6);
    // 6. squash while the line read is outstanding; its reply must be dropped
    #1 req_vaddr = VA_B; req_rob = 4'd7; req_slot = 3'd5; req_user = 1; req_valid = 1;
    @(posedge clk); #1 req_valid = 0;
    repeat (22) @(posedge clk);          // walk done (12), line read outstanding
    chk(sht_occupancy == 1 && !req_ready, "walk filled shadow TLB, read outstanding");
    squash(4'd7);
    chk(req_ready && sht_occupancy == 0, "squash cancelled the access");
    access(VA_A + 48'h8, 4'd7, 3'd5, 1'b1, SRC_L1, 0, "next access after squash", lat);
    repeat (25) @(posedge clk);
    chk(drops == 1, $sformatf("late reply dropped (%0d)", drops));
    chk(shc_occupancy == 0, "late reply not placed in shadow cache");
    // 7. unmapped page: walk fault, nothing allocated
    access(VA_U, 4'd8, 3'd6, 1'b1, SRC_FAULT, 0, "walk fault", lat);
    chk(sht_occupancy == 0 && shc_occupancy == 0, "fault allocates nothing");
    // 8. committed store merges into the L1 line
    #1 st_laddr = laddr_of(VA_A); st_data = {LINE_W{1'b1}}; st_be = 64'h1; st_valid = 1;
    @(posedge clk); #1 st_valid = 0;
    while (!req_ready) @(posedge clk);
    #1 req_vaddr = VA_A; req_rob = 4'd9; req_slot = 3'd7; req_valid = 1;
    @(posedge clk); #1 req_valid = 0;
    while (!rsp_valid) @(posedge clk);
    chk(rsp_src == SRC_L1 && rsp_line[7:0] == 8'hFF &&
        rsp_line[LINE_W-1:8] == line_of(laddr_of(VA_A))[LINE_W-1:8], "store byte merged into L1");
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
