// tb_shadow_table: self-checking test of shadow_table at a small size (4 entries,
// 16-entry ROB). Directed sequence, expected values worked out by hand: associative
// fill order, visibility to owner/younger only (also across ROB wrap-around), commit
// guarded by the owner tag, squash of younger owners, one-per-cycle drain, store merge,
// blocking when full.
module tb_shadow_table;
  localparam int unsigned N = 4, KW = 8, DW = 16, RN = 16, CW = 2;
  logic clk = 0, rst_n = 0;
  logic [3:0] rob_head = 0;
  logic [KW-1:0] lk_key = 0; logic [3:0] lk_rob = 0;
  logic lk_hit; logic [1:0] lk_idx; logic [DW-1:0] lk_data;
  logic al_valid = 0; logic [KW-1:0] al_key = 0; logic [DW-1:0] al_data = 0; logic [3:0] al_rob = 0;
  logic al_ready; logic [1:0] al_idx;
  logic [CW-1:0] cm_valid = 0; logic [CW-1:0][1:0] cm_idx = '0; logic [CW-1:0][3:0] cm_rob = '0;
  logic sq_valid = 0; logic [3:0] sq_rob = 0;
  logic dr_valid; logic [KW-1:0] dr_key; logic [DW-1:0] dr_data; logic dr_ready = 0;
  logic st_valid = 0; logic [KW-1:0] st_key = 0; logic [DW-1:0] st_data = 0; logic [1:0] st_be = 0;
  logic [2:0] occupancy;
  int checks = 0, failures = 0;

  shadow_table #(.ENTRIES(N), .KEY_W(KW), .DATA_W(DW), .ROB_N(RN), .CM_W(CW)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic lookup(input logic [KW-1:0] k, input logic [3:0] r, input bit hit,
                        input logic [DW-1:0] d, input string what);
    lk_key = k; lk_rob = r; #1;
    chk(lk_hit == hit && (!hit || lk_data == d), what);
  endtask
  task automatic alloc(input logic [KW-1:0] k, input logic [DW-1:0] d, input logic [3:0] r,
                       input logic [1:0] exp_idx);
    al_key = k; al_data = d; al_rob = r; #1;
    chk(al_ready && al_idx == exp_idx, $sformatf("alloc key %0h into entry %0d", k, exp_idx));
    al_valid = 1; @(posedge clk); #1 al_valid = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1; #1;
    chk(al_ready && al_idx == 0 && occupancy == 0 && !dr_valid, "empty after reset");
    lookup(8'h11, 4'd5, 0, 0, "no hit when empty");
    alloc(8'h11, 16'hA0A1, 4'd5, 2'd0);
    chk(occupancy == 1, "occupancy 1");
    lookup(8'h11, 4'd5, 1, 16'hA0A1, "owner sees its entry");
    lookup(8'h11, 4'd7, 1, 16'hA0A1, "younger sees entry");
    lookup(8'h11, 4'd3, 0, 0, "older does not see entry");
    alloc(8'h22, 16'hB0B1, 4'd8, 2'd1);
    alloc(8'h33, 16'hC0C1, 4'd9, 2'd2);
    alloc(8'h44, 16'hD0D1, 4'd10, 2'd3);
    #1 chk(!al_ready && occupancy == 4, "full: allocation blocked");
    // commit with a stale owner tag does nothing
    cm_valid = 2'b10; cm_idx[1] = 2'd1; cm_rob[1] = 4'd9; @(posedge clk); #1 cm_valid = 0;
    lookup(8'h22, 4'd3, 0, 0, "wrong-owner commit ignored");
    chk(!dr_valid, "nothing to drain yet");
    cm_valid = 2'b01; cm_idx[0] = 2'd1; cm_rob[0] = 4'd8; @(posedge clk); #1 cm_valid = 0;
    lookup(8'h22, 4'd3, 1, 16'hB0B1, "committed entry visible to older instruction");
    chk(dr_valid && dr_key == 8'h22 && dr_data == 16'hB0B1, "drain offers committed entry");
    // squash rob 9 and younger: entries 2,3 go, entry 0 (rob 5) and committed entry 1 stay
    sq_valid = 1; sq_rob = 4'd9; @(posedge clk); #1 sq_valid = 0;
    chk(occupancy == 2, "squash freed two entries");
    lookup(8'h33, 4'd12, 0, 0, "squashed entry gone");
    lookup(8'h11, 4'd12, 1, 16'hA0A1, "older entry survives squash");
    chk(al_ready && al_idx == 2, "lowest free entry is 2");
    dr_ready = 1; @(posedge clk); #1 dr_ready = 0;
    chk(occupancy == 1 && !dr_valid, "drain freed the committed entry");
    // committed store merges its enabled byte into the shadow copy
    st_valid = 1; st_key = 8'h11; st_data = 16'h55AB; st_be = 2'b01; @(posedge clk); #1 st_valid = 0;
    lookup(8'h11, 4'd5, 1, 16'hA0AB, "store byte merged");
    // squash of the owner itself frees entry 0
    sq_valid = 1; sq_rob = 4'd5; @(posedge clk); #1 sq_valid = 0;
    chk(occupancy == 0, "squash of owner empties table");
    // ROB wrap-around: head 14, owner rob 1 has age 3
    rob_head = 4'd14;
    alloc(8'h66, 16'h6666, 4'd1, 2'd0);
    lookup(8'h66, 4'd15, 0, 0, "older across wrap does not see");
    lookup(8'h66, 4'd2, 1, 16'h6666, "younger across wrap sees");
    sq_valid = 1; sq_rob = 4'd0; @(posedge clk); #1 sq_valid = 0;
    chk(occupancy == 0, "squash across wrap");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
