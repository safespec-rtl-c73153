// tb_miss_filter: self-checking test of miss_filter (2 transactions, 16-entry ROB).
// Checks id allocation and exhaustion, delivery of a live reply with its owner and
// address, cancellation of younger owners on a squash (reply dropped, id freed), a
// squash arriving in the same cycle as the reply, and owners older than the squash
// point surviving it.
module tb_miss_filter;
  logic clk = 0, rst_n = 0;
  logic [3:0] rob_head = 0;
  logic is_valid = 0; logic [3:0] is_rob = 0; logic [7:0] is_meta = 0;
  logic is_ready; logic is_id;
  logic sq_valid = 0; logic [3:0] sq_rob = 0;
  logic rs_valid = 0; logic rs_id = 0;
  logic rs_live; logic [3:0] rs_rob; logic [7:0] rs_meta;
  logic [1:0] outstanding; logic dropped;
  int checks = 0, failures = 0;

  miss_filter #(.TXNS(2), .ROB_N(16), .META_W(8)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic issue(input logic [3:0] r, input logic [7:0] m, input logic exp_id);
    is_rob = r; is_meta = m; #1;
    chk(is_ready && is_id == exp_id, $sformatf("issue rob %0d gets id %0d", r, exp_id));
    is_valid = 1; @(posedge clk); #1 is_valid = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1; #1;
    chk(outstanding == 0 && is_ready, "idle after reset");
    issue(4'd3, 8'hA3, 1'b0);
    issue(4'd6, 8'hB6, 1'b1);
    chk(!is_ready && outstanding == 2, "all ids in use");
    rs_valid = 1; rs_id = 1'b0; #1;
    chk(rs_live && rs_rob == 4'd3 && rs_meta == 8'hA3 && !dropped, "live reply delivered");
    @(posedge clk); #1 rs_valid = 0;
    chk(outstanding == 1 && is_ready && is_id == 1'b0, "id 0 freed by reply");
    issue(4'd2, 8'hC2, 1'b0);
    sq_valid = 1; sq_rob = 4'd5; @(posedge clk); #1 sq_valid = 0;    // rob 6 squashed, rob 2 kept
    rs_valid = 1; rs_id = 1'b1; #1;
    chk(!rs_live && dropped, "reply of squashed owner dropped");
    @(posedge clk); #1 rs_valid = 0;
    chk(outstanding == 1, "dropped reply frees its id");
    rs_valid = 1; rs_id = 1'b0; #1;
    chk(rs_live && rs_rob == 4'd2 && rs_meta == 8'hC2, "older owner survives squash");
    @(posedge clk); #1 rs_valid = 0;
    // squash in the same cycle as the reply
    rob_head = 4'd12;
    issue(4'd1, 8'hD1, 1'b0);                                     // age 5
    rs_valid = 1; rs_id = 1'b0; sq_valid = 1; sq_rob = 4'd14; #1;  // age 2: owner squashed
    chk(!rs_live && dropped, "squash in reply cycle drops reply");
    @(posedge clk); #1 rs_valid = 0; sq_valid = 0;
    chk(outstanding == 0, "empty at end");
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
