// tb_assoc_store: self-checking test of assoc_store at 4 sets x 2 ways. Checks hit/miss
// and data after fills, in-place refill, round-robin victim order within a set,
// independence of sets, byte-enabled store merge (also in the cycle of a fill to another
// set) and no allocation on a store miss.
// Expected contents are tracked by hand in the comments.
module tb_assoc_store;
  localparam int unsigned KW = 8, DW = 16;
  logic clk = 0, rst_n = 0;
  logic [KW-1:0] lk_key = 0; logic lk_hit; logic [DW-1:0] lk_data;
  logic fill_valid = 0; logic [KW-1:0] fill_key = 0; logic [DW-1:0] fill_data = 0;
  logic wr_valid = 0; logic [KW-1:0] wr_key = 0; logic [DW-1:0] wr_data = 0; logic [1:0] wr_be = 0;
  int checks = 0, failures = 0;

  assoc_store #(.SETS(4), .WAYS(2), .KEY_W(KW), .DATA_W(DW)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic look(input logic [KW-1:0] k, input bit hit, input logic [DW-1:0] d);
    lk_key = k; #1;
    chk(lk_hit == hit && (!hit || lk_data == d), $sformatf("lookup %0h expect hit=%0d data=%0h got %0d %0h", k, hit, d, lk_hit, lk_data));
  endtask
  task automatic fill(input logic [KW-1:0] k, input logic [DW-1:0] d);
    fill_key = k; fill_data = d; fill_valid = 1; @(posedge clk); #1 fill_valid = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    look(8'h10, 0, 0);
    fill(8'h10, 16'h1010);                 // set 0 way 0
    look(8'h10, 1, 16'h1010);
    fill(8'h14, 16'h1414);                 // set 0 way 1
    look(8'h10, 1, 16'h1010);
    look(8'h14, 1, 16'h1414);
    fill(8'h11, 16'h1111);                 // set 1, other set untouched
    fill(8'h18, 16'h1818);                 // set 0 way 0: evicts 10
    look(8'h10, 0, 0);
    look(8'h14, 1, 16'h1414);
    look(8'h18, 1, 16'h1818);
    look(8'h11, 1, 16'h1111);
    fill(8'h14, 16'h4141);                 // refill in place, victim pointer stays at way 1
    look(8'h14, 1, 16'h4141);
    fill(8'h1C, 16'h1C1C);                 // set 0 way 1: evicts 14
    look(8'h14, 0, 0);
    look(8'h18, 1, 16'h1818);
    look(8'h1C, 1, 16'h1C1C);
    wr_key = 8'h18; wr_data = 16'hABCD; wr_be = 2'b10; wr_valid = 1; @(posedge clk); #1 wr_valid = 0;
    look(8'h18, 1, 16'hAB18);
    wr_key = 8'h20; wr_data = 16'hFFFF; wr_be = 2'b11; wr_valid = 1; @(posedge clk); #1 wr_valid = 0;
    look(8'h20, 0, 0);
    look(8'h1C, 1, 16'h1C1C);
    // store and fill in the same cycle, different sets: both take effect
    wr_key = 8'h1C; wr_data = 16'h00EE; wr_be = 2'b01; wr_valid = 1;
    fill_key = 8'h11; fill_data = 16'h2222; fill_valid = 1;
    @(posedge clk); #1 wr_valid = 0; fill_valid = 0;
    look(8'h1C, 1, 16'h1CEE);
    look(8'h11, 1, 16'h2222);
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
