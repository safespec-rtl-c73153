// tb_ptr_table: self-checking test of ptr_table (8 slots, 2 read ports). Random slot
// writes are mirrored in a reference array in the testbench; both read ports are
// compared with it after every write, including overwrites of a slot.
module tb_ptr_table;
  logic clk = 0, rst_n = 0;
  logic wr_valid = 0; logic [2:0] wr_slot = 0;
  logic wr_has_c = 0; logic [2:0] wr_c_idx = 0; logic wr_has_t = 0; logic [2:0] wr_t_idx = 0;
  logic [1:0][2:0] rd_slot = '0;
  logic [1:0] rd_has_c, rd_has_t; logic [1:0][2:0] rd_c_idx, rd_t_idx;
  logic [7:0] ref_q [8];
  int checks = 0, failures = 0;

  ptr_table #(.SLOTS(8), .C_W(3), .T_W(3), .RD_W(2)) dut (.*);
  always #5 clk = ~clk;

  task automatic check_all();
    for (int s = 0; s < 8; s++) begin
      rd_slot[0] = 3'(s); rd_slot[1] = 3'(7 - s); #1;
      checks++;
      if ({rd_has_c[0], rd_c_idx[0], rd_has_t[0], rd_t_idx[0]} != ref_q[s] ||
          {rd_has_c[1], rd_c_idx[1], rd_has_t[1], rd_t_idx[1]} != ref_q[7 - s]) begin
        failures++;
        $display("FAIL: slot %0d", s);
      end
    end
  endtask

  initial begin
    for (int s = 0; s < 8; s++) ref_q[s] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    check_all();
    for (int n = 0; n < 40; n++) begin
      wr_slot = 3'($urandom_range(0, 7));
      {wr_has_c, wr_c_idx, wr_has_t, wr_t_idx} = 8'($urandom);
      wr_valid = 1; @(posedge clk); #1 wr_valid = 0;
      ref_q[wr_slot] = {wr_has_c, wr_c_idx, wr_has_t, wr_t_idx};
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
