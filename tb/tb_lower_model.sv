// tb_lower_model: behavioural model of what lies below one side of the SafeSpec path:
// the next cache level / memory (line reads) and the page walker. Every request is
// accepted at once and answered, in order, MEM_LAT or WALK_LAT cycles later, with
// contents from tb_safespec_pkg. Not synthesizable; testbench use only.
module tb_lower_model
  import safespec_pkg::*;
  import tb_safespec_pkg::*;
#(
  parameter int unsigned ID_W     = 1,
  parameter int unsigned MEM_LAT  = 20,
  parameter int unsigned WALK_LAT = 12
) (
  input  logic            clk,
  input  logic            mem_req_valid,
  output logic            mem_req_ready,
  input  laddr_t          mem_req_laddr,
  input  logic [ID_W-1:0] mem_req_id,
  output logic            mem_rsp_valid,
  output logic [ID_W-1:0] mem_rsp_id,
  output line_t           mem_rsp_data,
  input  logic            walk_req_valid,
  output logic            walk_req_ready,
  input  vpn_t            walk_req_vpn,
  input  logic [ID_W-1:0] walk_req_id,
  output logic            walk_rsp_valid,
  output logic [ID_W-1:0] walk_rsp_id,
  output pte_t            walk_rsp_pte,
  output logic            walk_rsp_fault,
  output int              mem_reads,
  output int              walks
);
  typedef struct { longint due; logic [ID_W-1:0] id; logic [63:0] key; } pend_t;
  pend_t mq[$], wq[$];
  longint now = 0;

  assign mem_req_ready  = 1'b1;
  assign walk_req_ready = 1'b1;

  initial begin
    mem_rsp_valid = 0; mem_rsp_id = '0; mem_rsp_data = '0;
    walk_rsp_valid = 0; walk_rsp_id = '0; walk_rsp_pte = '0; walk_rsp_fault = 0;
    mem_reads = 0; walks = 0;
  end

  always @(posedge clk) begin
    now <= now + 1;
    if (mem_req_valid) begin
      mq.push_back('{due: now + MEM_LAT, id: mem_req_id, key: 64'(mem_req_laddr)});
      mem_reads <= mem_reads + 1;
    end
    if (walk_req_valid) begin
      wq.push_back('{due: now + WALK_LAT, id: walk_req_id, key: 64'(walk_req_vpn)});
      walks <= walks + 1;
    end
    mem_rsp_valid <= 1'b0;
    if (mq.size() > 0 && mq[0].due <= now) begin
      mem_rsp_valid <= 1'b1;
      mem_rsp_id    <= mq[0].id;
      mem_rsp_data  <= line_of(laddr_t'(mq[0].key));
      void'(mq.pop_front());
    end
    walk_rsp_valid <= 1'b0;
    if (wq.size() > 0 && wq[0].due <= now) begin
      walk_rsp_valid <= 1'b1;
      walk_rsp_id    <= wq[0].id;
      walk_rsp_pte   <= pte_of(vpn_t'(wq[0].key));
      walk_rsp_fault <= unmapped(vpn_t'(wq[0].key));
      void'(wq.pop_front());
    end
  end
endmodule
