// miss_filter: filter for delayed side effects of long-latency transactions (cache line
// reads and page walks) issued on behalf of speculative instructions.
//
// Each outstanding transaction has an entry holding its owner's ROB index, a live flag
// and META_W bits of caller data (the address asked for). The entry index is the
// transaction id sent out with the request and returned with the reply.
//  * Issue: is_valid takes the lowest free entry (is_id) when is_ready.
//  * Squash: every live entry whose owner is at or younger than sq_rob is marked dead.
//    The entry stays busy until its reply arrives, so the id is not reused meanwhile.
//  * Reply: rs_valid with rs_id frees the entry; rs_live says whether the reply may be
//    used (owner still in flight). A dead reply, or one with no matching entry, is
//    dropped here and never reaches a shadow or committed structure.
// All outputs for a reply are combinational in the reply cycle. The number of entries
// and the use of the ROB index (rather than a branch id) as the owner tag are this
// design's choices.
module miss_filter
  import safespec_pkg::*;
#(
  parameter int unsigned TXNS   = 8,
  parameter int unsigned ROB_N  = 224,
  parameter int unsigned META_W = LADDR_W,
  localparam int unsigned ID_W  = (TXNS > 1) ? $clog2(TXNS) : 1,
  localparam int unsigned ROB_W = $clog2(ROB_N),
  localparam int unsigned CNT_W = $clog2(TXNS + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ROB_W-1:0]  rob_head,
  input  logic              is_valid,
  input  logic [ROB_W-1:0]  is_rob,
  input  logic [META_W-1:0] is_meta,
  output logic              is_ready,
  output logic [ID_W-1:0]   is_id,
  input  logic              sq_valid,
  input  logic [ROB_W-1:0]  sq_rob,
  input  logic              rs_valid,
  input  logic [ID_W-1:0]   rs_id,
  output logic              rs_live,
  output logic [ROB_W-1:0]  rs_rob,
  output logic [META_W-1:0] rs_meta,
  output logic [CNT_W-1:0]  outstanding,
  output logic              dropped      // pulses when a reply is discarded
);

  logic              busy_q [TXNS];
  logic              live_q [TXNS];
  logic [ROB_W-1:0]  own_q  [TXNS];
  logic [META_W-1:0] meta_q [TXNS];

  always_comb begin
    is_ready = 1'b0;
    is_id    = '0;
    for (int i = TXNS - 1; i >= 0; i--)
      if (!busy_q[i]) begin
        is_ready = 1'b1;
        is_id    = ID_W'(i);
      end
  end

  always_comb begin
    outstanding = '0;
    for (int i = 0; i < TXNS; i++)
      if (busy_q[i]) outstanding = outstanding + CNT_W'(1);
  end

  // a reply is usable only if its entry is busy, live, and not being squashed now
  logic rs_squashed_now;
  assign rs_squashed_now = sq_valid &&
      rob_age(own_q[rs_id], rob_head, ROB_N) >= rob_age(sq_rob, rob_head, ROB_N);
  assign rs_live = rs_valid && busy_q[rs_id] && live_q[rs_id] && !rs_squashed_now;
  assign rs_rob  = own_q[rs_id];
  assign rs_meta = meta_q[rs_id];
  assign dropped = rs_valid && !rs_live;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < TXNS; i++) begin
        busy_q[i] <= 1'b0;
        live_q[i] <= 1'b0;
        own_q[i]  <= '0;
        meta_q[i] <= '0;
      end
    end else begin
      for (int i = 0; i < TXNS; i++)
        if (sq_valid && busy_q[i] &&
            rob_age(own_q[i], rob_head, ROB_N) >= rob_age(sq_rob, rob_head, ROB_N))
          live_q[i] <= 1'b0;
      if (rs_valid) begin
        busy_q[rs_id] <= 1'b0;
        live_q[rs_id] <= 1'b0;
      end
      if (is_valid && is_ready) begin
        busy_q[is_id] <= 1'b1;
        live_q[is_id] <= 1'b1;
        own_q[is_id]  <= is_rob;
        meta_q[is_id] <= is_meta;
      end
    end
  end

  a_reply_known: assert property (@(posedge clk) disable iff (!rst_n)
                                  rs_valid |-> busy_q[rs_id]);

endmodule
