// assoc_store: set-associative committed structure, used for the L1 i-cache and d-cache
// (64 sets x 8 ways of 64-byte lines = 32 KB) and for the iTLB and dTLB (64 entries).
//
// The key is split into a set index (low bits) and a tag. Lookup is combinational:
// lk_hit and lk_data follow lk_key in the same cycle; the caller adds the access latency.
// A fill writes a (key, data) pair: it overwrites the way already holding the key, else
// the way named by the set's round-robin pointer, which then advances. Fills come only
// from committed shadow entries, and lookups never touch the replacement state, so
// speculative accesses leave no trace here, not even in the replacement order.
// wr_* merges the enabled bytes of a committed store into a resident line (no
// allocation on a store miss). Reset invalidates every way; data arrays are not reset.
// Round-robin replacement and the write-through / no-write-allocate store policy are
// this design's choices; the structure's sizes are those of the modelled core.
module assoc_store #(
  parameter int unsigned SETS   = 64,
  parameter int unsigned WAYS   = 8,
  parameter int unsigned KEY_W  = 34,
  parameter int unsigned DATA_W = 512,
  localparam int unsigned SET_W = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned TAG_W = KEY_W - $clog2(SETS),
  localparam int unsigned BE_W  = DATA_W / 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [KEY_W-1:0]  lk_key,
  output logic              lk_hit,
  output logic [DATA_W-1:0] lk_data,
  input  logic              fill_valid,
  input  logic [KEY_W-1:0]  fill_key,
  input  logic [DATA_W-1:0] fill_data,
  input  logic              wr_valid,
  input  logic [KEY_W-1:0]  wr_key,
  input  logic [DATA_W-1:0] wr_data,
  input  logic [BE_W-1:0]   wr_be
);

  logic              valid_q [SETS][WAYS];
  logic [TAG_W-1:0]  tag_q   [SETS][WAYS];
  logic [DATA_W-1:0] data_q  [SETS][WAYS];
  logic [WAY_W-1:0]  rr_q    [SETS];

  function automatic logic [SET_W-1:0] set_of(logic [KEY_W-1:0] k);
    return (SETS > 1) ? SET_W'(k) : '0;
  endfunction
  function automatic logic [TAG_W-1:0] tag_of(logic [KEY_W-1:0] k);
    return TAG_W'(k >> $clog2(SETS));
  endfunction

  // ---- lookup -----------------------------------------------------------------
  logic [SET_W-1:0] lk_set;
  assign lk_set = set_of(lk_key);
  always_comb begin
    lk_hit  = 1'b0;
    lk_data = '0;
    for (int w = 0; w < WAYS; w++)
      if (valid_q[lk_set][w] && tag_q[lk_set][w] == tag_of(lk_key)) begin
        lk_hit  = 1'b1;
        lk_data = data_q[lk_set][w];
      end
  end

  // ---- fill way selection -----------------------------------------------------
  logic [SET_W-1:0] f_set;
  logic             f_present;
  logic [WAY_W-1:0] f_way;
  assign f_set = set_of(fill_key);
  always_comb begin
    f_present = 1'b0;
    f_way     = rr_q[f_set];
    for (int w = 0; w < WAYS; w++)
      if (valid_q[f_set][w] && tag_q[f_set][w] == tag_of(fill_key)) begin
        f_present = 1'b1;
        f_way     = WAY_W'(w);
      end
  end

  logic [SET_W-1:0] w_set;
  logic             w_hit;
  logic [WAY_W-1:0] w_way;
  assign w_set = set_of(wr_key);
  always_comb begin
    w_hit = 1'b0;
    w_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (valid_q[w_set][w] && tag_q[w_set][w] == tag_of(wr_key)) begin
        w_hit = 1'b1;
        w_way = WAY_W'(w);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        rr_q[s] <= '0;
        for (int w = 0; w < WAYS; w++) begin
          valid_q[s][w] <= 1'b0;
          tag_q[s][w]   <= '0;
        end
      end
    end else if (fill_valid) begin
      valid_q[f_set][f_way] <= 1'b1;
      tag_q[f_set][f_way]   <= tag_of(fill_key);
      if (!f_present)
        rr_q[f_set] <= (WAY_W'(rr_q[f_set] + 1'b1) == WAY_W'(WAYS)) ? '0 : WAY_W'(rr_q[f_set] + 1'b1);
    end
  end

  logic [DATA_W-1:0] wr_mask;
  always_comb
    for (int b = 0; b < BE_W; b++) wr_mask[8*b +: 8] = {8{wr_be[b]}};

  always_ff @(posedge clk) begin
    // a fill into the same way wins: its data already carries the store (the shadow
    // copy was merged too), or it evicts the stored-to line
    if (wr_valid && w_hit && !(fill_valid && f_set == w_set && f_way == w_way))
      data_q[w_set][w_way] <= (data_q[w_set][w_way] & ~wr_mask) | (wr_data & wr_mask);
    if (fill_valid)
      data_q[f_set][f_way] <= fill_data;
  end

endmodule
