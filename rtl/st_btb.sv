// st_btb: set-associative branch target buffer.
//
// The BTB caches branch targets. Each entry holds a tag, an offset and a
// 32-bit stored target; in STBPU the index, tag and offset come from the keyed
// remapping R1 (address), optionally with its tag mixed with R2 (branch
// history), and the stored target is encrypted with the thread's phi. The BTB
// itself is unaware of keys: it matches {tag, offset} within the indexed set.
// Default geometry: 512 sets x 8 ways = 4096 entries, 8-bit tag, 5-bit offset.
//
// Lookup port: present lk_valid with index/tag/offset; one cycle later
// lk_resp_valid is high with lk_hit and lk_target (still encrypted).
//
// Update port (valid/ready): an accepted update reads its set in the first
// cycle and writes it back in the second, so up_ready is low in the cycle
// after an accepted update. If {tag, offset} already lives in the set its
// target is overwritten; otherwise the first invalid way is filled, or, if
// the set is full, the way named by the set's round-robin pointer is replaced
// and ev_valid is high for the one cycle that follows the write edge. That
// pulse is the BTB eviction event monitored for re-randomization. Replacement
// policy, the two-cycle update and the per-set memory word are choices of this
// implementation. A lookup in the cycle of a write to the same set sees the
// old contents.
module st_btb #(
  parameter int unsigned SETS  = 512,
  parameter int unsigned WAYS  = 8,
  parameter int unsigned TAG_W = 8,
  parameter int unsigned OFF_W = 5,
  parameter int unsigned TGT_W = 32,
  localparam int unsigned IDX_W = $clog2(SETS),
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // lookup
  input  logic             lk_valid,
  input  logic [IDX_W-1:0] lk_index,
  input  logic [TAG_W-1:0] lk_tag,
  input  logic [OFF_W-1:0] lk_off,
  output logic             lk_resp_valid,
  output logic             lk_hit,
  output logic [TGT_W-1:0] lk_target,
  // update
  input  logic             up_valid,
  output logic             up_ready,
  input  logic [IDX_W-1:0] up_index,
  input  logic [TAG_W-1:0] up_tag,
  input  logic [OFF_W-1:0] up_off,
  input  logic [TGT_W-1:0] up_target,
  output logic             ev_valid
);
  typedef struct packed {
    logic [TAG_W-1:0] tag;
    logic [OFF_W-1:0] off;
    logic [TGT_W-1:0] target;
  } entry_t;

  localparam int unsigned ENTRY_W = $bits(entry_t);

  // one memory word per set, way w at bits [w*ENTRY_W +: ENTRY_W]
  logic [WAYS*ENTRY_W-1:0] mem [SETS];
  logic [WAYS-1:0]         vld [SETS];
  logic [WAY_W-1:0]        rr  [SETS];

  // ---------------- lookup ----------------
  logic [WAYS*ENTRY_W-1:0] lk_set_q;
  logic [WAYS-1:0]         lk_vld_q;
  logic [TAG_W-1:0]        lk_tag_q;
  logic [OFF_W-1:0]        lk_off_q;
  logic                    lk_q;

  always_ff @(posedge clk) begin
    if (lk_valid) begin
      lk_set_q <= mem[lk_index];
      lk_vld_q <= vld[lk_index];
      lk_tag_q <= lk_tag;
      lk_off_q <= lk_off;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) lk_q <= 1'b0;
    else        lk_q <= lk_valid;
  end

  always_comb begin
    entry_t e;
    lk_hit    = 1'b0;
    lk_target = '0;
    for (int w = 0; w < WAYS; w++) begin
      e = lk_set_q[w*ENTRY_W +: ENTRY_W];
      if (lk_vld_q[w] && e.tag == lk_tag_q && e.off == lk_off_q && !lk_hit) begin
        lk_hit    = 1'b1;
        lk_target = e.target;
      end
    end
  end
  assign lk_resp_valid = lk_q;

  // ---------------- update ----------------
  logic                    up_q;       // second (write) cycle
  logic [IDX_W-1:0]        up_idx_q;
  entry_t                  up_ent_q;
  logic [WAYS*ENTRY_W-1:0] up_set_q;

  assign up_ready = !up_q;

  always_ff @(posedge clk) begin
    if (up_valid && up_ready) begin
      up_set_q <= mem[up_index];
      up_idx_q <= up_index;
      up_ent_q <= '{tag: up_tag, off: up_off, target: up_target};
    end
  end

  // choose the way to write
  logic             hit_any, free_any;
  logic [WAY_W-1:0] hit_way, free_way, wr_way;
  logic [WAYS-1:0]  cur_vld;

  always_comb begin
    entry_t e;
    cur_vld  = vld[up_idx_q];
    hit_any  = 1'b0;
    free_any = 1'b0;
    hit_way  = '0;
    free_way = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      e = up_set_q[w*ENTRY_W +: ENTRY_W];
      if (cur_vld[w] && e.tag == up_ent_q.tag && e.off == up_ent_q.off) begin
        hit_any = 1'b1;
        hit_way = WAY_W'(w);
      end
      if (!cur_vld[w]) begin
        free_any = 1'b1;
        free_way = WAY_W'(w);
      end
    end
    wr_way = hit_any ? hit_way : (free_any ? free_way : rr[up_idx_q]);
  end

  always_ff @(posedge clk) begin
    if (up_q) begin
      logic [WAYS*ENTRY_W-1:0] nset;
      nset = up_set_q;
      nset[wr_way*ENTRY_W +: ENTRY_W] = up_ent_q;
      mem[up_idx_q] <= nset;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      up_q     <= 1'b0;
      ev_valid <= 1'b0;
      for (int s = 0; s < SETS; s++) begin
        vld[s] <= '0;
        rr[s]  <= '0;
      end
    end else begin
      up_q     <= up_valid && up_ready;
      ev_valid <= 1'b0;
      if (up_q) begin
        vld[up_idx_q][wr_way] <= 1'b1;
        if (!hit_any && !free_any) begin
          ev_valid      <= 1'b1;
          rr[up_idx_q]  <= (rr[up_idx_q] == WAY_W'(WAYS - 1)) ? '0 : rr[up_idx_q] + 1'b1;
        end
      end
    end
  end

endmodule
