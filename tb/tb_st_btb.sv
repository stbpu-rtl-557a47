// tb_st_btb: self-checking test of the set-associative BTB at its default
// geometry (512 sets x 8 ways).
//
// A reference model in the testbench keeps its own copy of every set (valid,
// tag, offset, target) and its own round-robin pointers, following the
// documented policy: update of a present {tag, offset} rewrites it, else the
// lowest invalid way is filled, else the round-robin victim is replaced and
// an eviction is reported. Directed tests fill one set past its 8 ways and
// check the eviction pulse and which entry disappeared; a random phase mixes
// lookups and updates over a few sets so that hits, misses, refreshes and
// evictions all occur. Timing checks: lookup answers exactly one cycle after
// the request, up_ready drops for one cycle after an accepted update and the
// eviction pulse comes in the cycle after the update was accepted.
module tb_st_btb;
  localparam int SETS = 512, WAYS = 8, TAG_W = 8, OFF_W = 5, TGT_W = 32;
  localparam int IDX_W = 9;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             lk_valid = 0;
  logic [IDX_W-1:0] lk_index = '0;
  logic [TAG_W-1:0] lk_tag = '0;
  logic [OFF_W-1:0] lk_off = '0;
  logic             lk_resp_valid, lk_hit;
  logic [TGT_W-1:0] lk_target;
  logic             up_valid = 0, up_ready;
  logic [IDX_W-1:0] up_index = '0;
  logic [TAG_W-1:0] up_tag = '0;
  logic [OFF_W-1:0] up_off = '0;
  logic [TGT_W-1:0] up_target = '0;
  logic             ev_valid;

  st_btb dut (.*);

  int checks = 0, failures = 0, evictions_seen = 0, hits_seen = 0;

  // reference model
  logic             m_v   [SETS][WAYS];
  logic [TAG_W-1:0] m_tag [SETS][WAYS];
  logic [OFF_W-1:0] m_off [SETS][WAYS];
  logic [TGT_W-1:0] m_tgt [SETS][WAYS];
  int               m_rr  [SETS];

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  function automatic logic model_lookup(int s, logic [TAG_W-1:0] t, logic [OFF_W-1:0] o, output logic [TGT_W-1:0] tg);
    for (int w = 0; w < WAYS; w++)
      if (m_v[s][w] && m_tag[s][w] == t && m_off[s][w] == o) begin tg = m_tgt[s][w]; return 1'b1; end
    tg = '0;
    return 1'b0;
  endfunction

  // returns 1 if the model evicts
  function automatic logic model_update(int s, logic [TAG_W-1:0] t, logic [OFF_W-1:0] o, logic [TGT_W-1:0] tg);
    int way;
    way = -1;
    for (int w = 0; w < WAYS; w++) if (m_v[s][w] && m_tag[s][w] == t && m_off[s][w] == o) way = w;
    if (way < 0) for (int w = WAYS - 1; w >= 0; w--) if (!m_v[s][w]) way = w;
    if (way >= 0) begin
      m_v[s][way] = 1; m_tag[s][way] = t; m_off[s][way] = o; m_tgt[s][way] = tg;
      return 1'b0;
    end
    way = m_rr[s];
    m_tag[s][way] = t; m_off[s][way] = o; m_tgt[s][way] = tg;
    m_rr[s] = (m_rr[s] + 1) % WAYS;
    return 1'b1;
  endfunction

  task automatic do_lookup(int s, logic [TAG_W-1:0] t, logic [OFF_W-1:0] o);
    logic exp_hit;
    logic [TGT_W-1:0] exp_tgt;
    @(negedge clk);
    lk_valid = 1; lk_index = IDX_W'(s); lk_tag = t; lk_off = o;
    exp_hit = model_lookup(s, t, o, exp_tgt);
    @(negedge clk);
    lk_valid = 0;
    check(lk_resp_valid, "lookup response not one cycle after request");
    check(lk_hit == exp_hit, $sformatf("hit mismatch set %0d tag %h off %h: got %b", s, t, o, lk_hit));
    if (exp_hit) begin
      hits_seen++;
      check(lk_target == exp_tgt, $sformatf("target mismatch set %0d: got %h want %h", s, lk_target, exp_tgt));
    end
  endtask

  task automatic do_update(int s, logic [TAG_W-1:0] t, logic [OFF_W-1:0] o, logic [TGT_W-1:0] tg);
    logic exp_ev;
    @(negedge clk);
    check(up_ready, "up_ready low while idle");
    up_valid = 1; up_index = IDX_W'(s); up_tag = t; up_off = o; up_target = tg;
    exp_ev = model_update(s, t, o, tg);
    @(negedge clk);
    up_valid = 0;
    check(!up_ready, "up_ready high in the write cycle");
    #1;
    @(posedge clk); #1;
    check(ev_valid == exp_ev, $sformatf("eviction pulse %b, expected %b (set %0d)", ev_valid, exp_ev, s));
    if (ev_valid) evictions_seen++;
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (m_v[s, w]) m_v[s][w] = 0;
    foreach (m_rr[s]) m_rr[s] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // empty BTB misses
    do_lookup(7, 8'h12, 5'h3);

    // fill set 7 with 8 branches, then a 9th evicts the oldest
    for (int i = 0; i < WAYS; i++) do_update(7, TAG_W'(8'h10 + i), 5'h3, 32'hA000_0000 + i);
    check(evictions_seen == 0, "eviction while the set still had free ways");
    for (int i = 0; i < WAYS; i++) do_lookup(7, TAG_W'(8'h10 + i), 5'h3);
    do_update(7, 8'h55, 5'h3, 32'hBEEF_0001);
    check(evictions_seen == 1, "no eviction when a ninth branch entered a full set");
    do_lookup(7, 8'h10, 5'h3);   // evicted one must miss
    do_lookup(7, 8'h55, 5'h3);
    // same tag, other offset is another branch
    do_lookup(7, 8'h11, 5'h4);
    // refreshing a present entry does not evict
    do_update(7, 8'h12, 5'h3, 32'h1234_5678);
    check(evictions_seen == 1, "refresh of a present entry evicted");
    do_lookup(7, 8'h12, 5'h3);

    // random mix over 4 sets
    for (int n = 0; n < 3000; n++) begin
      int s;
      logic [TAG_W-1:0] t;
      logic [OFF_W-1:0] o;
      s = 100 + $urandom_range(0, 3);
      t = TAG_W'($urandom_range(0, 15));
      o = OFF_W'($urandom_range(0, 1));
      if ($urandom_range(0, 1) == 0) do_update(s, t, o, $urandom);
      else                           do_lookup(s, t, o);
    end
    check(evictions_seen > 10, "random phase produced too few evictions");
    check(hits_seen > 100, "random phase produced too few hits");
    $display("evictions %0d hits %0d", evictions_seen, hits_seen);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
