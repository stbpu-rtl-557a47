// tb_stbpu_top: end-to-end test of the STBPU at its default sizes
// (2 threads, 512x8 BTB, 16k PHT, 16-entry RSBs, default thresholds out of
// reset; smaller thresholds are then written through the MSR port, as an OS
// would).
//
// Each branch is run as a front end would: predict, then resolve with the
// prediction handed back. Expected targets and directions come from the
// branch stream itself (what was trained), not from the design. Scenarios:
//   - direct jumps and calls predicted from the BTB (address mode 1);
//   - conditionals in 1-level mode (always taken) and 2-level mode (an
//     alternating pattern only global history can learn);
//   - call/return pairs predicted from the RSB; RSB overflow by 17 nested
//     calls; RSB underflow, where the return falls back to BTB mode 2;
//   - indirect jumps predicted in BTB mode 2, dependent on branch history;
//   - thread isolation: thread 1 with another token never receives thread
//     0's trained targets; with the same token (shared history) it does;
//   - context switch: saving a token, running another and restoring it keeps
//     the trained history;
//   - unprivileged MSR accesses fault and change nothing;
//   - re-randomization on the misprediction threshold and on the eviction
//     threshold: the token is replaced by the random value and previously
//     trained branches stop predicting their targets.
// Every mechanism is counted; one that never happened is a failure. Timing:
// each prediction must arrive exactly one cycle after its request.
module tb_stbpu_top;
  import stbpu_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            pr_valid = 0, pr_two_level = 0;
  logic [0:0]      pr_tid = '0;
  logic [47:0]     pr_ip = '0;
  br_type_e        pr_type = BR_JMP;
  logic            pr_resp_valid, pr_taken, pr_target_valid;
  logic [47:0]     pr_target;
  tgt_src_e        pr_src;
  logic            rs_valid = 0, rs_ready, rs_two_level = 0, rs_taken = 0;
  logic [0:0]      rs_tid = '0;
  logic [47:0]     rs_ip = '0, rs_target = '0, rs_fallthru = '0, rs_pred_target = '0;
  br_type_e        rs_type = BR_JMP;
  logic            rs_pred_taken = 0, rs_pred_target_valid = 0;
  logic            msr_valid = 0, msr_write = 0, msr_priv = 0, msr_fault;
  logic [0:0]      msr_tid = '0;
  msr_addr_e       msr_addr = MSR_ST;
  logic [63:0]     msr_wdata = '0, msr_rdata;
  logic [63:0]     rng_data [2];
  logic [1:0]      rng_take, rerand_event;
  logic            misp_event, evict_event, rsb_overflow, rsb_underflow;

  stbpu_top dut (.*);

  int checks = 0, failures = 0;
  // mechanism counters
  int n_btb1 = 0, n_btb2 = 0, n_rsb = 0, n_ret_fallback = 0, n_ovf = 0, n_unf = 0;
  int n_evict = 0, n_misp = 0, n_rerand_misp = 0, n_rerand_evict = 0;
  int n_pht1 = 0, n_pht2 = 0, n_isolated = 0, n_shared = 0, n_ctx = 0, n_fault = 0;
  int n_ind_ctx = 0;

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // token loads: the value the design takes is the one present at the edge
  logic [63:0] last_rng [2];
  int          n_rr [2] = '{0, 0};
  int          evict_at_rr1 = -1, evict_base = 0;
  always @(posedge clk) begin
    for (int t = 0; t < 2; t++) if (rng_take[t]) begin last_rng[t] = rng_data[t]; n_rr[t]++; end
    if (rerand_event[1] && evict_at_rr1 < 0) evict_at_rr1 = n_evict - evict_base;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      if (evict_event)   n_evict++;
      if (misp_event)    n_misp++;
      if (rsb_overflow)  n_ovf++;
      if (rsb_underflow) n_unf++;
    end
  end

  // random source: a new value every cycle
  always @(negedge clk) begin
    rng_data[0] <= {$urandom, $urandom};
    rng_data[1] <= {$urandom, $urandom};
  end

  typedef struct {
    logic        taken;
    logic        tv;
    logic [47:0] target;
    tgt_src_e    src;
  } pred_t;

  task automatic predict(int tid, logic [47:0] ip, br_type_e t, logic two, output pred_t p);
    @(negedge clk);
    pr_valid = 1; pr_tid = 1'(tid); pr_ip = ip; pr_type = t; pr_two_level = two;
    @(negedge clk);
    pr_valid = 0;
    check(pr_resp_valid, "prediction not one cycle after the request");
    p.taken = pr_taken; p.tv = pr_target_valid; p.target = pr_target; p.src = pr_src;
  endtask

  task automatic resolve(int tid, logic [47:0] ip, br_type_e t, logic two, logic taken,
                         logic [47:0] tgt, logic [47:0] ft, pred_t p);
    @(negedge clk);
    while (!rs_ready) @(negedge clk);
    rs_valid = 1; rs_tid = 1'(tid); rs_ip = ip; rs_type = t; rs_two_level = two;
    rs_taken = taken; rs_target = tgt; rs_fallthru = ft;
    rs_pred_taken = p.taken; rs_pred_target_valid = p.tv; rs_pred_target = p.target;
    @(negedge clk);
    rs_valid = 0;
    check(!rs_ready, "rs_ready not low in the cycle after an accepted resolve");
  endtask

  // run one branch; returns 1 if it was fully predicted
  task automatic run(int tid, logic [47:0] ip, br_type_e t, logic two, logic taken,
                     logic [47:0] tgt, output logic ok, output pred_t p);
    predict(tid, ip, t, two, p);
    ok = (t == BR_COND) ? (p.taken == taken) && (!taken || (p.tv && p.target == tgt))
                        : (p.tv && p.target == tgt);
    resolve(tid, ip, t, two, taken, tgt, ip + 48'd5, p);
  endtask

  task automatic msr(logic wr, logic priv, int tid, msr_addr_e a, logic [63:0] d, output logic [63:0] q);
    @(negedge clk);
    msr_valid = 1; msr_write = wr; msr_priv = priv; msr_tid = 1'(tid); msr_addr = a; msr_wdata = d;
    #1 q = msr_rdata;
    @(negedge clk);
    msr_valid = 0;
  endtask

  initial begin
    #200000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic ok;
    pred_t p;
    logic [63:0] q, st0, st1;
    logic [47:0] base;
    int good, bad;

    rng_data[0] = '0; rng_data[1] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    st0 = 64'h0123_4567_89AB_CDEF;
    st1 = 64'hFEDC_BA98_7654_3210;
    msr(1, 1, 0, MSR_ST, st0, q);
    msr(1, 1, 1, MSR_ST, st1, q);
    msr(0, 1, 0, MSR_ST, '0, q);
    check(q == st0, "token of thread 0 does not read back");
    msr(0, 1, 0, MSR_MISP_THRESH, '0, q);
    check(q == 41500, "default misprediction threshold wrong");
    msr(0, 1, 0, MSR_EVCT_THRESH, '0, q);
    check(q == 26500, "default eviction threshold wrong");

    // unprivileged access
    msr(1, 0, 0, MSR_ST, 64'hDEAD, q);
    check(msr_fault, "unprivileged write did not fault");
    if (msr_fault) n_fault++;
    msr(0, 0, 0, MSR_ST, '0, q);
    check(q == 0, "unprivileged read returned the token");
    msr(0, 1, 0, MSR_ST, '0, q);
    check(q == st0, "unprivileged write changed the token");

    // ---- direct jumps and calls, BTB mode 1 ----
    base = 48'h7F00_1234_0000;
    for (int i = 0; i < 64; i++) run(0, base + 48'(i * 64), BR_JMP, 0, 1, base + 48'h10_0000 + 48'(i * 4), ok, p);
    good = 0;
    for (int i = 0; i < 64; i++) begin
      run(0, base + 48'(i * 64), BR_JMP, 0, 1, base + 48'h10_0000 + 48'(i * 4), ok, p);
      if (ok && p.src == SRC_BTB1) begin good++; n_btb1++; end
    end
    check(good >= 60, $sformatf("only %0d of 64 trained jumps predicted", good));

    // ---- conditional, 1-level: always taken ----
    for (int i = 0; i < 3; i++) run(0, 48'h7F00_2000_0040, BR_COND, 0, 1, 48'h7F00_2000_0100, ok, p);
    run(0, 48'h7F00_2000_0040, BR_COND, 0, 1, 48'h7F00_2000_0100, ok, p);
    check(ok, "always-taken conditional not predicted (1-level)");
    if (ok) n_pht1++;

    // ---- conditional, 2-level: alternating pattern ----
    for (int i = 0; i < 60; i++) run(0, 48'h7F00_3000_0080, BR_COND, 1, 1'(i % 2), 48'h7F00_3000_0200, ok, p);
    good = 0;
    for (int i = 60; i < 100; i++) begin
      run(0, 48'h7F00_3000_0080, BR_COND, 1, 1'(i % 2), 48'h7F00_3000_0200, ok, p);
      if (ok) good++;
    end
    check(good >= 36, $sformatf("alternating branch predicted %0d of 40 times in 2-level mode", good));
    if (good >= 36) n_pht2++;

    // ---- call / return through the RSB ----
    for (int i = 0; i < 4; i++) begin
      logic [47:0] cs;
      cs = 48'h7F00_4000_0000 + 48'(i * 32);
      run(0, cs, BR_CALL, 0, 1, 48'h7F00_5000_0000, ok, p);  // pushes cs + 5
      predict(0, 48'h7F00_5000_0100, BR_RET, 0, p);
      check(p.tv && p.src == SRC_RSB && p.target == cs + 48'd5, "return not predicted from the RSB");
      if (p.tv && p.src == SRC_RSB && p.target == cs + 48'd5) n_rsb++;
      resolve(0, 48'h7F00_5000_0100, BR_RET, 0, 1, cs + 48'd5, 48'h7F00_5000_0105, p);
    end

    // ---- RSB overflow: 17 nested calls, the 16 newest return correctly ----
    for (int i = 0; i < 17; i++) run(0, 48'h7F00_6000_0000 + 48'(i * 16), BR_CALL, 0, 1, 48'h7F00_6100_0000 + 48'(i * 256), ok, p);
    good = 0;
    for (int i = 16; i >= 1; i--) begin
      logic [47:0] ra;
      ra = 48'h7F00_6000_0000 + 48'(i * 16) + 48'd5;
      predict(0, 48'h7F00_6100_0080 + 48'(i * 256), BR_RET, 0, p);
      if (p.tv && p.src == SRC_RSB && p.target == ra) good++;
      resolve(0, 48'h7F00_6100_0080 + 48'(i * 256), BR_RET, 0, 1, ra, '0, p);
    end
    check(good == 16, $sformatf("%0d of 16 returns predicted after overflow", good));

    // ---- RSB underflow: the return falls back to BTB mode 2 ----
    // the stack is empty now; the same return trains BTB mode 2
    for (int i = 0; i < 2; i++) begin
      predict(0, 48'h7F00_7000_0010, BR_RET, 0, p);
      resolve(0, 48'h7F00_7000_0010, BR_RET, 0, 1, 48'h7F00_7777_0000, '0, p);
    end
    predict(0, 48'h7F00_7000_0010, BR_RET, 0, p);
    check(p.tv && p.src == SRC_BTB2 && p.target == 48'h7F00_7777_0000, "return on an empty RSB not predicted from BTB mode 2");
    if (p.tv && p.src == SRC_BTB2 && p.target == 48'h7F00_7777_0000) n_ret_fallback++;
    resolve(0, 48'h7F00_7000_0010, BR_RET, 0, 1, 48'h7F00_7777_0000, '0, p);
    check(n_unf >= 1, "no RSB underflow reported");

    // ---- indirect jump, BTB mode 2 keyed by branch history ----
    // The 58-bit BHB remembers the last 29 direct branches, so a fixed
    // preamble of 29 jumps makes the history repeatable; the last jump
    // before the indirect one (at 0x..A00 or 0x..B00) selects the context,
    // and each context has its own target.
    good = 0;
    for (int k = 0; k < 3; k++) begin
      for (int c = 0; c < 2; c++) begin
        for (int j = 0; j < 29; j++) run(0, 48'h7F00_8800_0000 + 48'(j * 64), BR_JMP, 0, 1, 48'h7F00_8800_0000 + 48'((j + 1) * 64), ok, p);
        run(0, (c == 0) ? 48'h7F00_8000_0A00 : 48'h7F00_8000_0B00, BR_JMP, 0, 1, 48'h7F00_8000_1000, ok, p);
        run(0, 48'h7F00_8000_1000, BR_IND_JMP, 0, 1, (c == 0) ? 48'h7F00_9000_0000 : 48'h7F00_9100_0000, ok, p);
        if (k > 0 && ok && p.src == SRC_BTB2) good++;
      end
    end
    check(good == 4, $sformatf("indirect jump predicted correctly in %0d of 4 contexts", good));
    n_btb2 += good;
    if (good == 4) n_ind_ctx++;

    // ---- isolation: thread 1 (other token) runs thread 0's addresses ----
    bad = 0;
    for (int i = 0; i < 64; i++) begin
      predict(1, base + 48'(i * 64), BR_JMP, 0, p);
      if (p.tv && p.target == base + 48'h10_0000 + 48'(i * 4)) bad++;
    end
    check(bad == 0, $sformatf("thread 1 received %0d of thread 0's targets", bad));
    if (bad == 0) n_isolated++;

    // ---- shared token: OS gives thread 1 the token of thread 0 ----
    msr(1, 1, 1, MSR_ST, st0, q);
    good = 0;
    for (int i = 0; i < 64; i++) begin
      predict(1, base + 48'(i * 64), BR_JMP, 0, p);
      if (p.tv && p.target == base + 48'h10_0000 + 48'(i * 4)) good++;
    end
    check(good >= 60, $sformatf("shared token: %0d of 64 targets reused", good));
    if (good >= 60) n_shared++;
    msr(1, 1, 1, MSR_ST, st1, q);

    // ---- context switch on thread 0: save, run another, restore ----
    msr(0, 1, 0, MSR_ST, '0, q);
    check(q == st0, "token save failed");
    msr(1, 1, 0, MSR_ST, 64'h5555_AAAA_3333_CCCC, q);
    for (int i = 0; i < 32; i++) run(0, 48'h0000_1000_0000 + 48'(i * 64), BR_JMP, 0, 1, 48'h0000_2000_0000, ok, p);
    msr(1, 1, 0, MSR_ST, st0, q);
    good = 0;
    for (int i = 0; i < 64; i++) begin
      predict(0, base + 48'(i * 64), BR_JMP, 0, p);
      if (p.tv && p.target == base + 48'h10_0000 + 48'(i * 4)) good++;
    end
    check(good >= 56, $sformatf("after a context switch %0d of 64 targets survive", good));
    if (good >= 56) n_ctx++;

    // ---- re-randomization on mispredictions (threshold 8) ----
    msr(1, 1, 0, MSR_MISP_THRESH, 64'd8, q);
    msr(1, 1, 0, MSR_MISP_CNT, 64'd8, q);
    begin
      int fired, rr0;
      fired = 0;
      rr0 = n_rr[0];
      for (int i = 0; i < 8; i++) begin
        // never-seen indirect jumps always mispredict
        run(0, 48'h7F00_A000_0000 + 48'(i * 4096), BR_IND_JMP, 0, 1, 48'h7F00_B000_0000, ok, p);
        repeat (2) @(negedge clk);
        if (fired == 0 && n_rr[0] != rr0) fired = i + 1;
      end
      check(fired == 8 && n_rr[0] == rr0 + 1, $sformatf("misprediction re-randomization after %0d events, expected 8", fired));
      if (fired == 8) n_rerand_misp++;
      msr(0, 1, 0, MSR_ST, '0, q);
      check(q == last_rng[0] && q != st0, "token not replaced by the random value");
    end
    good = 0;
    for (int i = 0; i < 64; i++) begin
      predict(0, base + 48'(i * 64), BR_JMP, 0, p);
      if (p.tv && p.target == base + 48'h10_0000 + 48'(i * 4)) good++;
    end
    check(good == 0, $sformatf("%0d trained targets survived re-randomization", good));

    // ---- re-randomization on BTB evictions (threshold 50) ----
    msr(1, 1, 1, MSR_EVCT_THRESH, 64'd50, q);
    msr(1, 1, 1, MSR_EVCT_CNT, 64'd50, q);
    msr(1, 1, 1, MSR_MISP_THRESH, 64'd1000000, q);
    msr(1, 1, 1, MSR_MISP_CNT, 64'd1000000, q);
    evict_base = n_evict;
    evict_at_rr1 = -1;
    // 6000 distinct taken jumps overflow the 4096-entry BTB
    for (int i = 0; i < 6000 && evict_at_rr1 < 0; i++) begin
      p.taken = 1; p.tv = 0; p.target = '0;
      resolve(1, 48'h0000_4000_0000 + 48'(i * 32), BR_JMP, 0, 1, 48'h0000_5000_0000, '0, p);
    end
    repeat (3) @(negedge clk);
    check(evict_at_rr1 == 50, $sformatf("eviction re-randomization after %0d evictions, expected 50", evict_at_rr1));
    if (evict_at_rr1 == 50) n_rerand_evict++;
    msr(0, 1, 1, MSR_ST, '0, q);
    check(q == last_rng[1] && q != st1, "thread 1 token not replaced by the random value");

    // ---- mechanism coverage ----
    $display("btb1 %0d btb2 %0d rsb %0d ret_fallback %0d rsb_ovf %0d rsb_unf %0d evict %0d misp %0d",
             n_btb1, n_btb2, n_rsb, n_ret_fallback, n_ovf, n_unf, n_evict, n_misp);
    $display("pht1 %0d pht2 %0d isolated %0d shared %0d ctx %0d fault %0d rerand_misp %0d rerand_evict %0d ind_ctx %0d",
             n_pht1, n_pht2, n_isolated, n_shared, n_ctx, n_fault, n_rerand_misp, n_rerand_evict, n_ind_ctx);
    check(n_btb1 > 0, "no BTB mode-1 prediction");
    check(n_btb2 > 0, "no BTB mode-2 prediction");
    check(n_rsb > 0, "no RSB prediction");
    check(n_ret_fallback > 0, "no return fall-back to BTB mode 2");
    check(n_ovf > 0, "no RSB overflow");
    check(n_unf > 0, "no RSB underflow");
    check(n_evict > 0, "no BTB eviction");
    check(n_misp > 0, "no misprediction");
    check(n_pht1 > 0, "no 1-level PHT prediction");
    check(n_pht2 > 0, "no 2-level PHT prediction");
    check(n_isolated > 0, "isolation never shown");
    check(n_shared > 0, "token sharing never shown");
    check(n_ctx > 0, "context switch never shown");
    check(n_fault > 0, "no privilege fault");
    check(n_rerand_misp > 0, "no misprediction re-randomization");
    check(n_rerand_evict > 0, "no eviction re-randomization");
    check(n_ind_ctx > 0, "history-dependent indirect prediction never shown");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
