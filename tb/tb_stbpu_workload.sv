// tb_stbpu_workload: SMT workload on the complete STBPU at its default sizes.
//
// Two hardware threads run the same synthetic program at the same virtual
// addresses, as two processes of one binary would. The trace is interleaved
// one branch per thread. The program has 24 functions, each entered by a
// direct call and left by a return. Each function holds:
//   - four conditionals with the periodic patterns always, i%2, i%3==0 and
//     i%4!=3 (i is the outer iteration), predicted in 2-level mode;
//   - one direct jump;
//   - in every fourth function, an indirect jump whose target follows i%2.
//     It is predictable only through the branch history (BTB mode 2).
// Thread 1's targets differ from thread 0's (XOR 0x40), except for returns.
// A target that thread t receives and that is the other thread's target for
// the same branch therefore shows cross-thread injection.
//
// Phase 1 runs the program with different tokens and the reset thresholds
// (r = 0.05).
// Phase 2 runs it with thresholds scaled down 100 times (415 mispredictions,
// 265 evictions), so that tokens are re-randomized during the run.
// Phase 3 gives both threads the same token, as for two threads of one
// process. Cross-thread targets must then appear, which shows that the
// injection check can detect them.
//
// Checks:
//   - steady-state accuracy of both threads in phase 1, and the accuracy
//     lost to re-randomization in phase 2;
//   - no cross-thread target in phases 1 and 2;
//   - the number of re-randomizations of each thread equals a cycle-level
//     model of the two down-counters, fed from the observed misprediction
//     and eviction events;
//   - every prediction arrives one cycle after its request.
// Expected directions and targets come from the program model, not from
// the design.
module tb_stbpu_workload;
  import stbpu_pkg::*;

  localparam int NFUNC  = 24;
  localparam int WARMUP = 12;   // period of all patterns (lcm of 2, 3, 4)
  localparam int ITERS  = 40;

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

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  always @(negedge clk) begin
    rng_data[0] <= {$urandom, $urandom};
    rng_data[1] <= {$urandom, $urandom};
  end

  // ---------------- event bookkeeping and counter model ----------------
  int          n_misp [2], n_evict [2], n_rerand [2], n_rerand_exp [2];
  int unsigned m_thr, e_thr, m_cnt [2], e_cnt [2];
  int          last_rs_tid = 0;
  logic        model_on = 0;

  always @(posedge clk) begin
    if (rst_n && model_on) begin
      logic fire [2];
      fire[0] = 0; fire[1] = 0;
      if (misp_event) begin
        n_misp[rs_tid]++;
        if (m_cnt[rs_tid] <= 1) begin m_cnt[rs_tid] = m_thr; fire[rs_tid] = 1; end
        else m_cnt[rs_tid]--;
      end
      if (evict_event) begin
        n_evict[last_rs_tid]++;
        if (e_cnt[last_rs_tid] <= 1) begin e_cnt[last_rs_tid] = e_thr; fire[last_rs_tid] = 1; end
        else e_cnt[last_rs_tid]--;
      end
      for (int t = 0; t < 2; t++) begin
        if (fire[t]) n_rerand_exp[t]++;
        if (rerand_event[t]) n_rerand[t]++;
      end
    end
  end

  // ---------------- port tasks ----------------
  typedef struct {
    logic        taken;
    logic        tv;
    logic [47:0] target;
  } pred_t;

  task automatic predict(int tid, logic [47:0] ip, br_type_e t, logic two, output pred_t p);
    @(negedge clk);
    pr_valid = 1; pr_tid = 1'(tid); pr_ip = ip; pr_type = t; pr_two_level = two;
    @(negedge clk);
    pr_valid = 0;
    check(pr_resp_valid, "prediction not one cycle after the request");
    p.taken = pr_taken; p.tv = pr_target_valid; p.target = pr_target;
  endtask

  task automatic resolve(int tid, logic [47:0] ip, br_type_e t, logic two, logic taken,
                         logic [47:0] tgt, logic [47:0] ft, pred_t p);
    @(negedge clk);
    while (!rs_ready) @(negedge clk);
    rs_valid = 1; rs_tid = 1'(tid); rs_ip = ip; rs_type = t; rs_two_level = two;
    rs_taken = taken; rs_target = tgt; rs_fallthru = ft;
    rs_pred_taken = p.taken; rs_pred_target_valid = p.tv; rs_pred_target = p.target;
    last_rs_tid = tid;
    @(negedge clk);
    rs_valid = 0;
  endtask

  task automatic msr_wr(int tid, msr_addr_e a, logic [63:0] d);
    @(negedge clk);
    msr_valid = 1; msr_write = 1; msr_priv = 1; msr_tid = 1'(tid); msr_addr = a; msr_wdata = d;
    @(negedge clk);
    msr_valid = 0;
  endtask

  task automatic set_thresholds(int unsigned mt, int unsigned et);
    for (int t = 0; t < 2; t++) begin
      msr_wr(t, MSR_MISP_THRESH, 64'(mt));
      msr_wr(t, MSR_EVCT_THRESH, 64'(et));
      msr_wr(t, MSR_MISP_CNT, 64'(mt));
      msr_wr(t, MSR_EVCT_CNT, 64'(et));
      m_cnt[t] = mt; e_cnt[t] = et;
    end
    m_thr = mt; e_thr = et;
  endtask

  // ---------------- program model ----------------
  typedef struct {
    logic [47:0] ip;
    br_type_e    t;
    logic        two;
    logic        taken;
    logic [47:0] tgt;
    logic [47:0] ft;
  } br_t;

  localparam logic [47:0] CODE = 48'h5555_0040_0000;

  // the n-th branch of one outer iteration, for thread tid; returns 0 past
  // the end of the iteration
  function automatic logic gen(int tid, int it, int n, output br_t b);
    int f, k, per;
    logic [47:0] cs, fn, x;
    per = 0;
    for (f = 0; f < NFUNC; f++) begin
      k = n - per;
      per += (f % 4 == 0) ? 8 : 7;
      if (n < per) break;
    end
    if (f == NFUNC) return 0;
    cs = CODE + 48'(f * 'h100);
    fn = CODE + 48'h1_0000 + 48'(f * 'h400);
    x  = (tid == 1) ? 48'h40 : 48'h0;
    b.two = 0; b.taken = 1; b.ft = '0;
    if (k == 0) begin
      b.ip = cs; b.t = BR_CALL; b.tgt = fn ^ x; b.ft = cs + 48'd5;
    end else if (k <= 4) begin
      b.ip = fn + 48'(k * 'h20); b.t = BR_COND; b.two = 1;
      b.tgt = (fn + 48'(k * 'h20 + 'h18)) ^ x;
      case (k)
        1: b.taken = 1;
        2: b.taken = (it % 2 == 1);
        3: b.taken = (it % 3 == 0);
        default: b.taken = (it % 4 != 3);
      endcase
    end else if (k == 5) begin
      b.ip = fn + 48'h100; b.t = BR_JMP; b.tgt = (fn + 48'h180) ^ x;
    end else if (k == 6 && f % 4 == 0) begin
      b.ip = fn + 48'h200; b.t = BR_IND_JMP;
      b.tgt = (fn + 48'h300 + ((it % 2 == 1) ? 48'h10 : 48'h0)) ^ x;
    end else begin
      b.ip = fn + 48'h3F0; b.t = BR_RET; b.tgt = cs + 48'd5;
    end
    return 1;
  endfunction

  // run iterations; counts correct predictions after the warm-up and
  // predictions of the other thread's target
  task automatic run_phase(int iters, int warm, output int good [2], output int total [2],
                           output int xthr [2]);
    br_t   b, o;
    pred_t p;
    logic  ok;
    for (int t = 0; t < 2; t++) begin good[t] = 0; total[t] = 0; xthr[t] = 0; end
    for (int it = 0; it < iters; it++) begin
      for (int n = 0; gen(0, it, n, b); n++) begin
        for (int t = 0; t < 2; t++) begin
          void'(gen(t, it, n, b));
          void'(gen(1 - t, it, n, o));
          predict(t, b.ip, b.t, b.two, p);
          ok = (b.t == BR_COND) ? (p.taken == b.taken) && (!b.taken || (p.tv && p.target == b.tgt))
                                : (p.tv && p.target == b.tgt);
          if (p.tv && b.t != BR_RET && p.target == o.tgt && o.tgt != b.tgt) xthr[t]++;
          if (it >= warm) begin total[t]++; if (ok) good[t]++; end
          resolve(t, b.ip, b.t, b.two, b.taken, b.tgt, b.ft, p);
        end
      end
    end
    repeat (4) @(negedge clk);
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int good1 [2], tot1 [2], xthr1 [2];
    int good2 [2], tot2 [2], xthr2 [2];
    int good3 [2], tot3 [2], xthr3 [2];
    int rr_p2 [2];
    real a1, a2;

    rng_data[0] = '0; rng_data[1] = '0;
    for (int t = 0; t < 2; t++) begin
      n_misp[t] = 0; n_evict[t] = 0; n_rerand[t] = 0; n_rerand_exp[t] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    msr_wr(0, MSR_ST, 64'h1F2E_3D4C_5B6A_7988);
    msr_wr(1, MSR_ST, 64'h8877_6655_4433_2211);
    m_thr = 41500; e_thr = 26500;
    for (int t = 0; t < 2; t++) begin m_cnt[t] = m_thr; e_cnt[t] = e_thr; end
    model_on = 1;

    // ---- phase 1: different tokens, reset thresholds (r = 0.05) ----
    run_phase(ITERS, WARMUP, good1, tot1, xthr1);
    for (int t = 0; t < 2; t++) begin
      a1 = real'(good1[t]) / real'(tot1[t]);
      $display("phase 1 thread %0d: %0d of %0d predicted (%.3f), %0d mispredictions, %0d evictions, %0d re-randomizations",
               t, good1[t], tot1[t], a1, n_misp[t], n_evict[t], n_rerand[t]);
      check(a1 >= 0.95, $sformatf("phase 1 thread %0d accuracy %.3f below 0.95", t, a1));
      check(xthr1[t] == 0, $sformatf("phase 1 thread %0d received %0d targets of the other thread", t, xthr1[t]));
      check(n_rerand[t] == n_rerand_exp[t], $sformatf("phase 1 thread %0d: %0d re-randomizations, model %0d",
                                                       t, n_rerand[t], n_rerand_exp[t]));
    end

    // ---- phase 2: thresholds scaled down 100 times ----
    set_thresholds(415, 265);
    for (int t = 0; t < 2; t++) rr_p2[t] = n_rerand[t];
    run_phase(ITERS, 0, good2, tot2, xthr2);
    for (int t = 0; t < 2; t++) begin
      rr_p2[t] = n_rerand[t] - rr_p2[t];
      a1 = real'(good1[t]) / real'(tot1[t]);
      a2 = real'(good2[t]) / real'(tot2[t]);
      $display("phase 2 thread %0d: %0d of %0d predicted (%.3f), %0d re-randomizations",
               t, good2[t], tot2[t], a2, rr_p2[t]);
      check(rr_p2[t] > 0, $sformatf("phase 2 thread %0d was never re-randomized", t));
      check(n_rerand[t] == n_rerand_exp[t], $sformatf("phase 2 thread %0d: %0d re-randomizations, model %0d",
                                                       t, n_rerand[t], n_rerand_exp[t]));
      check(xthr2[t] == 0, $sformatf("phase 2 thread %0d received %0d targets of the other thread", t, xthr2[t]));
      check(a2 < a1, $sformatf("phase 2 thread %0d lost no accuracy to re-randomization", t));
      check(a2 >= 0.6, $sformatf("phase 2 thread %0d accuracy %.3f below 0.6", t, a2));
    end

    // ---- phase 3: one token for both threads ----
    set_thresholds(41500, 26500);
    msr_wr(0, MSR_ST, 64'h0BAD_F00D_CAFE_BEEF);
    msr_wr(1, MSR_ST, 64'h0BAD_F00D_CAFE_BEEF);
    run_phase(4, 4, good3, tot3, xthr3);
    $display("phase 3: targets of the other thread received: %0d and %0d", xthr3[0], xthr3[1]);
    check(xthr3[0] + xthr3[1] > 0, "threads with the same token never shared an entry");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
