// tb_st_rerand_monitor: self-checking test of the misprediction and eviction
// down-counters that trigger token re-randomization.
//
// Part 1 (default thresholds 41500 / 26500): after reset the registers read
// back the thresholds; exactly 41500 mispredictions of thread 0 produce one
// re-randomization pulse, on the 41500th event, one cycle later, and the
// counter is back at its threshold; exactly 26500 evictions of thread 1 do
// the same for thread 1. Part 2: small thresholds written by privileged
// software, random interleaved events of both threads, MSR counter writes
// and unprivileged accesses, all compared against a reference model. A
// threshold of 1 must re-randomize on every event.
module tb_st_rerand_monitor;
  import stbpu_pkg::*;
  localparam int THREADS = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        misp_valid = 0, evict_valid = 0, msr_we = 0, msr_re = 0, msr_priv = 0;
  logic [0:0]  misp_tid = '0, evict_tid = '0, msr_tid = '0;
  mon_sel_e    msr_sel = MON_MISP_THRESH;
  logic [31:0] msr_wdata = '0, msr_rdata;
  logic [THREADS-1:0] rerand;

  st_rerand_monitor dut (.*);

  int checks = 0, failures = 0;
  int thr_m [THREADS], thr_e [THREADS], cnt_m [THREADS], cnt_e [THREADS];

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  function automatic int rd_model(int t, mon_sel_e s);
    case (s)
      MON_MISP_THRESH: return thr_m[t];
      MON_EVCT_THRESH: return thr_e[t];
      MON_MISP_CNT:    return cnt_m[t];
      default:         return cnt_e[t];
    endcase
  endfunction

  task automatic msr_write(int t, mon_sel_e s, int v);
    @(negedge clk);
    msr_we = 1; msr_priv = 1; msr_tid = 1'(t); msr_sel = s; msr_wdata = 32'(v);
    @(negedge clk);
    msr_we = 0;
    case (s)
      MON_MISP_THRESH: thr_m[t] = v;
      MON_EVCT_THRESH: thr_e[t] = v;
      MON_MISP_CNT:    cnt_m[t] = v;
      default:         cnt_e[t] = v;
    endcase
  endtask

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pulses;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    foreach (thr_m[t]) begin thr_m[t] = 41500; thr_e[t] = 26500; cnt_m[t] = 41500; cnt_e[t] = 26500; end
    // read back
    for (int t = 0; t < THREADS; t++)
      for (int s = 0; s < 4; s++) begin
        msr_re = 1; msr_priv = 1; msr_tid = 1'(t); msr_sel = mon_sel_e'(s); #1;
        check(msr_rdata == 32'(rd_model(t, mon_sel_e'(s))), "reset value of a monitor register wrong");
      end
    msr_priv = 0; #1;
    check(msr_rdata == 0, "unprivileged read returned data");
    msr_re = 0;

    // part 1: default misprediction threshold, thread 0
    pulses = 0;
    for (int n = 1; n <= 41500; n++) begin
      @(negedge clk);
      misp_valid = 1; misp_tid = 0;
      @(negedge clk);
      misp_valid = 0;
      if (rerand != 0) begin
        pulses++;
        check(n == 41500 && rerand == 2'b01, $sformatf("re-randomization after %0d mispredictions", n));
      end
    end
    check(pulses == 1, "41500 mispredictions did not give exactly one re-randomization");
    // evictions, thread 1
    pulses = 0;
    for (int n = 1; n <= 26500; n++) begin
      @(negedge clk);
      evict_valid = 1; evict_tid = 1;
      @(negedge clk);
      evict_valid = 0;
      if (rerand != 0) begin
        pulses++;
        check(n == 26500 && rerand == 2'b10, $sformatf("re-randomization after %0d evictions", n));
      end
    end
    check(pulses == 1, "26500 evictions did not give exactly one re-randomization");
    msr_re = 1; msr_priv = 1; msr_tid = 0; msr_sel = MON_MISP_CNT; #1;
    check(msr_rdata == 41500, "misprediction counter not reloaded");
    msr_tid = 1; msr_sel = MON_EVCT_CNT; #1;
    check(msr_rdata == 26500, "eviction counter not reloaded");
    msr_re = 0;

    // part 2: small thresholds, random traffic
    msr_write(0, MON_MISP_THRESH, 5);  msr_write(0, MON_MISP_CNT, 5);
    msr_write(0, MON_EVCT_THRESH, 3);  msr_write(0, MON_EVCT_CNT, 3);
    msr_write(1, MON_MISP_THRESH, 1);  msr_write(1, MON_MISP_CNT, 1);
    msr_write(1, MON_EVCT_THRESH, 7);  msr_write(1, MON_EVCT_CNT, 7);
    for (int n = 0; n < 5000; n++) begin
      logic [1:0] exp_r;
      @(negedge clk);
      misp_valid  = ($urandom_range(0, 1) == 0); misp_tid  = 1'($urandom_range(0, 1));
      evict_valid = ($urandom_range(0, 1) == 0); evict_tid = 1'($urandom_range(0, 1));
      msr_we = ($urandom_range(0, 19) == 0); msr_priv = ($urandom_range(0, 3) != 0);
      msr_tid = 1'($urandom_range(0, 1)); msr_sel = $urandom_range(0, 1) ? MON_MISP_CNT : MON_EVCT_CNT;
      msr_wdata = 32'($urandom_range(1, 6));
      exp_r = '0;
      for (int t = 0; t < THREADS; t++) begin
        logic wr;
        wr = msr_we && msr_priv && msr_tid == 1'(t);
        if (wr && msr_sel == MON_MISP_CNT) cnt_m[t] = int'(msr_wdata);
        else if (misp_valid && misp_tid == 1'(t)) begin
          if (cnt_m[t] <= 1) begin cnt_m[t] = thr_m[t]; exp_r[t] = 1; end else cnt_m[t]--;
        end
        if (wr && msr_sel == MON_EVCT_CNT) cnt_e[t] = int'(msr_wdata);
        else if (evict_valid && evict_tid == 1'(t)) begin
          if (cnt_e[t] <= 1) begin cnt_e[t] = thr_e[t]; exp_r[t] = 1; end else cnt_e[t]--;
        end
      end
      @(posedge clk); #1;
      misp_valid = 0; evict_valid = 0; msr_we = 0;
      check(rerand == exp_r, $sformatf("rerand %b expected %b", rerand, exp_r));
      msr_re = 1; msr_priv = 1;
      for (int t = 0; t < THREADS; t++) begin
        msr_tid = 1'(t);
        msr_sel = MON_MISP_CNT; #1; check(msr_rdata == 32'(cnt_m[t]), "misprediction counter wrong");
        msr_sel = MON_EVCT_CNT; #1; check(msr_rdata == 32'(cnt_e[t]), "eviction counter wrong");
      end
      msr_re = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
