// tb_st_token_regs: self-checking test of the per-thread secret-token
// registers (2 threads).
//
// Checks: reset clears both tokens; a privileged write loads only the named
// thread and shows up as psi (low half) and phi (high half); unprivileged
// writes change nothing and unprivileged reads return zero, both raising
// priv_fault; a re-randomization request loads that thread's random value;
// a simultaneous privileged write wins over re-randomization; random
// sequences are compared against a two-entry reference model.
module tb_st_token_regs;
  localparam int THREADS = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        wr_en = 0, wr_priv = 0, rd_en = 0, rd_priv = 0, priv_fault;
  logic [0:0]  wr_tid = '0, rd_tid = '0;
  logic [63:0] wr_data = '0, rd_data;
  logic [THREADS-1:0] rerand = '0;
  logic [63:0] rng_data [THREADS];
  logic [31:0] psi [THREADS];
  logic [31:0] phi [THREADS];

  st_token_regs dut (.*);

  int checks = 0, failures = 0;
  logic [63:0] m [THREADS];

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  task automatic compare();
    for (int t = 0; t < THREADS; t++) begin
      check(psi[t] == m[t][31:0],  $sformatf("psi[%0d] wrong", t));
      check(phi[t] == m[t][63:32], $sformatf("phi[%0d] wrong", t));
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rng_data[0] = '0; rng_data[1] = '0;
    m[0] = '0; m[1] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    compare();

    for (int n = 0; n < 3000; n++) begin
      logic fault_exp;
      wr_en   = ($urandom_range(0, 2) == 0);
      wr_priv = ($urandom_range(0, 3) != 0);
      wr_tid  = 1'($urandom_range(0, 1));
      wr_data = {$urandom, $urandom};
      rd_en   = ($urandom_range(0, 2) == 0);
      rd_priv = ($urandom_range(0, 3) != 0);
      rd_tid  = 1'($urandom_range(0, 1));
      rerand  = THREADS'($urandom_range(0, 3) & {2{$urandom_range(0, 3) == 0}});
      rng_data[0] = {$urandom, $urandom};
      rng_data[1] = {$urandom, $urandom};
      #1;
      check(rd_data == ((rd_en && rd_priv) ? m[rd_tid] : 64'h0), "read data wrong");
      fault_exp = (wr_en && !wr_priv) || (rd_en && !rd_priv);
      for (int t = 0; t < THREADS; t++) begin
        if (wr_en && wr_priv && wr_tid == 1'(t)) m[t] = wr_data;
        else if (rerand[t])                      m[t] = rng_data[t];
      end
      @(negedge clk);
      check(priv_fault == fault_exp, "priv_fault wrong");
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
