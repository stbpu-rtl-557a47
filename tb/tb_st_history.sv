// tb_st_history: self-checking test of the GHR and BHB shift registers.
//
// A reference model applies the documented update rules: conditional
// branches shift their outcome into the 16-bit GHR; direct jumps, direct
// calls and taken conditionals mix the 24-bit XOR fold of their address into
// the 58-bit BHB shifted left by two. Indirect branches and returns must
// leave both registers alone. Random branches of all kinds are applied and
// both registers compared after every update.
module tb_st_history;
  import stbpu_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            upd_valid = 0, upd_taken = 0;
  br_type_e        upd_type = BR_COND;
  logic [47:0]     upd_ip = '0;
  logic [15:0]     ghr;
  logic [57:0]     bhb;

  st_history dut (.*);

  int checks = 0, failures = 0;
  logic [15:0] m_ghr;
  logic [57:0] m_bhb;

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    m_ghr = '0; m_bhb = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(ghr == 0 && bhb == 0, "histories not cleared by reset");
    for (int n = 0; n < 4000; n++) begin
      br_type_e t;
      logic [47:0] ip;
      logic tk, v;
      t  = br_type_e'($urandom_range(0, 5));
      ip = {$urandom, $urandom};
      tk = (t == BR_COND) ? 1'($urandom_range(0, 1)) : 1'b1;
      v  = ($urandom_range(0, 9) != 0);
      upd_valid = v; upd_type = t; upd_ip = ip; upd_taken = tk;
      if (v) begin
        if (t == BR_COND) m_ghr = {m_ghr[14:0], tk};
        if (t == BR_JMP || t == BR_CALL || (t == BR_COND && tk)) begin
          logic [23:0] f;
          f = 24'(ip) ^ ip[47:24];
          m_bhb = (m_bhb << 2) ^ {34'b0, f};
        end
      end
      @(negedge clk);
      check(ghr == m_ghr, $sformatf("GHR %h, expected %h", ghr, m_ghr));
      check(bhb == m_bhb, $sformatf("BHB %h, expected %h", bhb, m_bhb));
    end
    upd_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
