// tb_st_target_crypt: self-checking test of target encryption and of
// function 5 (decryption and extension to 48 bits).
//
// For random targets, branch addresses and keys the test checks: the stored
// value is the low 32 target bits XOR phi; decrypting with the same phi and a
// branch in the same 4 GiB region returns the original target; decrypting
// with another thread's phi yields target ^ phi_a ^ phi_b, i.e. a value the
// writer does not control; the upper 16 bits always come from the branch.
module tb_st_target_crypt;
  logic [31:0] phi;
  logic [47:0] plain_target, branch_ip, pred_target;
  logic [31:0] enc_target, stored;

  st_target_crypt dut (.*);

  int checks = 0, failures = 0;

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      logic [31:0] pa, pb, e;
      logic [47:0] tgt, ip;
      pa  = $urandom; pb = $urandom;
      tgt = {$urandom, $urandom};
      ip  = {tgt[47:32], 32'($urandom)};
      phi = pa; plain_target = tgt; branch_ip = ip; stored = '0;
      #1;
      e = enc_target;
      check(e == (tgt[31:0] ^ pa), "encryption is not target XOR phi");
      stored = e;
      #1;
      check(pred_target == tgt, "decryption with the same key does not restore the target");
      phi = pb;
      #1;
      check(pred_target == {ip[47:32], tgt[31:0] ^ pa ^ pb}, "decryption with another key wrong");
      check(pred_target[47:32] == ip[47:32], "upper bits not taken from the branch address");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
