// tb_st_pht: self-checking test of the pattern history table (default 16384
// 2-bit counters).
//
// A reference array of counters, starting at weakly not-taken, is trained in
// parallel with the table. Directed tests walk one counter through all four
// states in both directions (including saturation at 0 and 3); a random
// phase trains a few hundred indices and compares each lookup's direction and
// counter value. Timing: the lookup answer is due exactly one cycle after the
// request and up_ready must drop for the cycle after each accepted update.
module tb_st_pht;
  localparam int ENTRIES = 16384, IDX_W = 14;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             lk_valid = 0;
  logic [IDX_W-1:0] lk_index = '0;
  logic             lk_resp_valid, lk_taken;
  logic [1:0]       lk_ctr;
  logic             up_valid = 0, up_ready;
  logic [IDX_W-1:0] up_index = '0;
  logic             up_taken = 0;

  st_pht dut (.*);

  int checks = 0, failures = 0;
  int model [ENTRIES];

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  task automatic lookup(int i);
    @(negedge clk);
    lk_valid = 1; lk_index = IDX_W'(i);
    @(negedge clk);
    lk_valid = 0;
    check(lk_resp_valid, "no lookup response after one cycle");
    check(lk_ctr == 2'(model[i]), $sformatf("counter %0d is %0d, expected %0d", i, lk_ctr, model[i]));
    check(lk_taken == (model[i] >= 2), $sformatf("direction of %0d wrong", i));
  endtask

  task automatic train(int i, logic t);
    @(negedge clk);
    check(up_ready, "up_ready low while idle");
    up_valid = 1; up_index = IDX_W'(i); up_taken = t;
    if (t) model[i] = (model[i] == 3) ? 3 : model[i] + 1;
    else   model[i] = (model[i] == 0) ? 0 : model[i] - 1;
    @(negedge clk);
    up_valid = 0;
    check(!up_ready, "up_ready high during the write cycle");
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (model[i]) model[i] = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;

    lookup(0); lookup(ENTRIES - 1);
    // walk up to strongly taken and beyond, then down past strongly not-taken
    for (int k = 0; k < 4; k++) begin train(77, 1'b1); lookup(77); end
    for (int k = 0; k < 5; k++) begin train(77, 1'b0); lookup(77); end
    // neighbours untouched
    lookup(76); lookup(78);

    for (int n = 0; n < 4000; n++) begin
      int i;
      i = $urandom_range(0, 255) * 64 + $urandom_range(0, 1);
      if ($urandom_range(0, 2) != 0) train(i, 1'($urandom_range(0, 1)));
      else                           lookup(i);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
