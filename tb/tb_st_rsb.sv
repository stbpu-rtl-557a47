// tb_st_rsb: self-checking test of the 16-entry return stack.
//
// A queue in the testbench models the stack, dropping its oldest element on a
// push to a full stack. Checks: LIFO order of pushed values, "empty" after
// all entries are popped, an underflow pulse on a pop of an empty stack with
// no change of state, an overflow pulse when the 17th value is pushed and
// loss of exactly the oldest value, then a long random push/pop sequence
// compared against the model (top, empty, pulses).
module tb_st_rsb;
  localparam int DEPTH = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        push = 0, pop = 0, empty, overflow, underflow;
  logic [31:0] push_data = '0, top;

  st_rsb dut (.*);

  int checks = 0, failures = 0, n_ovf = 0, n_unf = 0;
  logic [31:0] q [$];

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  task automatic compare_state();
    check(empty == (q.size() == 0), "empty flag wrong");
    if (q.size() != 0) check(top == q[$], $sformatf("top %h, expected %h", top, q[$]));
  endtask

  task automatic do_push(logic [31:0] v);
    logic exp_ovf;
    @(negedge clk);
    push = 1; push_data = v;
    exp_ovf = (q.size() == DEPTH);
    if (exp_ovf) void'(q.pop_front());
    q.push_back(v);
    @(negedge clk);
    push = 0;
    check(overflow == exp_ovf, "overflow pulse wrong");
    check(!underflow, "spurious underflow");
    if (overflow) n_ovf++;
    compare_state();
  endtask

  task automatic do_pop();
    logic exp_unf;
    @(negedge clk);
    pop = 1;
    exp_unf = (q.size() == 0);
    if (!exp_unf) void'(q.pop_back());
    @(negedge clk);
    pop = 0;
    check(underflow == exp_unf, "underflow pulse wrong");
    check(!overflow, "spurious overflow");
    if (underflow) n_unf++;
    compare_state();
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    compare_state();
    for (int i = 0; i < 5; i++) do_push(32'h100 + i);
    for (int i = 0; i < 5; i++) do_pop();
    do_pop();                                        // underflow
    check(n_unf == 1, "pop of empty stack did not report underflow");
    for (int i = 0; i < DEPTH + 1; i++) do_push(32'h200 + i);  // 17th overflows
    check(n_ovf == 1, "17th push did not report overflow");
    for (int i = 0; i < DEPTH; i++) do_pop();        // 0x200 is gone
    do_pop();
    check(n_unf == 2, "stack held more than DEPTH entries");
    for (int n = 0; n < 3000; n++) begin
      if ($urandom_range(0, 99) < 55) do_push($urandom);
      else                            do_pop();
    end
    $display("overflows %0d underflows %0d", n_ovf, n_unf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
