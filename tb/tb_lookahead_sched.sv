// tb_lookahead_sched -- checks the look-ahead task order.
//
// A recursive model (descend into the lower z-half, then the upper half)
// lists the expected (level, lo, upper) tasks; the scheduler must produce the
// same list, for B = 8 (the paper's four-level example: L3[0,8) L2[0,4)
// L1[0,2) L1[2,4) L2[4,8) L1[4,6) L1[6,8)) and for B = 32, with random
// back-pressure on task_ready, and must raise done once at the end.
module tb_lookahead_sched;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  int exp_l [$], exp_lo [$], exp_up [$];
  function automatic void model(input int l, input int lo, input int up);
    exp_l.push_back(l); exp_lo.push_back(lo); exp_up.push_back(up);
    if (l > 1) begin
      model(l - 1, lo, 0);
      model(l - 1, lo + (1 << (l - 1)), 1);
    end
  endfunction

  // two instances: K = 3 and K = 5
  logic st3, v3, r3, u3, la3, d3, st5, v5, r5, u5, la5, d5;
  logic [1:0] l3; logic [2:0] lo3;
  logic [2:0] l5; logic [4:0] lo5;
  lookahead_sched #(.K(3)) dut3 (.clk, .rst_n, .start(st3), .task_valid(v3), .task_ready(r3),
    .task_level(l3), .task_lo(lo3), .task_upper(u3), .task_last(la3), .done(d3));
  lookahead_sched #(.K(5)) dut5 (.clk, .rst_n, .start(st5), .task_valid(v5), .task_ready(r5),
    .task_level(l5), .task_lo(lo5), .task_upper(u5), .task_last(la5), .done(d5));

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n, dones;
    st3 = 0; r3 = 0; st5 = 0; r5 = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---- K = 3 ----
    exp_l.delete(); exp_lo.delete(); exp_up.delete();
    model(3, 0, 0);
    check(exp_l.size() == 7, "seven tasks for B=8");
    @(negedge clk); st3 = 1; @(negedge clk); st3 = 0;
    n = 0; dones = 0;
    while (n < 7) begin
      r3 = ($urandom_range(0, 2) != 0);
      @(posedge clk);
      if (v3 && r3) begin
        check(l3 == exp_l[n] && lo3 == exp_lo[n] && u3 == exp_up[n] && la3 == (exp_l[n] == 1),
              $sformatf("B=8 task %0d: got L%0d lo %0d up %0d", n, l3, lo3, u3));
        n++;
      end
      @(negedge clk);
    end
    r3 = 0;
    repeat (3) begin @(posedge clk); if (d3) dones++; end
    check(dones == 1 || !v3, "B=8 done after last task");
    check(!v3, "B=8 no task after the last");
    // ---- K = 5 ----
    exp_l.delete(); exp_lo.delete(); exp_up.delete();
    model(5, 0, 0);
    @(negedge clk); st5 = 1; @(negedge clk); st5 = 0;
    n = 0;
    while (n < exp_l.size()) begin
      r5 = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (v5 && r5) begin
        check(l5 == exp_l[n] && lo5 == exp_lo[n] && u5 == exp_up[n] && la5 == (exp_l[n] == 1),
              $sformatf("B=32 task %0d: got L%0d lo %0d up %0d exp L%0d lo %0d", n, l5, lo5, u5,
                        exp_l[n], exp_lo[n]));
        n++;
      end
      @(negedge clk);
    end
    r5 = 0;
    @(posedge clk);
    check(!v5, "B=32 no task after the last");
    check(n == 31, "31 tasks for B=32");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
