// tb_pim_scheduler: runs the baseline and the architecture-aware scheduler on the same
// command streams and checks (in sched_harness) every DRAM timing rule and the issue order.
// Further checks:
//   - a first broadcast command after reset activates at once and issues exactly tRCD later
//   - on alternating even/odd rows the architecture-aware schedule issues early activations
//     and finishes in fewer cycles than the baseline; the baseline never activates early
//   - on the alternating pattern the baseline's row commands are all-bank: one activate per
//     row, against one per row and parity in the architecture-aware schedule
module tb_pim_scheduler;
  import pim_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start0 = 0, start1 = 0, start2 = 0;
  int n = 0;
  logic done2, done3;
  int cyc2, cyc3, ch2, ch3, f2, f3, fa2, fa3, fc2, fc3;
  logic [31:0] e2, e3, a2, a3;
  logic done0, done1;
  int cyc0, cyc1, ch0, ch1, f0, f1, fa0, fa1, fc0, fc1;
  logic [31:0] e0, e1, a0, a1;
  int checks = 0, failures = 0;

  sched_harness #(.ARCH_AWARE(1'b0)) h0 (.clk, .rst_n, .start(start0), .workload(0), .n(128),
    .done(done0), .cycles(cyc0), .checks(ch0), .failures(f0), .first_act(fa0), .first_col(fc0),
    .n_early(e0), .n_act(a0));
  sched_harness #(.ARCH_AWARE(1'b1)) h1 (.clk, .rst_n, .start(start1), .workload(0), .n(128),
    .done(done1), .cycles(cyc1), .checks(ch1), .failures(f1), .first_act(fa1), .first_col(fc1),
    .n_early(e1), .n_act(a1));

  sched_harness #(.ARCH_AWARE(1'b0)) h2 (.clk, .rst_n, .start(start2), .workload(1), .n(600),
    .done(done2), .cycles(cyc2), .checks(ch2), .failures(f2), .first_act(fa2), .first_col(fc2),
    .n_early(e2), .n_act(a2));
  sched_harness #(.ARCH_AWARE(1'b1)) h3 (.clk, .rst_n, .start(start2), .workload(1), .n(600),
    .done(done3), .cycles(cyc3), .checks(ch3), .failures(f3), .first_act(fa3), .first_col(fc3),
    .n_early(e3), .n_act(a3));

  always #5 clk = ~clk;
  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    // phase 1: alternating even/odd rows
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start0 = 1; start1 = 1;
    wait (done0 && done1);
    checks += ch0 + ch1; failures += f0 + f1;
    $display("alternating rows: baseline %0d cycles, arch-aware %0d cycles, early row cmds %0d",
             cyc0, cyc1, e1);
    $display("first act %0d/%0d first col %0d/%0d", fa0, fa1, fc0, fc1);
    check(fa0 == 1 && fc0 - fa0 == T_RCD, "baseline first-command latency");
    check(fa1 == 1 && fc1 - fa1 == T_RCD, "arch-aware first-command latency");
    check(cyc1 < cyc0, "arch-aware faster");
    check(e1 > 0 && e0 == 0, "early activations only when arch-aware");
    check(a0 == 16, "baseline: one all-bank activate per row");
    check(a1 == 32, "arch-aware: one activate per row and parity");
    // phase 2: random mix, timing and order rules only
    @(negedge clk); start2 = 1;
    wait (done2 && done3);
    checks += ch2 + ch3; failures += f2 + f3;
    $display("random mix: baseline %0d cycles, arch-aware %0d cycles", cyc2, cyc3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
