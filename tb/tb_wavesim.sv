// tb_wavesim: wave-simulation kernels (volume and flux) on the PIM pseudo-channel, each run
// with the baseline all-bank activation and with architecture-aware activation on the same
// command stream (see wavesim_harness). Checks every result against an FP16 reference, that
// only the architecture-aware runs activate early, and that architecture-aware activation
// finishes the volume kernel sooner. Banks are kept at 64 rows: the kernels use fewer.
module tb_wavesim;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic d [4];
  int cy [4], ea [4], ch [4], fa [4];

  wavesim_harness #(.WL(0), .ARCH_AWARE(1'b0)) h0 (.clk, .rst_n, .done(d[0]), .cycles(cy[0]), .early(ea[0]), .checks(ch[0]), .failures(fa[0]));
  wavesim_harness #(.WL(0), .ARCH_AWARE(1'b1)) h1 (.clk, .rst_n, .done(d[1]), .cycles(cy[1]), .early(ea[1]), .checks(ch[1]), .failures(fa[1]));
  wavesim_harness #(.WL(1), .ARCH_AWARE(1'b0)) h2 (.clk, .rst_n, .done(d[2]), .cycles(cy[2]), .early(ea[2]), .checks(ch[2]), .failures(fa[2]));
  wavesim_harness #(.WL(1), .ARCH_AWARE(1'b1)) h3 (.clk, .rst_n, .done(d[3]), .cycles(cy[3]), .early(ea[3]), .checks(ch[3]), .failures(fa[3]));

  int checks = 0, failures = 0;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (d[0] && d[1] && d[2] && d[3]);
    for (int i = 0; i < 4; i++) begin checks += ch[i]; failures += fa[i]; end
    check(ea[0] == 0 && ea[2] == 0, "baseline never activates early");
    check(ea[1] > 0 && ea[3] > 0, "architecture-aware activates early");
    check(cy[1] < cy[0], "architecture-aware volume kernel faster than baseline");
    check(cy[3] <= cy[2], "architecture-aware flux kernel not slower than baseline");
    $display("volume: baseline %0d cycles, arch-aware %0d cycles (%0d early)", cy[0], cy[1], ea[1]);
    $display("flux:   baseline %0d cycles, arch-aware %0d cycles (%0d early)", cy[2], cy[3], ea[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
