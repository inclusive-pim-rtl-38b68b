// tb_pim_cmd_queue: random pushes and pops against a reference FIFO; checks pop order, the
// count, full back-pressure and that every visible entry equals the reference queue.
module tb_pim_cmd_queue;
  import pim_pkg::*;
  localparam int DEPTH = 16;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, pop = 0;
  pim_cmd_t in_cmd;
  logic [$clog2(DEPTH):0] count;
  pim_cmd_t entries [DEPTH];
  pim_cmd_t q [$];
  int checks = 0, failures = 0, n_full = 0;

  pim_cmd_queue #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_cmd = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      checks++;
      if (32'(count) != q.size()) failures++;
      for (int i = 0; i < q.size(); i++) begin
        checks++;
        if (entries[i] !== q[i]) failures++;
      end
      if (!in_ready) n_full++;
      in_valid = $urandom_range(0, 99) < ((t / 500) % 2 != 0 ? 70 : 40);
      in_cmd = '0;
      in_cmd.data = {8{$urandom}};
      in_cmd.row = ROW_W'($urandom);
      pop = (q.size() != 0) && ($urandom_range(0, 99) < 55);
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_cmd);
    end
    checks++;
    if (n_full == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
