// tb_sparsity_filter: sends a random stream of commands (many MACs with zero scalars, both
// +0 and -0, plus MULs and vector MACs with zero data that must NOT be skipped) under random
// output back-pressure; checks that the output stream is exactly the input stream minus the
// zero-scalar MACs, in order, and that the skip counter matches.
module tb_sparsity_filter;
  import pim_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid, out_ready = 0;
  pim_cmd_t in_cmd, out_cmd;
  logic [31:0] n_skipped;
  pim_cmd_t exp_q [$];
  int checks = 0, failures = 0, skips = 0, sent = 0;

  sparsity_filter dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output monitor
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    pim_cmd_t e;
    checks++;
    if (exp_q.size() == 0) failures++;
    else begin
      e = exp_q.pop_front();
      if (out_cmd !== e) failures++;
    end
  end

  initial begin
    in_cmd = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (sent < 3000) begin
      @(negedge clk);
      out_ready = $urandom_range(0, 3) != 0;
      if (!in_valid || in_ready) begin
        in_valid = $urandom_range(0, 4) != 0;
        in_cmd = '0;
        in_cmd.op = pim_op_e'($urandom_range(2, 6));
        if ($urandom_range(0, 1) != 0) in_cmd.op = OP_MAC;
        in_cmd.b_sel = bsel_e'($urandom_range(0, 2));
        in_cmd.row = ROW_W'($urandom);
        in_cmd.data = {8{$urandom}};
        if ($urandom_range(0, 1) != 0) in_cmd.data[15:0] = {1'($urandom), 15'd0};
      end
      @(posedge clk);
      if (in_valid && in_ready) begin
        sent++;
        if (in_cmd.op == OP_MAC && in_cmd.b_sel == B_SCALAR && in_cmd.data[14:0] == 0) skips++;
        else exp_q.push_back(in_cmd);
      end
    end
    @(negedge clk);
    in_valid = 0;
    out_ready = 1;
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d not delivered", exp_q.size()); end
    checks++;
    if (n_skipped != 32'(skips) || skips < 100) failures++;
    $display("sent %0d skipped %0d", sent, skips);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
