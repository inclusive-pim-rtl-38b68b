// tb_cache_aware_offload: sends push updates drawn from a small set of hot nodes and from
// random nodes, with random back-pressure on the command port. For each update it checks,
// against a reference LRU model of the 4 MB 16-way cache, whether the update correctly went
// to the cache port (predicted reuse) or to PIM, and that a PIM offload is exactly a
// single-bank pim-ADD (bank word + value in the node's lane) followed by a pim-STORE of the
// reserved register to the same word.
`include "lru_ref.svh"
module tb_cache_aware_offload;
  import pim_pkg::*;
  logic clk = 0, rst_n = 0, upd_valid = 0, upd_ready, cmd_valid, cmd_ready = 0, cache_valid;
  push_upd_t upd, cache_upd;
  pim_cmd_t cmd;
  logic [31:0] n_cache, n_pim;
  int checks = 0, failures = 0, to_cache = 0, to_pim = 0;
  lru_ref model;

  cache_aware_offload dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_cmd(input pim_op_e op, input push_upd_t u);
    word_t d;
    d = '0;
    d[16*u.lane +: 16] = u.value;
    while (!(cmd_valid && cmd_ready)) begin
      @(negedge clk);
      cmd_ready = $urandom_range(0, 2) != 0;
    end
    checks++;
    if (cmd.op != op || cmd.multi_bank || cmd.bank != u.bank || cmd.row != u.row ||
        cmd.col != u.col ||
        (op == OP_ADD && (!cmd.a_bank || cmd.b_sel != B_VECTOR || cmd.data != d || cmd.dst != 4'd15)) ||
        (op == OP_STORE && cmd.src_a != 4'd15)) begin
      failures++;
      if (failures < 5) $display("FAIL cmd %s", op.name());
    end
    @(negedge clk);
    cmd_ready = 0;
  endtask

  initial begin
    model = new(16, 4096);
    upd = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      push_upd_t u;
      longint line;
      bit hit;
      u.bank  = 4'($urandom);
      u.row   = ROW_W'($urandom_range(0, 3));
      u.col   = COL_W'($urandom);
      u.lane  = 4'($urandom);
      u.value = 16'($urandom);
      if ($urandom_range(0, 1) != 0) begin
        u.bank = 4'($urandom_range(0, 1)); u.col = 0; u.row = ROW_W'(0);
      end
      if ($urandom_range(0, 3) == 0) u.row = ROW_W'($urandom);
      line = longint'({u.row, u.bank, u.col, u.lane, 1'b0}) >> 6;
      hit = model.access(line);
      @(negedge clk);
      while (!upd_ready) @(negedge clk);
      upd_valid = 1;
      upd = u;
      @(negedge clk);
      upd_valid = 0;
      if (hit) begin
        int w;
        w = 0;
        while (!cache_valid && w < 10) begin @(negedge clk); w++; end
        checks++;
        if (!cache_valid || cache_upd != u) failures++;
        to_cache++;
      end else begin
        expect_cmd(OP_ADD, u);
        expect_cmd(OP_STORE, u);
        to_pim++;
      end
    end
    repeat (5) @(negedge clk);
    checks++;
    if (n_cache != 32'(to_cache) || n_pim != 32'(to_pim) || to_cache < 500 || to_pim < 500)
      failures++;
    $display("updates to cache %0d to PIM %0d", to_cache, to_pim);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
