// tb_pim_pch_top: end-to-end test of the PIM pseudo-channel at its default size (16 banks of
// 16384 rows, 8 PIM units, 16-entry queue), in three workloads:
//   vector-sum  c = a + b over 16 banks x 8 columns, with broadcast LOAD / ADD / STORE that
//               alternate between even and odd banks and between three rows
//   ss-gemm     y = D * x: a dense 16-column block per bank times a 16-element skinny vector
//               with zeros, broadcast as scalars of MUL/MAC commands, accumulated in a register
//   push        graph-node updates through the cache-aware offload
// Inputs are written with normal writes and every result is read back with normal reads and
// compared with a reference computed in the testbench (FP16 reference model, LRU model of
// the predictor). It also checks that broadcast MACs on an open row issue every tCCDL
// cycles, and counts how often each mechanism acted: zero-scalar MACs skipped, early
// (look-ahead) activations, updates kept in the cache and sent to PIM, cycles the queue
// head waited for a row, and input back-pressure. A mechanism that never acted is a failure.
`include "lru_ref.svh"
module tb_pim_pch_top;
  import pim_pkg::*;
  import fp16_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic inst_valid = 0, inst_ready, upd_valid = 0, upd_ready, cache_valid, rd_valid, idle;
  pim_cmd_t inst;
  push_upd_t upd, cache_upd;
  word_t rd_data;
  logic [31:0] n_skipped, n_cache, n_pim, n_col, n_act, n_early, n_stall;

  pim_pch_top dut (.*);

  int checks = 0, failures = 0, backpressure = 0, cyc = 0;
  word_t exp_rd [$];
  word_t mem [int];            // reference of words written: key = {bank, row, col}
  lru_ref model;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // read-data monitor
  int n_rd = 0;
  always @(posedge clk) if (rst_n && rd_valid) begin
    word_t e;
    checks++;
    n_rd++;
    if (exp_rd.size() == 0) begin failures++; $display("FAIL unexpected read data"); end
    else begin
      e = exp_rd.pop_front();
      if (rd_data !== e) begin
        failures++;
        if (failures < 8) $display("FAIL read %0d data mismatch at cycle %0d: got %h exp %h", n_rd, cyc, rd_data[63:0], e[63:0]);
      end
    end
  end

  // column-issue timestamps, for the rate check
  int col_t [$];
  logic rec = 0;
  logic [31:0] n_col_q = 0;
  always @(posedge clk) begin
    if (rec && n_col != n_col_q) col_t.push_back(cyc);
    n_col_q <= n_col;
  end

  function automatic int key(input int b, input int r, input int c);
    return (b << 24) | (r << 5) | c;
  endfunction

  task automatic send(input pim_cmd_t c);
    @(negedge clk);
    inst_valid = 1;
    inst = c;
    #1;
    while (!inst_ready) begin backpressure++; @(negedge clk); #1; end
    @(posedge clk);
    #1;
    inst_valid = 0;
  endtask

  function automatic pim_cmd_t mk(input pim_op_e op, input bit mb, input bit odd,
                                  input int bank, input int row, input int col);
    pim_cmd_t c;
    c = '0;
    c.op = op; c.multi_bank = mb; c.odd = odd; c.bank = BANK_W'(bank);
    c.row = ROW_W'(row); c.col = COL_W'(col);
    return c;
  endfunction

  task automatic wr(input int b, input int r, input int c, input word_t d);
    pim_cmd_t x;
    x = mk(OP_WR, 0, 0, b, r, c);
    x.data = d;
    mem[key(b, r, c)] = d;
    send(x);
  endtask

  task automatic rd(input int b, input int r, input int c, input word_t expect_w);
    exp_rd.push_back(expect_w);
    send(mk(OP_RD, 0, 0, b, r, c));
  endtask

  task automatic wait_idle();
    @(negedge clk);
    while (!idle) @(negedge clk);
    repeat (4) @(negedge clk);
  endtask

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  localparam int RA = 10, RB = 11, RC = 12, RD_ = 20, RY = 21, RN = 30;

  initial begin
    int nz;
    word_t x [16];
    model = new(16, 4096);
    inst = '0;
    upd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------------- vector-sum ----------------
    for (int b = 0; b < NUM_BANKS; b++) begin
      for (int k = 0; k < 8; k++) wr(b, RA, k, rand_word());
      for (int k = 0; k < 8; k++) wr(b, RB, k, rand_word());
    end
    // the even and odd bank of a pair share one PIM unit and its registers: even commands
    // use r0-r3 / r8-r11, odd commands r4-r7 / r12-r15; two rounds of four columns
    for (int h = 0; h < 2; h++) begin
      for (int k = 0; k < 4; k++)
        for (int p = 0; p < 2; p++) begin
          pim_cmd_t c;
          c = mk(OP_LOAD, 1, p[0], 0, RA, 4 * h + k); c.dst = REG_W'(4 * p + k); send(c);
        end
      for (int k = 0; k < 4; k++)
        for (int p = 0; p < 2; p++) begin
          pim_cmd_t c;
          c = mk(OP_ADD, 1, p[0], 0, RB, 4 * h + k); c.a_bank = 1; c.b_sel = B_REG;
          c.src_b = REG_W'(4 * p + k); c.dst = REG_W'(8 + 4 * p + k); send(c);
        end
      for (int k = 0; k < 4; k++)
        for (int p = 0; p < 2; p++) begin
          pim_cmd_t c;
          c = mk(OP_STORE, 1, p[0], 0, RC, 4 * h + k); c.src_a = REG_W'(8 + 4 * p + k); send(c);
        end
    end
    for (int b = 0; b < NUM_BANKS; b++)
      for (int k = 0; k < 8; k++)
        rd(b, RC, k, ref_word(1, mem[key(b, RB, k)], mem[key(b, RA, k)], '0));
    wait_idle();
    $display("vector-sum done at cycle %0d, early activations %0d", cyc, n_early);

    // ---------------- ss-gemm ----------------
    for (int b = 0; b < NUM_BANKS; b++)
      for (int j = 0; j < 16; j++) wr(b, RD_, j, rand_word());
    nz = 0;
    for (int j = 0; j < 16; j++) begin
      x[j] = '0;
      if (j == 0 || $urandom_range(0, 9) >= 4) begin
        x[j][15:0] = 16'(16'h3000 + $urandom_range(0, 32'h1400));
        x[j][15] = 1'($urandom);
        if (j != 0) nz++;
      end else x[j][15] = 1'($urandom);   // +0 or -0
    end
    wait_idle();
    rec = 1;
    for (int j = 0; j < 16; j++)
      for (int p = 0; p < 2; p++) begin
        pim_cmd_t c;
        c = mk(j == 0 ? OP_MUL : OP_MAC, 1, p[0], 0, RD_, j);
        c.a_bank = 1; c.b_sel = B_SCALAR; c.data = x[j]; c.dst = REG_W'(p); send(c);
      end
    for (int p = 0; p < 2; p++) begin
      pim_cmd_t c;
      c = mk(OP_STORE, 1, p[0], 0, RY, 0); c.src_a = REG_W'(p); send(c);
    end
    wait_idle();
    rec = 0;
    for (int b = 0; b < NUM_BANKS; b++) begin
      word_t y;
      y = ref_word(2, mem[key(b, RD_, 0)], {16{x[0][15:0]}}, '0);
      for (int j = 1; j < 16; j++)
        if (x[j][14:0] != 0) y = ref_word(3, mem[key(b, RD_, j)], {16{x[j][15:0]}}, y);
      rd(b, RY, 0, y);
    end
    wait_idle();
    begin
      int n4;
      n4 = 0;
      for (int i = 1; i < col_t.size(); i++) if (col_t[i] - col_t[i-1] == T_CCDL) n4++;
      // 2 MULs + 2*nz MACs + 2 STOREs on the open row; all but the few gaps around the
      // row switch for the STOREs must be exactly tCCDL
      check(n4 >= 2 * nz, "broadcast MACs issue every tCCDL cycles");
      check(32'(n_skipped) == 32'(2 * (15 - nz)), "zero-scalar MACs skipped");
      $display("ss-gemm: %0d of 15 MACs per parity kept, %0d skipped, %0d gaps of tCCDL",
               nz, n_skipped, n4);
    end

    // ---------------- push updates ----------------
    for (int b = 0; b < NUM_BANKS; b++)
      for (int c = 0; c < 4; c++) wr(b, RN, c, rand_word());
    begin
      int sent_cache, sent_pim;
      sent_cache = 0; sent_pim = 0;
      for (int t = 0; t < 400; t++) begin
        push_upd_t u;
        longint line;
        u.bank = 4'($urandom); u.row = ROW_W'(RN); u.col = COL_W'($urandom_range(0, 3));
        u.lane = 4'($urandom); u.value = 16'(16'h3000 + $urandom_range(0, 32'h0800));
        if ($urandom_range(0, 1) != 0) begin u.bank = 0; u.col = 0; end
        line = longint'({u.row, u.bank, u.col, u.lane, 1'b0}) >> 6;
        if (model.access(line)) sent_cache++;
        else begin
          word_t v;
          v = '0;
          v[16*u.lane +: 16] = u.value;
          mem[key(u.bank, RN, u.col)] = ref_word(1, mem[key(u.bank, RN, u.col)], v, '0);
          sent_pim++;
        end
        @(negedge clk);
        while (!upd_ready) @(negedge clk);
        upd_valid = 1; upd = u;
        @(negedge clk);
        upd_valid = 0;
      end
      wait_idle();
      for (int b = 0; b < NUM_BANKS; b++)
        for (int c = 0; c < 4; c++) rd(b, RN, c, mem[key(b, RN, c)]);
      wait_idle();
      check(32'(sent_cache) == n_cache && 32'(sent_pim) == n_pim, "cache/PIM split");
      $display("push: %0d updates kept in cache, %0d offloaded to PIM", n_cache, n_pim);
    end

    // ---------------- mechanism coverage ----------------
    check(exp_rd.size() == 0, "all reads returned");
    check(n_skipped > 0, "sparsity skip happened");
    check(n_early > 0, "early activation happened");
    check(n_cache > 0, "update kept in cache happened");
    check(n_pim > 0, "update offloaded to PIM happened");
    check(n_stall > 0, "row stall happened");
    check(backpressure > 0, "input back-pressure happened");
    $display("mechanisms: skipped=%0d early=%0d cache=%0d pim=%0d stall=%0d backpressure=%0d act=%0d col=%0d",
             n_skipped, n_early, n_cache, n_pim, n_stall, backpressure, n_act, n_col);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
