// sched_harness: one pim_scheduler with a model of its command queue, a deterministic command
// generator and a DRAM timing checker. Used twice by tb_pim_scheduler (baseline and
// architecture-aware activation) on the same command stream.
//   workload 0: rows of even-parity then odd-parity broadcast commands (the pattern where
//               activations can be hidden), 'n' rows of 4 + 4 commands
//   workload 1: pseudo-random mix of broadcast and single-bank commands over 4 rows
// The checker counts a failure for: an activate to an open bank or before tRP, a precharge
// to a closed bank or before tRAS, a column command to a bank without the command's row
// open for tRCD, column commands closer than tCCDL/tCCDS, and any command out of order.
module sched_harness
  import pim_pkg::*;
#(
  parameter bit ARCH_AWARE = 1'b0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  int          workload,
  input  int          n,
  output logic        done,
  output int          cycles,
  output int          checks,
  output int          failures,
  output int          first_act,
  output int          first_col,
  output logic [31:0] n_early,
  output logic [31:0] n_act
);
  localparam int DEPTH = 16;

  pim_cmd_t q [$];
  pim_cmd_t entries [DEPTH];
  logic [$clog2(DEPTH):0] count;
  logic pop, col_valid;
  pim_cmd_t col_cmd;
  logic [NUM_BANKS-1:0] act_mask, pre_mask;
  logic [ROW_W-1:0] act_row;
  logic [31:0] n_col, n_stall;

  pim_scheduler #(.DEPTH(DEPTH), .ARCH_AWARE(ARCH_AWARE)) dut (
    .clk, .rst_n, .count, .entries, .pop, .col_valid, .col_cmd, .act_mask, .pre_mask,
    .act_row, .n_col, .n_act, .n_early, .n_stall);

  always_comb begin
    count = ($clog2(DEPTH)+1)'(q.size());
    for (int i = 0; i < DEPTH; i++) entries[i] = (i < q.size()) ? q[i] : '0;
  end

  function automatic pim_cmd_t gen(input int wl, input int i);
    pim_cmd_t c;
    int h;
    c = '0;
    c.op = OP_MAC;
    c.a_bank = 1'b1;
    c.b_sel = B_SCALAR;
    c.data[15:0] = 16'h3C00;
    if (wl == 0) begin
      c.multi_bank = 1'b1;
      c.odd = (i % 8) >= 4;
      c.row = ROW_W'(i / 8);
      c.col = COL_W'(i % 4);
    end else begin
      h = (i * 1103515245 + 12345) >>> 4;
      c.multi_bank = (h % 3) != 0;
      c.odd = h[5];
      c.bank = 4'(h >> 7);
      c.row = ROW_W'((h >> 11) % 4);
      c.col = COL_W'(h >> 13);
      c.op = (h % 7 == 0) ? OP_RD : OP_MAC;
      if (c.op == OP_RD) c.multi_bank = 1'b0;
    end
    return c;
  endfunction

  // checker state
  logic                 bopen [NUM_BANKS];
  logic [ROW_W-1:0]     brow  [NUM_BANKS];
  int                   t_act [NUM_BANKS];
  int                   t_pre [NUM_BANKS];
  int                   t_col, last_gap, cyc, issued, pushed;
  pim_cmd_t             expect_q [$];

  initial begin
    done = 0; cycles = 0; checks = 0; failures = 0; first_act = -1; first_col = -1;
    for (int b = 0; b < NUM_BANKS; b++) begin bopen[b] = 0; t_act[b] = -1000; t_pre[b] = -1000; end
    t_col = -1000; last_gap = 0;
    wait (start);
    cyc = 0; issued = 0; pushed = 0;
    while (issued < n) begin
      @(negedge clk);
      // sample this cycle's outputs mid-cycle; the queue model changes just after the edge
      if (act_mask != 0 && first_act < 0) first_act = cyc;
      for (int b = 0; b < NUM_BANKS; b++) begin
        if (act_mask[b]) begin
          checks++;
          if (bopen[b] || cyc - t_pre[b] < T_RP) failures++;
          bopen[b] = 1; brow[b] = act_row; t_act[b] = cyc;
        end
        if (pre_mask[b]) begin
          checks++;
          if (!bopen[b] || cyc - t_act[b] < T_RAS) failures++;
          bopen[b] = 0; t_pre[b] = cyc;
        end
      end
      if (col_valid) begin
        logic [NUM_BANKS-1:0] m;
        pim_cmd_t e;
        if (first_col < 0) first_col = cyc;
        checks++;
        e = expect_q.pop_front();
        if (col_cmd !== e) failures++;
        checks++;
        if (cyc - t_col < last_gap) failures++;
        m = target_mask(col_cmd);
        for (int b = 0; b < NUM_BANKS; b++) if (m[b] && needs_row(col_cmd)) begin
          checks++;
          if (!bopen[b] || brow[b] != col_cmd.row || cyc - t_act[b] < T_RCD) begin
            failures++;
            if (failures < 5) $display("FAIL col bank %0d cyc %0d", b, cyc);
          end
        end
        t_col = cyc;
        last_gap = col_cmd.multi_bank ? T_CCDL : T_CCDS;
        issued++;
      end
      begin
        logic p;
        p = pop;
        @(posedge clk);
        #1;
        if (p) void'(q.pop_front());
      end
      if (q.size() < DEPTH && pushed < n) begin
        q.push_back(gen(workload, pushed));
        expect_q.push_back(gen(workload, pushed));
        pushed++;
      end
      cyc++;
      if (cyc > 100000) begin failures++; break; end
    end
    cycles = cyc;
    done = 1;
  end
endmodule
