// wavesim_harness: drives one pim_pch_top with a wave-simulation style kernel and checks the
// results; instantiated by tb_wavesim for both activation policies and both kernels.
//   WL = 0 (volume kernel): per point, out = sum over 4 field rows j of c_j * u_j, i.e. a MUL
//          then three MACs with a broadcast coefficient, each field in its own DRAM row.
//   WL = 1 (flux kernel):   out[k] = sum over 2 field rows j of c_2j * u_j[k] + c_2j+1 *
//          u_j[k+1], so each point also reads its neighbour column (neighbouring faces are
//          placed in the same bank).
// Points are the 16 lanes of a column in every bank; 8 output columns are computed in two
// blocks of 4, with even banks using registers r0-r3 / r8-r11 and odd banks r4-r7 / r12-r15
// (the two banks of a pair share one register file). Even and odd commands are interleaved
// row by row, so one parity moves to its next field row while the other still computes:
// the situation architecture-aware activation is built for.
// Inputs are written with normal writes, results are read back with normal reads and
// compared with an FP16 reference. 'cycles' is the time from the first compute command to
// the channel going idle after the last store.
module wavesim_harness
  import pim_pkg::*;
  import fp16_ref_pkg::*;
#(
  parameter int WL         = 0,
  parameter bit ARCH_AWARE = 1'b1,
  parameter int ROWS       = 64
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   cycles,
  output int   early,
  output int   checks,
  output int   failures
);
  localparam int NF = (WL == 0) ? 4 : 2;   // field rows
  localparam int NC = (WL == 0) ? 8 : 9;   // field columns written
  localparam int F0 = 40, OUTR = 50;

  logic inst_valid = 0, inst_ready, upd_valid, upd_ready, cache_valid, rd_valid, idle;
  pim_cmd_t inst;
  push_upd_t upd, cache_upd;
  word_t rd_data;
  logic [31:0] n_skipped, n_cache, n_pim, n_col, n_act, n_early, n_stall;

  assign upd_valid = 1'b0;
  assign upd = '0;

  pim_pch_top #(.ROWS(ROWS), .ARCH_AWARE(ARCH_AWARE)) dut (.*);

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  word_t exp_rd [$];
  word_t u [NUM_BANKS][NF][NC];
  logic [15:0] coef [2 * NF];

  initial begin
    done = 0; cycles = 0; early = 0; checks = 0; failures = 0;
  end

  always @(posedge clk) if (rst_n && rd_valid) begin
    checks++;
    if (exp_rd.size() == 0) begin failures++; $display("FAIL unexpected read data"); end
    else if (rd_data !== exp_rd.pop_front()) begin
      failures++;
      if (failures < 5) $display("FAIL wavesim WL=%0d ARCH=%0d result mismatch", WL, ARCH_AWARE);
    end
  end

  task automatic send(input pim_cmd_t c);
    @(negedge clk);
    inst_valid = 1;
    inst = c;
    #1;
    while (!inst_ready) begin @(negedge clk); #1; end
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

  task automatic wait_idle();
    @(negedge clk);
    while (!idle) @(negedge clk);
    repeat (4) @(negedge clk);
  endtask

  // one multiply term: first term of an accumulation is a MUL, later ones MACs
  task automatic term(input bit first, input bit p, input int row, input int col,
                      input logic [15:0] cf, input int dst);
    pim_cmd_t c;
    c = mk(first ? OP_MUL : OP_MAC, 1, p, 0, row, col);
    c.a_bank = 1; c.b_sel = B_SCALAR; c.data = '0; c.data[15:0] = cf; c.dst = REG_W'(dst);
    send(c);
  endtask

  initial begin
    int t0;
    inst = '0;
    for (int i = 0; i < 2 * NF; i++) begin
      coef[i] = 16'(16'h3000 + $urandom_range(0, 32'h1400));   // never zero: no skipping here
      coef[i][15] = 1'($urandom);
    end
    @(posedge rst_n);
    repeat (2) @(posedge clk);
    for (int b = 0; b < NUM_BANKS; b++)
      for (int j = 0; j < NF; j++)
        for (int k = 0; k < NC; k++) begin
          pim_cmd_t c;
          u[b][j][k] = rand_word();
          c = mk(OP_WR, 0, 0, b, F0 + j, k);
          c.data = u[b][j][k];
          send(c);
        end
    wait_idle();
    t0 = cyc;
    for (int h = 0; h < 2; h++) begin
      for (int j = 0; j < NF; j++)
        for (int p = 0; p < 2; p++)
          for (int k = 0; k < 4; k++) begin
            int col, dst;
            col = 4 * h + k;
            dst = 8 * h + 4 * p + k;
            if (WL == 0) term(j == 0, p[0], F0 + j, col, coef[j], dst);
            else begin
              term(j == 0, p[0], F0 + j, col, coef[2 * j], dst);
              term(1'b0, p[0], F0 + j, col + 1, coef[2 * j + 1], dst);
            end
          end
      for (int p = 0; p < 2; p++)
        for (int k = 0; k < 4; k++) begin
          pim_cmd_t c;
          c = mk(OP_STORE, 1, p[0], 0, OUTR, 4 * h + k);
          c.src_a = REG_W'(8 * h + 4 * p + k);
          send(c);
        end
    end
    wait_idle();
    cycles = cyc - t0 - 5;
    early = int'(n_early);
    for (int b = 0; b < NUM_BANKS; b++)
      for (int col = 0; col < 8; col++) begin
        word_t y;
        y = '0;
        for (int j = 0; j < NF; j++)
          if (WL == 0)
            y = (j == 0) ? ref_word(2, u[b][j][col], {16{coef[j]}}, '0)
                         : ref_word(3, u[b][j][col], {16{coef[j]}}, y);
          else begin
            y = (j == 0) ? ref_word(2, u[b][j][col], {16{coef[2 * j]}}, '0)
                         : ref_word(3, u[b][j][col], {16{coef[2 * j]}}, y);
            y = ref_word(3, u[b][j][col + 1], {16{coef[2 * j + 1]}}, y);
          end
        exp_rd.push_back(y);
        send(mk(OP_RD, 0, 0, b, OUTR, col));
      end
    wait_idle();
    checks++;
    if (exp_rd.size() != 0) begin failures++; $display("FAIL missing read data"); end
    done = 1;
  end
endmodule
