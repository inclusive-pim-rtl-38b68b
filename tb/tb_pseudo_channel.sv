// tb_pseudo_channel: drives row and column commands straight into the 16-bank pseudo-channel
// (respecting command order, not DRAM timing, which the controller owns) and checks normal
// reads against a reference model of all banks and all eight PIM units' registers. Random
// mixes of normal writes, single-bank and broadcast LOAD/ADD/MUL/MAC/STORE commands with
// bank, register, scalar and vector operands are used. Broadcast commands must update every
// unit from its own bank of the selected parity.
module tb_pseudo_channel;
  import pim_pkg::*;
  import fp16_ref_pkg::*;
  localparam int ROWS = 8;

  logic clk = 0, rst_n = 0;
  logic [NUM_BANKS-1:0] act_mask = 0, pre_mask = 0, bank_open;
  logic [ROW_W-1:0] act_row = 0;
  logic [ROW_W-1:0] bank_row [NUM_BANKS];
  logic col_valid = 0, rd_valid;
  pim_cmd_t col_cmd;
  word_t rd_data;

  word_t mem  [NUM_BANKS][ROWS][NUM_COLS];
  logic  memv [NUM_BANKS][ROWS][NUM_COLS];
  word_t regs [NUM_UNITS][16];
  int checks = 0, failures = 0, n_bcast = 0;

  pseudo_channel #(.ROWS(ROWS)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic ensure_row(input logic [NUM_BANKS-1:0] m, input int r);
    logic [NUM_BANKS-1:0] wrong, closed;
    for (int b = 0; b < NUM_BANKS; b++) wrong[b] = m[b] && bank_open[b] && bank_row[b] != ROW_W'(r);
    if (wrong != 0) begin
      @(negedge clk) pre_mask = wrong;
      @(negedge clk) pre_mask = 0;
    end
    closed = m & ~bank_open;
    if (closed != 0) begin
      @(negedge clk) begin act_mask = closed; act_row = ROW_W'(r); end
      @(negedge clk) act_mask = 0;
    end
  endtask

  task automatic issue(input pim_cmd_t c);
    @(negedge clk) begin col_cmd = c; col_valid = 1; end
    @(negedge clk) col_valid = 0;
  endtask

  initial begin
    col_cmd = '0;
    for (int u = 0; u < NUM_UNITS; u++) for (int i = 0; i < 16; i++) regs[u][i] = '0;
    for (int b = 0; b < NUM_BANKS; b++) for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < NUM_COLS; c++) memv[b][r][c] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      pim_cmd_t c;
      logic [NUM_BANKS-1:0] m;
      int k, r;
      c = '0;
      r = $urandom_range(0, ROWS - 1);
      c.row = ROW_W'(r);
      c.col = COL_W'($urandom_range(0, 3));
      c.bank = 4'($urandom);
      c.multi_bank = 1'($urandom_range(0, 1));
      c.odd = 1'($urandom_range(0, 1));
      k = $urandom_range(0, 9);
      c.op = (k < 3) ? OP_WR : (k < 5) ? OP_RD : (k == 5) ? OP_LOAD : (k == 6) ? OP_STORE :
             (k == 7) ? OP_ADD : (k == 8) ? OP_MUL : OP_MAC;
      if (c.op inside {OP_RD, OP_WR}) c.multi_bank = 0;
      c.a_bank = 1'($urandom_range(0, 1));
      c.src_a = 4'($urandom); c.src_b = 4'($urandom); c.dst = 4'($urandom);
      c.b_sel = bsel_e'($urandom_range(0, 2));
      c.data = rand_word();
      m = target_mask(c);
      // read only initialised words
      if (reads_bank(c)) begin
        for (int b = 0; b < NUM_BANKS; b++) if (m[b] && !memv[b][r][c.col]) c.op = OP_WR;
        if (c.op == OP_WR) begin c.multi_bank = 0; m = target_mask(c); end
      end
      if (c.multi_bank) n_bcast++;
      ensure_row(m, r);
      // reference model
      for (int b = 0; b < NUM_BANKS; b++) if (m[b]) begin
        int u;
        word_t a, bb;
        u = b / 2;
        a  = (c.a_bank || c.op == OP_LOAD) ? mem[b][r][c.col] : regs[u][c.src_a];
        bb = (c.b_sel == B_SCALAR) ? {LANES{c.data[15:0]}} : (c.b_sel == B_VECTOR) ? c.data : regs[u][c.src_b];
        unique case (c.op)
          OP_WR:    begin mem[b][r][c.col] = c.data; memv[b][r][c.col] = 1; end
          OP_STORE: begin mem[b][r][c.col] = regs[u][c.src_a]; memv[b][r][c.col] = 1; end
          OP_LOAD:  regs[u][c.dst] = a;
          OP_ADD:   regs[u][c.dst] = ref_word(1, a, bb, regs[u][c.dst]);
          OP_MUL:   regs[u][c.dst] = ref_word(2, a, bb, regs[u][c.dst]);
          OP_MAC:   regs[u][c.dst] = ref_word(3, a, bb, regs[u][c.dst]);
          default: ;
        endcase
      end
      issue(c);
      if (c.op == OP_RD) begin
        checks++;
        if (!rd_valid || rd_data !== mem[c.bank][r][c.col]) begin
          failures++;
          if (failures < 5) $display("FAIL rd bank %0d row %0d col %0d t=%0d", c.bank, r, c.col, t);
        end
      end
    end
    checks++;
    if (n_bcast < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
