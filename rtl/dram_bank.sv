// dram_bank: one DRAM bank with its row buffer and column decoder.
//
// An ACTIVATE opens a row (the row is read into the row buffer); column reads and writes
// then move one 256-bit (32-byte) word between the row buffer and the bank's I/O, selected
// by the column address; a PRECHARGE closes the row. A row of 1024 bytes holds COLS = 32
// words. The row buffer is modelled as the index of the open row: reads and writes go to
// the array at that row, which behaves the same as copying the row out and restoring it on
// precharge. Read data appears on rdata one cycle after rd_en (synchronous read) and holds
// until the next read.
//
// DRAM timing (tRCD, tRAS, tRP, column spacing) is enforced by the memory controller, not
// here; the bank only checks with assertions that commands arrive in a legal order: an
// activate only to a closed bank, column commands only to an open bank.
// The row-buffer size is the paper's; the number of rows is not given and 16384 is a design
// choice. The cell array is written as a plain memory so the model simulates and
// synthesizes as an ordinary RAM.
// Lint note: rst_n is reported as used both asynchronously and synchronously. The only
// synchronous use is the 'disable iff' of the assertions below; every flop resets
// asynchronously.
module dram_bank
  import pim_pkg::*;
#(
  parameter int ROWS = 1 << ROW_W,
  parameter int COLS = NUM_COLS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             act,
  input  logic [ROW_W-1:0] act_row,
  input  logic             pre,
  input  logic             rd_en,
  input  logic             wr_en,
  input  logic [COL_W-1:0] col,
  input  word_t            wdata,
  output word_t            rdata,
  output logic             is_open,
  output logic [ROW_W-1:0] open_row
);

  localparam int AW = $clog2(ROWS) + $clog2(COLS);

  word_t cells [ROWS*COLS];

  logic [AW-1:0] addr;
  assign addr = AW'({open_row, col});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      is_open  <= 1'b0;
      open_row <= '0;
    end else if (act) begin
      is_open  <= 1'b1;
      open_row <= act_row;
    end else if (pre) begin
      is_open  <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) cells[addr] <= wdata;
    if (rd_en) rdata <= cells[addr];
  end

  // command ordering rules of a bank
  a_act_closed: assert property (@(posedge clk) disable iff (!rst_n) act |-> !is_open);
  a_act_pre:    assert property (@(posedge clk) disable iff (!rst_n) !(act && pre));
  a_col_open:   assert property (@(posedge clk) disable iff (!rst_n) (rd_en || wr_en) |-> is_open);
  a_col_row:    assert property (@(posedge clk) disable iff (!rst_n) act |-> (32'(act_row) < ROWS));

endmodule
