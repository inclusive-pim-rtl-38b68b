// pseudo_channel: one PIM-enabled HBM pseudo-channel: NUM_BANKS banks sharing a data bus and
// NUM_BANKS/2 PIM units, one per even/odd bank pair.
//
// Row commands: act_mask/pre_mask name the banks that activate or precharge this cycle; all
// banks activated in one cycle open the same row act_row. A multi-bank (all-bank, all-even or
// all-odd) activate is simply a mask with several bits set.
// Column commands (col_valid/col_cmd, at most one per cycle):
//   RD / WR     normal access of one bank; read data returns on rd_valid/rd_data one cycle
//               later, over the shared data bus
//   PIM op      multi_bank=1: broadcast to every bank of the selected parity and to all PIM
//               units at once, each unit working on the word of its own bank; this is where
//               the bandwidth gain comes from, since no data crosses the shared bus.
//               multi_bank=0: only the addressed bank and its PIM unit.
//   STORE       each addressed bank writes the register value of its own PIM unit
// The controller guarantees that every addressed bank has the right row open and that DRAM
// timing is met; this block performs no checks beyond the banks' assertions.
// The structure (banks sharing a bus, a PIM unit per bank pair, broadcast commands) follows
// the paper; signal names and the one-cycle read latency are this design's.
// Lint note: rst_n is reported as used both asynchronously and synchronously. The only
// synchronous use is the 'disable iff' of the assertions below; every flop resets
// asynchronously.
module pseudo_channel
  import pim_pkg::*;
#(
  parameter int ROWS = 1 << ROW_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NUM_BANKS-1:0] act_mask,
  input  logic [NUM_BANKS-1:0] pre_mask,
  input  logic [ROW_W-1:0]     act_row,
  input  logic                 col_valid,
  input  pim_cmd_t             col_cmd,
  output logic                 rd_valid,
  output word_t                rd_data,
  output logic [NUM_BANKS-1:0] bank_open,
  output logic [ROW_W-1:0]     bank_row [NUM_BANKS]
);

  logic [NUM_BANKS-1:0] tmask, rd_en, wr_en;
  word_t                rdata   [NUM_BANKS];
  word_t                st_data [NUM_UNITS];
  logic [BANK_W-1:0]    rd_bank_q;
  logic                 rd_q;

  assign tmask = col_valid ? target_mask(col_cmd) : '0;

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    assign rd_en[b] = tmask[b] && reads_bank(col_cmd);
    assign wr_en[b] = tmask[b] && writes_bank(col_cmd);
    dram_bank #(.ROWS(ROWS)) u_bank (
      .clk, .rst_n,
      .act     (act_mask[b]),
      .act_row (act_row),
      .pre     (pre_mask[b]),
      .rd_en   (rd_en[b]),
      .wr_en   (wr_en[b]),
      .col     (col_cmd.col),
      .wdata   ((col_cmd.op == OP_STORE) ? st_data[b/2] : col_cmd.data),
      .rdata   (rdata[b]),
      .is_open (bank_open[b]),
      .open_row(bank_row[b])
    );
  end

  for (genvar u = 0; u < NUM_UNITS; u++) begin : g_unit
    logic sel;
    assign sel = col_valid && is_pim_op(col_cmd.op) &&
                 (col_cmd.multi_bank || (col_cmd.bank[BANK_W-1:1] == (BANK_W-1)'(u)));
    pim_unit u_pim (
      .clk, .rst_n,
      .cmd_valid (sel),
      .cmd       (col_cmd),
      .cmd_odd   (col_cmd.multi_bank ? col_cmd.odd : col_cmd.bank[0]),
      .even_rdata(rdata[2*u]),
      .odd_rdata (rdata[2*u+1]),
      .st_data   (st_data[u])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q      <= 1'b0;
      rd_bank_q <= '0;
    end else begin
      rd_q      <= col_valid && (col_cmd.op == OP_RD);
      rd_bank_q <= col_cmd.bank;
    end
  end

  assign rd_valid = rd_q;
  assign rd_data  = rdata[rd_bank_q];

  a_rd_single: assert property (@(posedge clk) disable iff (!rst_n)
    (col_valid && col_cmd.op inside {OP_RD, OP_WR}) |-> !col_cmd.multi_bank);

endmodule
