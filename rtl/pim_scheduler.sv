// pim_scheduler: memory-controller issue logic for one PIM pseudo-channel.
//
// Each cycle it looks at the head of the command queue and drives two command buses:
//   column bus: issues the head command once every bank it addresses has the command's row
//               open for at least tRCD and the previous column command is far enough back
//               (tCCDL = 4 cycles after a multi-bank PIM command, tCCDS = 2 after a
//               single-bank command or normal access: multi-bank commands run at half rate).
//               Column commands always leave in queue order.
//   row bus:    generates the precharges and activates the head needs (a precharge waits
//               for tRAS after the activate, an activate for tRP after the precharge).
// Two activation policies (parameter ARCH_AWARE):
//   0  baseline: a multi-bank command that finds its row closed precharges and activates
//      ALL banks, so every activation sits on the critical path.
//   1  architecture-aware: activations are split by bank parity, since a PIM unit serves one
//      even and one odd bank. A multi-bank command opens only its own parity. While the head
//      works on one parity, the scheduler finds the first later command that touches the
//      other parity; if it is a multi-bank command for a different row, it precharges and
//      activates that parity early, so the activation overlaps useful work. Only the first
//      such command is looked at, so no earlier command on that parity can lose its row.
// Counters report issued column commands, row commands, early (look-ahead) row commands and
// cycles in which the head waited.
// The policies and the DRAM timing values are the paper's; the counter-based timing model,
// tRCD and the one-row-command-per-cycle limit are this design's choices.
// col_cmd is the queue head itself (no copy is stored), so after synthesis its bits come
// straight from the 'entries' input.
// Lint note: rst_n is reported as used both asynchronously and synchronously. The only
// synchronous use is the 'disable iff' of the assertions below; every flop resets
// asynchronously.
module pim_scheduler
  import pim_pkg::*;
#(
  parameter int   DEPTH      = 16,
  parameter bit   ARCH_AWARE = 1'b1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [$clog2(DEPTH):0] count,
  input  pim_cmd_t               entries [DEPTH],
  output logic                   pop,
  output logic                   col_valid,
  output pim_cmd_t               col_cmd,
  output logic [NUM_BANKS-1:0]   act_mask,
  output logic [NUM_BANKS-1:0]   pre_mask,
  output logic [ROW_W-1:0]       act_row,
  output logic [31:0]            n_col,
  output logic [31:0]            n_act,
  output logic [31:0]            n_early,
  output logic [31:0]            n_stall
);

  localparam logic [NUM_BANKS-1:0] EVEN_M = {(NUM_BANKS/2){2'b01}};
  localparam logic [NUM_BANKS-1:0] ODD_M  = {(NUM_BANKS/2){2'b10}};

  logic [NUM_BANKS-1:0] open_q;
  logic [ROW_W-1:0]     row_q  [NUM_BANKS];
  logic [5:0]           rcd_c  [NUM_BANKS];
  logic [5:0]           ras_c  [NUM_BANKS];
  logic [5:0]           rp_c   [NUM_BANKS];
  logic [2:0]           ccd_c;

  pim_cmd_t             head;
  logic                 hv;
  logic [NUM_BANKS-1:0] hmask, hit_m, ras_ok, rp_ok, rcd_ok;
  logic                 early;

  always_comb begin
    for (int b = 0; b < NUM_BANKS; b++) begin
      ras_ok[b] = (ras_c[b] == 0);
      rp_ok[b]  = (rp_c[b] == 0);
      rcd_ok[b] = (rcd_c[b] == 0);
    end
  end

  // Which banks have a given row open
  function automatic logic [NUM_BANKS-1:0] row_hit(input logic [ROW_W-1:0] r);
    logic [NUM_BANKS-1:0] m;
    for (int b = 0; b < NUM_BANKS; b++) m[b] = open_q[b] && (row_q[b] == r);
    return m;
  endfunction

  // Row command that brings 'want' banks to row r: precharge the wrong open ones (of
  // 'clear'), then activate the closed ones. Returns 1 if a command is issued now.
  function automatic logic row_step(input logic [NUM_BANKS-1:0] want,
                                    input logic [NUM_BANKS-1:0] clear,
                                    input logic [ROW_W-1:0] r,
                                    output logic [NUM_BANKS-1:0] am,
                                    output logic [NUM_BANKS-1:0] pm);
    logic [NUM_BANKS-1:0] wrong;
    am = '0;
    pm = '0;
    wrong = clear & open_q & ~row_hit(r);
    if (wrong != 0) begin
      if ((wrong & ~ras_ok) == 0) pm = wrong;
    end else if (((want & ~open_q) != 0) && ((want & ~open_q & ~rp_ok) == 0)) begin
      am = want & ~open_q;
    end
    return (am != 0) || (pm != 0);
  endfunction

  always_comb begin
    logic                 col_ready, need_row, any;
    logic [NUM_BANKS-1:0] am, pm, other;
    logic                 found, stop;
    pim_cmd_t             la;

    am    = '0;
    pm    = '0;
    any   = 1'b0;
    other = '0;
    found = 1'b0;
    stop  = 1'b0;
    la    = entries[0];
    head  = entries[0];
    hv    = (count != 0);
    hmask = target_mask(head);
    hit_m = row_hit(head.row);

    need_row  = hv && needs_row(head) && ((hmask & hit_m) != hmask);
    col_ready = hv && (ccd_c == 0) &&
                (!needs_row(head) || (((hmask & hit_m) == hmask) && ((hmask & ~rcd_ok) == 0)));

    pop       = col_ready;
    col_valid = col_ready;
    col_cmd   = head;

    act_mask = '0;
    pre_mask = '0;
    act_row  = head.row;
    early    = 1'b0;

    if (need_row) begin
      if (!ARCH_AWARE && head.multi_bank) begin
        // baseline all-bank activation: close every open bank, then open all of them
        if (open_q != 0) begin
          if ((open_q & ~ras_ok) == 0) pre_mask = open_q;
        end else if (rp_ok == '1) begin
          act_mask = '1;
        end
      end else begin
        any = row_step(hmask, hmask, head.row, am, pm);
        act_mask = am;
        pre_mask = pm;
      end
    end else if (ARCH_AWARE && hv && head.multi_bank) begin
      // look ahead for the first command that uses the other bank parity
      other = head.odd ? EVEN_M : ODD_M;
      for (int i = 1; i < DEPTH; i++) begin
        if (!found && !stop && (i < 32'(count)) && needs_row(entries[i]) &&
            ((target_mask(entries[i]) & other) != 0)) begin
          if (entries[i].multi_bank) begin
            found = 1'b1;
            la    = entries[i];
          end else begin
            stop = 1'b1;
          end
        end
      end
      if (found) begin
        any = row_step(other, other, la.row, am, pm);
        act_mask = am;
        pre_mask = pm;
        act_row  = la.row;
        early    = any;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      open_q  <= '0;
      ccd_c   <= '0;
      n_col   <= '0;
      n_act   <= '0;
      n_early <= '0;
      n_stall <= '0;
      for (int b = 0; b < NUM_BANKS; b++) begin
        row_q[b] <= '0;
        rcd_c[b] <= '0;
        ras_c[b] <= '0;
        rp_c[b]  <= '0;
      end
    end else begin
      for (int b = 0; b < NUM_BANKS; b++) begin
        if (act_mask[b]) begin
          open_q[b] <= 1'b1;
          row_q[b]  <= act_row;
          rcd_c[b]  <= 6'(T_RCD - 1);
          ras_c[b]  <= 6'(T_RAS - 1);
        end else begin
          if (rcd_c[b] != 0) rcd_c[b] <= rcd_c[b] - 1;
          if (ras_c[b] != 0) ras_c[b] <= ras_c[b] - 1;
        end
        if (pre_mask[b]) begin
          open_q[b] <= 1'b0;
          rp_c[b]   <= 6'(T_RP - 1);
        end else if (rp_c[b] != 0) begin
          rp_c[b] <= rp_c[b] - 1;
        end
      end
      if (col_valid) ccd_c <= 3'(head.multi_bank ? T_CCDL - 1 : T_CCDS - 1);
      else if (ccd_c != 0) ccd_c <= ccd_c - 1;
      if (col_valid) n_col <= n_col + 1;
      if (act_mask != 0) n_act <= n_act + 1;
      if (early) n_early <= n_early + 1;
      if (hv && !col_valid) n_stall <= n_stall + 1;
    end
  end

  a_act_pre_excl: assert property (@(posedge clk) disable iff (!rst_n) (act_mask & pre_mask) == 0);
  a_act_closed:   assert property (@(posedge clk) disable iff (!rst_n) (act_mask & open_q) == 0);

endmodule
