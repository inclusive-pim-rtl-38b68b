// pim_pch_top: one PIM-enabled HBM pseudo-channel together with the memory-controller front
// end that feeds it, in the optimized ("inclusive") configuration.
//
// Data flow:
//   inst_*   pim-commands and normal reads/writes from the processor (one per handshake)
//   upd_*    push-primitive updates -> cache_aware_offload: predicted-reuse updates leave on
//            cache_* for the processor's cache, the rest become a pim-ADD/pim-STORE pair
//   both streams -> sparsity_filter (drops MACs whose broadcast scalar is zero; offload
//            commands have priority, so an ADD/STORE pair stays together)
//            -> pim_cmd_queue (FIFO) -> pim_scheduler (row commands, DRAM timing,
//            architecture-aware activation) -> pseudo_channel (16 banks, 8 PIM units)
//   rd_*     data of normal reads, one cycle after the read issues
// Statistics counters show what each mechanism did; idle is high when nothing is queued or
// in flight in the front end.
// Each optimization can be switched off by parameter to obtain the baseline PIM behaviour.
// The chain of blocks is the paper's system; putting all three optimizations in one front
// end, and the arbitration between the two input streams, are this design's choices.
// Lint note: rst_n is reported as used both asynchronously and synchronously. The only
// synchronous use is the 'disable iff' of the assertions below; every flop resets
// asynchronously.
module pim_pch_top
  import pim_pkg::*;
#(
  parameter int ROWS           = 1 << ROW_W,
  parameter int QDEPTH         = 16,
  parameter bit ARCH_AWARE     = 1'b1,
  parameter bit SPARSITY_AWARE = 1'b1,
  parameter bit CACHE_AWARE    = 1'b1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        inst_valid,
  output logic        inst_ready,
  input  pim_cmd_t    inst,
  input  logic        upd_valid,
  output logic        upd_ready,
  input  push_upd_t   upd,
  output logic        cache_valid,
  output push_upd_t   cache_upd,
  output logic        rd_valid,
  output word_t       rd_data,
  output logic        idle,
  output logic [31:0] n_skipped,
  output logic [31:0] n_cache,
  output logic [31:0] n_pim,
  output logic [31:0] n_col,
  output logic [31:0] n_act,
  output logic [31:0] n_early,
  output logic [31:0] n_stall
);

  // offload -> arbiter
  logic     off_valid, off_ready;
  pim_cmd_t off_cmd;
  // arbiter -> filter
  logic     f_in_valid, f_in_ready;
  pim_cmd_t f_in_cmd;
  // filter -> queue
  logic     q_in_valid, q_in_ready;
  pim_cmd_t q_in_cmd;
  // queue -> scheduler
  logic [$clog2(QDEPTH):0] q_count;
  pim_cmd_t                q_entries [QDEPTH];
  logic                    q_pop;
  // scheduler -> pseudo-channel
  logic                 col_valid;
  pim_cmd_t             col_cmd;
  logic [NUM_BANKS-1:0] act_mask, pre_mask, bank_open;
  logic [ROW_W-1:0]     act_row;
  logic [ROW_W-1:0]     bank_row [NUM_BANKS];

  cache_aware_offload #(.ENABLE(CACHE_AWARE)) u_offload (
    .clk, .rst_n,
    .upd_valid, .upd_ready, .upd,
    .cmd_valid  (off_valid),
    .cmd_ready  (off_ready),
    .cmd        (off_cmd),
    .cache_valid, .cache_upd,
    .n_cache, .n_pim
  );

  assign f_in_valid = off_valid || inst_valid;
  assign f_in_cmd   = off_valid ? off_cmd : inst;
  assign off_ready  = f_in_ready;
  assign inst_ready = f_in_ready && !off_valid;

  sparsity_filter #(.ENABLE(SPARSITY_AWARE)) u_filter (
    .clk, .rst_n,
    .in_valid (f_in_valid),
    .in_ready (f_in_ready),
    .in_cmd   (f_in_cmd),
    .out_valid(q_in_valid),
    .out_ready(q_in_ready),
    .out_cmd  (q_in_cmd),
    .n_skipped
  );

  pim_cmd_queue #(.DEPTH(QDEPTH)) u_queue (
    .clk, .rst_n,
    .in_valid(q_in_valid),
    .in_ready(q_in_ready),
    .in_cmd  (q_in_cmd),
    .pop     (q_pop),
    .count   (q_count),
    .entries (q_entries)
  );

  pim_scheduler #(.DEPTH(QDEPTH), .ARCH_AWARE(ARCH_AWARE)) u_sched (
    .clk, .rst_n,
    .count  (q_count),
    .entries(q_entries),
    .pop    (q_pop),
    .col_valid, .col_cmd,
    .act_mask, .pre_mask, .act_row,
    .n_col, .n_act, .n_early, .n_stall
  );

  pseudo_channel #(.ROWS(ROWS)) u_pch (
    .clk, .rst_n,
    .act_mask, .pre_mask, .act_row,
    .col_valid, .col_cmd,
    .rd_valid, .rd_data,
    .bank_open, .bank_row
  );

  assign idle = (q_count == 0) && !q_in_valid && upd_ready && !off_valid;

  // the banks' open rows always agree with the scheduler's view
  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_chk
    a_row_view: assert property (@(posedge clk) disable iff (!rst_n)
      (col_valid && target_mask(col_cmd)[b] && needs_row(col_cmd)) |->
        (bank_open[b] && bank_row[b] == col_cmd.row));
  end

endmodule
