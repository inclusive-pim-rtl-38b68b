// cache_aware_offload: cache-aware PIM offload of push-primitive updates.
//
// A push update adds a value to one FP16 graph-node property in memory. Each update is first
// classified by the locality predictor. If the predictor expects on-chip reuse (a hit), the
// update is handed back to the processor's cache on the cache_* port. Otherwise it is
// offloaded to PIM as two single-bank commands:
//   pim-ADD   reg[TMP_REG] = bank word + data-bus vector (the value in the node's lane,
//             +0 in the fifteen other lanes)
//   pim-STORE bank word = reg[TMP_REG]
// The two commands leave back to back on the cmd_* port, so no other command can fall
// between them if the consumer gives this port priority. TMP_REG is reserved for this use.
// The byte address seen by the predictor is {row, bank, col, lane, 1'b0}: a 1 KB row of one
// bank is contiguous and consecutive kilobytes go to consecutive banks.
// ENABLE=0 gives the non-selective policy: every update goes to PIM and the predictor is
// not consulted.
// Sequence: accept (1 cycle), predictor lookup (2 cycles), then either one cache_valid pulse
// or the two commands (one per accepted cmd_ready). The ADD+STORE pair and the predictor
// guiding the offload are the paper's; the address mapping, the +0 padding of the other
// lanes and the reserved register are this design's choices. Adding +0 leaves every other
// lane unchanged except that a -0 there becomes +0.
module cache_aware_offload
  import pim_pkg::*;
#(
  parameter bit               ENABLE  = 1'b1,
  parameter logic [REG_W-1:0] TMP_REG = 4'd15
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        upd_valid,
  output logic        upd_ready,
  input  push_upd_t   upd,
  output logic        cmd_valid,
  input  logic        cmd_ready,
  output pim_cmd_t    cmd,
  output logic        cache_valid,
  output push_upd_t   cache_upd,
  output logic [31:0] n_cache,
  output logic [31:0] n_pim
);

  typedef enum logic [2:0] {S_IDLE, S_REQ, S_WAIT, S_ADD, S_STORE} state_e;

  state_e    st;
  push_upd_t u_q;
  logic      p_ready, p_valid, p_hit;

  locality_predictor #(.ADDR_W(40)) u_pred (
    .clk, .rst_n,
    .req_valid (st == S_REQ),
    .req_ready (p_ready),
    .req_addr  (40'({u_q.row, u_q.bank, u_q.col, u_q.lane, 1'b0})),
    .resp_valid(p_valid),
    .resp_hit  (p_hit)
  );

  assign upd_ready = (st == S_IDLE);
  assign cache_upd = u_q;

  always_comb begin
    cmd            = '0;
    cmd.multi_bank = 1'b0;
    cmd.bank       = u_q.bank;
    cmd.row        = u_q.row;
    cmd.col        = u_q.col;
    cmd.a_bank     = 1'b1;
    cmd.dst        = TMP_REG;
    cmd.src_a      = TMP_REG;
    cmd.b_sel      = B_VECTOR;
    cmd.data       = '0;
    cmd.data[16*u_q.lane +: 16] = u_q.value;
    cmd.op         = (st == S_STORE) ? OP_STORE : OP_ADD;
    if (st == S_STORE) begin
      cmd.a_bank = 1'b0;
      cmd.b_sel  = B_REG;
      cmd.data   = '0;
    end
    cmd_valid = (st == S_ADD) || (st == S_STORE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= S_IDLE;
      u_q         <= '0;
      cache_valid <= 1'b0;
      n_cache     <= '0;
      n_pim       <= '0;
    end else begin
      cache_valid <= 1'b0;
      unique case (st)
        S_IDLE:  if (upd_valid) begin
          u_q <= upd;
          st  <= ENABLE ? S_REQ : S_ADD;
        end
        S_REQ:   if (p_ready) st <= S_WAIT;
        S_WAIT:  if (p_valid) begin
          if (p_hit) begin
            cache_valid <= 1'b1;
            n_cache     <= n_cache + 1;
            st          <= S_IDLE;
          end else begin
            st <= S_ADD;
          end
        end
        S_ADD:   if (cmd_ready) st <= S_STORE;
        S_STORE: if (cmd_ready) begin
          n_pim <= n_pim + 1;
          st    <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
