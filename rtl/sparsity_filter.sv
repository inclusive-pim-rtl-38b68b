// sparsity_filter: sparsity-aware command issue for PIM matrix products.
//
// In a sparse-skinny GEMM the dense matrix stays in the banks and each element of the skinny
// matrix is broadcast on the data bus as the scalar of a multiply-accumulate command. When
// that scalar is zero (+0 or -0) the command cannot change the accumulator, so it is dropped
// here instead of being queued: the command slot, and the DRAM time it would take, is saved.
// Every other command passes unchanged. The filter is a single register stage with a
// valid/ready handshake on both sides (full throughput). Dropped commands are counted.
// Only MAC commands with a scalar operand are filtered: a plain MUL writes its destination,
// so skipping it would change the result. ENABLE=0 turns the filter off.
// Skipping zero-operand commands at issue time is the paper's optimization; the paper
// places the check in software on the processor, here it is a hardware stage in front of
// the command queue, which performs the same check.
// Lint note: rst_n is reported as used both asynchronously and synchronously. The only
// synchronous use is the 'disable iff' of the assertions below; every flop resets
// asynchronously.
module sparsity_filter
  import pim_pkg::*;
#(
  parameter bit ENABLE = 1'b1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  pim_cmd_t    in_cmd,
  output logic        out_valid,
  input  logic        out_ready,
  output pim_cmd_t    out_cmd,
  output logic [31:0] n_skipped
);

  logic skip;
  assign skip = ENABLE && (in_cmd.op == OP_MAC) && (in_cmd.b_sel == B_SCALAR) &&
                (in_cmd.data[14:0] == 15'd0);

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_cmd   <= '0;
      n_skipped <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid && !skip;
      if (in_valid && !skip) out_cmd <= in_cmd;
      if (in_valid && skip) n_skipped <= n_skipped + 1;
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (out_valid && !out_ready) |=> (out_valid && $stable(out_cmd)));

endmodule
