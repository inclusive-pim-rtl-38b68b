// pim_cmd_queue: the memory controller's queue of pim-commands.
//
// A FIFO of DEPTH commands with a valid/ready push side and a pop strobe. Commands leave in
// the order they arrived, which keeps the register dependencies between PIM commands intact.
// Besides the head, every queued entry is readable (entries[i] is the i-th oldest, valid for
// i < count) so that the scheduler can look ahead for the next row it will need and activate
// it early; look-ahead never reorders column commands.
// FIFO issue order is the paper's; the depth (16) is not given and is this design's choice.
// Lint note: rst_n is reported as used both asynchronously and synchronously. The only
// synchronous use is the 'disable iff' of the assertions below; every flop resets
// asynchronously.
module pim_cmd_queue
  import pim_pkg::*;
#(
  parameter int DEPTH = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  pim_cmd_t               in_cmd,
  input  logic                   pop,
  output logic [$clog2(DEPTH):0] count,
  output pim_cmd_t               entries [DEPTH]
);

  localparam int PW = $clog2(DEPTH);

  pim_cmd_t          mem [DEPTH];
  logic [PW-1:0]     rd_ptr, wr_ptr;
  logic              push;

  assign in_ready = (count != (PW+1)'(DEPTH));
  assign push     = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) begin
        mem[wr_ptr] <= in_cmd;
        wr_ptr      <= PW'((32'(wr_ptr) + 1) % DEPTH);
      end
      if (pop) rd_ptr <= PW'((32'(rd_ptr) + 1) % DEPTH);
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  always_comb
    for (int i = 0; i < DEPTH; i++) entries[i] = mem[PW'((32'(rd_ptr) + i) % DEPTH)];

  a_pop_nonempty: assert property (@(posedge clk) disable iff (!rst_n) pop |-> count != 0);

endmodule
