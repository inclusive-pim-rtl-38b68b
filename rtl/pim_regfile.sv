// pim_regfile: the register file of one PIM unit.
//
// NUM_REGS registers of 256 bits (16 FP16 lanes) hold data staged from an open DRAM row and
// intermediate results, so that a row need not be re-activated for every use. Three
// asynchronous read ports (operand A, operand B, accumulator/store data) and one write port
// written on the rising clock edge. A value written in one cycle is visible on the read
// ports from the next cycle. Registers are cleared by reset (a design choice; the paper does
// not describe reset). Sixteen registers per ALU is the paper's baseline; it studies larger
// counts only as a limit study, so the count is a parameter.
module pim_regfile
  import pim_pkg::*;
#(
  parameter int N = NUM_REGS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 we,
  input  logic [$clog2(N)-1:0] waddr,
  input  word_t                wdata,
  input  logic [$clog2(N)-1:0] raddr_a,
  input  logic [$clog2(N)-1:0] raddr_b,
  input  logic [$clog2(N)-1:0] raddr_c,
  output word_t                rdata_a,
  output word_t                rdata_b,
  output word_t                rdata_c
);

  word_t regs [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) regs[i] <= '0;
    end else if (we) begin
      regs[waddr] <= wdata;
    end
  end

  assign rdata_a = regs[raddr_a];
  assign rdata_b = regs[raddr_b];
  assign rdata_c = regs[raddr_c];

endmodule
