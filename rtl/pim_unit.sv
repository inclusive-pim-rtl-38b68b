// pim_unit: one PIM unit, placed between an even and an odd bank and shared by both.
//
// A PIM command arrives with the column command that the memory controller issues to the
// bank(s). The bank word (if the command reads the bank) appears one cycle later, so the unit
// keeps the command for one cycle (stage 1), then selects its operands and writes the ALU
// result into the register file at the end of that cycle:
//   operand A = the word read from the even or odd bank (a_bank=1) or reg[src_a]
//   operand B = reg[src_b], the data-bus scalar data[15:0] copied to all lanes, or the
//               full 256-bit data-bus word
//   accumulator = reg[dst] (MAC)
// A STORE is handled in the issue cycle: st_data = reg[src_a] goes to the addressed bank's
// write port in that same cycle. Because the controller spaces column commands at least
// tCCDS = 2 cycles apart, a register written by one command is always readable by the next,
// so commands execute strictly in program order without interlocks.
// Sharing one unit by two banks and the operand sources (bank, register, data bus) follow the
// paper; the two-stage timing is this design's choice.
// Lint note: rst_n is reported as used both asynchronously and synchronously. The only
// synchronous use is the 'disable iff' of the assertions below; every flop resets
// asynchronously.
module pim_unit
  import pim_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     cmd_valid,     // a PIM command addresses this unit this cycle
  input  pim_cmd_t cmd,
  input  logic     cmd_odd,       // which bank of the pair the command addresses
  input  word_t    even_rdata,
  input  word_t    odd_rdata,
  output word_t    st_data        // register data for a STORE, valid in the issue cycle
);

  logic     s1_valid;
  pim_cmd_t s1_cmd;
  logic     s1_odd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_cmd   <= '0;
      s1_odd   <= 1'b0;
    end else begin
      s1_valid <= cmd_valid && is_pim_op(cmd.op) && (cmd.op != OP_STORE);
      if (cmd_valid) begin
        s1_cmd <= cmd;
        s1_odd <= cmd_odd;
      end
    end
  end

  word_t   ra, rb, rc, opa, opb, res;
  alu_op_e aop;

  // port A serves the STORE in the issue cycle; stage 1 never needs it then because
  // commands are at least two cycles apart
  pim_regfile #(.N(NUM_REGS)) u_rf (
    .clk, .rst_n,
    .we     (s1_valid),
    .waddr  (s1_cmd.dst),
    .wdata  (res),
    .raddr_a((cmd_valid && cmd.op == OP_STORE) ? cmd.src_a : s1_cmd.src_a),
    .raddr_b(s1_cmd.src_b),
    .raddr_c(s1_cmd.dst),
    .rdata_a(ra),
    .rdata_b(rb),
    .rdata_c(rc)
  );

  assign st_data = ra;

  always_comb begin
    opa = (s1_cmd.a_bank || s1_cmd.op == OP_LOAD) ? (s1_odd ? odd_rdata : even_rdata) : ra;
    unique case (s1_cmd.b_sel)
      B_SCALAR: opb = {LANES{s1_cmd.data[15:0]}};
      B_VECTOR: opb = s1_cmd.data;
      default:  opb = rb;
    endcase
    unique case (s1_cmd.op)
      OP_ADD:  aop = ALU_ADD;
      OP_MUL:  aop = ALU_MUL;
      OP_MAC:  aop = ALU_MAC;
      default: aop = ALU_PASS;
    endcase
  end

  pim_simd_alu u_alu (.op(aop), .a(opa), .b(opb), .c(rc), .y(res));

  a_spacing: assert property (@(posedge clk) disable iff (!rst_n) s1_valid |-> !cmd_valid)
    else $error("pim_unit: commands closer than two cycles");

endmodule
