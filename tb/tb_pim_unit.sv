// tb_pim_unit: drives one PIM unit with LOAD, ADD, MUL, MAC and STORE commands two cycles
// apart, supplying bank words one cycle after each command as the banks would, and checks
// the register contents (read back through STOREs) against a reference register model.
module tb_pim_unit;
  import pim_pkg::*;
  import fp16_ref_pkg::*;

  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_odd = 0;
  pim_cmd_t cmd;
  word_t even_rdata, odd_rdata, st_data;
  word_t regs [16];
  int checks = 0, failures = 0;

  pim_unit dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t rand_w();
    word_t w;
    for (int l = 0; l < LANES; l++) w[16*l +: 16] = rand_h();
    return w;
  endfunction

  function automatic word_t lanes2(input alu_op_e op, input word_t a, input word_t b, input word_t c);
    word_t y;
    for (int l = 0; l < LANES; l++)
      unique case (op)
        ALU_ADD: y[16*l +: 16] = ref_add(a[16*l +: 16], b[16*l +: 16]);
        ALU_MUL: y[16*l +: 16] = ref_mul(a[16*l +: 16], b[16*l +: 16]);
        ALU_MAC: y[16*l +: 16] = ref_add(c[16*l +: 16], ref_mul(a[16*l +: 16], b[16*l +: 16]));
        default: y[16*l +: 16] = a[16*l +: 16];
      endcase
    return y;
  endfunction

  initial begin
    cmd = '0; even_rdata = '0; odd_rdata = '0;
    for (int i = 0; i < 16; i++) regs[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      word_t bw, a, b, res;
      pim_op_e op;
      int k;
      k = $urandom_range(0, 9);
      op = (k < 2) ? OP_LOAD : (k < 4) ? OP_STORE : (k < 6) ? OP_ADD : (k < 7) ? OP_MUL : OP_MAC;
      bw = rand_w();
      @(negedge clk);
      cmd        = '0;
      cmd.op     = op;
      cmd.a_bank = 1'($urandom_range(0, 1));
      cmd.src_a  = 4'($urandom);
      cmd.src_b  = 4'($urandom);
      cmd.dst    = 4'($urandom);
      cmd.b_sel  = bsel_e'($urandom_range(0, 2));
      cmd.data   = rand_w();
      cmd_odd    = 1'($urandom_range(0, 1));
      cmd_valid  = 1;
      if (op == OP_STORE) begin
        #1;
        checks++;
        if (st_data !== regs[cmd.src_a]) begin
          failures++;
          if (failures < 5) $display("FAIL store r%0d", cmd.src_a);
        end
      end else begin
        a = (cmd.a_bank || op == OP_LOAD) ? bw : regs[cmd.src_a];
        b = (cmd.b_sel == B_SCALAR) ? {LANES{cmd.data[15:0]}} :
            (cmd.b_sel == B_VECTOR) ? cmd.data : regs[cmd.src_b];
        res = lanes2(op == OP_ADD ? ALU_ADD : op == OP_MUL ? ALU_MUL :
                     op == OP_MAC ? ALU_MAC : ALU_PASS, a, b, regs[cmd.dst]);
        regs[cmd.dst] = res;
      end
      @(negedge clk);
      cmd_valid = 0;
      // bank word of the command arrives one cycle after it
      even_rdata = cmd_odd ? rand_w() : bw;
      odd_rdata  = cmd_odd ? bw : rand_w();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
