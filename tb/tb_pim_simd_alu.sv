// tb_pim_simd_alu: checks every lane of the SIMD ALU against the reference FP16 model, for
// all four operations, on directed values and on random operands with special values mixed in.
module tb_pim_simd_alu;
  import pim_pkg::*;
  import fp16_ref_pkg::*;

  alu_op_e op;
  word_t   a, b, c, y;
  int      checks = 0, failures = 0;

  pim_simd_alu dut (.op, .a, .b, .c, .y);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    logic [15:0] exp_l, la, lb, lc;
    #1;
    for (int l = 0; l < LANES; l++) begin
      la = a[16*l +: 16]; lb = b[16*l +: 16]; lc = c[16*l +: 16];
      unique case (op)
        ALU_PASS: exp_l = la;
        ALU_ADD:  exp_l = ref_add(la, lb);
        ALU_MUL:  exp_l = ref_mul(la, lb);
        default:  exp_l = ref_add(lc, ref_mul(la, lb));
      endcase
      checks++;
      if (y[16*l +: 16] !== exp_l) begin
        failures++;
        if (failures < 10)
          $display("FAIL op=%s lane %0d a=%h b=%h c=%h got %h exp %h", op.name(), l, la, lb, lc,
                   y[16*l +: 16], exp_l);
      end
    end
  endtask

  initial begin
    // directed: 1.0 + 1.0 = 2.0, 1.5 * 2.0 = 3.0, 1.0 + 1.0*2.0 = 3.0
    op = ALU_ADD; a = {LANES{16'h3C00}}; b = {LANES{16'h3C00}}; c = '0;
    #1; checks++; if (y[15:0] !== 16'h4000) failures++;
    op = ALU_MUL; a = {LANES{16'h3E00}}; b = {LANES{16'h4000}};
    #1; checks++; if (y[15:0] !== 16'h4200) failures++;
    op = ALU_MAC; a = {LANES{16'h3C00}}; b = {LANES{16'h4000}}; c = {LANES{16'h3C00}};
    #1; checks++; if (y[15:0] !== 16'h4200) failures++;
    // overflow to infinity: 65504 + 65504
    op = ALU_ADD; a = {LANES{16'h7BFF}}; b = {LANES{16'h7BFF}};
    #1; checks++; if (y[15:0] !== 16'h7C00) failures++;
    // exact cancellation gives +0
    a = {LANES{16'h4000}}; b = {LANES{16'hC000}};
    #1; checks++; if (y[15:0] !== 16'h0000) failures++;
    for (int t = 0; t < 3000; t++) begin
      op = alu_op_e'(t % 4);
      for (int l = 0; l < LANES; l++) begin
        a[16*l +: 16] = rand_h();
        b[16*l +: 16] = rand_h();
        c[16*l +: 16] = rand_h();
        // close magnitudes exercise cancellation
        if (l == 3) b[16*l +: 16] = {~a[16*l+15], a[16*l +: 15] ^ 15'($urandom_range(0, 3))};
      end
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
