// tb_pim_regfile: random writes and reads of the 16 x 256-bit register file against a
// shadow copy, including the reset value and write-then-read timing.
module tb_pim_regfile;
  import pim_pkg::*;
  logic clk = 0, rst_n = 0, we = 0;
  logic [3:0] waddr, ra, rb, rc;
  word_t wdata, da, db, dc;
  word_t shadow [16];
  int checks = 0, failures = 0;

  pim_regfile dut (.clk, .rst_n, .we, .waddr, .wdata, .raddr_a(ra), .raddr_b(rb), .raddr_c(rc),
                   .rdata_a(da), .rdata_b(db), .rdata_c(dc));

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++) shadow[i] = '0;
    waddr = 0; wdata = 0; ra = 0; rb = 0; rc = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      ra = 4'($urandom); rb = 4'($urandom); rc = 4'($urandom);
      #1;
      checks += 3;
      if (da !== shadow[ra]) failures++;
      if (db !== shadow[rb]) failures++;
      if (dc !== shadow[rc]) failures++;
      we = $urandom_range(0, 1) == 1;
      waddr = 4'($urandom);
      for (int k = 0; k < 8; k++) wdata[32*k +: 32] = $urandom;
      @(posedge clk);
      if (we) shadow[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
