// tb_dram_bank: opens rows, writes and reads 32-byte columns, precharges and re-opens rows,
// and checks every read against a shadow memory (data must survive precharge, and a read
// must return the open row's word one cycle after rd_en).
module tb_dram_bank;
  import pim_pkg::*;
  localparam int ROWS = 64;
  logic clk = 0, rst_n = 0, act = 0, pre = 0, rd_en = 0, wr_en = 0;
  logic [ROW_W-1:0] act_row = 0, open_row;
  logic [COL_W-1:0] col = 0;
  word_t wdata = 0, rdata;
  logic is_open;
  word_t shadow [int];
  int checks = 0, failures = 0;

  dram_bank #(.ROWS(ROWS)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic open_row_t(input int r);
    if (is_open) begin
      @(negedge clk) pre = 1;
      @(negedge clk) pre = 0;
    end
    @(negedge clk) begin act = 1; act_row = ROW_W'(r); end
    @(negedge clk) act = 0;
    checks++;
    if (!is_open || open_row != ROW_W'(r)) failures++;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    checks++; if (is_open) failures++;
    for (int t = 0; t < 3000; t++) begin
      int r, c, key;
      r = $urandom_range(0, ROWS - 1);
      if (!is_open || open_row != ROW_W'(r) || $urandom_range(0, 3) == 0) open_row_t(r);
      for (int k = 0; k < 4; k++) begin
        c = $urandom_range(0, NUM_COLS - 1);
        key = r * NUM_COLS + c;
        @(negedge clk);
        col = COL_W'(c);
        if (!shadow.exists(key) || $urandom_range(0, 1) == 0) begin
          wr_en = 1;
          for (int w = 0; w < 8; w++) wdata[32*w +: 32] = $urandom;
          shadow[key] = wdata;
          @(negedge clk) wr_en = 0;
        end else begin
          rd_en = 1;
          @(negedge clk) rd_en = 0;
          checks++;
          if (rdata !== shadow[key]) begin
            failures++;
            if (failures < 5) $display("FAIL row %0d col %0d", r, c);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
