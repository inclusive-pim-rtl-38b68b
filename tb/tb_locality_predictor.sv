// tb_locality_predictor: after the reset sweep, sends lookups whose line addresses are drawn
// from a working set that crowds a few sets (so LRU eviction matters) and from random
// addresses, and compares every hit/miss answer with a reference true-LRU model of the same
// 4 MB, 16-way, 64-byte-line cache. Also checks that a request is answered two cycles after
// it is accepted.
`include "lru_ref.svh"
module tb_locality_predictor;
  localparam int SETS = 4096;
  logic clk = 0, rst_n = 0, req_valid = 0, req_ready, resp_valid, resp_hit;
  logic [39:0] req_addr = 0;
  int checks = 0, failures = 0, hits = 0, misses = 0;
  lru_ref model;

  locality_predictor dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    model = new(16, SETS);
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (req_ready);
    for (int t = 0; t < 20000; t++) begin
      longint line;
      bit exp_hit;
      int lat;
      if ($urandom_range(0, 9) < 8)
        line = longint'($urandom_range(0, 3)) + SETS * longint'($urandom_range(0, 19)); // 4 sets, 20 tags each
      else
        line = {$urandom, $urandom} & 64'h3_FFFF_FFFF;
      @(negedge clk);
      req_valid = 1;
      req_addr = {line[33:0], 6'($urandom)};
      @(negedge clk);
      req_valid = 0;
      lat = 1;
      while (!resp_valid) begin @(negedge clk); lat++; end
      exp_hit = model.access(line);
      checks++;
      if (resp_hit !== exp_hit || lat != 2) begin
        failures++;
        if (failures < 5) $display("FAIL line %h got %0d exp %0d lat %0d", line, resp_hit, exp_hit, lat);
      end
      if (exp_hit) hits++; else misses++;
    end
    checks++;
    if (hits < 1000 || misses < 1000) failures++;
    $display("hits %0d misses %0d", hits, misses);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
