// tb_plru_tree: self-checking testbench of the tree pseudo-LRU.
//
// Checks, for 16 ways: after reset the victim is way 0; after touching all
// ways in order the victim is the least recently used way 0; the victim is
// never the way just touched (random accesses); always touching the victim
// visits every way exactly once in 16 steps.
module tb_plru_tree;
  localparam int unsigned N = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic         acc;
  logic [3:0]   idx, victim;
  plru_tree #(.ENTRIES(N)) dut (.clk_i(clk), .rst_ni(rst_n), .access_valid_i(acc), .access_idx_i(idx), .victim_o(victim));

  task automatic touch(logic [3:0] i);
    @(negedge clk); acc = 1; idx = i; @(negedge clk); acc = 0;
  endtask

  initial begin
    bit [N-1:0] seen;
    acc = 0; idx = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    check(victim == 0, "reset victim is way 0");
    for (int i = 0; i < N; i++) touch(4'(i));
    check(victim == 0, "after in-order touches the LRU way 0 is the victim");
    touch(4'd0);
    check(victim == 8, $sformatf("after touching way 0 again the victim is way 8, got %0d", victim));
    for (int k = 0; k < 200; k++) begin
      logic [3:0] r;
      r = 4'($urandom_range(N - 1, 0));
      touch(r);
      check(victim != r, "victim differs from the way just touched");
    end
    seen = '0;
    for (int k = 0; k < N; k++) begin
      seen[victim] = 1'b1;
      touch(victim);
    end
    check(seen == '1, "victim chase visits every way");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
