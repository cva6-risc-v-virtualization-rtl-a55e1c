// tb_tlb_sram: self-checking testbench of the L2 TLB SRAM.
//
// Writes random words lane by lane, reads them back one cycle after the
// read request, and checks that a lane write leaves the other lanes intact
// and that the read data holds until the next read.
module tb_tlb_sram;
  localparam int unsigned D = 32, W = 24, L = 4;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic           req, we;
  logic [4:0]     addr;
  logic [L-1:0]   lwe;
  logic [L*W-1:0] wdata, rdata;
  logic [L*W-1:0] model [D];

  tlb_sram #(.DEPTH(D), .WIDTH(W), .LANES(L)) dut (
    .clk_i(clk), .req_i(req), .we_i(we), .addr_i(addr), .lane_we_i(lwe), .wdata_i(wdata), .rdata_o(rdata));

  initial begin
    req = 0; we = 0; addr = 0; lwe = 0; wdata = 0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk); req = 1; we = 1; addr = 5'(a); lwe = '1;
      wdata = {$urandom, $urandom, $urandom}; model[a] = wdata;
    end
    for (int k = 0; k < 100; k++) begin
      int a, l;
      a = $urandom_range(D - 1, 0); l = $urandom_range(L - 1, 0);
      @(negedge clk); req = 1; we = 1; addr = 5'(a); lwe = L'(1) << l; wdata = {$urandom, $urandom, $urandom};
      model[a][l*W +: W] = wdata[l*W +: W];
    end
    for (int a = 0; a < D; a++) begin
      @(negedge clk); req = 1; we = 0; addr = 5'(a);
      @(negedge clk); req = 0;
      check(rdata == model[a], $sformatf("read back word %0d", a));
      @(negedge clk);
      check(rdata == model[a], "read data held while idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
