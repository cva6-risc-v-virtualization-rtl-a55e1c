// tb_l2_tlb: self-checking testbench of the two-bank L2 TLB (4 KiB bank
// 128 entries / 4 ways, 2 MiB bank 32 entries / 4 ways).
//
// Checks: ready after the reset flush of the larger bank (32 sets); routing
// of refills by merged page size (VS 4K/G 2M -> 4 KiB bank, VS 2M/G 2M and
// G-only 2M -> 2 MiB bank, 1 GiB translations not stored); a 2 MiB entry hit
// from any 4 KiB page inside it; answer in the cycle after acceptance; both
// banks together hold 160 translations; a fence empties both banks.
module tb_l2_tlb;
  import hyp_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic             flush, req_v, rdy, rsp_v, rsp_hit;
  logic [VPNW-1:0]  vpn;
  logic [ASIDW-1:0] asid;
  logic [VMIDW-1:0] vmid;
  logic             v, s_en, g_en;
  tlb_entry_t       rsp_e, upd;

  l2_tlb dut (
    .clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .req_valid_i(req_v), .req_ready_o(rdy),
    .req_vpn_i(vpn), .req_asid_i(asid), .req_vmid_i(vmid), .req_v_i(v), .req_s_en_i(s_en), .req_g_en_i(g_en),
    .resp_valid_o(rsp_v), .resp_hit_o(rsp_hit), .resp_entry_o(rsp_e), .update_i(upd));

  function automatic tlb_entry_t mk(logic [28:0] p, logic se, pg_size_e ss, pg_size_e gs);
    tlb_entry_t e;
    e = '0; e.valid = 1; e.v = 1; e.s_en = se; e.g_en = 1; e.asid = se ? 16'h5 : 16'h0; e.vmid = 14'h2;
    e.vpn = p; e.s_size = ss; e.g_size = gs;
    e.s_pte.v = 1; e.s_pte.r = 1; e.s_pte.a = 1; e.s_pte.ppn = 44'($urandom) & ~44'h1FF;
    e.g_pte.v = 1; e.g_pte.r = 1; e.g_pte.u = 1; e.g_pte.a = 1; e.g_pte.ppn = 44'($urandom) & ~44'h3FFFF;
    return e;
  endfunction
  task automatic wait_ready();
    while (!rdy) @(negedge clk);
  endtask
  task automatic install(tlb_entry_t e);
    @(negedge clk); upd = e; @(negedge clk); upd = '0;
    wait_ready();
  endtask
  task automatic look(tlb_entry_t e, logic [VPNW-1:0] va, output logic h, output tlb_entry_t r);
    @(negedge clk); wait_ready();
    req_v = 1; vpn = va; asid = e.asid; vmid = e.vmid; v = e.v; s_en = e.s_en; g_en = e.g_en;
    @(negedge clk); req_v = 0;
    check(rsp_v, "answer in the cycle after acceptance");
    h = rsp_hit; r = rsp_e;
  endtask

  initial begin
    logic h; tlb_entry_t r; int cyc, nh;
    tlb_entry_t a, b, c, d, t4 [128], t2 [32];
    flush = 0; req_v = 0; upd = '0; vpn = 0; asid = 0; vmid = 0; v = 0; s_en = 0; g_en = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    cyc = 0;
    while (!rdy) begin @(negedge clk); cyc++; end
    check(cyc == 32, $sformatf("reset flush: ready after 32 cycles (got %0d)", cyc));

    a = mk(29'h0123456, 1, PG_4K, PG_2M);   // merged 4K
    b = mk(29'h0400200, 1, PG_2M, PG_2M);   // merged 2M
    c = mk(29'h0800400, 0, PG_4K, PG_2M);   // G-only 2M
    d = mk(29'h0C00000, 1, PG_1G, PG_1G);   // 1G: not stored
    install(a); install(b); install(c); install(d);
    look(a, a.vpn, h, r);       check(h && r.vpn == a.vpn, "4K-merged entry hits");
    look(a, a.vpn ^ 29'h1, h, r); check(!h, "4K-merged entry does not cover its neighbour");
    look(b, b.vpn, h, r);       check(h && r.g_pte == b.g_pte, "2M entry hits");
    look(b, b.vpn | 29'h1AB, h, r); check(h && r.vpn == b.vpn, "2M entry hits another 4K page inside it");
    look(c, c.vpn | 29'h77, h, r);  check(h && !r.s_en, "G-only 2M entry hits");
    look(d, d.vpn, h, r);       check(!h, "1G translation is not stored");

    @(negedge clk); flush = 1; @(negedge clk); flush = 0; wait_ready();
    look(a, a.vpn, h, r); check(!h, "fence empties the 4K bank");
    look(b, b.vpn, h, r); check(!h, "fence empties the 2M bank");

    for (int i = 0; i < 128; i++) begin
      t4[i] = mk({15'($urandom), 2'(i / 32), 12'(i % 32)}, 1, PG_4K, PG_4K); install(t4[i]);
    end
    for (int i = 0; i < 32; i++) begin
      t2[i] = mk({14'($urandom), 1'b1, 2'(i / 8), 3'(i % 8), 9'd0}, 1, PG_2M, PG_1G); install(t2[i]);
    end
    nh = 0;
    for (int i = 0; i < 128; i++) begin look(t4[i], t4[i].vpn, h, r); nh += int'(h && r.s_pte == t4[i].s_pte); end
    for (int i = 0; i < 32; i++)  begin look(t2[i], t2[i].vpn, h, r); nh += int'(h && r.s_pte == t2[i].s_pte); end
    check(nh == 160, $sformatf("both banks hold 160 translations (%0d)", nh));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
