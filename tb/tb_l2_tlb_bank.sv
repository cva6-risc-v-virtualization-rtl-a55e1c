// tb_l2_tlb_bank: self-checking testbench of one L2 TLB bank (4 KiB pages,
// 128 entries, 4 ways, 32 sets).
//
// Checks: the reset flush lasts one cycle per set (32) before the bank is
// ready; a lookup answers in the cycle after acceptance; 128 entries spread
// over all sets all hit; a fifth entry in a full set evicts exactly one; a
// rewrite of an existing translation replaces it in place; ASID/VMID/V
// mismatches miss; global entries hit any ASID; a fence flushes everything.
module tb_l2_tlb_bank;
  import hyp_pkg::*;
  localparam int unsigned N = 128, W = 4, SETS = N / W;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic             flush, req_v, rdy, rsp_v, rsp_hit, upd_v;
  logic [VPNW-1:0]  vpn;
  logic [ASIDW-1:0] asid;
  logic [VMIDW-1:0] vmid;
  logic             v, s_en, g_en;
  tlb_entry_t       rsp_e, upd;

  l2_tlb_bank #(.ENTRIES(N), .WAYS(W), .PG(PG_4K)) dut (
    .clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .req_valid_i(req_v), .req_ready_o(rdy),
    .req_vpn_i(vpn), .req_asid_i(asid), .req_vmid_i(vmid), .req_v_i(v), .req_s_en_i(s_en), .req_g_en_i(g_en),
    .resp_valid_o(rsp_v), .resp_hit_o(rsp_hit), .resp_entry_o(rsp_e), .update_valid_i(upd_v), .update_i(upd));

  function automatic tlb_entry_t mk(logic [28:0] p, logic [15:0] a, logic [13:0] m, logic glob);
    tlb_entry_t e;
    e = '0; e.valid = 1; e.v = 1; e.s_en = 1; e.g_en = 1; e.asid = a; e.vmid = m; e.vpn = p;
    e.s_size = PG_4K; e.g_size = PG_4K;
    e.s_pte.v = 1; e.s_pte.r = 1; e.s_pte.a = 1; e.s_pte.g = glob; e.s_pte.ppn = 44'($urandom);
    e.g_pte.v = 1; e.g_pte.r = 1; e.g_pte.u = 1; e.g_pte.a = 1; e.g_pte.ppn = 44'($urandom);
    return e;
  endfunction

  task automatic wait_ready();
    while (!rdy) @(negedge clk);
  endtask
  task automatic install(tlb_entry_t e);
    @(negedge clk); upd_v = 1; upd = e; @(negedge clk); upd_v = 0;
    wait_ready();
  endtask
  task automatic look(tlb_entry_t e, output logic h, output tlb_entry_t r);
    @(negedge clk); wait_ready();
    req_v = 1; vpn = e.vpn; asid = e.asid; vmid = e.vmid; v = e.v; s_en = e.s_en; g_en = e.g_en;
    @(negedge clk); req_v = 0;
    check(rsp_v, "response valid in the cycle after acceptance");
    h = rsp_hit; r = rsp_e;
  endtask
  function automatic bit same(tlb_entry_t a, tlb_entry_t b);
    return a.vpn == b.vpn && a.asid == b.asid && a.vmid == b.vmid && a.s_pte == b.s_pte && a.g_pte == b.g_pte
        && a.s_size == b.s_size && a.g_size == b.g_size;
  endfunction

  tlb_entry_t tab [N];

  initial begin
    logic h; tlb_entry_t r; int cyc, nh;
    flush = 0; req_v = 0; upd_v = 0; upd = '0; vpn = 0; asid = 0; vmid = 0; v = 0; s_en = 0; g_en = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    cyc = 0;
    while (!rdy) begin @(negedge clk); cyc++; end
    check(cyc == SETS, $sformatf("reset flush takes %0d cycles (got %0d)", SETS, cyc));

    for (int i = 0; i < N; i++) begin
      tab[i] = mk({22'($urandom), 2'(i / SETS), 5'(i % SETS)}, 16'h7, 14'h3, 0);
      install(tab[i]);
    end
    nh = 0;
    for (int i = 0; i < N; i++) begin
      look(tab[i], h, r);
      if (h && same(r, tab[i])) nh++;
    end
    check(nh == N, $sformatf("all %0d entries hit with their data (%0d)", N, nh));

    begin
      tlb_entry_t e;
      e = tab[0]; e.asid = 16'h8; look(e, h, r); check(!h, "wrong ASID misses");
      e = tab[0]; e.vmid = 14'h4; look(e, h, r); check(!h, "wrong VMID misses");
      e = tab[0]; e.v = 0;        look(e, h, r); check(!h, "V mismatch misses");
      e = tab[0]; e.vpn[5] = ~e.vpn[5]; e.vpn[28:7] = ~e.vpn[28:7]; look(e, h, r); check(!h, "other page misses");
      // rewrite in place
      e = tab[1]; e.g_pte.ppn = 44'hABCDE; install(e);
      look(e, h, r); check(h && r.g_pte.ppn == 44'hABCDE, "rewrite replaces the entry");
      tab[1] = e;
      nh = 0;
      for (int i = 0; i < N; i++) if (i % SETS == 1) begin look(tab[i], h, r); nh += int'(h); end
      check(nh == W, "rewrite did not evict another way");
      // fifth entry in set 2
      e = mk({22'h3FFFFF, 2'd0, 5'd2}, 16'h7, 14'h3, 0); install(e);
      look(e, h, r); check(h, "fifth entry in the set hits");
      nh = 0;
      for (int i = 0; i < N; i++) if (i % SETS == 2) begin look(tab[i], h, r); nh += int'(h); end
      check(nh == W - 1, $sformatf("one way of the full set evicted (%0d left)", nh));
      // global entry
      e = mk({22'h12345, 2'd0, 5'd9}, 16'h1, 14'h3, 1); install(e);
      e.asid = 16'hFFFF; look(e, h, r); check(h, "global entry hits any ASID");
    end

    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    cyc = 0;
    while (!rdy) begin @(negedge clk); cyc++; end
    check(cyc == SETS, $sformatf("fence flush walks all %0d sets (busy %0d cycles after the fence cycle)", SETS, cyc));
    nh = 0;
    for (int i = 0; i < N; i++) begin look(tab[i], h, r); nh += int'(h); end
    check(nh == 0, "all entries gone after the flush");
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
