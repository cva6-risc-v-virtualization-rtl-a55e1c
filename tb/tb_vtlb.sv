// tb_vtlb: self-checking testbench of the virtualization-aware L1 TLB.
//
// A reference list of installed translations is kept in the testbench. The
// checks cover: hits and the host-physical page for every combination of
// VS/G page sizes, including the merged-size rule (a 2 MiB VS page mapped by
// 4 KiB G pages only covers one 4 KiB page); misses on a wrong ASID, VMID or
// V bit; global pages; capacity (16 entries, the 17th refill evicts one);
// SFENCE.VMA, HFENCE.VVMA and HFENCE.GVMA with and without filters; and the
// lookup being combinational (hit in the same cycle as the request).
module tb_vtlb;
  import hyp_pkg::*;
  localparam int unsigned N = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  flush_req_t       flush;
  logic             flush_v;
  tlb_entry_t       upd;
  logic             acc;
  logic [VPNW-1:0]  vpn;
  logic [ASIDW-1:0] asid;
  logic [VMIDW-1:0] vmid;
  logic             v, s_en, g_en;
  logic             hit;
  tlb_entry_t       ent;
  logic [PPNW-1:0]  gppn, ppn;

  vtlb #(.ENTRIES(N)) dut (
    .clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .flush_valid_i(flush_v), .update_i(upd),
    .lu_access_i(acc), .lu_vpn_i(vpn), .lu_asid_i(asid), .lu_vmid_i(vmid), .lu_v_i(v),
    .lu_s_en_i(s_en), .lu_g_en_i(g_en), .lu_hit_o(hit), .lu_entry_o(ent), .lu_gppn_o(gppn), .lu_ppn_o(ppn));

  // Reference: host page of a translation, computed independently
  function automatic logic [PPNW-1:0] ref_ppn(tlb_entry_t e, logic [VPNW-1:0] va);
    logic [PPNW-1:0] g, h;
    g = e.s_en ? e.s_pte.ppn : PPNW'(va);
    if (e.s_en && e.s_size == PG_2M) g[8:0]  = va[8:0];
    if (e.s_en && e.s_size == PG_1G) g[17:0] = va[17:0];
    h = e.g_en ? e.g_pte.ppn : g;
    if (e.g_en && e.g_size == PG_2M) h[8:0]  = g[8:0];
    if (e.g_en && e.g_size == PG_1G) h[17:0] = g[17:0];
    return h;
  endfunction

  function automatic tlb_entry_t mk(logic gv, logic se, logic ge, logic [15:0] a, logic [13:0] m,
                                    logic [28:0] p, pg_size_e ss, pg_size_e gs, logic glob);
    tlb_entry_t e;
    e = '0;
    e.valid = 1; e.v = gv; e.s_en = se; e.g_en = ge; e.asid = a; e.vmid = m; e.vpn = p;
    e.s_size = ss; e.g_size = gs;
    e.s_pte.v = 1; e.s_pte.r = 1; e.s_pte.a = 1; e.s_pte.g = glob;
    e.s_pte.ppn = {15'd0, 29'($urandom)};
    if (ss != PG_4K) e.s_pte.ppn[8:0] = '0;
    if (ss == PG_1G) e.s_pte.ppn[17:0] = '0;
    e.g_pte.v = 1; e.g_pte.r = 1; e.g_pte.u = 1; e.g_pte.a = 1;
    e.g_pte.ppn = {12'd0, 32'($urandom)};
    if (gs != PG_4K) e.g_pte.ppn[8:0] = '0;
    if (gs == PG_1G) e.g_pte.ppn[17:0] = '0;
    return e;
  endfunction

  task automatic install(tlb_entry_t e);
    @(negedge clk); upd = e; @(negedge clk); upd = '0;
  endtask
  task automatic do_flush(flush_req_t f);
    @(negedge clk); flush = f; flush_v = 1; @(negedge clk); flush_v = 0; flush = '0;
  endtask
  // combinational lookup, sampled in the same cycle as the request
  task automatic look(tlb_entry_t e, logic [VPNW-1:0] va, output logic h, output logic [PPNW-1:0] p);
    acc = 1; vpn = va; asid = e.asid; vmid = e.vmid; v = e.v; s_en = e.s_en; g_en = e.g_en;
    #1; h = hit; p = ppn; acc = 0;
  endtask

  tlb_entry_t tab [N];

  initial begin
    logic h; logic [PPNW-1:0] p; int nh;
    pg_size_e sz [3];
    flush = '0; flush_v = 0; upd = '0; acc = 0; vpn = 0; asid = 0; vmid = 0; v = 0; s_en = 0; g_en = 0;
    sz[0] = PG_4K; sz[1] = PG_2M; sz[2] = PG_1G;
    repeat (2) @(negedge clk); rst_n = 1;

    // ---- all 9 VS/G size combinations, guest entries, distinct 1 GiB regions
    for (int i = 0; i < 9; i++) begin
      tab[i] = mk(1, 1, 1, 16'h11, 14'h5, {11'(i + 1), 18'($urandom)}, sz[i/3], sz[i%3], 0);
      install(tab[i]);
    end
    // ---- host entries (S only), G-only entries, and a global entry
    for (int i = 9; i < 12; i++) begin
      tab[i] = mk(0, 1, 0, 16'h22, 14'h0, {11'(i + 1), 18'($urandom)}, sz[i-9], PG_4K, 0);
      install(tab[i]);
    end
    for (int i = 12; i < 14; i++) begin
      tab[i] = mk(1, 0, 1, 16'h0, 14'h6, {11'(i + 1), 18'($urandom)}, PG_4K, sz[i-12], 0);
      install(tab[i]);
    end
    tab[14] = mk(0, 1, 0, 16'h33, 14'h0, {11'd15, 18'($urandom)}, PG_4K, PG_4K, 1);
    install(tab[14]);
    tab[15] = mk(1, 1, 1, 16'h44, 14'h7, {11'd16, 18'($urandom)}, PG_4K, PG_4K, 0);
    install(tab[15]);

    for (int i = 0; i < N; i++) begin
      look(tab[i], tab[i].vpn, h, p);
      check(h && p == ref_ppn(tab[i], tab[i].vpn), $sformatf("entry %0d hit and host page", i));
    end
    // merged size: other pages inside the larger page
    for (int i = 0; i < 9; i++) begin
      pg_size_e m; logic [VPNW-1:0] va;
      m = min_size(tab[i].s_size, tab[i].g_size);
      va = tab[i].vpn ^ 29'h1;            // another 4 KiB page in the same 2M/1G page
      look(tab[i], va, h, p);
      if (m == PG_4K) check(!h, $sformatf("entry %0d: merged 4K size, neighbour misses", i));
      else            check(h && p == ref_ppn(tab[i], va), $sformatf("entry %0d: neighbour hits", i));
      va = tab[i].vpn ^ 29'h200;          // another 2 MiB page in the same 1 GiB page
      look(tab[i], va, h, p);
      if (m != PG_1G) check(!h, $sformatf("entry %0d: other 2M page misses", i));
      else            check(h && p == ref_ppn(tab[i], va), $sformatf("entry %0d: 1G neighbour hits", i));
    end
    // context mismatches
    begin
      tlb_entry_t e;
      e = tab[0]; e.asid = 16'h12; look(e, e.vpn, h, p); check(!h, "wrong ASID misses");
      e = tab[0]; e.vmid = 14'h9;  look(e, e.vpn, h, p); check(!h, "wrong VMID misses");
      e = tab[0]; e.v = 0;         look(e, e.vpn, h, p); check(!h, "V=0 does not hit a guest entry");
      e = tab[9]; e.v = 1;         look(e, e.vpn, h, p); check(!h, "V=1 does not hit a host entry");
      e = tab[14]; e.asid = 16'h99; look(e, e.vpn, h, p); check(h, "global entry hits any ASID");
      e = tab[12]; e.asid = 16'h99; look(e, e.vpn, h, p); check(h, "G-only entry ignores ASID");
    end

    // ---- capacity: a 17th refill evicts exactly one entry
    begin
      tlb_entry_t x;
      x = mk(1, 1, 1, 16'h55, 14'h8, {11'd20, 18'd0}, PG_4K, PG_4K, 0);
      install(x);
      look(x, x.vpn, h, p); check(h, "new entry hits");
      nh = 0;
      for (int i = 0; i < N; i++) begin look(tab[i], tab[i].vpn, h, p); nh += int'(h); end
      check(nh == N - 1, $sformatf("exactly one old entry evicted (%0d hits)", nh));
      // put the table back into a known state
      do_flush('{sfence: 1, default: '0});
      do_flush('{hgvma: 1, default: '0});
      look(x, x.vpn, h, p); check(!h, "full HFENCE.GVMA removes guest entries");
      for (int i = 0; i < N; i++) begin look(tab[i], tab[i].vpn, h, p); check(!h, "all flushed"); end
      for (int i = 0; i < N; i++) install(tab[i]);
    end

    // ---- SFENCE.VMA with ASID filter: host non-global ASID 0x22 entries go
    do_flush('{sfence: 1, asid_valid: 1, asid: 16'h22, default: '0});
    for (int i = 0; i < N; i++) begin
      look(tab[i], tab[i].vpn, h, p);
      check(h == !(i >= 9 && i < 12), $sformatf("SFENCE asid: entry %0d", i));
    end
    // ---- SFENCE.VMA address filter on the global entry: kept by ASID, removed by address
    do_flush('{sfence: 1, asid_valid: 1, asid: 16'h33, default: '0});
    look(tab[14], tab[14].vpn, h, p); check(h, "global entry kept by ASID-filtered SFENCE");
    do_flush('{sfence: 1, addr_valid: 1, addr: {25'd0, tab[14].vpn[26:0], 12'd0}, default: '0});
    look(tab[14], tab[14].vpn, h, p); check(!h, "address SFENCE removes the global entry");
    look(tab[0], tab[0].vpn, h, p); check(h, "SFENCE does not touch guest entries");

    // ---- HFENCE.VVMA for VMID 7 removes only that guest's entries
    do_flush('{hvvma: 1, vmid: 14'h7, default: '0});
    look(tab[15], tab[15].vpn, h, p); check(!h, "HFENCE.VVMA removes the VMID 7 entry");
    look(tab[0], tab[0].vpn, h, p); check(h, "HFENCE.VVMA keeps VMID 5 entries");
    // HFENCE.VVMA by guest virtual address
    do_flush('{hvvma: 1, vmid: 14'h5, addr_valid: 1, addr: {25'd0, tab[1].vpn[26:0], 12'd0}, default: '0});
    look(tab[1], tab[1].vpn, h, p); check(!h, "address HFENCE.VVMA removes the entry");
    look(tab[2], tab[2].vpn, h, p); check(h, "address HFENCE.VVMA keeps other entries");

    // ---- HFENCE.GVMA by guest-physical address of entry 4 (VS 2M, G 2M)
    begin
      logic [PPNW-1:0] g;
      g = tab[4].s_pte.ppn; g[8:0] = tab[4].vpn[8:0];
      do_flush('{hgvma: 1, addr_valid: 1, addr: {23'd0, g[28:0], 12'd0}, default: '0});
      look(tab[4], tab[4].vpn, h, p); check(!h, "GPA HFENCE.GVMA removes the entry");
      look(tab[5], tab[5].vpn, h, p); check(h, "GPA HFENCE.GVMA keeps other entries");
    end
    // ---- HFENCE.GVMA by VMID 6 removes the G-only entries
    do_flush('{hgvma: 1, vmid_valid: 1, vmid: 14'h6, default: '0});
    look(tab[12], tab[12].vpn, h, p); check(!h, "VMID HFENCE.GVMA removes VMID 6");
    look(tab[0], tab[0].vpn, h, p); check(h, "VMID HFENCE.GVMA keeps VMID 5");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
