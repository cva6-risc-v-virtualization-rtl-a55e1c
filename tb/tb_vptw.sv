// tb_vptw: self-checking testbench of the nested page-table walker.
//
// Builds guest (VS-stage) and hypervisor (G-stage) page tables in tb_pt_mem
// and checks for each walk the returned entry (PTEs, page sizes, tags) and
// the number of PTE reads:
//   S-stage only walk                 3 reads
//   G-stage only walk, 2 MiB leaf     2 reads
//   cold nested 4 KiB / 4 KiB walk   15 reads (GTLB empty)
//   second nested walk, warm GTLB     6 reads (3 VS + 3 final G)
//   after HFENCE.GVMA                15 reads again
// plus page faults and guest-page faults (with the faulting GPA), and a walk
// abandoned on an L2 TLB hit.
module tb_vptw;
  import hyp_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic             flush_valid;
  flush_req_t       flush;
  logic             req_valid, req_ready, req_is_instr, req_v, req_s_en, req_g_en;
  logic [GPLEN-1:0] req_vaddr;
  logic [ASIDW-1:0] req_asid;
  logic [VMIDW-1:0] req_vmid;
  logic [PPNW-1:0]  s_root, g_root;
  tlb_entry_t       upd, l2_entry;
  logic             upd_instr, upd_l2, err, err_guest, err_instr, l2_hit;
  logic [GPLEN-1:0] err_gpa;
  logic             mreq, mgnt, mrvalid, gh, gm;
  logic [PLEN-1:0]  maddr;
  logic [XLEN-1:0]  mrdata;

  vptw dut (
    .clk_i(clk), .rst_ni(rst_n), .flush_valid_i(flush_valid), .flush_i(flush),
    .req_valid_i(req_valid), .req_ready_o(req_ready), .req_is_instr_i(req_is_instr),
    .req_vaddr_i(req_vaddr), .req_v_i(req_v), .req_s_en_i(req_s_en), .req_g_en_i(req_g_en),
    .req_asid_i(req_asid), .req_vmid_i(req_vmid), .req_s_root_ppn_i(s_root), .req_g_root_ppn_i(g_root),
    .update_o(upd), .update_is_instr_o(upd_instr), .update_from_l2_o(upd_l2),
    .error_o(err), .error_guest_o(err_guest), .error_is_instr_o(err_instr), .error_gpaddr_o(err_gpa),
    .l2_hit_i(l2_hit), .l2_entry_i(l2_entry),
    .mem_req_o(mreq), .mem_addr_o(maddr), .mem_gnt_i(mgnt), .mem_rvalid_i(mrvalid), .mem_rdata_i(mrdata),
    .gtlb_hit_o(gh), .gtlb_miss_o(gm)
  );

  tb_pt_mem mem (.clk_i(clk), .req_i(mreq), .addr_i(maddr), .gnt_o(mgnt), .rvalid_o(mrvalid), .rdata_o(mrdata));

  int gtlb_hits = 0;
  always @(posedge clk) if (gh) gtlb_hits++;

  // run one walk; returns when update or error pulses
  task automatic walk(logic [GPLEN-1:0] va, bit v, bit s_en, bit g_en, bit instr,
                      output int nreads, output bit got_err);
    int r0;
    r0 = mem.reads;
    @(negedge clk);
    req_valid = 1'b1; req_vaddr = va; req_v = v; req_s_en = s_en; req_g_en = g_en; req_is_instr = instr;
    @(negedge clk);
    req_valid = 1'b0;
    while (!upd.valid && !err) @(negedge clk);
    nreads  = mem.reads - r0;
    got_err = err;
  endtask

  logic [PLEN-1:0] vs_root, s_host_root, gdata, gdata2, gdata3;
  int n; bit e;

  initial begin
    flush_valid = 0; flush = '0; req_valid = 0; req_vaddr = '0; req_v = 0; req_s_en = 0; req_g_en = 0;
    req_is_instr = 0; req_asid = 16'h5; req_vmid = 14'h3; l2_hit = 0; l2_entry = '0;
    // ------------------------------------------------- page tables
    g_root      = mem.new_g_root();
    s_host_root = mem.alloc_host(1);
    s_root      = s_host_root[PLEN-1:12];
    // S stage (host, V=0): VA 0x4000_1000 -> PA 0x7777_7000, RWX A D
    mem.map(s_host_root, 1'b0, 1'b0, 56'h4000_1000, 56'h7777_7000, 2, 8'hCF);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // 1. S-stage only
    walk(41'h4000_1000, 1'b0, 1'b1, 1'b0, 1'b1, n, e);
    check(!e && upd.valid && upd.s_en && !upd.g_en && !upd.v, "S walk: entry kind");
    check(upd.s_pte.ppn == 44'h77777 && upd.s_size == PG_4K, "S walk: leaf PTE and size");
    check(upd.vpn == 29'h40001 && upd.asid == 16'h5 && upd_instr, "S walk: tags");
    check(n == 3, $sformatf("S walk: 3 reads, got %0d", n));

    // 2. G-stage only (vsatp Bare): GPA 0x0000_2345_6000 mapped with a 2 MiB leaf
    mem.map(mem.g_root, 1'b1, 1'b0, 56'h2340_0000, 56'h9_8760_0000, 1, 8'hDF);
    walk(41'h2345_6000, 1'b1, 1'b0, 1'b1, 1'b0, n, e);
    check(!e && upd.g_en && !upd.s_en && upd.v && upd.vmid == 14'h3, "G walk: entry kind");
    check(upd.g_pte.ppn == 44'h987600 && upd.g_size == PG_2M && upd.vpn == 29'h23456, "G walk: leaf, size");
    check(n == 2, $sformatf("G walk, 2 MiB leaf: 2 reads, got %0d", n));
    check(!upd_instr, "G walk: data side");

    // 3. nested walk, 4 KiB VS leaf, 4 KiB G leaves everywhere
    vs_root = mem.alloc_guest();
    s_root  = vs_root[PLEN-1:12];
    gdata   = mem.alloc_guest();                     // GPA of the data page
    mem.map(vs_root, 1'b0, 1'b1, 56'h12_3456_7000, gdata, 2, 8'hD7);  // RW U A D
    gdata2  = mem.alloc_guest();
    mem.map(vs_root, 1'b0, 1'b1, 56'h12_3456_8000, gdata2, 2, 8'hD7);
    walk(41'h12_3456_7000, 1'b1, 1'b1, 1'b1, 1'b0, n, e);
    check(!e && upd.s_en && upd.g_en && upd.v, "nested walk: entry kind");
    check(upd.s_pte.ppn == gdata[PLEN-1:12] && upd.s_size == PG_4K, "nested walk: VS leaf");
    check(upd.g_pte.ppn == (gdata[PLEN-1:12] + 44'h100000) && upd.g_size == PG_4K, "nested walk: G leaf");
    check(n == 15, $sformatf("cold nested walk: 15 reads, got %0d", n));

    // 4. neighbour page: VS tables shared, GTLB warm
    gtlb_hits = 0;
    walk(41'h12_3456_8000, 1'b1, 1'b1, 1'b1, 1'b0, n, e);
    check(!e && upd.s_pte.ppn == gdata2[PLEN-1:12], "warm nested walk: VS leaf");
    check(n == 6, $sformatf("warm nested walk: 6 reads, got %0d", n));
    check(gtlb_hits == 3, $sformatf("warm nested walk: 3 GTLB hits, got %0d", gtlb_hits));

    // 5. HFENCE.GVMA empties the GTLB: cold again
    @(negedge clk); flush_valid = 1; flush = '0; flush.hgvma = 1; @(negedge clk); flush_valid = 0;
    walk(41'h12_3456_8000, 1'b1, 1'b1, 1'b1, 1'b0, n, e);
    check(!e && n == 15, $sformatf("nested walk after HFENCE.GVMA: 15 reads, got %0d", n));
    // other VMID does not hit the GTLB entries of VMID 3
    req_vmid = 14'h4;
    walk(41'h12_3456_8000, 1'b1, 1'b1, 1'b1, 1'b0, n, e);
    check(!e && n == 15, $sformatf("nested walk, other VMID: 15 reads, got %0d", n));
    req_vmid = 14'h3;

    // 6. VS-stage fault: unmapped GVA -> page fault (not guest)
    walk(41'h12_3456_9000, 1'b1, 1'b1, 1'b1, 1'b0, n, e);
    check(e && !err_guest, "unmapped GVA: page fault");

    // 7. G-stage fault on the final GPA: VS leaf points to unmapped GPA
    mem.map(vs_root, 1'b0, 1'b1, 56'h12_3456_a000, 56'h3f00_0000, 2, 8'hD7);
    walk(41'h12_3456_a000, 1'b1, 1'b1, 1'b1, 1'b1, n, e);
    check(e && err_guest && err_gpa == 41'h3f00_0000 && err_instr, "unmapped final GPA: guest-page fault with GPA");

    // 8. G-stage leaf without U bit on the final GPA -> guest-page fault
    gdata3 = 56'h0300_0000;
    mem.map(mem.g_root, 1'b1, 1'b0, gdata3, gdata3 + 56'h1_0000_0000, 2, 8'hCF);
    mem.map(vs_root, 1'b0, 1'b1, 56'h12_3456_b000, gdata3, 2, 8'hD7);
    walk(41'h12_3456_b000, 1'b1, 1'b1, 1'b1, 1'b0, n, e);
    check(e && err_guest && err_gpa == 41'h0300_0000, "G leaf without U: guest-page fault");

    // 9. L2 TLB hit during a walk: walk abandoned, L2 entry delivered
    l2_entry = '0; l2_entry.valid = 1; l2_entry.vpn = 29'h1abcd; l2_entry.s_en = 1; l2_entry.s_pte.ppn = 44'h55;
    fork
      walk(41'h4000_1000, 1'b0, 1'b1, 1'b0, 1'b0, n, e);
      begin repeat (3) @(negedge clk); l2_hit = 1; @(negedge clk); l2_hit = 0; end
    join
    check(!e && upd_l2 && upd.vpn == 29'h1abcd && upd.s_pte.ppn == 44'h55, "L2 hit: L2 entry delivered");
    check(n <= 2, $sformatf("L2 hit: walk stopped early (%0d reads)", n));

    // 10. flush during a walk: no result, walker idle again
    @(negedge clk);
    req_valid = 1; req_vaddr = 41'h12_3456_7000; req_v = 1; req_s_en = 1; req_g_en = 1;
    @(negedge clk); req_valid = 0;
    repeat (4) @(negedge clk);
    flush_valid = 1; flush = '0; flush.sfence = 1; @(negedge clk); flush_valid = 0;
    repeat (8) @(negedge clk);
    check(req_ready, "flush: walker back to idle");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
