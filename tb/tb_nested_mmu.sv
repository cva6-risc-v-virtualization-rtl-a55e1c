// tb_nested_mmu: self-checking testbench of the nested MMU, built with the
// L2 TLB enabled (L2TLB_EN=1; every other parameter at its default: 16-entry
// vITLB/vDTLB, 8-entry GTLB, 128+32-entry L2 TLB).
//
// Page tables live in a behavioural memory (tb_pt_mem) with random grant
// and read latency. Each access holds its request until the MMU answers; the
// testbench counts cycles and page-table reads. Checks:
//   - translation off (M mode): answered in the request cycle, PA = VA
//   - host (V=0) S-stage fetch: ITLB miss, 3 reads; then a same-cycle hit
//   - guest (V=1) load, cold: 15 reads (the paper's two-stage worst case);
//     then a same-cycle hit; a neighbouring page with a warm GTLB: 6 reads
//     and 3 GTLB hits
//   - store page fault (read-only page), load guest-page fault (tval2 =
//     GPA >> 2), instruction guest-page fault, U-page with SUM off/on,
//     out-of-range address, HLV/HLVX from HS mode via SPVP (execute-only page)
//   - G-stage only translation (vsatp Bare)
//   - HFENCE.VVMA, HFENCE.GVMA (cold walk again), SFENCE.VMA
//   - L2 TLB: 20 pages overflow the 16-entry DTLB; revisiting them needs no
//     page-table reads, at least 4 of them served by the L2 TLB
module tb_nested_mmu;
  import hyp_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s (ex %0d cause %0d pa %h tval2 %h cycles %0d reads %0d)", what, last.ex, last.cause,
               last.pa, last.tval2, last.cyc, last.reads);
    end
  endtask

  typedef struct { logic ex; logic [5:0] cause; logic [55:0] pa; logic [63:0] tval, tval2; int cyc, reads; } res_t;
  res_t last;
  localparam logic [PLEN-1:0] GOFF = 56'h1_0000_0000;

  priv_e priv, ldst_priv;
  logic  v, ldst_v, mxr, vmxr, sum, vsum, spvp, flush_v;
  satp_t satp, vsatp;
  hgatp_t hgatp;
  flush_req_t flush;
  logic ireq, ivalid, iex, lreq, lstore, lhyp, lhlvx, lvalid, lex;
  logic [63:0] ivaddr, itval, itval2, lvaddr, ltval, ltval2;
  logic [55:0] ipaddr, lpaddr;
  logic [5:0]  icause, lcause;
  logic mreq, mgnt, mrvalid;
  logic [55:0] maddr;
  logic [63:0] mrdata;
  logic ev_imiss, ev_dmiss, ev_ghit, ev_gmiss, ev_l2;
  int n_imiss = 0, n_dmiss = 0, n_ghit = 0, n_gmiss = 0, n_l2 = 0;

  nested_mmu #(.L2TLB_EN(1'b1)) dut (
    .clk_i(clk), .rst_ni(rst_n), .priv_lvl_i(priv), .v_i(v), .ld_st_priv_lvl_i(ldst_priv), .ld_st_v_i(ldst_v),
    .satp_i(satp), .vsatp_i(vsatp), .hgatp_i(hgatp), .mxr_i(mxr), .vmxr_i(vmxr), .sum_i(sum), .vsum_i(vsum),
    .spvp_i(spvp), .flush_valid_i(flush_v), .flush_i(flush),
    .icache_req_i(ireq), .icache_vaddr_i(ivaddr), .icache_resp_valid_o(ivalid), .icache_paddr_o(ipaddr),
    .icache_ex_valid_o(iex), .icache_ex_cause_o(icause), .icache_ex_tval_o(itval), .icache_ex_tval2_o(itval2),
    .lsu_req_i(lreq), .lsu_vaddr_i(lvaddr), .lsu_is_store_i(lstore), .lsu_hyp_i(lhyp), .lsu_hlvx_i(lhlvx),
    .lsu_resp_valid_o(lvalid), .lsu_paddr_o(lpaddr), .lsu_ex_valid_o(lex), .lsu_ex_cause_o(lcause),
    .lsu_ex_tval_o(ltval), .lsu_ex_tval2_o(ltval2),
    .ptw_mem_req_o(mreq), .ptw_mem_addr_o(maddr), .ptw_mem_gnt_i(mgnt), .ptw_mem_rvalid_i(mrvalid),
    .ptw_mem_rdata_i(mrdata),
    .itlb_miss_o(ev_imiss), .dtlb_miss_o(ev_dmiss), .gtlb_hit_o(ev_ghit), .gtlb_miss_o(ev_gmiss), .l2_hit_o(ev_l2));

  tb_pt_mem mem (.clk_i(clk), .req_i(mreq), .addr_i(maddr), .gnt_o(mgnt), .rvalid_o(mrvalid), .rdata_o(mrdata));

  always @(posedge clk) begin
    n_imiss += int'(ev_imiss); n_dmiss += int'(ev_dmiss); n_ghit += int'(ev_ghit);
    n_gmiss += int'(ev_gmiss); n_l2 += int'(ev_l2);
  end


  task automatic mode(int m);   // 0 M, 1 HS, 2 U, 3 VS, 4 VU
    case (m)
      0: begin priv = PRIV_M; v = 0; end
      1: begin priv = PRIV_S; v = 0; end
      2: begin priv = PRIV_U; v = 0; end
      3: begin priv = PRIV_S; v = 1; end
      default: begin priv = PRIV_U; v = 1; end
    endcase
    ldst_priv = priv; ldst_v = v;
  endtask

  task automatic fetch(logic [63:0] va, output res_t r);
    int r0;
    @(negedge clk); r0 = mem.reads; r.cyc = 0;
    ireq = 1; ivaddr = va; #1;
    while (!ivalid) begin @(negedge clk); r.cyc++; #1; end
    r.ex = iex; r.cause = icause; r.pa = ipaddr; r.tval = itval; r.tval2 = itval2; r.reads = mem.reads - r0; last = r;
    @(negedge clk); ireq = 0;
  endtask
  task automatic ldst(logic [63:0] va, bit store, bit hyp, bit hlvx, output res_t r);
    int r0;
    @(negedge clk); r0 = mem.reads; r.cyc = 0;
    lreq = 1; lvaddr = va; lstore = store; lhyp = hyp; lhlvx = hlvx; #1;
    while (!lvalid) begin @(negedge clk); r.cyc++; #1; end
    r.ex = lex; r.cause = lcause; r.pa = lpaddr; r.tval = ltval; r.tval2 = ltval2; r.reads = mem.reads - r0; last = r;
    @(negedge clk); lreq = 0; lhyp = 0; lhlvx = 0; lstore = 0;
  endtask
  task automatic fence(flush_req_t f);
    @(negedge clk); flush = f; flush_v = 1; @(negedge clk); flush_v = 0; flush = '0;
  endtask

  logic [PLEN-1:0] s_host, vs_root, gd [20], gcode, gro, gu, gx, gc2;
  logic [PPNW-1:0] g_root;

  initial begin
    res_t r; int g0, reads_sum, l20;
    flush_v = 0; flush = '0; ireq = 0; ivaddr = 0; lreq = 0; lvaddr = 0; lstore = 0; lhyp = 0; lhlvx = 0;
    mxr = 0; vmxr = 0; sum = 0; vsum = 0; spvp = 1; mode(0);
    // ---------------------------------------------------- page tables
    g_root  = mem.new_g_root();
    s_host  = mem.alloc_host(1);
    vs_root = mem.alloc_guest();
    mem.map(s_host, 0, 0, 56'h8000_0000, 56'h5555_5000, 2, 8'hCB);          // host code R X A D
    for (int i = 0; i < 20; i++) begin
      gd[i] = mem.alloc_guest();
      mem.map(vs_root, 0, 1, 56'h10_0000_0000 + 56'(i) * 56'h1000, gd[i], 2, 8'hC7);   // RW A D
    end
    gcode = mem.alloc_guest(); mem.map(vs_root, 0, 1, 56'h20_0000_0000, gcode, 2, 8'hCB);
    gro   = mem.alloc_guest(); mem.map(vs_root, 0, 1, 56'h30_0000_0000, gro, 2, 8'h43);   // R A
    mem.map(vs_root, 0, 1, 56'h04_0000_0000, 56'h7_0000_0000, 2, 8'hC7);                  // GPA unmapped in G
    gu    = mem.alloc_guest(); mem.map(vs_root, 0, 1, 56'h05_0000_0000, gu, 2, 8'hD7);    // U page
    gx    = mem.alloc_guest(); mem.map(vs_root, 0, 1, 56'h06_0000_0000, gx, 2, 8'hC9);    // X only
    mem.map(vs_root, 0, 1, 56'h07_0000_0000, 56'h7_1000_0000, 2, 8'hCB);                  // code, GPA unmapped
    satp  = '{mode: MODE_SV39, asid: 16'h7, ppn: s_host[55:12]};
    vsatp = '{mode: MODE_SV39, asid: 16'h5, ppn: vs_root[55:12]};
    hgatp = '{mode: MODE_SV39, zero: 2'b0, vmid: 14'h3, ppn: g_root};
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (40) @(negedge clk);          // L2 TLB reset flush

    // 1. translation off
    mode(0); fetch(64'h1234, r);
    check(!r.ex && r.cyc == 0 && r.pa == 56'h1234, "M mode: no translation, same cycle");
    // 2. host S-stage fetch
    mode(1); fetch(64'h8000_0040, r);
    check(!r.ex && r.pa == 56'h5555_5040 && r.reads == 3 && n_imiss == 1, $sformatf("host fetch: 3 reads (got %0d)", r.reads));
    fetch(64'h8000_0044, r);
    check(!r.ex && r.cyc == 0 && r.reads == 0 && r.pa == 56'h5555_5044, "host fetch hit in the request cycle");
    // 3. guest load, cold walk
    mode(3); ldst(64'h10_0000_0008, 0, 0, 0, r);
    check(!r.ex && r.pa == gd[0] + GOFF + 8, "guest load: host address");
    check(r.reads == 15, $sformatf("cold two-stage walk: 15 reads (got %0d)", r.reads));
    check(n_dmiss == 1, "DTLB miss counted");
    ldst(64'h10_0000_0010, 1, 0, 0, r);
    check(!r.ex && r.cyc == 0 && r.reads == 0, "guest store hits the DTLB in the request cycle");
    g0 = n_ghit;
    ldst(64'h10_0000_1000, 0, 0, 0, r);
    check(!r.ex && r.pa == gd[1] + GOFF, "neighbour page: host address");
    check(r.reads == 6 && n_ghit - g0 == 3, $sformatf("warm GTLB walk: 6 reads (got %0d), 3 GTLB hits (got %0d)", r.reads, n_ghit - g0));
    // 4. guest fetch
    fetch(64'h20_0000_0100, r);
    check(!r.ex && r.pa == gcode + GOFF + 56'h100, "guest fetch: host address");
    // 5. faults
    ldst(64'h30_0000_0000, 1, 0, 0, r);
    check(r.ex && r.cause == EXC_STORE_PAGE_FAULT && r.tval == 64'h30_0000_0000 && r.tval2 == 0, "store to read-only page: store page fault");
    ldst(64'h30_0000_0008, 0, 0, 0, r);
    check(!r.ex && r.pa == gro + GOFF + 8, "load from read-only page works");
    ldst(64'h04_0000_0010, 0, 0, 0, r);
    check(r.ex && r.cause == EXC_LOAD_GUEST_PF && r.tval2 == 64'(56'h7_0000_0010 >> 2), "load guest-page fault with GPA >> 2");
    fetch(64'h07_0000_0000, r);
    check(r.ex && r.cause == EXC_INSTR_GUEST_PF && r.tval2 == 64'(56'h7_1000_0000 >> 2), "instruction guest-page fault");
    ldst(64'h05_0000_0000, 0, 0, 0, r);
    check(r.ex && r.cause == EXC_LOAD_PAGE_FAULT, "VS access to a U page without SUM: page fault");
    vsum = 1;
    ldst(64'h05_0000_0000, 0, 0, 0, r);
    check(!r.ex && r.pa == gu + GOFF, "VS access to a U page with vsstatus.SUM");
    vsum = 0;
    ldst(64'h0000_8000_0000_0000, 0, 0, 0, r);
    check(r.ex && r.cause == EXC_LOAD_PAGE_FAULT && r.cyc == 0, "non-canonical address: page fault at once");
    // 6. HLV / HLVX from HS mode, SPVP=1
    mode(1);
    ldst(64'h06_0000_0000, 0, 1, 1, r);
    check(!r.ex && r.pa == gx + GOFF, "HLVX reads an execute-only guest page");
    ldst(64'h06_0000_0000, 0, 1, 0, r);
    check(r.ex && r.cause == EXC_LOAD_PAGE_FAULT, "HLV of an execute-only page: page fault");
    ldst(64'h10_0000_0008, 0, 1, 0, r);
    check(!r.ex && r.cyc == 0 && r.pa == gd[0] + GOFF + 8, "HLV from HS mode uses the guest translation");
    // 7. G-stage only
    vsatp.mode = MODE_BARE; mode(3);
    ldst(64'(gd[2]) + 64'h18, 0, 0, 0, r);
    check(!r.ex && r.pa == gd[2] + GOFF + 56'h18 && r.reads == 3, $sformatf("G-stage only translation (%0d reads)", r.reads));
    vsatp.mode = MODE_SV39;
    // 8. fences
    fence('{hvvma: 1, vmid: 14'h3, default: '0});
    g0 = n_dmiss;
    ldst(64'h10_0000_0008, 0, 0, 0, r);
    check(!r.ex && n_dmiss == g0 + 1 && r.reads < 15, $sformatf("after HFENCE.VVMA: DTLB miss, GTLB entries kept (%0d reads)", r.reads));
    fence('{hgvma: 1, default: '0});
    ldst(64'h10_0000_0008, 0, 0, 0, r);
    check(!r.ex && r.reads == 15, $sformatf("after HFENCE.GVMA: cold walk again (%0d reads)", r.reads));
    mode(1);
    fetch(64'h8000_0040, r);
    check(r.cyc == 0, "host ITLB entry survives guest fences");
    fence('{sfence: 1, default: '0});
    fetch(64'h8000_0040, r);
    check(!r.ex && r.reads == 3, "after SFENCE.VMA: host walk again");
    // 9. L2 TLB (refills that arrive while it is still flushing are dropped)
    // the L2 TLB is not inclusive: empty the DTLB first so that every page is walked
    fence('{hvvma: 1, vmid: 14'h3, default: '0});
    repeat (40) @(negedge clk);
    mode(3);
    for (int i = 0; i < 20; i++) ldst(64'h10_0000_0000 + 64'(i) * 64'h1000, 0, 0, 0, r);
    reads_sum = 0; l20 = n_l2;
    for (int i = 0; i < 20; i++) begin
      ldst(64'h10_0000_0000 + 64'(i) * 64'h1000 + 64'h20, 0, 0, 0, r);
      check(!r.ex && r.pa == gd[i] + GOFF + 56'h20, $sformatf("page %0d revisited", i));
      reads_sum += r.reads;
      if (r.reads != 0) $display("page %0d: %0d reads, %0d cycles, L2 hits so far %0d", i, r.reads, r.cyc, n_l2 - l20);
    end
    check(reads_sum == 0, $sformatf("revisits need no page-table reads (%0d)", reads_sum));
    check(n_l2 - l20 >= 4, $sformatf("L2 TLB hits on revisits (%0d)", n_l2 - l20));
    check(n_gmiss > 0 && n_imiss >= 3, "GTLB misses and ITLB misses counted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
