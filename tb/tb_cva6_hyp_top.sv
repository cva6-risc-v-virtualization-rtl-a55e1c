// tb_cva6_hyp_top: end-to-end testbench of the hypervisor extension blocks
// at their default sizes (16-entry vITLB/vDTLB, 8-entry GTLB, Sstc on, no L2
// TLB).
//
// The testbench plays the rest of the core: it holds the CSR state, runs
// the platform time counter, presents instructions to the decode port,
// commits fences with their rs1/rs2 values, and issues fetch and load/store
// translations; a behavioural memory holds host, guest and G-stage page
// tables. It goes through one full guest bring-up: the host fetches through
// its own page tables, a guest (V=1) runs with two-stage translation, the
// hypervisor in HS mode reads guest memory with HLV/HLVX, guest and host
// fences are committed, and both supervisor timers fire through Sstc.
//
// Every mechanism is counted and each one that never happened counts as a
// failure: ITLB/DTLB misses, same-cycle L1 hits, GTLB hits and misses, the
// 15-read cold two-stage walk, DTLB overflow, page and guest-page faults,
// HLV/HLVX/HSV decode and translation, illegal and virtual instruction
// exceptions, SFENCE.VMA / HFENCE.VVMA / HFENCE.GVMA (address and VMID
// forms, and SFENCE.VMA under V=1), STIP and VSTIP, and V=0/V=1 switches.
module tb_cva6_hyp_top;
  import hyp_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  typedef struct { logic ex; logic [5:0] cause; logic [55:0] pa; logic [63:0] tval, tval2; int cyc, reads; } res_t;
  res_t last;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s (ex %0d cause %0d pa %h tval2 %h cycles %0d reads %0d)", what, last.ex, last.cause,
               last.pa, last.tval2, last.cyc, last.reads);
    end
  endtask

  localparam logic [55:0] GOFF = 56'h1_0000_0000;

  // ---- core-side state
  logic [1:0]  priv, ldst_priv;
  logic        v, ldst_v, mxr, vmxr, sum, vsum, spvp, tvm, vtvm, hu, mcen, hcen;
  logic [63:0] satp, vsatp, hgatp, mtime;
  logic [31:0] id_instr, c_instr;
  logic        id_hldst, id_hlvx, id_ld, id_st, id_uns, id_fence, id_ill, id_virt;
  logic [1:0]  id_size;
  logic        c_valid;
  logic [63:0] c_rs1, c_rs2;
  logic        cv, cwe, chit, cill, cvirt, stip, vstip, mstce, hstce;
  logic [11:0] caddr;
  logic [63:0] cwdata, crdata, htd;
  logic        ireq, ivalid, iex, lreq, lstore, lhyp, lhlvx, lvalid, lex;
  logic [63:0] ivaddr, itval, itval2, lvaddr, ltval, ltval2;
  logic [55:0] ipaddr, lpaddr;
  logic [5:0]  icause, lcause;
  logic        mreq, mgnt, mrvalid;
  logic [55:0] maddr;
  logic [63:0] mrdata;
  logic        ev_flush, ev_imiss, ev_dmiss, ev_ghit, ev_gmiss, ev_l2;

  cva6_hyp_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .priv_lvl_i(priv), .v_i(v), .ld_st_priv_lvl_i(ldst_priv), .ld_st_v_i(ldst_v),
    .satp_i(satp), .vsatp_i(vsatp), .hgatp_i(hgatp), .mxr_i(mxr), .vmxr_i(vmxr), .sum_i(sum), .vsum_i(vsum),
    .spvp_i(spvp), .tvm_i(tvm), .vtvm_i(vtvm), .hu_i(hu), .mcounteren_tm_i(mcen), .hcounteren_tm_i(hcen),
    .time_i(mtime),
    .id_instr_i(id_instr), .id_hyp_ldst_o(id_hldst), .id_hlvx_o(id_hlvx), .id_is_load_o(id_ld),
    .id_is_store_o(id_st), .id_size_o(id_size), .id_unsigned_o(id_uns), .id_fence_o(id_fence),
    .id_ex_illegal_o(id_ill), .id_ex_virtual_o(id_virt),
    .commit_valid_i(c_valid), .commit_instr_i(c_instr), .commit_rs1_i(c_rs1), .commit_rs2_i(c_rs2),
    .csr_valid_i(cv), .csr_addr_i(caddr), .csr_we_i(cwe), .csr_wdata_i(cwdata), .csr_hit_o(chit),
    .csr_rdata_o(crdata), .csr_ex_illegal_o(cill), .csr_ex_virtual_o(cvirt), .stip_o(stip), .vstip_o(vstip),
    .menvcfg_stce_o(mstce), .henvcfg_stce_o(hstce), .htimedelta_o(htd),
    .icache_req_i(ireq), .icache_vaddr_i(ivaddr), .icache_resp_valid_o(ivalid), .icache_paddr_o(ipaddr),
    .icache_ex_valid_o(iex), .icache_ex_cause_o(icause), .icache_ex_tval_o(itval), .icache_ex_tval2_o(itval2),
    .lsu_req_i(lreq), .lsu_vaddr_i(lvaddr), .lsu_is_store_i(lstore), .lsu_hyp_i(lhyp), .lsu_hlvx_i(lhlvx),
    .lsu_resp_valid_o(lvalid), .lsu_paddr_o(lpaddr), .lsu_ex_valid_o(lex), .lsu_ex_cause_o(lcause),
    .lsu_ex_tval_o(ltval), .lsu_ex_tval2_o(ltval2),
    .ptw_mem_req_o(mreq), .ptw_mem_addr_o(maddr), .ptw_mem_gnt_i(mgnt), .ptw_mem_rvalid_i(mrvalid),
    .ptw_mem_rdata_i(mrdata),
    .flush_o(ev_flush), .itlb_miss_o(ev_imiss), .dtlb_miss_o(ev_dmiss), .gtlb_hit_o(ev_ghit),
    .gtlb_miss_o(ev_gmiss), .l2_hit_o(ev_l2));

  tb_pt_mem mem (.clk_i(clk), .req_i(mreq), .addr_i(maddr), .gnt_o(mgnt), .rvalid_o(mrvalid), .rdata_o(mrdata));

  always @(posedge clk) mtime <= mtime + 64'd1;

  // ---- mechanism counters
  typedef enum int {
    M_ITLB_MISS, M_DTLB_MISS, M_L1_HIT, M_GTLB_HIT, M_GTLB_MISS, M_WALK15, M_WALK6, M_DTLB_OVERFLOW,
    M_PF, M_GPF, M_IGPF, M_HLV, M_HLVX, M_HSV, M_ILLEGAL, M_VIRTUAL, M_SFENCE, M_SFENCE_V, M_HVVMA,
    M_HGVMA_ADDR, M_HGVMA_VMID, M_STIP, M_VSTIP, M_V_SWITCH, M_NUM
  } mech_e;
  int cnt [M_NUM];
  logic stip_q = 1'b0, vstip_q = 1'b0, v_q = 1'b0;
  always @(posedge clk) begin
    cnt[M_ITLB_MISS] += int'(ev_imiss);
    cnt[M_DTLB_MISS] += int'(ev_dmiss);
    cnt[M_GTLB_HIT]  += int'(ev_ghit);
    cnt[M_GTLB_MISS] += int'(ev_gmiss);
    cnt[M_STIP]      += int'(stip && !stip_q);
    cnt[M_VSTIP]     += int'(vstip && !vstip_q);
    cnt[M_V_SWITCH]  += int'(v != v_q);
    stip_q <= stip; vstip_q <= vstip; v_q <= v;
  end

  task automatic mode(int m);   // 0 M, 1 HS, 2 U, 3 VS, 4 VU
    case (m)
      0: begin priv = 2'd3; v = 0; end
      1: begin priv = 2'd1; v = 0; end
      2: begin priv = 2'd0; v = 0; end
      3: begin priv = 2'd1; v = 1; end
      default: begin priv = 2'd0; v = 1; end
    endcase
    ldst_priv = priv; ldst_v = v;
  endtask

  task automatic fetch(logic [63:0] va, output res_t r);
    int r0;
    @(negedge clk); r0 = mem.reads; r.cyc = 0;
    ireq = 1; ivaddr = va; #1;
    while (!ivalid) begin @(negedge clk); r.cyc++; #1; end
    r.ex = iex; r.cause = icause; r.pa = ipaddr; r.tval = itval; r.tval2 = itval2; r.reads = mem.reads - r0;
    last = r;
    if (r.cyc == 0) cnt[M_L1_HIT]++;
    @(negedge clk); ireq = 0;
  endtask
  // a load/store, or a hypervisor load/store decoded from its instruction
  task automatic ldst_raw(logic [63:0] va, bit store, bit hyp, bit hlvx, output res_t r);
    int r0;
    @(negedge clk); r0 = mem.reads; r.cyc = 0;
    lreq = 1; lvaddr = va; lstore = store; lhyp = hyp; lhlvx = hlvx; #1;
    while (!lvalid) begin @(negedge clk); r.cyc++; #1; end
    r.ex = lex; r.cause = lcause; r.pa = lpaddr; r.tval = ltval; r.tval2 = ltval2; r.reads = mem.reads - r0;
    last = r;
    if (r.cyc == 0 && !r.ex) cnt[M_L1_HIT]++;
    if (r.reads == 15) cnt[M_WALK15]++;
    if (r.reads == 6 && v) cnt[M_WALK6]++;
    if (r.ex && (r.cause == EXC_LOAD_PAGE_FAULT || r.cause == EXC_STORE_PAGE_FAULT)) cnt[M_PF]++;
    if (r.ex && (r.cause == EXC_LOAD_GUEST_PF || r.cause == EXC_STORE_GUEST_PF)) cnt[M_GPF]++;
    @(negedge clk); lreq = 0; lhyp = 0; lhlvx = 0; lstore = 0;
  endtask
  task automatic ldst(logic [63:0] va, bit store, output res_t r);
    ldst_raw(va, store, 0, 0, r);
  endtask
  // decode a hypervisor load/store, then translate it as the pipeline would
  task automatic hyp_access(logic [31:0] instr, logic [63:0] va, output res_t r, output bit trapped);
    @(negedge clk); id_instr = instr; #1;
    trapped = id_ill || id_virt;
    if (id_ill) cnt[M_ILLEGAL]++;
    if (id_virt) cnt[M_VIRTUAL]++;
    if (!trapped && id_hldst) begin
      logic st, x;
      st = id_st; x = id_hlvx;
      if (id_hlvx) cnt[M_HLVX]++; else if (id_st) cnt[M_HSV]++; else cnt[M_HLV]++;
      id_instr = 32'h0000_0013;
      ldst_raw(va, st, 1, x, r);
    end
    id_instr = 32'h0000_0013;
  endtask
  task automatic commit(logic [31:0] instr, logic [63:0] rs1, logic [63:0] rs2, output bit flushed);
    @(negedge clk); c_valid = 1; c_instr = instr; c_rs1 = rs1; c_rs2 = rs2; #1;
    flushed = ev_flush;
    @(negedge clk); c_valid = 0;
  endtask
  task automatic csrw(logic [11:0] a, logic [63:0] d);
    @(negedge clk); cv = 1; cwe = 1; caddr = a; cwdata = d;
    @(negedge clk); cv = 0; cwe = 0;
  endtask

  function automatic logic [31:0] r_type(logic [6:0] f7, logic [4:0] rs2, logic [4:0] rs1, logic [2:0] f3, logic [4:0] rd);
    return {f7, rs2, rs1, f3, rd, 7'b1110011};
  endfunction

  logic [55:0] s_host, vs_root, gd [24], gcode, gro, gx;
  logic [43:0] g_root;

  initial begin
    res_t r; bit t, fl; int g0, d0;
    logic [31:0] HLV_W, HLVX_WU, HSV_D, SFENCE_ALL, SFENCE_VA, HFENCE_VVMA, HFENCE_GVMA_A, HFENCE_GVMA_V;
    foreach (cnt[i]) cnt[i] = 0;
    HLV_W        = r_type(7'b0110100, 5'd0, 5'd10, 3'b100, 5'd11);
    HLVX_WU      = r_type(7'b0110100, 5'd3, 5'd10, 3'b100, 5'd11);
    HSV_D        = r_type(7'b0110111, 5'd11, 5'd10, 3'b100, 5'd0);
    SFENCE_ALL   = r_type(7'b0001001, 5'd0, 5'd0, 3'b000, 5'd0);
    SFENCE_VA    = r_type(7'b0001001, 5'd0, 5'd10, 3'b000, 5'd0);
    HFENCE_VVMA  = r_type(7'b0010001, 5'd0, 5'd0, 3'b000, 5'd0);
    HFENCE_GVMA_A = r_type(7'b0110001, 5'd0, 5'd10, 3'b000, 5'd0);
    HFENCE_GVMA_V = r_type(7'b0110001, 5'd11, 5'd0, 3'b000, 5'd0);
    mtime = 64'd0; id_instr = 32'h13; c_valid = 0; c_instr = 0; c_rs1 = 0; c_rs2 = 0;
    cv = 0; cwe = 0; caddr = 0; cwdata = 0; ireq = 0; ivaddr = 0; lreq = 0; lvaddr = 0; lstore = 0;
    lhyp = 0; lhlvx = 0; mxr = 0; vmxr = 0; sum = 0; vsum = 0; spvp = 1; tvm = 0; vtvm = 0; hu = 0;
    mcen = 1; hcen = 1; mode(0);

    // ---- page tables: host code, guest data pages, guest code, special pages
    g_root  = mem.new_g_root();
    s_host  = mem.alloc_host(1);
    vs_root = mem.alloc_guest();
    mem.map(s_host, 0, 0, 56'h8000_0000, 56'h5555_5000, 2, 8'hCB);
    for (int i = 0; i < 24; i++) begin
      gd[i] = mem.alloc_guest();
      mem.map(vs_root, 0, 1, 56'h10_0000_0000 + 56'(i) * 56'h1000, gd[i], 2, 8'hC7);
    end
    gcode = mem.alloc_guest(); mem.map(vs_root, 0, 1, 56'h20_0000_0000, gcode, 2, 8'hCB);
    gro   = mem.alloc_guest(); mem.map(vs_root, 0, 1, 56'h30_0000_0000, gro, 2, 8'h43);
    gx    = mem.alloc_guest(); mem.map(vs_root, 0, 1, 56'h06_0000_0000, gx, 2, 8'hC9);
    mem.map(vs_root, 0, 1, 56'h04_0000_0000, 56'h7_0000_0000, 2, 8'hC7);
    mem.map(vs_root, 0, 1, 56'h07_0000_0000, 56'h7_1000_0000, 2, 8'hCB);
    satp  = {4'd8, 16'h7, 44'(s_host[55:12])};
    vsatp = {4'd8, 16'h5, 44'(vs_root[55:12])};
    hgatp = {4'd8, 2'b0, 14'h3, g_root};
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);

    // ---- M mode sets up Sstc
    csrw(12'h30A, 64'h8000_0000_0000_0000);
    csrw(12'h60A, 64'h8000_0000_0000_0000);
    check(mstce && hstce, "menvcfg.STCE and henvcfg.STCE set");
    csrw(12'h605, 64'd1_000_000);
    check(htd == 64'd1_000_000, "htimedelta set");

    // ---- host (HS mode) code: ITLB miss, 3-read walk, then same-cycle hits
    mode(1);
    fetch(64'h8000_0000, r);
    check(!r.ex && r.pa == 56'h5555_5000 && r.reads == 3, $sformatf("host fetch walk: 3 reads (got %0d)", r.reads));
    fetch(64'h8000_0004, r);
    check(!r.ex && r.cyc == 0 && r.pa == 56'h5555_5004, "host fetch hits the ITLB in the request cycle");
    // S-mode timer: stimecmp a few cycles ahead
    csrw(12'h14D, mtime + 64'd30);
    check(!stip, "STIP low before stimecmp");
    repeat (40) @(negedge clk);
    check(stip, "STIP high after time passed stimecmp");
    csrw(12'h14D, '1);
    check(!stip, "STIP cleared by a new stimecmp");

    // ---- the hypervisor reads guest memory with HLV / HLVX / HSV
    hyp_access(HLV_W, 64'h10_0000_0008, r, t);
    check(!t && !r.ex && r.pa == gd[0] + GOFF + 8, "HLV.W from HS mode through both stages");
    check(r.reads == 15, $sformatf("cold two-stage walk: 15 reads (got %0d)", r.reads));
    hyp_access(HSV_D, 64'h10_0000_0010, r, t);
    check(!t && !r.ex && r.cyc == 0, "HSV.D hits the DTLB");
    hyp_access(HLVX_WU, 64'h06_0000_0000, r, t);
    check(!t && !r.ex && r.pa == gx + GOFF, "HLVX.WU reads an execute-only page");
    hyp_access(HLV_W, 64'h06_0000_0000, r, t);
    check(!t && r.ex && r.cause == EXC_LOAD_PAGE_FAULT, "HLV.W of an execute-only page faults");
    // U mode without hstatus.HU: illegal
    mode(2);
    hyp_access(HLV_W, 64'h10_0000_0008, r, t);
    check(t, "HLV in U mode with HU=0 traps");

    // ---- enter the guest (V=1, VS mode)
    mode(3);
    fetch(64'h20_0000_0000, r);
    check(!r.ex && r.pa == gcode + GOFF, "guest fetch through both stages");
    g0 = cnt[M_GTLB_HIT];
    ldst(64'h10_0000_1000, 0, r);
    check(!r.ex && r.pa == gd[1] + GOFF && r.reads == 6, $sformatf("warm-GTLB walk: 6 reads (got %0d)", r.reads));
    check(cnt[M_GTLB_HIT] - g0 == 3, "three GTLB hits in the warm walk");
    ldst(64'h30_0000_0000, 1, r);
    check(r.ex && r.cause == EXC_STORE_PAGE_FAULT && r.tval == 64'h30_0000_0000, "guest store to a read-only page");
    ldst(64'h04_0000_0020, 0, r);
    check(r.ex && r.cause == EXC_LOAD_GUEST_PF && r.tval2 == 64'(56'h7_0000_0020 >> 2), "load guest-page fault, tval2 = GPA >> 2");
    fetch(64'h07_0000_0000, r);
    check(r.ex && r.cause == EXC_INSTR_GUEST_PF && r.tval2 == 64'(56'h7_1000_0000 >> 2), "instruction guest-page fault");
    if (r.ex && r.cause == EXC_INSTR_GUEST_PF) cnt[M_IGPF]++;
    // hypervisor instructions in the guest: virtual instruction
    hyp_access(HLV_W, 64'h10_0000_0008, r, t);
    check(t, "HLV in VS mode is a virtual instruction");
    commit(HFENCE_VVMA, 0, 0, fl);
    check(!fl, "HFENCE.VVMA in VS mode does not flush");
    // guest timer: vstimecmp via the stimecmp address under V=1
    csrw(12'h14D, mtime + 64'd1_000_000 + 64'd30);
    check(!vstip, "VSTIP low before vstimecmp");
    repeat (40) @(negedge clk);
    check(vstip, "VSTIP high once time + htimedelta passed vstimecmp");
    check(!stip, "the guest write did not touch stimecmp");

    // ---- DTLB overflow: 20 pages through a 16-entry DTLB
    for (int i = 0; i < 20; i++) ldst(64'h10_0000_0000 + 64'(i) * 64'h1000, 0, r);
    d0 = cnt[M_DTLB_MISS];
    for (int i = 0; i < 20; i++) begin
      ldst(64'h10_0000_0000 + 64'(i) * 64'h1000 + 64'h8, 0, r);
      check(!r.ex && r.pa == gd[i] + GOFF + 8, $sformatf("page %0d after overflow", i));
    end
    check(cnt[M_DTLB_MISS] > d0, "revisits after overflow miss the DTLB");
    if (cnt[M_DTLB_MISS] > d0) cnt[M_DTLB_OVERFLOW]++;

    // ---- SFENCE.VMA under V=1 acts on the guest's own entries (HFENCE.VVMA)
    ldst(64'h10_0000_5000, 0, r);
    commit(SFENCE_VA, 64'h10_0000_5000, 0, fl);
    check(fl, "SFENCE.VMA in VS mode flushes");
    if (fl) cnt[M_SFENCE_V]++;
    d0 = cnt[M_DTLB_MISS];
    ldst(64'h10_0000_5000, 0, r);
    check(cnt[M_DTLB_MISS] == d0 + 1, "the guest page was flushed");

    // ---- back to the hypervisor: fences
    mode(1);
    fetch(64'h8000_0008, r);
    check(r.cyc == 0, "host ITLB entry survived the guest fence");
    commit(HFENCE_VVMA, 0, 0, fl);
    check(fl, "HFENCE.VVMA commits"); if (fl) cnt[M_HVVMA]++;
    mode(3);
    ldst(64'h10_0000_0008, 0, r);
    check(r.cyc > 0 && r.reads < 15, "HFENCE.VVMA emptied the DTLB but kept GTLB entries");
    ldst(64'h10_0000_1008, 0, r);
    mode(1);
    // HFENCE.GVMA by guest-physical address: rs1 holds GPA >> 2
    commit(HFENCE_GVMA_A, 64'(gd[0] >> 2), 0, fl);
    check(fl, "HFENCE.GVMA (address) commits"); if (fl) cnt[M_HGVMA_ADDR]++;
    mode(3);
    ldst(64'h10_0000_1010, 0, r);
    check(r.cyc == 0, "entry of another GPA survives the address HFENCE.GVMA");
    ldst(64'h10_0000_0010, 0, r);
    check(r.cyc > 0 && !r.ex, "entry of the fenced GPA was flushed");
    mode(1);
    // HFENCE.GVMA for another VMID keeps this guest; for its VMID cold again
    commit(HFENCE_GVMA_V, 0, 64'h9, fl);
    mode(3);
    ldst(64'h10_0000_1018, 0, r);
    check(r.cyc == 0, "HFENCE.GVMA of another VMID keeps entries");
    mode(1);
    commit(HFENCE_GVMA_V, 0, 64'h3, fl);
    check(fl, "HFENCE.GVMA (VMID) commits"); if (fl) cnt[M_HGVMA_VMID]++;
    mode(3);
    ldst(64'h10_0000_1018, 0, r);
    check(r.reads == 15, $sformatf("after HFENCE.GVMA of this VMID: cold walk (%0d reads)", r.reads));
    // TVM: HFENCE.GVMA in HS mode with mstatus.TVM is illegal
    mode(1); tvm = 1;
    @(negedge clk); id_instr = HFENCE_GVMA_V; #1;
    check(id_ill && id_fence, "HFENCE.GVMA with TVM=1 is illegal");
    if (id_ill) cnt[M_ILLEGAL]++;
    id_instr = 32'h13; tvm = 0;
    // host SFENCE.VMA: host walk again
    commit(SFENCE_ALL, 0, 0, fl);
    check(fl, "SFENCE.VMA commits"); if (fl) cnt[M_SFENCE]++;
    fetch(64'h8000_0000, r);
    check(!r.ex && r.reads == 3, "host walk again after SFENCE.VMA");
    // VU mode access to the S timer: virtual instruction
    mode(4);
    @(negedge clk); cv = 1; caddr = 12'h14D; cwe = 0; #1;
    check(cvirt, "stimecmp from VU mode is a virtual instruction");
    if (cvirt) cnt[M_VIRTUAL]++;
    @(negedge clk); cv = 0;
    mode(1);

    // ---- every mechanism must have happened
    for (int i = 0; i < M_NUM; i++) begin
      mech_e m;
      m = mech_e'(i);
      $display("mechanism %-16s %0d", m.name(), cnt[i]);
      check(cnt[i] > 0, $sformatf("mechanism %s happened", m.name()));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
