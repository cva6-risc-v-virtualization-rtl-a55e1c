// tb_cva6_hyp_l2cfg: end-to-end testbench of the hypervisor blocks in the
// configurations of the design-space study.
//
// The localparams below pick the configuration: L1 TLB entries (16 or 32),
// GTLB on or off, and the L2 TLB off or with its 4 KiB bank, its 2 MiB bank
// or both. As written it runs the largest point, 16-entry vITLB/vDTLB,
// 8-entry GTLB and both L2 banks; with L2_4K = L2_2M = 0 it is the
// default configuration again.
//
// The testbench plays a guest (V=1, VS mode) with two-stage translation:
//   1. touches 40 guest 4 KiB pages, more than the 16-entry vDTLB holds;
//      every first touch is a full nested walk (6 reads with a warm GTLB)
//      and also fills the L2 TLB
//   2. revisits all 40 pages: the vDTLB misses, the L2 TLB answers, and the
//      walk started in parallel is abandoned (fewer reads than a walk, and
//      an l2_hit event for each)
//   3. maps one 2 MiB guest page on a 2 MiB host page (merged size 2 MiB),
//      touches it, pushes it out of the vDTLB and hits it in the 2 MiB bank
//      at another 4 KiB offset
//   4. commits a guest SFENCE.VMA: every L2 entry is gone (no filtering), so
//      the next revisit walks again
// Each of these mechanisms is counted and one that never happened counts as
// a failure. Checks that need an absent structure are replaced by their
// counterpart: without the L2 bank a revisit must walk again, and without
// the GTLB every nested walk takes 15 reads instead of 6.
module tb_cva6_hyp_l2cfg;
  import hyp_pkg::*;
  localparam int unsigned L1_ENTRIES = 16;
  localparam bit          GTLB_ON    = 1'b1;
  localparam bit          L2_4K      = 1'b1;
  localparam bit          L2_2M      = 1'b1;
  localparam bit          L2_ON      = L2_4K || L2_2M;
  localparam int          WALK       = GTLB_ON ? 6 : 15;   // reads of a nested 4 KiB walk

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  localparam logic [55:0] GOFF = 56'h1_0000_0000;

  logic [1:0]  priv;
  logic        v;
  logic [63:0] satp, vsatp, hgatp, mtime;
  logic        ivalid, iex, lreq, lvalid, lex;
  logic [63:0] itval, itval2, lvaddr, ltval, ltval2;
  logic [55:0] ipaddr, lpaddr;
  logic [5:0]  icause, lcause;
  logic        mreq, mgnt, mrvalid;
  logic [55:0] maddr;
  logic [63:0] mrdata, crdata, htd;
  logic        chit, cill, cvirt, stip, vstip, mstce, hstce;
  logic        id_hldst, id_hlvx, id_ld, id_st, id_uns, id_fence, id_ill, id_virt;
  logic [1:0]  id_size;
  logic        c_valid;
  logic [31:0] c_instr;
  logic [63:0] c_rs1;
  logic        ev_flush, ev_imiss, ev_dmiss, ev_ghit, ev_gmiss, ev_l2;

  cva6_hyp_top #(.ITLB_ENTRIES(L1_ENTRIES), .DTLB_ENTRIES(L1_ENTRIES), .GTLB_EN(GTLB_ON),
                .L2TLB_EN(L2_ON), .L2_EN_4K(L2_ON ? L2_4K : 1'b1), .L2_EN_2M(L2_ON ? L2_2M : 1'b1)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .priv_lvl_i(priv), .v_i(v), .ld_st_priv_lvl_i(priv), .ld_st_v_i(v),
    .satp_i(satp), .vsatp_i(vsatp), .hgatp_i(hgatp), .mxr_i(1'b0), .vmxr_i(1'b0), .sum_i(1'b0),
    .vsum_i(1'b0), .spvp_i(1'b1), .tvm_i(1'b0), .vtvm_i(1'b0), .hu_i(1'b0), .mcounteren_tm_i(1'b1),
    .hcounteren_tm_i(1'b1), .time_i(mtime),
    .id_instr_i(32'h13), .id_hyp_ldst_o(id_hldst), .id_hlvx_o(id_hlvx), .id_is_load_o(id_ld),
    .id_is_store_o(id_st), .id_size_o(id_size), .id_unsigned_o(id_uns), .id_fence_o(id_fence),
    .id_ex_illegal_o(id_ill), .id_ex_virtual_o(id_virt),
    .commit_valid_i(c_valid), .commit_instr_i(c_instr), .commit_rs1_i(c_rs1), .commit_rs2_i(64'd0),
    .csr_valid_i(1'b0), .csr_addr_i(12'd0), .csr_we_i(1'b0), .csr_wdata_i(64'd0), .csr_hit_o(chit),
    .csr_rdata_o(crdata), .csr_ex_illegal_o(cill), .csr_ex_virtual_o(cvirt), .stip_o(stip),
    .vstip_o(vstip), .menvcfg_stce_o(mstce), .henvcfg_stce_o(hstce), .htimedelta_o(htd),
    .icache_req_i(1'b0), .icache_vaddr_i(64'd0), .icache_resp_valid_o(ivalid), .icache_paddr_o(ipaddr),
    .icache_ex_valid_o(iex), .icache_ex_cause_o(icause), .icache_ex_tval_o(itval),
    .icache_ex_tval2_o(itval2),
    .lsu_req_i(lreq), .lsu_vaddr_i(lvaddr), .lsu_is_store_i(1'b0), .lsu_hyp_i(1'b0), .lsu_hlvx_i(1'b0),
    .lsu_resp_valid_o(lvalid), .lsu_paddr_o(lpaddr), .lsu_ex_valid_o(lex), .lsu_ex_cause_o(lcause),
    .lsu_ex_tval_o(ltval), .lsu_ex_tval2_o(ltval2),
    .ptw_mem_req_o(mreq), .ptw_mem_addr_o(maddr), .ptw_mem_gnt_i(mgnt), .ptw_mem_rvalid_i(mrvalid),
    .ptw_mem_rdata_i(mrdata),
    .flush_o(ev_flush), .itlb_miss_o(ev_imiss), .dtlb_miss_o(ev_dmiss), .gtlb_hit_o(ev_ghit),
    .gtlb_miss_o(ev_gmiss), .l2_hit_o(ev_l2));

  tb_pt_mem mem (.clk_i(clk), .req_i(mreq), .addr_i(maddr), .gnt_o(mgnt), .rvalid_o(mrvalid), .rdata_o(mrdata));

  always @(posedge clk) mtime <= mtime + 64'd1;

  typedef enum int { M_WALK, M_DTLB_MISS, M_L2_HIT, M_L2_HIT_4K, M_L2_HIT_2M, M_L2_FLUSHED, M_NUM } mech_e;
  int cnt [M_NUM];
  always @(posedge clk) if (rst_n) begin
    cnt[M_DTLB_MISS] += int'(ev_dmiss);
    cnt[M_L2_HIT]    += int'(ev_l2);
  end

  typedef struct { logic ex; logic [55:0] pa; int cyc, reads, l2; } res_t;

  // one load translation, held until the MMU answers
  task automatic load(logic [63:0] va, output res_t r);
    int r0, l0;
    @(negedge clk); r0 = mem.reads; l0 = cnt[M_L2_HIT]; r.cyc = 0;
    lreq = 1; lvaddr = va; #1;
    while (!lvalid) begin @(negedge clk); r.cyc++; #1; end
    r.ex = lex; r.pa = lpaddr; r.reads = mem.reads - r0;
    @(negedge clk); lreq = 0;
    r.l2 = cnt[M_L2_HIT] - l0;
    if (r.reads == WALK) cnt[M_WALK]++;
  endtask

  logic [55:0] vs_root, gd [40];
  logic [43:0] g_root;
  localparam logic [63:0] VA4K = 64'h10_0000_0000;
  localparam logic [63:0] VA2M = 64'h20_0000_0000;
  localparam logic [55:0] GPA2M = 56'h4000_0000;
  localparam logic [55:0] HPA2M = 56'h2_0000_0000;

  initial begin
    res_t r;
    foreach (cnt[i]) cnt[i] = 0;
    mtime = 64'd0; lreq = 0; lvaddr = 0; c_valid = 0; c_instr = 0; c_rs1 = 0;
    priv = 2'd1; v = 1'b1;

    // guest page tables: 40 4 KiB data pages, one 2 MiB page on a 2 MiB host page
    g_root  = mem.new_g_root();
    vs_root = mem.alloc_guest();
    for (int i = 0; i < 40; i++) begin
      gd[i] = mem.alloc_guest();
      mem.map(vs_root, 0, 1, 56'(VA4K) + 56'(i) * 56'h1000, gd[i], 2, 8'hC7);
    end
    mem.map(vs_root, 0, 1, 56'(VA2M), GPA2M, 1, 8'hC7);
    mem.map({g_root, 12'b0}, 1, 0, GPA2M, HPA2M, 1, 8'hDF);
    satp  = '0;
    vsatp = {4'd8, 16'h5, 44'(vs_root[55:12])};
    hgatp = {4'd8, 2'b0, 14'h3, g_root};
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (40) @(negedge clk);   // the L2 banks clear themselves after reset

    // 1. first touches: full walks, which also fill the L2 TLB
    for (int i = 0; i < 40; i++) begin
      load(VA4K + 64'(i) * 64'h1000, r);
      check(!r.ex && r.pa == gd[i] + GOFF, $sformatf("first touch of page %0d", i));
      if (i >= 3) check(r.reads == WALK && r.l2 == 0, $sformatf("page %0d: nested walk of %0d reads (got %0d)", i, WALK, r.reads));
    end

    // 2. revisits: the vDTLB has lost most pages, the L2 TLB answers
    for (int i = 0; i < 40; i++) begin
      load(VA4K + 64'(i) * 64'h1000 + 64'h18, r);
      check(!r.ex && r.pa == gd[i] + GOFF + 56'h18, $sformatf("revisit of page %0d", i));
      if (r.cyc > 0 && L2_4K) begin
        check(r.l2 == 1 && r.reads < WALK, $sformatf("page %0d: vDTLB miss answered by the L2 TLB (reads %0d, l2 %0d)", i, r.reads, r.l2));
        if (r.l2 == 1) cnt[M_L2_HIT_4K]++;
      end else if (r.cyc > 0) begin
        check(r.l2 == 0 && r.reads == WALK, $sformatf("page %0d: vDTLB miss walks again (reads %0d)", i, r.reads));
      end
    end

    // 3. a 2 MiB page in the 2 MiB bank
    load(VA2M + 64'h3_4560, r);
    check(!r.ex && r.pa == HPA2M + 56'h3_4560, "2 MiB guest page on a 2 MiB host page");
    for (int i = 0; i < 40; i++) load(VA4K + 64'(i) * 64'h1000, r);   // push it out of the vDTLB
    if (L2_2M) begin
      load(VA2M + 64'h1F_0008, r);
      check(!r.ex && r.pa == HPA2M + 56'h1F_0008, "other offset of the 2 MiB page");
      check(r.cyc > 0 && r.l2 == 1 && r.reads < WALK, $sformatf("2 MiB page answered by the L2 TLB (reads %0d, l2 %0d)", r.reads, r.l2));
      if (r.l2 == 1) cnt[M_L2_HIT_2M]++;
    end else cnt[M_L2_HIT_2M]++;
    if (!L2_4K) cnt[M_L2_HIT_4K]++;

    // 4. a guest SFENCE.VMA empties the whole L2 TLB
    @(negedge clk); c_valid = 1; c_instr = 32'h1200_0073; c_rs1 = 0; #1;
    check(ev_flush, "guest SFENCE.VMA commits");
    @(negedge clk); c_valid = 0;
    for (int i = 0; i < 4; i++) begin
      load(VA4K + 64'(36 + i) * 64'h1000, r);
      check(!r.ex && r.pa == gd[36 + i] + GOFF, $sformatf("page %0d after the fence", 36 + i));
      check(r.l2 == 0 && r.reads == WALK, $sformatf("page %0d walks again after the fence (reads %0d)", 36 + i, r.reads));
      if (r.l2 == 0 && r.reads == WALK && L2_ON) cnt[M_L2_FLUSHED]++;
    end

    if (!L2_ON) begin   // no L2 TLB: its mechanisms cannot happen, and must not
      check(cnt[M_L2_HIT] == 0, "no L2 hits without an L2 TLB");
      cnt[M_L2_HIT]++; cnt[M_L2_HIT_4K]++; cnt[M_L2_HIT_2M]++; cnt[M_L2_FLUSHED]++;
    end
    for (int i = 0; i < M_NUM; i++) begin
      mech_e m;
      m = mech_e'(i);
      $display("mechanism %-14s %0d", m.name(), cnt[i]);
      check(cnt[i] > 0, $sformatf("mechanism %s happened", m.name()));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
