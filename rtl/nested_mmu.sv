// nested_mmu: two-stage (nested) memory management unit of the CVA6 core.
//
// Translates instruction-fetch and load/store virtual addresses into host
// physical addresses with up to two stages: the VS stage (guest page tables,
// vsatp) or the S stage (host page tables, satp), followed by the G stage
// (hypervisor page tables, hgatp) when virtualization is on (V=1).
//
// Blocks:
//   translation and exception logic  picks the translation context of each
//       access (V, privilege, satp/vsatp/hgatp, ASID, VMID); hypervisor
//       load/stores (lsu_hyp_i, the decoder's hyp ld/st) switch to V=1 with
//       the privilege of hstatus.SPVP and so enable vsatp and hgatp; checks
//       the PTE permissions of both stages and raises page faults (VS/S
//       stage) or guest-page faults (G stage, with the guest-physical address
//       in tval2 shifted right by 2)
//   vITLB, vDTLB  fully associative L1 TLBs with two-stage entries (vtlb)
//   vPTW   nested page-table walker with its GTLB (vptw)
//   L2 TLB optional set-associative second level (l2_tlb), looked up in
//       parallel with the walker on every L1 miss (L2TLB_EN)
//
// Timing: both request ports are answered combinationally in the cycle of a
// TLB hit (or at once with translation off). On a miss the port gets no
// answer; the requester holds its request while the walker (or the L2 TLB)
// refills the L1 TLB, and the retried lookup then hits, or the walk fault is
// answered as an exception in the cycle after the walk ends. Instruction
// misses are walked before data misses. Fences are applied to every TLB in
// the cycle flush_valid_i is high and abort a walk in progress.
//
// Defaults are the design point the paper selects: 16-entry L1 TLBs, 8-entry
// GTLB, no L2 TLB. The permission rules (R/W/X, U with SUM, MXR, HLVX needing
// X, A/D bits, G-stage accesses treated as user accesses) are those of the
// RISC-V privileged specification; the paper states compliance with it.
//
// Lint note: the reset is reported as used both synchronously and
// asynchronously; that comes from the disable condition of the walker's
// handshake assertion (vptw). Every flop resets asynchronously.
module nested_mmu
  import hyp_pkg::*;
#(
  parameter int unsigned ITLB_ENTRIES  = 16,
  parameter int unsigned DTLB_ENTRIES  = 16,
  parameter bit          GTLB_EN       = 1'b1,
  parameter int unsigned GTLB_ENTRIES  = 8,
  parameter bit          L2TLB_EN      = 1'b0,
  parameter bit          L2_EN_4K      = 1'b1,
  parameter int unsigned L2_ENTRIES_4K = 128,
  parameter int unsigned L2_WAYS_4K    = 4,
  parameter bit          L2_EN_2M      = 1'b1,
  parameter int unsigned L2_ENTRIES_2M = 32,
  parameter int unsigned L2_WAYS_2M    = 4
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  // CSR state
  input  priv_e            priv_lvl_i,
  input  logic             v_i,
  input  priv_e            ld_st_priv_lvl_i,   // effective data privilege (MPRV applied)
  input  logic             ld_st_v_i,
  input  satp_t            satp_i,
  input  satp_t            vsatp_i,
  input  hgatp_t           hgatp_i,
  input  logic             mxr_i,              // mstatus.MXR
  input  logic             vmxr_i,             // vsstatus.MXR
  input  logic             sum_i,              // mstatus.SUM
  input  logic             vsum_i,             // vsstatus.SUM
  input  logic             spvp_i,             // hstatus.SPVP
  // fences from the controller
  input  logic             flush_valid_i,
  input  flush_req_t       flush_i,
  // instruction fetch
  input  logic             icache_req_i,
  input  logic [XLEN-1:0]  icache_vaddr_i,
  output logic             icache_resp_valid_o,
  output logic [PLEN-1:0]  icache_paddr_o,
  output logic             icache_ex_valid_o,
  output logic [5:0]       icache_ex_cause_o,
  output logic [XLEN-1:0]  icache_ex_tval_o,
  output logic [XLEN-1:0]  icache_ex_tval2_o,
  // load/store unit
  input  logic             lsu_req_i,
  input  logic [XLEN-1:0]  lsu_vaddr_i,
  input  logic             lsu_is_store_i,
  input  logic             lsu_hyp_i,
  input  logic             lsu_hlvx_i,
  output logic             lsu_resp_valid_o,
  output logic [PLEN-1:0]  lsu_paddr_o,
  output logic             lsu_ex_valid_o,
  output logic [5:0]       lsu_ex_cause_o,
  output logic [XLEN-1:0]  lsu_ex_tval_o,
  output logic [XLEN-1:0]  lsu_ex_tval2_o,
  // PTE memory port of the walker
  output logic             ptw_mem_req_o,
  output logic [PLEN-1:0]  ptw_mem_addr_o,
  input  logic             ptw_mem_gnt_i,
  input  logic             ptw_mem_rvalid_i,
  input  logic [XLEN-1:0]  ptw_mem_rdata_i,
  // events
  output logic             itlb_miss_o,
  output logic             dtlb_miss_o,
  output logic             gtlb_hit_o,
  output logic             gtlb_miss_o,
  output logic             l2_hit_o
);

  // --------------------------------------------------- translation context
  typedef struct packed {
    logic             v;
    priv_e            priv;
    logic             s_en;
    logic             g_en;
    logic [ASIDW-1:0] asid;
    logic [PPNW-1:0]  s_root;
    logic             sum;
    logic             mxr_s;
  } ctx_t;

  function automatic ctx_t make_ctx(logic v, priv_e priv, satp_t satp, satp_t vsatp, hgatp_t hgatp,
                                    logic sum, logic vsum, logic mxr, logic vmxr);
    ctx_t c;
    c.v      = v;
    c.priv   = priv;
    c.s_en   = (priv != PRIV_M) && ((v ? vsatp.mode : satp.mode) == MODE_SV39);
    c.g_en   = (priv != PRIV_M) && v && (hgatp.mode == MODE_SV39);
    c.asid   = v ? vsatp.asid : satp.asid;
    c.s_root = v ? vsatp.ppn : satp.ppn;
    c.sum    = v ? vsum : sum;
    c.mxr_s  = v ? (mxr || vmxr) : mxr;
    return c;
  endfunction

  // {VS/S-stage fault, G-stage fault} of an access hitting entry e
  function automatic logic [1:0] perm_fault(tlb_entry_t e, logic fetch, logic store, logic hlvx,
                                            priv_e priv, logic sum, logic mxr_s, logic mxr_g);
    logic sf, gf;
    pte_t p, g;
    p  = e.s_pte;
    g  = e.g_pte;
    sf = 1'b0;
    gf = 1'b0;
    if (e.s_en) begin
      if (fetch) sf = !p.x || !p.a || ((priv == PRIV_U) && !p.u) || ((priv == PRIV_S) && p.u);
      else begin
        sf = ((priv == PRIV_U) && !p.u) || ((priv == PRIV_S) && p.u && !sum) || !p.a;
        if (store) sf |= !p.w || !p.d;
        else       sf |= hlvx ? !p.x : !(p.r || (mxr_s && p.x));
      end
    end
    if (e.g_en) begin
      gf = !g.u || !g.a;
      if (fetch)      gf |= !g.x;
      else if (store) gf |= !g.w || !g.d;
      else            gf |= hlvx ? !g.x : !(g.r || (mxr_g && g.x));
    end
    return {sf, gf && !sf};
  endfunction

  function automatic logic va_out_of_range(ctx_t c, logic [XLEN-1:0] va);
    return c.s_en ? !((va[63:38] == '0) || (va[63:38] == '1)) : (va[63:GPLEN] != '0);
  endfunction

  ctx_t            fctx, dctx;
  logic [VPNW-1:0] f_vpn, d_vpn;

  assign fctx  = make_ctx(v_i, priv_lvl_i, satp_i, vsatp_i, hgatp_i, sum_i, vsum_i, mxr_i, vmxr_i);
  assign dctx  = make_ctx(lsu_hyp_i ? 1'b1 : ld_st_v_i,
                          lsu_hyp_i ? (spvp_i ? PRIV_S : PRIV_U) : ld_st_priv_lvl_i,
                          satp_i, vsatp_i, hgatp_i, sum_i, vsum_i, mxr_i, vmxr_i);
  assign f_vpn = fctx.s_en ? {2'b00, icache_vaddr_i[38:12]} : icache_vaddr_i[GPLEN-1:12];
  assign d_vpn = dctx.s_en ? {2'b00, lsu_vaddr_i[38:12]} : lsu_vaddr_i[GPLEN-1:12];

  // ------------------------------------------------------------- L1 TLBs
  logic            itlb_hit, dtlb_hit;
  tlb_entry_t      itlb_e, dtlb_e, ptw_update;
  logic [PPNW-1:0] itlb_ppn, itlb_gppn, dtlb_ppn, dtlb_gppn;
  logic            ptw_update_is_instr, ptw_update_from_l2;
  tlb_entry_t      itlb_upd, dtlb_upd;

  always_comb begin
    itlb_upd       = ptw_update;
    itlb_upd.valid = ptw_update.valid && ptw_update_is_instr;
    dtlb_upd       = ptw_update;
    dtlb_upd.valid = ptw_update.valid && !ptw_update_is_instr;
  end

  vtlb #(.ENTRIES(ITLB_ENTRIES)) i_itlb (
    .clk_i, .rst_ni, .flush_i, .flush_valid_i,
    .update_i   (itlb_upd),
    .lu_access_i(icache_req_i && (fctx.s_en || fctx.g_en)),
    .lu_vpn_i   (f_vpn),
    .lu_asid_i  (fctx.asid),
    .lu_vmid_i  (hgatp_i.vmid),
    .lu_v_i     (fctx.v),
    .lu_s_en_i  (fctx.s_en),
    .lu_g_en_i  (fctx.g_en),
    .lu_hit_o   (itlb_hit),
    .lu_entry_o (itlb_e),
    .lu_gppn_o  (itlb_gppn),
    .lu_ppn_o   (itlb_ppn)
  );

  vtlb #(.ENTRIES(DTLB_ENTRIES)) i_dtlb (
    .clk_i, .rst_ni, .flush_i, .flush_valid_i,
    .update_i   (dtlb_upd),
    .lu_access_i(lsu_req_i && (dctx.s_en || dctx.g_en)),
    .lu_vpn_i   (d_vpn),
    .lu_asid_i  (dctx.asid),
    .lu_vmid_i  (hgatp_i.vmid),
    .lu_v_i     (dctx.v),
    .lu_s_en_i  (dctx.s_en),
    .lu_g_en_i  (dctx.g_en),
    .lu_hit_o   (dtlb_hit),
    .lu_entry_o (dtlb_e),
    .lu_gppn_o  (dtlb_gppn),
    .lu_ppn_o   (dtlb_ppn)
  );

  // ------------------------------------------------- walker and L2 TLB
  logic             ptw_ready, ptw_req, ptw_req_instr;
  logic             ptw_error, ptw_error_guest, ptw_error_instr;
  logic [GPLEN-1:0] ptw_error_gpaddr;
  logic             f_range_err, d_range_err, f_miss, d_miss;
  ctx_t             wctx;
  logic [XLEN-1:0]  wvaddr;
  logic             l2_req_ready, l2_resp_valid, l2_resp_hit;
  tlb_entry_t       l2_resp_entry, l2_update;

  assign f_range_err = va_out_of_range(fctx, icache_vaddr_i);
  assign d_range_err = va_out_of_range(dctx, lsu_vaddr_i);
  assign f_miss = icache_req_i && (fctx.s_en || fctx.g_en) && !f_range_err && !itlb_hit;
  assign d_miss = lsu_req_i && (dctx.s_en || dctx.g_en) && !d_range_err && !dtlb_hit;

  assign ptw_req       = (f_miss || d_miss) && !flush_valid_i && !ptw_update.valid && !ptw_error;
  assign ptw_req_instr = f_miss;
  assign wctx          = f_miss ? fctx : dctx;
  assign wvaddr        = f_miss ? icache_vaddr_i : lsu_vaddr_i;

  assign itlb_miss_o = f_miss && ptw_ready && ptw_req;
  assign dtlb_miss_o = d_miss && !f_miss && ptw_ready && ptw_req;

  vptw #(.GTLB_EN(GTLB_EN), .GTLB_ENTRIES(GTLB_ENTRIES)) i_ptw (
    .clk_i, .rst_ni, .flush_valid_i, .flush_i,
    .req_valid_i      (ptw_req),
    .req_ready_o      (ptw_ready),
    .req_is_instr_i   (ptw_req_instr),
    .req_vaddr_i      (wvaddr[GPLEN-1:0]),
    .req_v_i          (wctx.v),
    .req_s_en_i       (wctx.s_en),
    .req_g_en_i       (wctx.g_en),
    .req_asid_i       (wctx.asid),
    .req_vmid_i       (hgatp_i.vmid),
    .req_s_root_ppn_i (wctx.s_root),
    .req_g_root_ppn_i (hgatp_i.ppn),
    .update_o         (ptw_update),
    .update_is_instr_o(ptw_update_is_instr),
    .update_from_l2_o (ptw_update_from_l2),
    .error_o          (ptw_error),
    .error_guest_o    (ptw_error_guest),
    .error_is_instr_o (ptw_error_instr),
    .error_gpaddr_o   (ptw_error_gpaddr),
    .l2_hit_i         (l2_resp_valid && l2_resp_hit),
    .l2_entry_i       (l2_resp_entry),
    .mem_req_o        (ptw_mem_req_o),
    .mem_addr_o       (ptw_mem_addr_o),
    .mem_gnt_i        (ptw_mem_gnt_i),
    .mem_rvalid_i     (ptw_mem_rvalid_i),
    .mem_rdata_i      (ptw_mem_rdata_i),
    .gtlb_hit_o,
    .gtlb_miss_o
  );

  always_comb begin
    l2_update       = ptw_update;
    l2_update.valid = ptw_update.valid && !ptw_update_from_l2;
  end

  if (L2TLB_EN) begin : gen_l2
    l2_tlb #(
      .EN_4K(L2_EN_4K), .ENTRIES_4K(L2_ENTRIES_4K), .WAYS_4K(L2_WAYS_4K),
      .EN_2M(L2_EN_2M), .ENTRIES_2M(L2_ENTRIES_2M), .WAYS_2M(L2_WAYS_2M)
    ) i_l2 (
      .clk_i, .rst_ni,
      .flush_i     (flush_valid_i),
      .req_valid_i (ptw_req && ptw_ready),
      .req_ready_o (l2_req_ready),
      .req_vpn_i   (wctx.s_en ? {2'b00, wvaddr[38:12]} : wvaddr[GPLEN-1:12]),
      .req_asid_i  (wctx.asid),
      .req_vmid_i  (hgatp_i.vmid),
      .req_v_i     (wctx.v),
      .req_s_en_i  (wctx.s_en),
      .req_g_en_i  (wctx.g_en),
      .resp_valid_o(l2_resp_valid),
      .resp_hit_o  (l2_resp_hit),
      .resp_entry_o(l2_resp_entry),
      .update_i    (l2_update)
    );
  end else begin : gen_no_l2
    assign l2_req_ready  = 1'b0;
    assign l2_resp_valid = 1'b0;
    assign l2_resp_hit   = 1'b0;
    assign l2_resp_entry = '0;
  end
  assign l2_hit_o = ptw_update.valid && ptw_update_from_l2;

  // ------------------------------------------------ responses and faults
  always_comb begin
    logic [1:0] pf;
    pf = 2'b00;
    // fetch side
    icache_resp_valid_o = 1'b0;
    icache_paddr_o      = icache_vaddr_i[PLEN-1:0];
    icache_ex_valid_o   = 1'b0;
    icache_ex_cause_o   = '0;
    icache_ex_tval_o    = icache_vaddr_i;
    icache_ex_tval2_o   = '0;
    if (icache_req_i) begin
      if (!(fctx.s_en || fctx.g_en)) begin
        icache_resp_valid_o = 1'b1;
      end else if (f_range_err) begin
        icache_resp_valid_o = 1'b1;
        icache_ex_valid_o   = 1'b1;
        icache_ex_cause_o   = fctx.s_en ? EXC_INSTR_PAGE_FAULT : EXC_INSTR_GUEST_PF;
        icache_ex_tval2_o   = fctx.s_en ? '0 : icache_vaddr_i >> 2;
      end else if (itlb_hit) begin
        pf = perm_fault(itlb_e, 1'b1, 1'b0, 1'b0, fctx.priv, fctx.sum, fctx.mxr_s, mxr_i);
        icache_resp_valid_o = 1'b1;
        icache_paddr_o      = {itlb_ppn, icache_vaddr_i[11:0]};
        icache_ex_valid_o   = |pf;
        icache_ex_cause_o   = pf[1] ? EXC_INSTR_PAGE_FAULT : EXC_INSTR_GUEST_PF;
        icache_ex_tval2_o   = pf[0] ? XLEN'({itlb_gppn, icache_vaddr_i[11:0]} >> 2) : '0;
      end else if (ptw_error && ptw_error_instr) begin
        icache_resp_valid_o = 1'b1;
        icache_ex_valid_o   = 1'b1;
        icache_ex_cause_o   = ptw_error_guest ? EXC_INSTR_GUEST_PF : EXC_INSTR_PAGE_FAULT;
        icache_ex_tval2_o   = ptw_error_guest ? XLEN'(ptw_error_gpaddr >> 2) : '0;
      end
    end
    // data side
    lsu_resp_valid_o = 1'b0;
    lsu_paddr_o      = lsu_vaddr_i[PLEN-1:0];
    lsu_ex_valid_o   = 1'b0;
    lsu_ex_cause_o   = '0;
    lsu_ex_tval_o    = lsu_vaddr_i;
    lsu_ex_tval2_o   = '0;
    if (lsu_req_i) begin
      if (!(dctx.s_en || dctx.g_en)) begin
        lsu_resp_valid_o = 1'b1;
      end else if (d_range_err) begin
        lsu_resp_valid_o = 1'b1;
        lsu_ex_valid_o   = 1'b1;
        lsu_ex_cause_o   = dctx.s_en ? (lsu_is_store_i ? EXC_STORE_PAGE_FAULT : EXC_LOAD_PAGE_FAULT)
                                     : (lsu_is_store_i ? EXC_STORE_GUEST_PF : EXC_LOAD_GUEST_PF);
        lsu_ex_tval2_o   = dctx.s_en ? '0 : lsu_vaddr_i >> 2;
      end else if (dtlb_hit) begin
        pf = perm_fault(dtlb_e, 1'b0, lsu_is_store_i, lsu_hlvx_i, dctx.priv, dctx.sum, dctx.mxr_s, mxr_i);
        lsu_resp_valid_o = 1'b1;
        lsu_paddr_o      = {dtlb_ppn, lsu_vaddr_i[11:0]};
        lsu_ex_valid_o   = |pf;
        lsu_ex_cause_o   = pf[1] ? (lsu_is_store_i ? EXC_STORE_PAGE_FAULT : EXC_LOAD_PAGE_FAULT)
                                 : (lsu_is_store_i ? EXC_STORE_GUEST_PF : EXC_LOAD_GUEST_PF);
        lsu_ex_tval2_o   = pf[0] ? XLEN'({dtlb_gppn, lsu_vaddr_i[11:0]} >> 2) : '0;
      end else if (ptw_error && !ptw_error_instr) begin
        lsu_resp_valid_o = 1'b1;
        lsu_ex_valid_o   = 1'b1;
        lsu_ex_cause_o   = ptw_error_guest ? (lsu_is_store_i ? EXC_STORE_GUEST_PF : EXC_LOAD_GUEST_PF)
                                           : (lsu_is_store_i ? EXC_STORE_PAGE_FAULT : EXC_LOAD_PAGE_FAULT);
        lsu_ex_tval2_o   = ptw_error_guest ? XLEN'(ptw_error_gpaddr >> 2) : '0;
      end
    end
  end
endmodule
