// cva6_hyp_top: hypervisor-extension subsystem of a CVA6 core.
//
// Gathers the parts of the core that hardware virtualization adds or changes
// and wires them as in the core: the hypervisor decoder in the decode stage,
// the Sstc timer comparators of the CSR file, and the nested MMU (vITLB,
// vDTLB, nested page-table walker with GTLB, optional L2 TLB) of the
// load/store unit. The rest of the core (frontend, issue, scoreboard,
// execution units, commit, CSR file), the caches and the CLINT are outside;
// their signals are the ports.
//
// Flow of a hypervisor load/store: the decode-stage decoder marks it with
// id_hyp_ldst_o; the pipeline carries the flag to the LSU, which presents
// the access on lsu_* with lsu_hyp_i set; the MMU then translates it with
// vsatp and hgatp as a guest access.
// Flow of a fence: when SFENCE.VMA / HFENCE.VVMA / HFENCE.GVMA commits
// (commit_valid_i with the instruction and its rs1/rs2 values), a second
// decoder instance recognises it and the top forms the flush request for all
// TLBs: rs1 != x0 filters by address (for HFENCE.GVMA rs1 holds the
// guest-physical address shifted right by 2), rs2 != x0 filters by ASID
// (VMID for HFENCE.GVMA). An SFENCE.VMA executed with V=1 acts on the guest's
// translations of the current VMID, like HFENCE.VVMA.
// CSR accesses to the Sstc registers use the csr_* port (same cycle answer);
// stip_o/vstip_o go to the interrupt logic of the CSR file.
//
// Default parameters are the configuration the paper selects as its optimum:
// Sstc on, 16-entry L1 TLBs, 8-entry GTLB, no L2 TLB.
//
// Lint note: the reset is reported as used both synchronously and
// asynchronously; that comes from the disable condition of the walker's
// handshake assertion (vptw). Every flop resets asynchronously.
module cva6_hyp_top
  import hyp_pkg::*;
#(
  parameter bit          SSTC_EN       = 1'b1,
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
  input  logic            clk_i,
  input  logic            rst_ni,
  // CSR state (from the CSR file)
  input  logic [1:0]      priv_lvl_i,        // 0 U, 1 S, 3 M
  input  logic            v_i,
  input  logic [1:0]      ld_st_priv_lvl_i,
  input  logic            ld_st_v_i,
  input  logic [XLEN-1:0] satp_i,            // MODE[63:60] ASID[59:44] PPN[43:0]
  input  logic [XLEN-1:0] vsatp_i,
  input  logic [XLEN-1:0] hgatp_i,           // MODE[63:60] VMID[57:44] PPN[43:0]
  input  logic            mxr_i,
  input  logic            vmxr_i,
  input  logic            sum_i,
  input  logic            vsum_i,
  input  logic            spvp_i,
  input  logic            tvm_i,
  input  logic            vtvm_i,
  input  logic            hu_i,
  input  logic            mcounteren_tm_i,
  input  logic            hcounteren_tm_i,
  // platform timer (CLINT mtime)
  input  logic [XLEN-1:0] time_i,
  // decode stage
  input  logic [31:0]     id_instr_i,
  output logic            id_hyp_ldst_o,
  output logic            id_hlvx_o,
  output logic            id_is_load_o,
  output logic            id_is_store_o,
  output logic [1:0]      id_size_o,
  output logic            id_unsigned_o,
  output logic            id_fence_o,
  output logic            id_ex_illegal_o,
  output logic            id_ex_virtual_o,
  // commit of a fence
  input  logic            commit_valid_i,
  input  logic [31:0]     commit_instr_i,
  input  logic [XLEN-1:0] commit_rs1_i,
  input  logic [XLEN-1:0] commit_rs2_i,
  // Sstc CSR access
  input  logic            csr_valid_i,
  input  logic [11:0]     csr_addr_i,
  input  logic            csr_we_i,
  input  logic [XLEN-1:0] csr_wdata_i,
  output logic            csr_hit_o,
  output logic [XLEN-1:0] csr_rdata_o,
  output logic            csr_ex_illegal_o,
  output logic            csr_ex_virtual_o,
  output logic            stip_o,
  output logic            vstip_o,
  output logic            menvcfg_stce_o,
  output logic            henvcfg_stce_o,
  output logic [XLEN-1:0] htimedelta_o,
  // instruction fetch translation
  input  logic            icache_req_i,
  input  logic [XLEN-1:0] icache_vaddr_i,
  output logic            icache_resp_valid_o,
  output logic [PLEN-1:0] icache_paddr_o,
  output logic            icache_ex_valid_o,
  output logic [5:0]      icache_ex_cause_o,
  output logic [XLEN-1:0] icache_ex_tval_o,
  output logic [XLEN-1:0] icache_ex_tval2_o,
  // load/store translation
  input  logic            lsu_req_i,
  input  logic [XLEN-1:0] lsu_vaddr_i,
  input  logic            lsu_is_store_i,
  input  logic            lsu_hyp_i,
  input  logic            lsu_hlvx_i,
  output logic            lsu_resp_valid_o,
  output logic [PLEN-1:0] lsu_paddr_o,
  output logic            lsu_ex_valid_o,
  output logic [5:0]      lsu_ex_cause_o,
  output logic [XLEN-1:0] lsu_ex_tval_o,
  output logic [XLEN-1:0] lsu_ex_tval2_o,
  // page-table walker memory port (to the data cache)
  output logic            ptw_mem_req_o,
  output logic [PLEN-1:0] ptw_mem_addr_o,
  input  logic            ptw_mem_gnt_i,
  input  logic            ptw_mem_rvalid_i,
  input  logic [XLEN-1:0] ptw_mem_rdata_i,
  // events (performance counters)
  output logic            flush_o,
  output logic            itlb_miss_o,
  output logic            dtlb_miss_o,
  output logic            gtlb_hit_o,
  output logic            gtlb_miss_o,
  output logic            l2_hit_o
);
  // typed views of the CSR-state ports
  priv_e  priv_lvl, ld_st_priv_lvl;
  satp_t  satp, vsatp;
  hgatp_t hgatp;
  assign priv_lvl       = priv_e'(priv_lvl_i);
  assign ld_st_priv_lvl = priv_e'(ld_st_priv_lvl_i);
  assign satp           = satp_t'(satp_i);
  assign vsatp          = satp_t'(vsatp_i);
  assign hgatp          = hgatp_t'(hgatp_i);

  // ------------------------------------------------------ decode stage
  logic id_sfence, id_hvvma, id_hgvma;

  hyp_decoder i_id_dec (
    .instr_i      (id_instr_i),
    .priv_lvl_i   (priv_lvl),
    .v_i,
    .tvm_i,
    .vtvm_i,
    .hu_i,
    .valid_o      (),
    .hyp_ldst_o   (id_hyp_ldst_o),
    .is_load_o    (id_is_load_o),
    .is_store_o   (id_is_store_o),
    .hlvx_o       (id_hlvx_o),
    .size_o       (id_size_o),
    .unsigned_o   (id_unsigned_o),
    .sfence_o     (id_sfence),
    .hfence_vvma_o(id_hvvma),
    .hfence_gvma_o(id_hgvma),
    .illegal_o    (id_ex_illegal_o),
    .virtual_o    (id_ex_virtual_o)
  );
  assign id_fence_o = id_sfence || id_hvvma || id_hgvma;

  // ------------------------------------------------------ fence commit
  logic       c_sfence, c_hvvma, c_hgvma, c_illegal, c_virtual;
  logic       flush_valid;
  flush_req_t flush;

  hyp_decoder i_commit_dec (
    .instr_i      (commit_instr_i),
    .priv_lvl_i   (priv_lvl),
    .v_i,
    .tvm_i,
    .vtvm_i,
    .hu_i,
    .valid_o      (),
    .hyp_ldst_o   (),
    .is_load_o    (),
    .is_store_o   (),
    .hlvx_o       (),
    .size_o       (),
    .unsigned_o   (),
    .sfence_o     (c_sfence),
    .hfence_vvma_o(c_hvvma),
    .hfence_gvma_o(c_hgvma),
    .illegal_o    (c_illegal),
    .virtual_o    (c_virtual)
  );

  always_comb begin
    logic rs1_nz, rs2_nz;
    rs1_nz           = (commit_instr_i[19:15] != 5'd0);
    rs2_nz           = (commit_instr_i[24:20] != 5'd0);
    flush_valid      = commit_valid_i && (c_sfence || c_hvvma || c_hgvma) && !c_illegal && !c_virtual;
    flush            = '0;
    flush.sfence     = c_sfence && !v_i;
    flush.hvvma      = c_hvvma || (c_sfence && v_i);
    flush.hgvma      = c_hgvma;
    flush.addr_valid = rs1_nz;
    flush.asid_valid = rs2_nz && !c_hgvma;
    flush.vmid_valid = c_hgvma ? rs2_nz : 1'b1;
    flush.addr       = c_hgvma ? (commit_rs1_i << 2) : commit_rs1_i;
    flush.asid       = commit_rs2_i[ASIDW-1:0];
    flush.vmid       = c_hgvma ? commit_rs2_i[VMIDW-1:0] : hgatp.vmid;
  end
  assign flush_o = flush_valid;

  // ------------------------------------------------------------- Sstc
  sstc_timer #(.SSTC_EN(SSTC_EN)) i_sstc (
    .clk_i,
    .rst_ni,
    .time_i,
    .priv_lvl_i   (priv_lvl),
    .v_i,
    .mcounteren_tm_i,
    .hcounteren_tm_i,
    .csr_valid_i,
    .csr_addr_i,
    .csr_we_i,
    .csr_wdata_i,
    .csr_hit_o,
    .csr_rdata_o,
    .csr_illegal_o (csr_ex_illegal_o),
    .csr_virtual_o (csr_ex_virtual_o),
    .stip_o,
    .vstip_o,
    .menvcfg_stce_o,
    .henvcfg_stce_o,
    .htimedelta_o
  );

  // -------------------------------------------------------- nested MMU
  nested_mmu #(
    .ITLB_ENTRIES (ITLB_ENTRIES),
    .DTLB_ENTRIES (DTLB_ENTRIES),
    .GTLB_EN      (GTLB_EN),
    .GTLB_ENTRIES (GTLB_ENTRIES),
    .L2TLB_EN     (L2TLB_EN),
    .L2_EN_4K     (L2_EN_4K),
    .L2_ENTRIES_4K(L2_ENTRIES_4K),
    .L2_WAYS_4K   (L2_WAYS_4K),
    .L2_EN_2M     (L2_EN_2M),
    .L2_ENTRIES_2M(L2_ENTRIES_2M),
    .L2_WAYS_2M   (L2_WAYS_2M)
  ) i_mmu (
    .clk_i,
    .rst_ni,
    .priv_lvl_i   (priv_lvl),
    .v_i,
    .ld_st_priv_lvl_i(ld_st_priv_lvl),
    .ld_st_v_i,
    .satp_i       (satp),
    .vsatp_i      (vsatp),
    .hgatp_i      (hgatp),
    .mxr_i,
    .vmxr_i,
    .sum_i,
    .vsum_i,
    .spvp_i,
    .flush_valid_i(flush_valid),
    .flush_i      (flush),
    .icache_req_i,
    .icache_vaddr_i,
    .icache_resp_valid_o,
    .icache_paddr_o,
    .icache_ex_valid_o,
    .icache_ex_cause_o,
    .icache_ex_tval_o,
    .icache_ex_tval2_o,
    .lsu_req_i,
    .lsu_vaddr_i,
    .lsu_is_store_i,
    .lsu_hyp_i,
    .lsu_hlvx_i,
    .lsu_resp_valid_o,
    .lsu_paddr_o,
    .lsu_ex_valid_o,
    .lsu_ex_cause_o,
    .lsu_ex_tval_o,
    .lsu_ex_tval2_o,
    .ptw_mem_req_o,
    .ptw_mem_addr_o,
    .ptw_mem_gnt_i,
    .ptw_mem_rvalid_i,
    .ptw_mem_rdata_i,
    .itlb_miss_o,
    .dtlb_miss_o,
    .gtlb_hit_o,
    .gtlb_miss_o,
    .l2_hit_o
  );
endmodule
