// hyp_pkg: types, constants and helper functions shared by the hypervisor
// extension of the CVA6 core (nested MMU, Sstc timer, hypervisor decoder).
//
// Address widths follow the RISC-V schemes the design supports: Sv39 for the
// (guest) virtual address (39 bits), Sv39x4 for the guest-physical address
// (41 bits) and the 56-bit physical address of CVA6. A page number is kept
// 29 bits wide everywhere (GPA[40:12]); a 39-bit virtual address uses only its
// low 27 bits and carries zeros above.
//
// One translation is held as a tlb_entry_t: it stores the VS-stage (or
// S-stage) leaf PTE and the G-stage leaf PTE side by side, each with its own
// page size, together with the ASID and VMID tags. This "both stages in one
// entry" layout is the one the design uses in every TLB level. The ASID and
// VMID widths (16 and 14 bits) are those of the RISC-V privileged
// specification for RV64 and are this design's choice where unstated.
package hyp_pkg;

  localparam int unsigned XLEN  = 64;
  localparam int unsigned VLEN  = 39;   // Sv39 guest-virtual / virtual address
  localparam int unsigned GPLEN = 41;   // Sv39x4 guest-physical address
  localparam int unsigned PLEN  = 56;   // host-physical address
  localparam int unsigned PPNW  = 44;   // PPN field of an Sv39 PTE
  localparam int unsigned VPNW  = 29;   // page number of a GPA (VA uses 27 bits)
  localparam int unsigned ASIDW = 16;
  localparam int unsigned VMIDW = 14;

  // satp / vsatp / hgatp MODE encodings
  localparam logic [3:0] MODE_BARE   = 4'd0;
  localparam logic [3:0] MODE_SV39   = 4'd8;  // Sv39 in satp/vsatp, Sv39x4 in hgatp

  // Page size of one stage (level at which the leaf PTE was found)
  typedef enum logic [1:0] {
    PG_4K = 2'd0,
    PG_2M = 2'd1,
    PG_1G = 2'd2
  } pg_size_e;

  typedef enum logic [1:0] {
    PRIV_U = 2'd0,
    PRIV_S = 2'd1,
    PRIV_M = 2'd3
  } priv_e;

  // Sv39 / Sv39x4 page-table entry
  typedef struct packed {
    logic [9:0]      reserved;
    logic [PPNW-1:0] ppn;
    logic [1:0]      rsw;
    logic            d, a, g, u, x, w, r, v;
  } pte_t;

  // satp and vsatp layout (RV64)
  typedef struct packed {
    logic [3:0]       mode;
    logic [ASIDW-1:0] asid;
    logic [PPNW-1:0]  ppn;
  } satp_t;

  // hgatp layout (RV64)
  typedef struct packed {
    logic [3:0]       mode;
    logic [1:0]       zero;
    logic [VMIDW-1:0] vmid;
    logic [PPNW-1:0]  ppn;
  } hgatp_t;

  // One combined two-stage translation, as stored in the L1 TLBs and L2 TLB
  typedef struct packed {
    logic             valid;
    logic             v;       // translation belongs to a guest (V=1)
    logic             s_en;    // VS/S stage was active
    logic             g_en;    // G stage was active
    logic [ASIDW-1:0] asid;
    logic [VMIDW-1:0] vmid;
    logic [VPNW-1:0]  vpn;     // GVA/VA page number, or GPA page number if !s_en
    pg_size_e         s_size;
    pg_size_e         g_size;
    pte_t             s_pte;
    pte_t             g_pte;
  } tlb_entry_t;

  // A committed SFENCE.VMA / HFENCE.VVMA / HFENCE.GVMA, already decoded.
  // addr is a virtual address for SFENCE/HFENCE.VVMA and a guest-physical
  // address for HFENCE.GVMA.
  typedef struct packed {
    logic             sfence;
    logic             hvvma;
    logic             hgvma;
    logic             addr_valid;
    logic             asid_valid;
    logic             vmid_valid;
    logic [XLEN-1:0]  addr;
    logic [ASIDW-1:0] asid;
    logic [VMIDW-1:0] vmid;
  } flush_req_t;

  // Exception causes (RISC-V privileged specification, hypervisor extension)
  localparam logic [5:0] EXC_ILLEGAL_INSTR      = 6'd2;
  localparam logic [5:0] EXC_INSTR_PAGE_FAULT   = 6'd12;
  localparam logic [5:0] EXC_LOAD_PAGE_FAULT    = 6'd13;
  localparam logic [5:0] EXC_STORE_PAGE_FAULT   = 6'd15;
  localparam logic [5:0] EXC_INSTR_GUEST_PF     = 6'd20;
  localparam logic [5:0] EXC_LOAD_GUEST_PF      = 6'd21;
  localparam logic [5:0] EXC_VIRTUAL_INSTR      = 6'd22;
  localparam logic [5:0] EXC_STORE_GUEST_PF     = 6'd23;

  // Smaller of two page sizes: the size a combined entry is matched at
  function automatic pg_size_e min_size(pg_size_e a, pg_size_e b);
    return (a < b) ? a : b;
  endfunction

  // Page-number match at a given page size (upper bits always compared)
  function automatic logic vpn_match(logic [VPNW-1:0] a, logic [VPNW-1:0] b, pg_size_e sz);
    logic m;
    m = (a[VPNW-1:18] == b[VPNW-1:18]);
    if (sz != PG_1G) m &= (a[17:9] == b[17:9]);
    if (sz == PG_4K) m &= (a[8:0] == b[8:0]);
    return m;
  endfunction

  // Output PPN of a leaf: the PTE's PPN with the low bits a superpage leaves
  // untranslated taken from the input page number.
  function automatic logic [PPNW-1:0] compose_ppn(logic [PPNW-1:0] ppn, logic [VPNW-1:0] vpn,
                                                  pg_size_e sz);
    logic [PPNW-1:0] r;
    r = ppn;
    if (sz != PG_4K) r[8:0]  = vpn[8:0];
    if (sz == PG_1G) r[17:9] = vpn[17:9];
    return r;
  endfunction

  // Page size of a leaf found at walk level lvl (0 = root)
  function automatic pg_size_e lvl_to_size(logic [1:0] lvl);
    return (lvl == 2'd0) ? PG_1G : (lvl == 2'd1) ? PG_2M : PG_4K;
  endfunction

  // Superpage alignment: the PPN bits a superpage leaves untranslated must be 0
  function automatic logic misaligned(pte_t pte, logic [1:0] lvl);
    return ((lvl == 2'd0) && (pte.ppn[17:0] != '0)) || ((lvl == 2'd1) && (pte.ppn[8:0] != '0));
  endfunction

  // A PTE that ends the walk with a fault: not valid, or writable and not readable
  function automatic logic pte_invalid(pte_t pte);
    return !pte.v || (!pte.r && pte.w);
  endfunction

  function automatic logic pte_is_leaf(pte_t pte);
    return pte.r || pte.x;
  endfunction

endpackage
