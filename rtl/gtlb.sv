// gtlb: G-stage TLB inside the nested page-table walker.
//
// Caches G-stage translations (guest-physical page -> host-physical page) of
// the addresses the walker uses to read VS-stage page-table entries. During a
// nested walk each VS-stage PTE pointer is a guest-physical address that
// would otherwise need its own three-level G-stage walk; a GTLB hit supplies
// the host-physical address at once.
//
// Structure, as described for the design: fully associative, all entries
// searched in parallel, any translation in any entry, 4 KiB / 2 MiB / 1 GiB
// pages, tree-PLRU replacement, entries in flip-flops. HFENCE.GVMA flushes
// entries, optionally filtered by VMID and by guest-physical address; other
// fences leave the GTLB alone because it holds only G-stage state.
//
// Timing: lookup is combinational (hit, host address and PTE in the same
// cycle); updates and flushes take effect at the next clock edge, the flush
// winning over an update in the same cycle. Refill goes to the first invalid
// entry, else the PLRU victim (this design's choice).
module gtlb
  import hyp_pkg::*;
#(
  parameter int unsigned ENTRIES = 8
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             flush_valid_i,
  input  flush_req_t       flush_i,
  // refill
  input  logic             update_valid_i,
  input  logic [VPNW-1:0]  update_gppn_i,
  input  logic [VMIDW-1:0] update_vmid_i,
  input  pg_size_e         update_size_i,
  input  pte_t             update_pte_i,
  // lookup
  input  logic             lu_access_i,
  input  logic [GPLEN-1:0] lu_gpaddr_i,
  input  logic [VMIDW-1:0] lu_vmid_i,
  output logic             lu_hit_o,
  output logic [PLEN-1:0]  lu_hpaddr_o,
  output pte_t             lu_pte_o,
  output pg_size_e         lu_size_o
);
  localparam int unsigned IW = $clog2(ENTRIES);

  typedef struct packed {
    logic             valid;
    logic [VMIDW-1:0] vmid;
    logic [VPNW-1:0]  gppn;
    pg_size_e         size;
    pte_t             pte;
  } gtlb_entry_t;

  gtlb_entry_t [ENTRIES-1:0] tlb_q, tlb_d;
  logic [ENTRIES-1:0]        hit_vec;
  logic [IW-1:0]             hit_idx, victim_plru, repl_idx, invalid_idx;
  logic                      has_invalid;
  logic [VPNW-1:0]           lu_gppn;

  assign lu_gppn = lu_gpaddr_i[GPLEN-1:12];

  always_comb begin
    for (int unsigned i = 0; i < ENTRIES; i++) begin
      hit_vec[i] = tlb_q[i].valid && (tlb_q[i].vmid == lu_vmid_i)
                && vpn_match(tlb_q[i].gppn, lu_gppn, tlb_q[i].size);
    end
    hit_idx = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) if (hit_vec[i]) hit_idx = IW'(i);
  end

  assign lu_hit_o    = lu_access_i && (hit_vec != '0);
  assign lu_pte_o    = tlb_q[hit_idx].pte;
  assign lu_size_o   = tlb_q[hit_idx].size;
  assign lu_hpaddr_o = {compose_ppn(tlb_q[hit_idx].pte.ppn, lu_gppn, tlb_q[hit_idx].size),
                        lu_gpaddr_i[11:0]};

  always_comb begin
    has_invalid = 1'b0;
    invalid_idx = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (!tlb_q[i].valid) begin
        has_invalid = 1'b1;
        invalid_idx = IW'(i);
      end
    end
  end
  assign repl_idx = has_invalid ? invalid_idx : victim_plru;

  plru_tree #(.ENTRIES(ENTRIES)) i_plru (
    .clk_i,
    .rst_ni,
    .access_valid_i(update_valid_i || lu_hit_o),
    .access_idx_i  (update_valid_i ? repl_idx : hit_idx),
    .victim_o      (victim_plru)
  );

  always_comb begin
    tlb_d = tlb_q;
    if (flush_valid_i && flush_i.hgvma) begin
      for (int unsigned i = 0; i < ENTRIES; i++) begin
        if ((!flush_i.vmid_valid || (tlb_q[i].vmid == flush_i.vmid))
            && (!flush_i.addr_valid || vpn_match(tlb_q[i].gppn, flush_i.addr[GPLEN-1:12], tlb_q[i].size)))
          tlb_d[i].valid = 1'b0;
      end
    end else if (update_valid_i) begin
      tlb_d[repl_idx].valid = 1'b1;
      tlb_d[repl_idx].vmid  = update_vmid_i;
      tlb_d[repl_idx].gppn  = update_gppn_i;
      tlb_d[repl_idx].size  = update_size_i;
      tlb_d[repl_idx].pte   = update_pte_i;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) tlb_q <= '0;
    else         tlb_q <= tlb_d;
  end
endmodule
