// vtlb: virtualization-aware L1 TLB (used as both the vITLB and the vDTLB).
//
// A small fully associative TLB whose every entry holds one complete
// two-stage translation: the VS-stage (or S-stage) leaf PTE and the G-stage
// leaf PTE, each with its own page size, plus ASID and VMID tags. All entries
// are compared in parallel in the same cycle (the lookup is combinational, as
// in CVA6). An entry is matched at the merged size, the smaller of its two
// page sizes, so a 4 KiB guest page mapped by a 2 MiB host page occupies a
// 4 KiB entry. The output page number is formed from both PTEs: the VS-stage
// PTE gives the guest-physical page, the G-stage PTE translates that page.
//
// Flushes (one cycle, taking effect at the next clock edge):
//   sfence : host entries (V=0), optionally filtered by address and ASID
//   hvvma  : guest entries of flush_i.vmid, optionally filtered by guest
//            virtual address and ASID
//   hgvma  : guest entries, optionally filtered by VMID and by guest-physical
//            address (matched at the G-stage page size)
// Global PTEs are kept by ASID-filtered flushes.
//
// Replacement: first invalid entry, otherwise the tree-PLRU victim; hits and
// refills update the PLRU. Entry count, two-stage entries, merged-size
// lookup, VMID tags and the fence filtering follow the paper; the refill
// choice and the flush-over-update priority are this design's choices.
module vtlb
  import hyp_pkg::*;
#(
  parameter int unsigned ENTRIES = 16
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  flush_req_t       flush_i,
  input  logic             flush_valid_i,
  // refill from the page-table walker (or L2 TLB)
  input  tlb_entry_t       update_i,
  // lookup
  input  logic             lu_access_i,
  input  logic [VPNW-1:0]  lu_vpn_i,
  input  logic [ASIDW-1:0] lu_asid_i,
  input  logic [VMIDW-1:0] lu_vmid_i,
  input  logic             lu_v_i,
  input  logic             lu_s_en_i,
  input  logic             lu_g_en_i,
  output logic             lu_hit_o,
  output tlb_entry_t       lu_entry_o,
  output logic [PPNW-1:0]  lu_gppn_o,   // guest-physical page (VS-stage output)
  output logic [PPNW-1:0]  lu_ppn_o     // host-physical page
);
  localparam int unsigned IW = $clog2(ENTRIES);

  tlb_entry_t [ENTRIES-1:0] tlb_q, tlb_d;
  logic [ENTRIES-1:0]       hit_vec;
  logic [IW-1:0]            hit_idx, victim_plru, repl_idx;
  logic                     has_invalid;
  logic [IW-1:0]            invalid_idx;

  // ---------------------------------------------------------------- lookup
  always_comb begin
    for (int unsigned i = 0; i < ENTRIES; i++) begin
      hit_vec[i] = tlb_q[i].valid
                && (tlb_q[i].v == lu_v_i)
                && (tlb_q[i].s_en == lu_s_en_i)
                && (tlb_q[i].g_en == lu_g_en_i)
                && (!tlb_q[i].s_en || tlb_q[i].s_pte.g || (tlb_q[i].asid == lu_asid_i))
                && (!tlb_q[i].v || (tlb_q[i].vmid == lu_vmid_i))
                && vpn_match(tlb_q[i].vpn, lu_vpn_i,
                             tlb_q[i].g_en ? (tlb_q[i].s_en ? min_size(tlb_q[i].s_size, tlb_q[i].g_size)
                                                             : tlb_q[i].g_size)
                                           : tlb_q[i].s_size);
    end
  end

  always_comb begin
    hit_idx = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) if (hit_vec[i]) hit_idx = IW'(i);
  end

  assign lu_hit_o   = lu_access_i && (hit_vec != '0);
  assign lu_entry_o = tlb_q[hit_idx];

  always_comb begin
    tlb_entry_t e;
    e = tlb_q[hit_idx];
    lu_gppn_o = e.s_en ? compose_ppn(e.s_pte.ppn, lu_vpn_i, e.s_size) : PPNW'(lu_vpn_i);
    lu_ppn_o  = e.g_en ? compose_ppn(e.g_pte.ppn, lu_gppn_o[VPNW-1:0], e.g_size) : lu_gppn_o;
  end

  // ----------------------------------------------------------- replacement
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
    .access_valid_i(update_i.valid || lu_hit_o),
    .access_idx_i  (update_i.valid ? repl_idx : hit_idx),
    .victim_o      (victim_plru)
  );

  // ----------------------------------------------------------------- flush
  function automatic logic flush_hit(tlb_entry_t e, flush_req_t f);
    logic [VPNW-1:0] fvpn, fgppn, egppn;
    logic            m;
    fvpn  = {2'b00, f.addr[38:12]};
    fgppn = f.addr[40:12];
    egppn = e.s_en ? compose_ppn(e.s_pte.ppn, e.vpn, e.s_size)[VPNW-1:0] : e.vpn;
    m = 1'b0;
    if (f.sfence && !e.v) begin
      m = (!f.addr_valid || vpn_match(e.vpn, fvpn, e.s_size))
       && (!f.asid_valid || (!e.s_pte.g && (e.asid == f.asid)));
    end else if (f.hvvma && e.v) begin
      m = (e.vmid == f.vmid)
       && (!f.addr_valid || vpn_match(e.vpn, fvpn,
                                      e.s_en ? min_size(e.s_size, e.g_size) : e.g_size))
       && (!f.asid_valid || (e.s_en && !e.s_pte.g && (e.asid == f.asid)));
    end else if (f.hgvma && e.v) begin
      m = (!f.vmid_valid || (e.vmid == f.vmid))
       && (!f.addr_valid || !e.g_en || vpn_match(egppn, fgppn, e.g_size));
    end
    return m;
  endfunction

  always_comb begin
    tlb_d = tlb_q;
    if (flush_valid_i) begin
      for (int unsigned i = 0; i < ENTRIES; i++) begin
        if (flush_hit(tlb_q[i], flush_i)) tlb_d[i].valid = 1'b0;
      end
    end else if (update_i.valid) begin
      tlb_d[repl_idx] = update_i;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) tlb_q <= '0;
    else         tlb_q <= tlb_d;
  end
endmodule
