// vptw: nested (two-stage) page-table walker with G-stage TLB.
//
// Walks Sv39 VS/S-stage tables and Sv39x4 G-stage tables. Besides the walk
// state (idle, G-stage start, memory request, memory wait) it keeps the
// translation stage it is in, the control state that makes the walk nested:
//   S_STAGE    reading a VS-stage (or S-stage) PTE
//   G_INTERMED translating the guest-physical address of the next VS-stage
//              PTE into a host-physical address
//   G_FINAL    translating the guest-physical address produced by the
//              VS-stage leaf (or the guest address itself when the VS stage
//              is Bare) into the final host-physical address
// With G stage Bare the walk is a plain S/VS-stage walk; with VS stage Bare
// only the G_FINAL walk runs. A full walk takes up to 15 PTE reads
// (3 VS-stage reads, each preceded by up to 3 G-stage reads, plus 3 for the
// final G-stage walk).
//
// GTLB: every G_INTERMED step first looks up the GTLB (combinational, in the
// G-stage start state). A hit skips the three G-stage reads; a miss walks the
// G stage and refills the GTLB with the leaf found. The final G-stage walk
// does not use the GTLB, which holds only translations of VS-stage page-table
// pointers. GTLB_EN=0 removes it (the design-space baseline).
//
// L2 TLB: the L2 TLB is looked up in parallel with the walk. If it reports a
// hit, the walk is abandoned (once any outstanding PTE read has returned) and
// the L2 entry is written to the L1 TLB instead.
//
// Result: on completion update_o.valid pulses for one cycle with the combined
// VS+G entry, ASID and VMID; on a fault error_o pulses, error_guest_o telling
// a guest-page fault (G stage) from a page fault (VS/S stage), with the
// faulting guest-physical address. A flush abandons the walk without result.
//
// Memory port: one PTE read at a time; mem_req_o is held until mem_gnt_i, the
// 64-bit PTE arrives with mem_rvalid_i some cycles later.
//
// The paper gives the three translation stages, the GTLB use on intermediate
// steps, the combined TLB update with ASID/VMID, and the parallel L2 lookup.
// The state encoding, the fault checks in the walker (valid bit, W without
// R, superpage alignment, U/R/A on G-stage leaves for implicit reads, GPA
// width), the memory handshake and the abort rules are this design's,
// following the RISC-V privileged specification. Accessed/dirty bits are not
// updated by hardware: a clear A (or D on a store) raises a fault, as in CVA6.
//
// Lint note: the reset is reported as used both synchronously and
// asynchronously. The only synchronous use is the disable condition of the
// memory-handshake assertion at the end; every flop resets asynchronously.
module vptw
  import hyp_pkg::*;
#(
  parameter bit          GTLB_EN      = 1'b1,
  parameter int unsigned GTLB_ENTRIES = 8
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             flush_valid_i,
  input  flush_req_t       flush_i,
  // walk request
  input  logic             req_valid_i,
  output logic             req_ready_o,
  input  logic             req_is_instr_i,
  input  logic [GPLEN-1:0] req_vaddr_i,
  input  logic             req_v_i,
  input  logic             req_s_en_i,
  input  logic             req_g_en_i,
  input  logic [ASIDW-1:0] req_asid_i,
  input  logic [VMIDW-1:0] req_vmid_i,
  input  logic [PPNW-1:0]  req_s_root_ppn_i,
  input  logic [PPNW-1:0]  req_g_root_ppn_i,
  // result
  output tlb_entry_t       update_o,
  output logic             update_is_instr_o,
  output logic             update_from_l2_o,
  output logic             error_o,
  output logic             error_guest_o,
  output logic             error_is_instr_o,
  output logic [GPLEN-1:0] error_gpaddr_o,
  // L2 TLB answer for the walk in progress
  input  logic             l2_hit_i,
  input  tlb_entry_t       l2_entry_i,
  // PTE memory port (towards the data cache)
  output logic             mem_req_o,
  output logic [PLEN-1:0]  mem_addr_o,
  input  logic             mem_gnt_i,
  input  logic             mem_rvalid_i,
  input  logic [XLEN-1:0]  mem_rdata_i,
  // events
  output logic             gtlb_hit_o,
  output logic             gtlb_miss_o
);

  typedef enum logic [2:0] {IDLE, G_START, MEM_REQ, MEM_WAIT, DRAIN} state_e;
  typedef enum logic [1:0] {S_STAGE, G_INTERMED, G_FINAL} stage_e;

  state_e           state_q, state_d;
  stage_e           stage_q, stage_d;
  logic             is_instr_q, v_q, s_en_q, g_en_q;
  logic [GPLEN-1:0] vaddr_q;
  logic [ASIDW-1:0] asid_q;
  logic [VMIDW-1:0] vmid_q;
  logic [PPNW-1:0]  g_root_q;
  logic [1:0]       s_lvl_q, s_lvl_d, g_lvl_q, g_lvl_d;
  logic [PLEN-1:0]  g_target_q, g_target_d;   // GPA under G-stage translation
  logic [PLEN-1:0]  addr_q, addr_d;           // PTE address of the next read
  pte_t             s_pte_q, s_pte_d;
  pg_size_e         s_size_q, s_size_d;
  logic             l2_hit_q, l2_hit_d;
  tlb_entry_t       l2_entry_q, l2_entry_d;

  tlb_entry_t       update_d;
  logic             update_from_l2_d;
  logic             error_d, error_guest_d;
  logic [GPLEN-1:0] error_gpaddr_d;

  // GTLB interface
  logic             gtlb_lu_access, gtlb_lu_hit;
  logic [PLEN-1:0]  gtlb_lu_hpaddr;
  logic             gtlb_upd_valid;
  pte_t             gtlb_upd_pte;
  pg_size_e         gtlb_upd_size;

  pte_t             pte;
  assign pte = pte_t'(mem_rdata_i);

  // VS-stage index of the virtual address at walk level lvl
  function automatic logic [8:0] va_idx(logic [GPLEN-1:0] va, logic [1:0] lvl);
    return (lvl == 2'd0) ? va[38:30] : (lvl == 2'd1) ? va[29:21] : va[20:12];
  endfunction

  // G-stage PTE offset (index * 8) of a guest-physical address at level lvl;
  // the Sv39x4 root index is 11 bits wide (16 KiB root table)
  function automatic logic [PLEN-1:0] ga_off(logic [PLEN-1:0] ga, logic [1:0] lvl);
    return (lvl == 2'd0) ? PLEN'({ga[40:30], 3'b000}) :
           (lvl == 2'd1) ? PLEN'({ga[29:21], 3'b000}) : PLEN'({ga[20:12], 3'b000});
  endfunction

  assign req_ready_o = (state_q == IDLE);
  assign mem_req_o   = (state_q == MEM_REQ);
  assign mem_addr_o  = addr_q;

  assign gtlb_lu_access = (state_q == G_START) && (stage_q == G_INTERMED);

  always_comb begin
    state_d          = state_q;
    stage_d          = stage_q;
    s_lvl_d          = s_lvl_q;
    g_lvl_d          = g_lvl_q;
    g_target_d       = g_target_q;
    addr_d           = addr_q;
    s_pte_d          = s_pte_q;
    s_size_d         = s_size_q;
    l2_hit_d         = l2_hit_q;
    l2_entry_d       = l2_entry_q;
    update_d         = '0;
    update_from_l2_d = 1'b0;
    error_d          = 1'b0;
    error_guest_d    = 1'b0;
    error_gpaddr_d   = '0;
    gtlb_upd_valid   = 1'b0;
    gtlb_upd_pte     = pte;
    gtlb_upd_size    = lvl_to_size(g_lvl_q);
    gtlb_hit_o       = 1'b0;
    gtlb_miss_o      = 1'b0;

    unique case (state_q)
      IDLE: begin
        l2_hit_d = 1'b0;
        if (req_valid_i) begin
          if (req_s_en_i) begin
            s_lvl_d = 2'd0;
            addr_d  = {req_s_root_ppn_i, 12'b0} + PLEN'({va_idx(req_vaddr_i, 2'd0), 3'b000});
            if (req_g_en_i) begin
              stage_d    = G_INTERMED;
              g_target_d = {req_s_root_ppn_i, 12'b0} + PLEN'({va_idx(req_vaddr_i, 2'd0), 3'b000});
              state_d    = G_START;
            end else begin
              stage_d = S_STAGE;
              state_d = MEM_REQ;
            end
          end else begin
            stage_d    = G_FINAL;
            g_target_d = PLEN'(req_vaddr_i);
            state_d    = G_START;
          end
        end
      end

      G_START: begin
        if (l2_hit_i) begin
          update_d         = l2_entry_i;
          update_d.valid   = 1'b1;
          update_from_l2_d = 1'b1;
          state_d          = IDLE;
        end else if (g_target_q[PLEN-1:GPLEN] != '0) begin
          // guest-physical address wider than Sv39x4 allows
          error_d        = 1'b1;
          error_guest_d  = 1'b1;
          error_gpaddr_d = g_target_q[GPLEN-1:0];
          state_d        = IDLE;
        end else if (gtlb_lu_access && gtlb_lu_hit) begin
          gtlb_hit_o = 1'b1;
          addr_d     = gtlb_lu_hpaddr;
          stage_d    = S_STAGE;
          state_d    = MEM_REQ;
        end else begin
          gtlb_miss_o = gtlb_lu_access;
          g_lvl_d     = 2'd0;
          addr_d      = {g_root_q, 12'b0} + ga_off(g_target_q, 2'd0);
          state_d     = MEM_REQ;
        end
      end

      MEM_REQ: begin
        if (l2_hit_i) begin
          l2_hit_d   = 1'b1;
          l2_entry_d = l2_entry_i;
        end
        if (mem_gnt_i) begin
          state_d = MEM_WAIT;
        end else if (l2_hit_i) begin
          update_d         = l2_entry_i;
          update_d.valid   = 1'b1;
          update_from_l2_d = 1'b1;
          state_d          = IDLE;
        end
      end

      MEM_WAIT: begin
        if (l2_hit_i) begin
          l2_hit_d   = 1'b1;
          l2_entry_d = l2_entry_i;
        end
        if (mem_rvalid_i) begin
          state_d = MEM_REQ;  // default: next read; overridden below
          if (l2_hit_q || l2_hit_i) begin
            update_d         = l2_hit_q ? l2_entry_q : l2_entry_i;
            update_d.valid   = 1'b1;
            update_from_l2_d = 1'b1;
            state_d          = IDLE;
          end else if (stage_q == S_STAGE) begin
            // ------------------------------------------- VS / S stage PTE
            if (pte_invalid(pte) || (pte_is_leaf(pte) && misaligned(pte, s_lvl_q))
                || (!pte_is_leaf(pte) && (s_lvl_q == 2'd2))) begin
              error_d        = 1'b1;
              error_gpaddr_d = '0;
              state_d        = IDLE;
            end else if (pte_is_leaf(pte)) begin
              s_pte_d  = pte;
              s_size_d = lvl_to_size(s_lvl_q);
              if (g_en_q) begin
                stage_d    = G_FINAL;
                g_target_d = {compose_ppn(pte.ppn, {2'b00, vaddr_q[38:12]}, lvl_to_size(s_lvl_q)),
                              vaddr_q[11:0]};
                state_d    = G_START;
              end else begin
                update_d.valid  = 1'b1;
                update_d.v      = v_q;
                update_d.s_en   = 1'b1;
                update_d.g_en   = 1'b0;
                update_d.asid   = asid_q;
                update_d.vmid   = vmid_q;
                update_d.vpn    = {2'b00, vaddr_q[38:12]};
                update_d.s_size = lvl_to_size(s_lvl_q);
                update_d.g_size = PG_1G;
                update_d.s_pte  = pte;
                state_d         = IDLE;
              end
            end else begin
              s_lvl_d = s_lvl_q + 2'd1;
              addr_d  = {pte.ppn, 12'b0} + PLEN'({va_idx(vaddr_q, s_lvl_q + 2'd1), 3'b000});
              if (g_en_q) begin
                stage_d    = G_INTERMED;
                g_target_d = {pte.ppn, 12'b0} + PLEN'({va_idx(vaddr_q, s_lvl_q + 2'd1), 3'b000});
                state_d    = G_START;
              end
            end
          end else begin
            // ---------------------------------------------- G-stage PTE
            if (pte_invalid(pte) || (!pte_is_leaf(pte) && (g_lvl_q == 2'd2))
                || (pte_is_leaf(pte) && (misaligned(pte, g_lvl_q) || !pte.u))
                || (pte_is_leaf(pte) && (stage_q == G_INTERMED) && (!pte.r || !pte.a))) begin
              error_d        = 1'b1;
              error_guest_d  = 1'b1;
              error_gpaddr_d = g_target_q[GPLEN-1:0];
              state_d        = IDLE;
            end else if (pte_is_leaf(pte)) begin
              if (stage_q == G_INTERMED) begin
                gtlb_upd_valid = 1'b1;
                addr_d  = {compose_ppn(pte.ppn, g_target_q[GPLEN-1:12], lvl_to_size(g_lvl_q)),
                           g_target_q[11:0]};
                stage_d = S_STAGE;
              end else begin
                update_d.valid  = 1'b1;
                update_d.v      = v_q;
                update_d.s_en   = s_en_q;
                update_d.g_en   = 1'b1;
                update_d.asid   = asid_q;
                update_d.vmid   = vmid_q;
                update_d.vpn    = s_en_q ? {2'b00, vaddr_q[38:12]} : vaddr_q[GPLEN-1:12];
                update_d.s_size = s_en_q ? s_size_q : PG_1G;
                update_d.g_size = lvl_to_size(g_lvl_q);
                update_d.s_pte  = s_en_q ? s_pte_q : '0;
                update_d.g_pte  = pte;
                state_d         = IDLE;
              end
            end else begin
              g_lvl_d = g_lvl_q + 2'd1;
              addr_d  = {pte.ppn, 12'b0} + ga_off(g_target_q, g_lvl_q + 2'd1);
            end
          end
        end
      end

      DRAIN: if (mem_rvalid_i) state_d = IDLE;

      default: state_d = IDLE;
    endcase

    // a fence abandons the walk; an outstanding read is drained first
    if (flush_valid_i && (state_q != IDLE) && (state_q != DRAIN)) begin
      update_d         = '0;
      update_from_l2_d = 1'b0;
      error_d          = 1'b0;
      gtlb_upd_valid   = 1'b0;
      if (((state_q == MEM_WAIT) && !mem_rvalid_i) || ((state_q == MEM_REQ) && mem_gnt_i))
        state_d = DRAIN;
      else
        state_d = IDLE;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q           <= IDLE;
      stage_q           <= S_STAGE;
      is_instr_q        <= 1'b0;
      v_q               <= 1'b0;
      s_en_q            <= 1'b0;
      g_en_q            <= 1'b0;
      vaddr_q           <= '0;
      asid_q            <= '0;
      vmid_q            <= '0;
      g_root_q          <= '0;
      s_lvl_q           <= '0;
      g_lvl_q           <= '0;
      g_target_q        <= '0;
      addr_q            <= '0;
      s_pte_q           <= '0;
      s_size_q          <= PG_4K;
      l2_hit_q          <= 1'b0;
      l2_entry_q        <= '0;
      update_o          <= '0;
      update_is_instr_o <= 1'b0;
      update_from_l2_o  <= 1'b0;
      error_o           <= 1'b0;
      error_guest_o     <= 1'b0;
      error_is_instr_o  <= 1'b0;
      error_gpaddr_o    <= '0;
    end else begin
      state_q           <= state_d;
      stage_q           <= stage_d;
      s_lvl_q           <= s_lvl_d;
      g_lvl_q           <= g_lvl_d;
      g_target_q        <= g_target_d;
      addr_q            <= addr_d;
      s_pte_q           <= s_pte_d;
      s_size_q          <= s_size_d;
      l2_hit_q          <= l2_hit_d;
      l2_entry_q        <= l2_entry_d;
      update_o          <= update_d;
      update_is_instr_o <= is_instr_q;
      update_from_l2_o  <= update_from_l2_d;
      error_o           <= error_d;
      error_guest_o     <= error_guest_d;
      error_is_instr_o  <= is_instr_q;
      error_gpaddr_o    <= error_gpaddr_d;
      if ((state_q == IDLE) && req_valid_i) begin
        is_instr_q <= req_is_instr_i;
        vaddr_q    <= req_vaddr_i;
        v_q        <= req_v_i;
        s_en_q     <= req_s_en_i;
        g_en_q     <= req_g_en_i;
        asid_q     <= req_asid_i;
        vmid_q     <= req_vmid_i;
        g_root_q   <= req_g_root_ppn_i;
      end
    end
  end

  // ------------------------------------------------------------------ GTLB
  if (GTLB_EN) begin : gen_gtlb
    gtlb #(.ENTRIES(GTLB_ENTRIES)) i_gtlb (
      .clk_i,
      .rst_ni,
      .flush_valid_i,
      .flush_i,
      .update_valid_i(gtlb_upd_valid),
      .update_gppn_i (g_target_q[GPLEN-1:12]),
      .update_vmid_i (vmid_q),
      .update_size_i (gtlb_upd_size),
      .update_pte_i  (gtlb_upd_pte),
      .lu_access_i   (gtlb_lu_access),
      .lu_gpaddr_i   (g_target_q[GPLEN-1:0]),
      .lu_vmid_i     (vmid_q),
      .lu_hit_o      (gtlb_lu_hit),
      .lu_hpaddr_o   (gtlb_lu_hpaddr),
      .lu_pte_o      (),
      .lu_size_o     ()
    );
  end else begin : gen_no_gtlb
    assign gtlb_lu_hit    = 1'b0;
    assign gtlb_lu_hpaddr = '0;
  end

  // memory handshake: the address is stable while a request waits for grant
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   mem_req_o && !mem_gnt_i && !flush_valid_i && !l2_hit_i |=> mem_req_o && $stable(mem_addr_o))
    else $error("vptw: PTE request dropped or changed before grant");
endmodule
