// l2_tlb_bank: one page-size structure of the L2 TLB.
//
// A set-associative TLB (ENTRIES entries, WAYS ways, ENTRIES/WAYS sets) for
// translations of one merged page size PG (4 KiB or 2 MiB). Tags and data sit
// in two single-port SRAMs (tlb_sram), each word holding all ways of a set;
// every set has its own tree PLRU. The set index comes from the page-number
// bits just above the page offset of PG.
//
// Controller: a 4-state FSM, as the paper describes it.
//   FLUSH  walks all sets and clears their tags (after reset and after any
//          fence: no filtering by ASID or VMID)
//   IDLE   waits for a lookup request or an update from the walker; it
//          issues the SRAM read of the addressed set (updates first)
//   READ   compares the tags of the set read; answers resp_valid_o with
//          resp_hit_o and the entry, then returns to IDLE
//   UPDATE writes the new entry into the way that already holds it, else an
//          invalid way, else the PLRU victim, then returns to IDLE
// A lookup is answered (resp_valid_o) in the cycle after the one in which
// it was accepted (req_valid_i with req_ready_o high); one update is
// buffered while the bank is busy; an update that arrives while the bank is
// flushing is dropped, since the fence has made it stale. A flush takes
// ENTRIES/WAYS cycles. Tag fields: valid, V, stage enables, ASID, VMID,
// global bit and the page number above the set index.
//
// What the paper gives: SRAM tags and data, PLRU, separate per-size
// structures, the four states and their roles, full flush. The buffering,
// the read-before-write in UPDATE and the tag layout are this design's.
module l2_tlb_bank
  import hyp_pkg::*;
#(
  parameter int unsigned ENTRIES = 128,
  parameter int unsigned WAYS    = 4,
  parameter pg_size_e    PG      = PG_4K
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             flush_i,
  // lookup
  input  logic             req_valid_i,
  output logic             req_ready_o,
  input  logic [VPNW-1:0]  req_vpn_i,
  input  logic [ASIDW-1:0] req_asid_i,
  input  logic [VMIDW-1:0] req_vmid_i,
  input  logic             req_v_i,
  input  logic             req_s_en_i,
  input  logic             req_g_en_i,
  output logic             resp_valid_o,
  output logic             resp_hit_o,
  output tlb_entry_t       resp_entry_o,
  // update from the walker
  input  logic             update_valid_i,
  input  tlb_entry_t       update_i
);
  localparam int unsigned SETS = ENTRIES / WAYS;
  localparam int unsigned IDXW = $clog2(SETS);
  localparam int unsigned WW   = $clog2(WAYS);
  localparam int unsigned LSB  = (PG == PG_4K) ? 0 : 9;   // set-index position in the vpn

  typedef struct packed {
    logic             valid;
    logic             v;
    logic             s_en;
    logic             g_en;
    logic             glob;
    logic [ASIDW-1:0] asid;
    logic [VMIDW-1:0] vmid;
    logic [VPNW-1:0]  vpn;
  } tag_t;

  typedef struct packed {
    pg_size_e s_size;
    pg_size_e g_size;
    pte_t     s_pte;
    pte_t     g_pte;
  } data_t;

  localparam int unsigned TW = $bits(tag_t);
  localparam int unsigned DW = $bits(data_t);

  typedef enum logic [1:0] {FLUSH, IDLE, READ, UPDATE} state_e;
  state_e state_q, state_d;

  logic [IDXW-1:0]      flush_idx_q, flush_idx_d;
  logic                 flush_pend_q, flush_pend_d;
  logic                 upd_pend_q, upd_pend_d;
  tlb_entry_t           upd_q, upd_d;
  logic [VPNW-1:0]      vpn_q, vpn_d;
  logic [ASIDW-1:0]     asid_q, asid_d;
  logic [VMIDW-1:0]     vmid_q, vmid_d;
  logic                 v_q, v_d, s_en_q, s_en_d, g_en_q, g_en_d;

  // SRAM ports
  logic                 sram_req, sram_we;
  logic [IDXW-1:0]      sram_addr;
  logic [WAYS-1:0]      lane_we;
  logic [WAYS*TW-1:0]   tag_wdata, tag_rdata;
  logic [WAYS*DW-1:0]   data_wdata, data_rdata;
  tag_t  [WAYS-1:0]     tags;
  data_t [WAYS-1:0]     datas;

  // PLRU per set
  logic [SETS-1:0]      plru_access;
  logic [WW-1:0]        plru_idx;
  logic [WW-1:0]        plru_victim [SETS];

  function automatic logic [IDXW-1:0] set_of(logic [VPNW-1:0] vpn);
    return vpn[LSB +: IDXW];
  endfunction

  assign tags  = tag_rdata;
  assign datas = data_rdata;

  // tag compare on the set just read (lookup key in vpn_q etc.)
  logic [WAYS-1:0] hit_vec, match_upd, inval_vec;
  logic [WW-1:0]   hit_way, upd_way, inval_way;
  always_comb begin
    for (int unsigned w = 0; w < WAYS; w++) begin
      hit_vec[w] = tags[w].valid && (tags[w].v == v_q) && (tags[w].s_en == s_en_q)
                && (tags[w].g_en == g_en_q)
                && (!tags[w].s_en || tags[w].glob || (tags[w].asid == asid_q))
                && (!tags[w].v || (tags[w].vmid == vmid_q))
                && vpn_match(tags[w].vpn, vpn_q, PG);
      match_upd[w] = tags[w].valid && (tags[w].v == upd_q.v) && (tags[w].s_en == upd_q.s_en)
                && (tags[w].g_en == upd_q.g_en) && (tags[w].asid == upd_q.asid)
                && (tags[w].vmid == upd_q.vmid) && vpn_match(tags[w].vpn, upd_q.vpn, PG);
      inval_vec[w] = !tags[w].valid;
    end
    hit_way = '0; upd_way = '0; inval_way = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (hit_vec[w])   hit_way   = WW'(w);
      if (match_upd[w]) upd_way   = WW'(w);
      if (inval_vec[w]) inval_way = WW'(w);
    end
  end

  logic [WW-1:0] write_way;
  assign write_way = (match_upd != '0) ? upd_way :
                     (inval_vec != '0) ? inval_way : plru_victim[set_of(upd_q.vpn)];

  always_comb begin
    tag_t  t;
    data_t d;
    t.valid = 1'b1;
    t.v     = upd_q.v;
    t.s_en  = upd_q.s_en;
    t.g_en  = upd_q.g_en;
    t.glob  = upd_q.s_en && upd_q.s_pte.g;
    t.asid  = upd_q.asid;
    t.vmid  = upd_q.vmid;
    t.vpn   = upd_q.vpn;
    d.s_size = upd_q.s_size;
    d.g_size = upd_q.g_size;
    d.s_pte  = upd_q.s_pte;
    d.g_pte  = upd_q.g_pte;
    tag_wdata  = (state_q == FLUSH) ? '0 : {WAYS{t}};
    data_wdata = {WAYS{d}};
  end

  always_comb begin
    state_d      = state_q;
    flush_idx_d  = flush_idx_q;
    flush_pend_d = flush_pend_q || flush_i;
    upd_pend_d   = upd_pend_q;
    upd_d        = upd_q;
    vpn_d        = vpn_q;
    asid_d       = asid_q;
    vmid_d       = vmid_q;
    v_d          = v_q;
    s_en_d       = s_en_q;
    g_en_d       = g_en_q;
    sram_req     = 1'b0;
    sram_we      = 1'b0;
    sram_addr    = '0;
    lane_we      = '0;
    req_ready_o  = 1'b0;
    resp_valid_o = 1'b0;
    resp_hit_o   = 1'b0;
    plru_access  = '0;
    plru_idx     = '0;

    if (update_valid_i && !upd_pend_q) begin
      upd_pend_d = 1'b1;
      upd_d      = update_i;
    end

    unique case (state_q)
      FLUSH: begin
        sram_req     = 1'b1;
        sram_we      = 1'b1;
        sram_addr    = flush_idx_q;
        lane_we      = '1;
        flush_idx_d  = flush_idx_q + 1'b1;
        flush_pend_d = flush_i;
        upd_pend_d   = 1'b0;
        if (flush_idx_q == IDXW'(SETS - 1)) state_d = IDLE;
      end
      IDLE: begin
        if (flush_pend_q || flush_i) begin
          state_d     = FLUSH;
          flush_idx_d = '0;
        end else if (upd_pend_q) begin
          sram_req  = 1'b1;
          sram_addr = set_of(upd_q.vpn);
          state_d   = UPDATE;
        end else begin
          req_ready_o = 1'b1;
          if (req_valid_i) begin
            sram_req  = 1'b1;
            sram_addr = set_of(req_vpn_i);
            vpn_d     = req_vpn_i;
            asid_d    = req_asid_i;
            vmid_d    = req_vmid_i;
            v_d       = req_v_i;
            s_en_d    = req_s_en_i;
            g_en_d    = req_g_en_i;
            state_d   = READ;
          end
        end
      end
      READ: begin
        resp_valid_o = !flush_i;
        resp_hit_o   = (hit_vec != '0) && !flush_i;
        if (resp_hit_o) begin
          plru_access[set_of(vpn_q)] = 1'b1;
          plru_idx                   = hit_way;
        end
        state_d = IDLE;
      end
      UPDATE: begin
        if (!flush_i) begin
          sram_req  = 1'b1;
          sram_we   = 1'b1;
          sram_addr = set_of(upd_q.vpn);
          lane_we   = WAYS'(1) << write_way;
          plru_access[set_of(upd_q.vpn)] = 1'b1;
          plru_idx  = write_way;
        end
        upd_pend_d = 1'b0;
        state_d    = IDLE;
      end
      default: state_d = FLUSH;
    endcase
  end

  always_comb begin
    resp_entry_o        = '0;
    resp_entry_o.valid  = 1'b1;
    resp_entry_o.v      = tags[hit_way].v;
    resp_entry_o.s_en   = tags[hit_way].s_en;
    resp_entry_o.g_en   = tags[hit_way].g_en;
    resp_entry_o.asid   = tags[hit_way].asid;
    resp_entry_o.vmid   = tags[hit_way].vmid;
    resp_entry_o.vpn    = tags[hit_way].vpn;
    resp_entry_o.s_size = datas[hit_way].s_size;
    resp_entry_o.g_size = datas[hit_way].g_size;
    resp_entry_o.s_pte  = datas[hit_way].s_pte;
    resp_entry_o.g_pte  = datas[hit_way].g_pte;
  end

  tlb_sram #(.DEPTH(SETS), .WIDTH(TW), .LANES(WAYS)) i_tag_sram (
    .clk_i, .req_i(sram_req), .we_i(sram_we), .addr_i(sram_addr),
    .lane_we_i(lane_we), .wdata_i(tag_wdata), .rdata_o(tag_rdata)
  );

  tlb_sram #(.DEPTH(SETS), .WIDTH(DW), .LANES(WAYS)) i_data_sram (
    .clk_i, .req_i(sram_req && (state_q != FLUSH)), .we_i(sram_we), .addr_i(sram_addr),
    .lane_we_i(lane_we), .wdata_i(data_wdata), .rdata_o(data_rdata)
  );

  for (genvar s = 0; s < SETS; s++) begin : gen_plru
    plru_tree #(.ENTRIES(WAYS)) i_plru (
      .clk_i, .rst_ni,
      .access_valid_i(plru_access[s]),
      .access_idx_i  (plru_idx),
      .victim_o      (plru_victim[s])
    );
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q      <= FLUSH;
      flush_idx_q  <= '0;
      flush_pend_q <= 1'b0;
      upd_pend_q   <= 1'b0;
      upd_q        <= '0;
      vpn_q        <= '0;
      asid_q       <= '0;
      vmid_q       <= '0;
      v_q          <= 1'b0;
      s_en_q       <= 1'b0;
      g_en_q       <= 1'b0;
    end else begin
      state_q      <= state_d;
      flush_idx_q  <= flush_idx_d;
      flush_pend_q <= flush_pend_d;
      upd_pend_q   <= upd_pend_d;
      upd_q        <= upd_d;
      vpn_q        <= vpn_d;
      asid_q       <= asid_d;
      vmid_q       <= vmid_d;
      v_q          <= v_d;
      s_en_q       <= s_en_d;
      g_en_q       <= g_en_d;
    end
  end

  initial begin
    assert (ENTRIES % WAYS == 0 && SETS >= 2) else $error("l2_tlb_bank: bad geometry");
    assert (PG != PG_1G) else $error("l2_tlb_bank: 4 KiB or 2 MiB pages only");
  end
endmodule
