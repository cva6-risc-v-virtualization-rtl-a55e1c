// tb_pt_mem: behavioural memory for the page-table walker testbenches.
//
// Serves the walker's PTE reads: a request is granted after 0..MAX_GNT_WAIT
// cycles and its 64-bit word returned 1..MAX_LAT cycles later, one at a time.
// The contents are a sparse array of 64-bit words filled by the testbench
// through the tasks below, which also build Sv39 (VS/S stage) and Sv39x4
// (G stage) page tables: map() allocates missing table pages on the way down.
// Guest-physical pages are placed at host-physical GPA + GOFF and G-mapped
// with 4 KiB leaves as they are allocated, so VS-stage tables are reachable
// through the G stage. reads counts the PTE reads served.
module tb_pt_mem
  import hyp_pkg::*;
#(
  parameter int unsigned MAX_GNT_WAIT = 2,
  parameter int unsigned MAX_LAT      = 3
) (
  input  logic            clk_i,
  input  logic            req_i,
  input  logic [PLEN-1:0] addr_i,
  output logic            gnt_o,
  output logic            rvalid_o,
  output logic [XLEN-1:0] rdata_o
);
  localparam logic [PLEN-1:0] GOFF = 56'h1_0000_0000;

  logic [XLEN-1:0] mem [logic [PLEN-1:0]];
  logic [PLEN-1:0] host_next  = 56'h2000_0000;
  logic [PLEN-1:0] guest_next = 56'h0010_0000;
  logic [PLEN-1:0] g_root     = '0;
  int unsigned     reads      = 0;

  // ------------------------------------------------------- memory port
  int unsigned     gnt_wait, lat;
  logic            busy = 1'b0;
  logic [PLEN-1:0] raddr;

  initial begin
    gnt_wait = 0; lat = 0; rvalid_o = 1'b0; rdata_o = '0;
  end

  always_comb gnt_o = req_i && !busy && (gnt_wait == 0);

  always @(posedge clk_i) begin
    rvalid_o <= 1'b0;
    if (req_i && !busy) begin
      if (gnt_wait == 0) begin
        busy     <= 1'b1;
        raddr    <= addr_i;
        lat      <= $urandom_range(MAX_LAT - 1, 0);
        gnt_wait <= $urandom_range(MAX_GNT_WAIT, 0);
      end else begin
        gnt_wait <= gnt_wait - 1;
      end
    end
    if (busy) begin
      if (lat == 0) begin
        busy     <= 1'b0;
        rvalid_o <= 1'b1;
        rdata_o  <= rd(raddr);
        reads    <= reads + 1;
      end else begin
        lat <= lat - 1;
      end
    end
  end

  // ------------------------------------------------------------ helpers
  function automatic logic [XLEN-1:0] rd(logic [PLEN-1:0] a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  function automatic void wr(logic [PLEN-1:0] a, logic [XLEN-1:0] d);
    mem[a] = d;
  endfunction

  function automatic logic [PLEN-1:0] alloc_host(int unsigned pages);
    logic [PLEN-1:0] p;
    p = host_next;
    host_next += PLEN'(pages) * 56'h1000;
    return p;
  endfunction

  function automatic logic [XLEN-1:0] mk_pte(logic [PLEN-1:0] pa, logic [7:0] flags);
    return {10'b0, pa[PLEN-1:12], 2'b00, flags};
  endfunction

  // 16 KiB aligned G-stage root; returns its PPN
  function automatic logic [PPNW-1:0] new_g_root();
    host_next = (host_next + 56'h3fff) & ~56'h3fff;
    g_root    = alloc_host(4);
    return g_root[PLEN-1:12];
  endfunction

  function automatic logic [8:0] idx9(logic [PLEN-1:0] va, int lvl);
    return (lvl == 0) ? va[38:30] : (lvl == 1) ? va[29:21] : va[20:12];
  endfunction

  // Write leaf PTE for va at level leaf_lvl (0 = 1 GiB ... 2 = 4 KiB).
  // g_stage: Sv39x4 tables in host memory; otherwise tables in guest memory
  // when guest=1 (addresses are GPAs) or host memory when guest=0.
  function automatic void map(logic [PLEN-1:0] root, bit g_stage, bit guest, logic [PLEN-1:0] va,
                              logic [PLEN-1:0] target, int leaf_lvl, logic [7:0] flags);
    logic [PLEN-1:0] table_a, pte_a, nt;
    logic [XLEN-1:0] pte;
    table_a = root;
    for (int l = 0; l <= leaf_lvl; l++) begin
      pte_a = table_a + ((g_stage && l == 0) ? PLEN'({va[40:30], 3'b000}) : PLEN'({idx9(va, l), 3'b000}));
      if (guest) pte_a = pte_a + GOFF;
      if (l == leaf_lvl) begin
        wr(pte_a, mk_pte(target, flags));
      end else begin
        pte = rd(pte_a);
        if (!pte[0]) begin
          nt = guest ? alloc_guest() : alloc_host(1);
          wr(pte_a, mk_pte(nt, 8'h01));
          table_a = nt;
        end else begin
          table_a = {pte[53:10], 12'b0};
        end
      end
    end
  endfunction

  // New guest-physical page, G-mapped 4 KiB to GPA + GOFF (RWXU, A, D)
  function automatic logic [PLEN-1:0] alloc_guest();
    logic [PLEN-1:0] gpa;
    gpa = guest_next;
    guest_next += 56'h1000;
    map(g_root, 1'b1, 1'b0, gpa, gpa + GOFF, 2, 8'hDF);
    return gpa;
  endfunction

  // Corrupt (clear V of) the leaf-or-pointer PTE at a physical address
  function automatic void clear_pte(logic [PLEN-1:0] pa);
    wr(pa, rd(pa) & ~64'h1);
  endfunction
endmodule
