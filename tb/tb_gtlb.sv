// tb_gtlb: self-checking testbench of the G-stage TLB.
//
// Installs G-stage leaves of all three page sizes for two VMIDs and checks:
// hit and host-physical address (page offset and superpage bits passed
// through), miss on another VMID or address, capacity (8 entries, a 9th
// refill evicts exactly one), HFENCE.GVMA with VMID and GPA filters, and
// that SFENCE.VMA / HFENCE.VVMA leave the GTLB untouched.
module tb_gtlb;
  import hyp_pkg::*;
  localparam int unsigned N = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic             flush_v, upd_v, acc, hit;
  flush_req_t       flush;
  logic [VPNW-1:0]  upd_gppn;
  logic [VMIDW-1:0] upd_vmid, lu_vmid;
  pg_size_e         upd_size, lu_size;
  pte_t             upd_pte, lu_pte;
  logic [GPLEN-1:0] gpa;
  logic [PLEN-1:0]  hpa;

  gtlb #(.ENTRIES(N)) dut (
    .clk_i(clk), .rst_ni(rst_n), .flush_valid_i(flush_v), .flush_i(flush),
    .update_valid_i(upd_v), .update_gppn_i(upd_gppn), .update_vmid_i(upd_vmid), .update_size_i(upd_size),
    .update_pte_i(upd_pte), .lu_access_i(acc), .lu_gpaddr_i(gpa), .lu_vmid_i(lu_vmid),
    .lu_hit_o(hit), .lu_hpaddr_o(hpa), .lu_pte_o(lu_pte), .lu_size_o(lu_size));

  typedef struct { logic [28:0] gppn; logic [13:0] vmid; pg_size_e sz; logic [43:0] ppn; } ent_t;
  ent_t tab [N];

  task automatic install(ent_t e);
    @(negedge clk);
    upd_v = 1; upd_gppn = e.gppn; upd_vmid = e.vmid; upd_size = e.sz;
    upd_pte = '0; upd_pte.v = 1; upd_pte.r = 1; upd_pte.u = 1; upd_pte.a = 1; upd_pte.ppn = e.ppn;
    @(negedge clk); upd_v = 0;
  endtask
  task automatic do_flush(flush_req_t f);
    @(negedge clk); flush = f; flush_v = 1; @(negedge clk); flush_v = 0; flush = '0;
  endtask
  function automatic logic [PLEN-1:0] ref_hpa(ent_t e, logic [GPLEN-1:0] a);
    logic [PLEN-1:0] r;
    r = {e.ppn, a[11:0]};
    if (e.sz != PG_4K) r[20:12] = a[20:12];
    if (e.sz == PG_1G) r[29:21] = a[29:21];
    return r;
  endfunction
  task automatic look(logic [GPLEN-1:0] a, logic [13:0] m, output logic h, output logic [PLEN-1:0] p);
    acc = 1; gpa = a; lu_vmid = m; #1; h = hit; p = hpa; acc = 0;
  endtask

  initial begin
    logic h; logic [PLEN-1:0] p; int nh;
    flush_v = 0; flush = '0; upd_v = 0; upd_gppn = 0; upd_vmid = 0; upd_size = PG_4K; upd_pte = '0;
    acc = 0; gpa = 0; lu_vmid = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < N; i++) begin
      tab[i].gppn = {11'(i + 1), 18'($urandom)};
      tab[i].vmid = (i < 4) ? 14'h1 : 14'h2;
      tab[i].sz   = (i % 3 == 0) ? PG_4K : (i % 3 == 1) ? PG_2M : PG_1G;
      tab[i].ppn  = {12'd0, 32'($urandom)};
      if (tab[i].sz != PG_4K) tab[i].ppn[8:0] = '0;
      if (tab[i].sz == PG_1G) tab[i].ppn[17:0] = '0;
      install(tab[i]);
    end
    for (int i = 0; i < N; i++) begin
      logic [GPLEN-1:0] a;
      a = {tab[i].gppn, 12'($urandom)};
      look(a, tab[i].vmid, h, p);
      check(h && p == ref_hpa(tab[i], a) && lu_size == tab[i].sz, $sformatf("entry %0d hit", i));
      look(a, tab[i].vmid ^ 14'h3, h, p);
      check(!h, $sformatf("entry %0d misses for another VMID", i));
      a[GPLEN-1:GPLEN-11] = 11'h7FF;
      look(a, tab[i].vmid, h, p);
      check(!h, $sformatf("entry %0d misses for another region", i));
      if (tab[i].sz != PG_4K) begin
        a = {tab[i].gppn ^ 29'h1FF, 12'h0};
        look(a, tab[i].vmid, h, p);
        check(h && p == ref_hpa(tab[i], a), $sformatf("entry %0d superpage neighbour hits", i));
      end
    end
    do_flush('{sfence: 1, default: '0});
    do_flush('{hvvma: 1, vmid: 14'h1, default: '0});
    nh = 0;
    for (int i = 0; i < N; i++) begin look({tab[i].gppn, 12'h0}, tab[i].vmid, h, p); nh += int'(h); end
    check(nh == N, "SFENCE.VMA and HFENCE.VVMA keep all GTLB entries");
    begin
      ent_t x;
      x.gppn = {11'h500, 18'h0}; x.vmid = 14'h3; x.sz = PG_4K; x.ppn = 44'h1234;
      install(x);
      look({x.gppn, 12'h0}, x.vmid, h, p); check(h && p == {44'h1234, 12'h0}, "9th entry hits");
      nh = 0;
      for (int i = 0; i < N; i++) begin look({tab[i].gppn, 12'h0}, tab[i].vmid, h, p); nh += int'(h); end
      check(nh == N - 1, $sformatf("9th refill evicts one entry (%0d hits)", nh));
      do_flush('{hgvma: 1, default: '0});
      look({x.gppn, 12'h0}, x.vmid, h, p); check(!h, "full HFENCE.GVMA empties the GTLB");
      for (int i = 0; i < N; i++) install(tab[i]);
    end
    do_flush('{hgvma: 1, vmid_valid: 1, vmid: 14'h2, default: '0});
    for (int i = 0; i < N; i++) begin
      look({tab[i].gppn, 12'h0}, tab[i].vmid, h, p);
      check(h == (i < 4), $sformatf("VMID HFENCE.GVMA entry %0d", i));
    end
    do_flush('{hgvma: 1, addr_valid: 1, addr: {23'd0, tab[1].gppn, 12'h0}, default: '0});
    look({tab[1].gppn, 12'h0}, tab[1].vmid, h, p); check(!h, "GPA HFENCE.GVMA removes the entry");
    look({tab[0].gppn, 12'h0}, tab[0].vmid, h, p); check(h, "GPA HFENCE.GVMA keeps others");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
