// tb_sstc_timer: self-checking testbench of the Sstc timer block.
//
// A free-running 64-bit time counter drives the block. Checks: after reset
// no interrupt is pending and the STCE bits read zero; with menvcfg.STCE=1,
// STIP rises in the same cycle as time reaches stimecmp (time >= stimecmp)
// and falls when stimecmp is moved forward; VSTIP compares time+htimedelta
// with vstimecmp; an S-mode access to stimecmp while V=1 reaches vstimecmp;
// the time CSR read under V=1 returns time+htimedelta; henvcfg.STCE reads
// zero while menvcfg.STCE=0; and the illegal/virtual-instruction rules for
// stimecmp, vstimecmp, htimedelta, henvcfg, menvcfg and time in all modes.
module tb_sstc_timer;
  import hyp_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [63:0] mtime;
  priv_e       priv;
  logic        v, mcen, hcen, cv, we, hit, ill, virt, stip, vstip, mstce, hstce;
  logic [11:0] addr;
  logic [63:0] wdata, rdata, htd;

  always @(posedge clk) mtime <= mtime + 64'd1;

  sstc_timer dut (
    .clk_i(clk), .rst_ni(rst_n), .time_i(mtime), .priv_lvl_i(priv), .v_i(v),
    .mcounteren_tm_i(mcen), .hcounteren_tm_i(hcen), .csr_valid_i(cv), .csr_addr_i(addr), .csr_we_i(we),
    .csr_wdata_i(wdata), .csr_hit_o(hit), .csr_rdata_o(rdata), .csr_illegal_o(ill), .csr_virtual_o(virt),
    .stip_o(stip), .vstip_o(vstip), .menvcfg_stce_o(mstce), .henvcfg_stce_o(hstce), .htimedelta_o(htd));

  task automatic mode(int m);   // 0 M, 1 HS, 2 U, 3 VS, 4 VU
    case (m)
      0: begin priv = PRIV_M; v = 0; end
      1: begin priv = PRIV_S; v = 0; end
      2: begin priv = PRIV_U; v = 0; end
      3: begin priv = PRIV_S; v = 1; end
      default: begin priv = PRIV_U; v = 1; end
    endcase
  endtask
  task automatic csrw(logic [11:0] a, logic [63:0] d);
    @(negedge clk); cv = 1; we = 1; addr = a; wdata = d;
    @(negedge clk); cv = 0; we = 0;
  endtask
  task automatic csrr(logic [11:0] a, output logic [63:0] d, output logic i, output logic vi);
    cv = 1; we = 0; addr = a; #1; d = rdata; i = ill; vi = virt; cv = 0;
  endtask

  initial begin
    logic [63:0] d; logic i, vi; logic [63:0] t0; int wait_c;
    mtime = 64'd1000; cv = 0; we = 0; addr = 0; wdata = 0; mcen = 1; hcen = 1; mode(0);
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    check(!stip && !vstip && !mstce && !hstce && htd == 0, "reset state");

    // henvcfg.STCE is read-only zero while menvcfg.STCE = 0
    csrw(12'h60A, 64'h8000_0000_0000_0000);
    check(!hstce, "henvcfg.STCE reads 0 while menvcfg.STCE = 0");
    // compare without STCE: no interrupt
    csrw(12'h14D, 64'd0);
    check(!stip, "no STIP while menvcfg.STCE = 0");
    csrw(12'h30A, 64'h8000_0000_0000_0000);
    check(mstce && hstce, "STCE bits set");
    check(stip, "STIP once enabled and time >= stimecmp");

    // STIP rises exactly when time reaches stimecmp
    @(negedge clk); t0 = mtime + 64'd20;
    csrw(12'h14D, t0);
    check(!stip, "STIP low after moving stimecmp forward");
    wait_c = 0;
    while (!stip) begin @(negedge clk); wait_c++; end
    check(mtime == t0, $sformatf("STIP rises when time == stimecmp (time %0d cmp %0d)", mtime, t0));

    // VSTIP: time + htimedelta >= vstimecmp
    csrw(12'h605, 64'd5000);
    check(htd == 64'd5000, "htimedelta written");
    @(negedge clk); t0 = mtime + 64'd5000 + 64'd15;
    csrw(12'h24D, t0);
    check(!vstip, "VSTIP low before the compare");
    while (!vstip) @(negedge clk);
    check(mtime + 64'd5000 == t0, "VSTIP rises when time + htimedelta == vstimecmp");

    // VS-mode stimecmp accesses vstimecmp; time reads the virtual time
    mode(3);
    csrw(12'h14D, 64'hFFFF_FFFF_FFFF_FFFF);
    check(!vstip, "VS write of stimecmp moved vstimecmp");
    check(stip, "VS write of stimecmp left stimecmp alone");
    csrr(12'hC01, d, i, vi);
    check(d == mtime + 64'd5000 && !i && !vi, "time under V=1 is time + htimedelta");
    mode(1);
    csrr(12'hC01, d, i, vi);
    check(d == mtime, "time under V=0 is the host time");

    // access rules
    for (int m = 0; m < 5; m++) begin
      for (int c = 0; c < 8; c++) begin
        bit e_i, e_v, ms, hs;
        mode(0); csrw(12'h30A, {c[0], 63'd0}); csrw(12'h60A, {c[1], 63'd0});
        ms = c[0]; hs = c[0] & c[1];
        mcen = c[2]; hcen = c[1] ^ c[2];
        mode(m);
        // stimecmp
        e_i = 0; e_v = 0;
        if (m == 2) e_i = 1; else if (m == 4) e_v = 1;
        else if (m != 0) begin
          if (!mcen || !ms) e_i = 1; else if (m == 3 && (!hcen || !hs)) e_v = 1;
        end
        csrr(12'h14D, d, i, vi); check(i == e_i && vi == e_v, $sformatf("stimecmp rule m%0d c%0d", m, c));
        // vstimecmp
        e_i = 0; e_v = 0;
        if (m == 2) e_i = 1; else if (m >= 3) e_v = 1; else if (m == 1 && (!mcen || !ms)) e_i = 1;
        csrr(12'h24D, d, i, vi); check(i == e_i && vi == e_v, $sformatf("vstimecmp rule m%0d c%0d", m, c));
        // htimedelta and henvcfg
        e_i = (m == 2); e_v = (m >= 3);
        csrr(12'h605, d, i, vi); check(i == e_i && vi == e_v, $sformatf("htimedelta rule m%0d", m));
        csrr(12'h60A, d, i, vi); check(i == e_i && vi == e_v, $sformatf("henvcfg rule m%0d", m));
        // menvcfg: M only
        csrr(12'h30A, d, i, vi); check(i == (m != 0) && !vi, $sformatf("menvcfg rule m%0d", m));
        // time
        e_i = 0; e_v = 0;
        if (m != 0 && !mcen) e_i = 1; else if (m >= 3 && !hcen) e_v = 1;
        csrr(12'hC01, d, i, vi); check(i == e_i && vi == e_v, $sformatf("time rule m%0d c%0d", m, c));
      end
    end
    // a denied write does not change state
    mode(0); csrw(12'h30A, 64'h8000_0000_0000_0000); csrw(12'h60A, 64'h8000_0000_0000_0000);
    mode(4); csrw(12'h605, 64'd1);
    check(htd == 64'd5000, "VU write of htimedelta is ignored");
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
