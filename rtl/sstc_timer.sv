// sstc_timer: Sstc supervisor timer comparators of the hart.
//
// Implements the timer part of the CSR file that the Sstc extension adds:
// stimecmp raises the S/HS-mode timer interrupt and vstimecmp the VS-mode
// timer interrupt directly in hardware, so a hypervisor no longer needs
// M-mode firmware (SBI calls) to program and take timer interrupts for itself
// or its guest. The time value comes from the platform timer (CLINT mtime)
// over time_i. Also here: htimedelta (guest time offset), the STCE enable
// bits of menvcfg and henvcfg (the other bits of these registers read as
// zero here), and the time CSR as seen by the hart (time + htimedelta
// when V=1).
//
// Interrupts (combinational from the registers and time_i):
//   stip_o  = menvcfg.STCE & (time >= stimecmp)
//   vstip_o = henvcfg.STCE & (time + htimedelta >= vstimecmp)
// Access checks (RISC-V Sstc and hypervisor specifications):
//   stimecmp from HS: illegal if mcounteren.TM=0 or menvcfg.STCE=0.
//   From VS, stimecmp is vstimecmp: illegal if mcounteren.TM=0 or
//   menvcfg.STCE=0, else virtual instruction if hcounteren.TM=0 or
//   henvcfg.STCE=0.
//   vstimecmp, htimedelta and henvcfg are HS-level CSRs: virtual instruction
//   from VS/VU, illegal from U; menvcfg is M-only.
// CSR interface: a request (csr_valid_i) is answered in the same cycle with
// csr_hit_o (address implemented here), csr_rdata_o and the exception flags;
// a write without exception updates the register at the clock edge.
// SSTC_EN=0 removes stimecmp/vstimecmp and the STCE bits (design-space
// option). Reset values: comparators all ones (no interrupt), STCE bits and
// htimedelta zero; this is this design's choice.
// The paper states the comparison as "greater than"; this design follows the
// Sstc specification's "greater than or equal", which the paper claims to
// implement.
module sstc_timer
  import hyp_pkg::*;
#(
  parameter bit SSTC_EN = 1'b1
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic [XLEN-1:0] time_i,
  input  priv_e           priv_lvl_i,
  input  logic            v_i,
  input  logic            mcounteren_tm_i,
  input  logic            hcounteren_tm_i,
  input  logic            csr_valid_i,
  input  logic [11:0]     csr_addr_i,
  input  logic            csr_we_i,
  input  logic [XLEN-1:0] csr_wdata_i,
  output logic            csr_hit_o,
  output logic [XLEN-1:0] csr_rdata_o,
  output logic            csr_illegal_o,
  output logic            csr_virtual_o,
  output logic            stip_o,
  output logic            vstip_o,
  output logic            menvcfg_stce_o,
  output logic            henvcfg_stce_o,
  output logic [XLEN-1:0] htimedelta_o
);
  localparam logic [11:0] CSR_STIMECMP   = 12'h14D;
  localparam logic [11:0] CSR_VSTIMECMP  = 12'h24D;
  localparam logic [11:0] CSR_MENVCFG    = 12'h30A;
  localparam logic [11:0] CSR_HTIMEDELTA = 12'h605;
  localparam logic [11:0] CSR_HENVCFG    = 12'h60A;
  localparam logic [11:0] CSR_TIME       = 12'hC01;

  logic [XLEN-1:0] stimecmp_q, vstimecmp_q, htimedelta_q;
  logic            menvcfg_stce_q, henvcfg_stce_q, henvcfg_stce;
  logic [XLEN-1:0] vtime;
  logic            is_m, is_hs, is_vs, is_u, is_vu;
  logic            wr;

  assign vtime        = time_i + htimedelta_q;
  assign henvcfg_stce = henvcfg_stce_q && menvcfg_stce_q;   // read-only zero if menvcfg.STCE=0

  assign is_m  = (priv_lvl_i == PRIV_M);
  assign is_hs = (priv_lvl_i == PRIV_S) && !v_i;
  assign is_vs = (priv_lvl_i == PRIV_S) && v_i;
  assign is_u  = (priv_lvl_i == PRIV_U) && !v_i;
  assign is_vu = (priv_lvl_i == PRIV_U) && v_i;

  always_comb begin
    csr_hit_o     = 1'b0;
    csr_rdata_o   = '0;
    csr_illegal_o = 1'b0;
    csr_virtual_o = 1'b0;
    if (csr_valid_i) begin
      unique case (csr_addr_i)
        CSR_STIMECMP: if (SSTC_EN) begin
          csr_hit_o   = 1'b1;
          csr_rdata_o = is_vs ? vstimecmp_q : stimecmp_q;
          if (is_u) csr_illegal_o = 1'b1;
          else if (is_vu) csr_virtual_o = 1'b1;
          else if (!is_m) begin
            if (!mcounteren_tm_i || !menvcfg_stce_q) csr_illegal_o = 1'b1;
            else if (is_vs && (!hcounteren_tm_i || !henvcfg_stce)) csr_virtual_o = 1'b1;
          end
        end
        CSR_VSTIMECMP: if (SSTC_EN) begin
          csr_hit_o   = 1'b1;
          csr_rdata_o = vstimecmp_q;
          if (is_u) csr_illegal_o = 1'b1;
          else if (is_vs || is_vu) csr_virtual_o = 1'b1;
          else if (is_hs && (!mcounteren_tm_i || !menvcfg_stce_q)) csr_illegal_o = 1'b1;
        end
        CSR_MENVCFG: begin
          csr_hit_o     = 1'b1;
          csr_rdata_o   = {menvcfg_stce_q, 63'b0};
          csr_illegal_o = !is_m;
        end
        CSR_HENVCFG, CSR_HTIMEDELTA: begin
          csr_hit_o   = 1'b1;
          csr_rdata_o = (csr_addr_i == CSR_HENVCFG) ? {henvcfg_stce, 63'b0} : htimedelta_q;
          if (is_u) csr_illegal_o = 1'b1;
          else if (is_vs || is_vu) csr_virtual_o = 1'b1;
        end
        CSR_TIME: begin
          csr_hit_o   = 1'b1;
          csr_rdata_o = v_i ? vtime : time_i;
          if (csr_we_i) csr_illegal_o = 1'b1;          // read-only
          else if (!is_m && !mcounteren_tm_i) csr_illegal_o = 1'b1;
          else if (v_i && !hcounteren_tm_i) csr_virtual_o = 1'b1;
        end
        default: ;
      endcase
    end
  end

  assign wr = csr_valid_i && csr_we_i && csr_hit_o && !csr_illegal_o && !csr_virtual_o;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      stimecmp_q     <= '1;
      vstimecmp_q    <= '1;
      htimedelta_q   <= '0;
      menvcfg_stce_q <= 1'b0;
      henvcfg_stce_q <= 1'b0;
    end else if (wr) begin
      unique case (csr_addr_i)
        CSR_STIMECMP:   if (is_vs) vstimecmp_q <= csr_wdata_i; else stimecmp_q <= csr_wdata_i;
        CSR_VSTIMECMP:  vstimecmp_q  <= csr_wdata_i;
        CSR_HTIMEDELTA: htimedelta_q <= csr_wdata_i;
        CSR_MENVCFG:    menvcfg_stce_q <= SSTC_EN && csr_wdata_i[63];
        CSR_HENVCFG:    henvcfg_stce_q <= SSTC_EN && csr_wdata_i[63];
        default: ;
      endcase
    end
  end

  assign stip_o         = SSTC_EN && menvcfg_stce_q && (time_i >= stimecmp_q);
  assign vstip_o        = SSTC_EN && henvcfg_stce && (vtime >= vstimecmp_q);
  assign menvcfg_stce_o = menvcfg_stce_q;
  assign henvcfg_stce_o = henvcfg_stce;
  assign htimedelta_o   = htimedelta_q;
endmodule
