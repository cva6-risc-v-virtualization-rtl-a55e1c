// l2_tlb: unified private second-level TLB of the nested MMU.
//
// Holds combined VS+G translations (the same entries as the L1 TLBs) for both
// instruction and data side. Each merged page size has its own structure
// (l2_tlb_bank): a 4 KiB one and a 2 MiB one, with independent controllers and
// storage, searched in parallel. A refill from the walker goes to the bank of
// its merged page size; 1 GiB translations are not kept. EN_4K / EN_2M select
// which structures exist, so the design-space points "4 KiB only", "2 MiB
// only" and "both" are one parameter each.
//
// Timing: a lookup is accepted when every present bank is idle (req_ready_o)
// and answered in the next cycle with resp_valid_o, resp_hit_o and the entry
// (4 KiB bank first if both hit). A fence flushes everything. Geometry
// defaults are the paper's largest evaluated configuration used for its
// power/area study: 4 KiB 128 entries 4-way and 2 MiB 32 entries 4-way.
module l2_tlb
  import hyp_pkg::*;
#(
  parameter bit          EN_4K      = 1'b1,
  parameter int unsigned ENTRIES_4K = 128,
  parameter int unsigned WAYS_4K    = 4,
  parameter bit          EN_2M      = 1'b1,
  parameter int unsigned ENTRIES_2M = 32,
  parameter int unsigned WAYS_2M    = 4
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             flush_i,
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
  input  tlb_entry_t       update_i
);
  logic       rdy_4k, rdy_2m, rv_4k, rv_2m, hit_4k, hit_2m;
  tlb_entry_t e_4k, e_2m;
  pg_size_e   upd_size;

  assign upd_size = update_i.g_en ? (update_i.s_en ? min_size(update_i.s_size, update_i.g_size)
                                                   : update_i.g_size)
                                  : update_i.s_size;

  assign req_ready_o  = rdy_4k && rdy_2m;
  assign resp_valid_o = rv_4k || rv_2m;
  assign resp_hit_o   = hit_4k || hit_2m;
  assign resp_entry_o = hit_4k ? e_4k : e_2m;

  if (EN_4K) begin : gen_4k
    l2_tlb_bank #(.ENTRIES(ENTRIES_4K), .WAYS(WAYS_4K), .PG(PG_4K)) i_bank (
      .clk_i, .rst_ni, .flush_i,
      .req_valid_i(req_valid_i && req_ready_o), .req_ready_o(rdy_4k),
      .req_vpn_i, .req_asid_i, .req_vmid_i, .req_v_i, .req_s_en_i, .req_g_en_i,
      .resp_valid_o(rv_4k), .resp_hit_o(hit_4k), .resp_entry_o(e_4k),
      .update_valid_i(update_i.valid && (upd_size == PG_4K)), .update_i
    );
  end else begin : gen_no_4k
    assign rdy_4k = 1'b1;
    assign rv_4k  = 1'b0;
    assign hit_4k = 1'b0;
    assign e_4k   = '0;
  end

  if (EN_2M) begin : gen_2m
    l2_tlb_bank #(.ENTRIES(ENTRIES_2M), .WAYS(WAYS_2M), .PG(PG_2M)) i_bank (
      .clk_i, .rst_ni, .flush_i,
      .req_valid_i(req_valid_i && req_ready_o), .req_ready_o(rdy_2m),
      .req_vpn_i, .req_asid_i, .req_vmid_i, .req_v_i, .req_s_en_i, .req_g_en_i,
      .resp_valid_o(rv_2m), .resp_hit_o(hit_2m), .resp_entry_o(e_2m),
      .update_valid_i(update_i.valid && (upd_size == PG_2M)), .update_i
    );
  end else begin : gen_no_2m
    assign rdy_2m = 1'b1;
    assign rv_2m  = 1'b0;
    assign hit_2m = 1'b0;
    assign e_2m   = '0;
  end

  initial assert (EN_4K || EN_2M) else $error("l2_tlb: at least one page-size structure");
endmodule
