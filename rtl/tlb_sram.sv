// tlb_sram: single-port synchronous SRAM for the L2 TLB tag and data arrays.
//
// DEPTH words of LANES lanes, each lane WIDTH bits (one lane per way). A
// request with we_i=0 reads the addressed word, which appears on rdata_o in
// the next cycle and stays there until the next read. A request with we_i=1
// writes the lanes whose lane_we_i bit is set. The array has no reset: the
// L2 TLB controller invalidates its contents by walking all sets. The paper
// says the L2 TLB keeps tags and data in SRAMs; the one-cycle read latency
// and the per-lane write enable are this design's choice, as in common SRAM
// macros. In an ASIC flow this array is replaced by a generated macro.
module tlb_sram #(
  parameter int unsigned DEPTH = 32,
  parameter int unsigned WIDTH = 64,
  parameter int unsigned LANES = 4
) (
  input  logic                       clk_i,
  input  logic                       req_i,
  input  logic                       we_i,
  input  logic [$clog2(DEPTH)-1:0]   addr_i,
  input  logic [LANES-1:0]           lane_we_i,
  input  logic [LANES*WIDTH-1:0]     wdata_i,
  output logic [LANES*WIDTH-1:0]     rdata_o
);
  logic [LANES*WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int unsigned l = 0; l < LANES; l++) begin
          if (lane_we_i[l]) mem[addr_i][l*WIDTH +: WIDTH] <= wdata_i[l*WIDTH +: WIDTH];
        end
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end
endmodule
