// plru_tree: tree pseudo-LRU replacement for a set of ENTRIES ways.
//
// ENTRIES-1 state bits form a binary tree in heap order. Every access walks
// from the root to the accessed leaf and points each node it passes away from
// the path taken; the victim is found by following the node bits from the
// root. The same replacement is used by the L1 TLBs, the GTLB and every set
// of the L2 TLB. The paper names the policy (PLRU, reused from the CVA6 L1
// TLBs); the tree form and the bit polarity are this design's choice.
//
// Interface: access_valid_i/access_idx_i mark a way as most recently used at
// the next clock edge; victim_o is combinational from the current state.
// Reset clears the state, which makes way 0 the first victim.
// ENTRIES must be a power of two, at least 2.
module plru_tree #(
  parameter int unsigned ENTRIES = 16
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic                       access_valid_i,
  input  logic [$clog2(ENTRIES)-1:0] access_idx_i,
  output logic [$clog2(ENTRIES)-1:0] victim_o
);
  localparam int unsigned L = $clog2(ENTRIES);

  logic [ENTRIES-2:0] state_q, state_d;

  always_comb begin
    int unsigned node;
    node = 0;
    for (int unsigned l = 0; l < L; l++) begin
      node = 2 * node + 1 + int'(state_q[node]);
    end
    victim_o = L'(node - (ENTRIES - 1));
  end

  always_comb begin
    int unsigned node;
    logic        dir;
    state_d = state_q;
    node    = 0;
    dir     = 1'b0;
    if (access_valid_i) begin
      for (int unsigned l = 0; l < L; l++) begin
        dir            = access_idx_i[L-1-l];
        state_d[node]  = ~dir;
        node           = 2 * node + 1 + int'(dir);
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) state_q <= '0;
    else         state_q <= state_d;
  end

  initial begin
    assert (ENTRIES >= 2 && (ENTRIES & (ENTRIES - 1)) == 0)
      else $error("plru_tree: ENTRIES must be a power of two >= 2");
  end
endmodule
