// plru_tree: tree pseudo-LRU replacement state for a set-associative TLB.
//
// Each of the SETS sets keeps WAYS-1 bits, the inner nodes of a binary tree
// whose leaves are the ways (node 1 is the root, node k has children 2k and
// 2k+1, leaves are nodes WAYS..2*WAYS-1). A node bit of 0 means "the older
// half is the left subtree". The victim of a set is found by following the
// bits from the root; an access to a way sets every bit on its path to point
// away from it. The state is a register array, as the set-associative PLRU
// of the TLB hierarchy keeps it in registers.
//
// Interface: touch_valid/touch_set/touch_way record an access at the clock
// edge. victim_way is combinational from query_set and the current state.
// WAYS must be a power of two. With WAYS=1 there is nothing to replace and
// the module holds no state. The tree flavour of pseudo-LRU is this design's
// choice; the TLB hierarchy only asks for a per-set pseudo-LRU in registers.
module plru_tree #(
  parameter int unsigned SETS  = 16,
  parameter int unsigned WAYS  = 8,
  localparam int unsigned IDX_W = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             touch_valid,
  input  logic [IDX_W-1:0] touch_set,
  input  logic [WAY_W-1:0] touch_way,
  input  logic [IDX_W-1:0] query_set,
  output logic [WAY_W-1:0] victim_way
);

  if (WAYS > 1) begin : g_tree
    localparam int unsigned LV = $clog2(WAYS);
    // bit 0 unused, bits 1..WAYS-1 are the tree nodes
    logic [WAYS-1:0] state [SETS];

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        for (int s = 0; s < SETS; s++) state[s] <= '0;
      end else if (touch_valid) begin
        automatic int unsigned node = 1;
        for (int l = 0; l < LV; l++) begin
          automatic logic b = touch_way[LV-1-l];
          state[touch_set][node] <= ~b;
          node = 2 * node + int'(b);
        end
      end
    end

    always_comb begin
      automatic int unsigned node = 1;
      for (int l = 0; l < LV; l++) node = 2 * node + int'(state[query_set][node]);
      victim_way = WAY_W'(node - WAYS);
    end
  end else begin : g_none
    assign victim_way = '0;
  end

endmodule
