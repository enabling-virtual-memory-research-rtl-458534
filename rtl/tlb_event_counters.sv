// tlb_event_counters: miss counters of the TLB hierarchy.
//
// N counters of W bits; counter k adds one at every clock edge on which
// inc[k] is high, and all return to zero on clear. In the hierarchy they
// count ITLB misses, DTLB misses, L2 TLB misses and page walks, the events a
// processor exposes through its hardware performance counters to measure
// misses per kilo-instruction. Plain counters with a clear input stand in
// for the processor's CSR-mapped counters; that mapping is not part of this
// design.
module tlb_event_counters #(
  parameter int unsigned N = 4,
  parameter int unsigned W = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic [N-1:0]        inc,
  output logic [N-1:0][W-1:0] count
);

  always_ff @(posedge clk) begin
    if (!rst_n || clear) count <= '0;
    else begin
      for (int k = 0; k < N; k++)
        if (inc[k]) count[k] <= count[k] + W'(1);
    end
  end

endmodule
