// rr_arbiter: round-robin arbiter in front of the page table walker.
//
// N requesters (the L1 TLBs) raise req_valid; one of them is offered to the
// walker on out_valid/out_idx. The winner is the first valid requester at or
// after the priority pointer, counting upwards and wrapping. When the walker
// accepts (out_valid and out_ready), req_ready of the winner is high in that
// cycle and the pointer moves to the requester after the winner, so a
// requester that keeps asking is served at least every N grants. The choice
// is combinational; only the pointer is a register. Round-robin selection is
// what the TLB hierarchy asks for; the pointer scheme is this design's.
module rr_arbiter #(
  parameter int unsigned N  = 2,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  req_valid,
  output logic [N-1:0]  req_ready,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [IW-1:0] out_idx
);

  logic [IW-1:0] ptr;

  always_comb begin
    out_valid = 1'b0;
    out_idx   = '0;
    for (int k = N - 1; k >= 0; k--) begin
      automatic int unsigned c = (int'(ptr) + k) % N;
      if (req_valid[c]) begin
        out_valid = 1'b1;
        out_idx   = IW'(c);
      end
    end
    req_ready = '0;
    if (out_valid && out_ready) req_ready[out_idx] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) ptr <= '0;
    else if (out_valid && out_ready) ptr <= IW'((int'(out_idx) + 1) % N);
  end

  // A granted requester must be one that asked.
  a_grant_valid: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid |-> req_valid[out_idx]);

endmodule
