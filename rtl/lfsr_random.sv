// lfsr_random: random replacement for a set-associative TLB.
//
// A 16-bit maximal-length Fibonacci LFSR (x^16 + x^14 + x^13 + x^11 + 1)
// steps at every clock edge on which advance is high; its low bits name the
// victim way. This costs sixteen flip-flops whatever the size of the TLB,
// which is why random replacement is the area-friendly option for a large L2
// TLB (it is the L2 default and an option for the L1 TLBs). The polynomial,
// width and seed are this design's choices.
//
// Interface: victim_way is a register output, valid every cycle. WAYS must be
// a power of two; with WAYS=1 victim_way is always 0.
module lfsr_random #(
  parameter int unsigned WAYS = 8,
  parameter logic [15:0] SEED = 16'hACE1,
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             advance,
  output logic [WAY_W-1:0] victim_way
);

  logic [15:0] lfsr;

  always_ff @(posedge clk) begin
    if (!rst_n)       lfsr <= SEED;
    else if (advance) lfsr <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
  end

  if (WAYS > 1) begin : g_way
    assign victim_way = lfsr[WAY_W-1:0];
  end else begin : g_dm
    assign victim_way = '0;
  end

endmodule
