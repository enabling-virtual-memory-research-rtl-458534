// tlb_sram: entry storage of the L2 TLB.
//
// A synchronous-read, synchronous-write memory with one read port and one
// write port. A row holds one set: WAYS fields of WAY_W bits. The read data
// appear at the output one cycle after rd_en (the output is a register, so
// the memory maps onto FPGA block RAM or an ASIC SRAM macro). A write updates
// only the ways whose wr_mask bit is set, so a refill changes one way of a set
// without a read-modify-write. A read of a row that is written in the same
// cycle returns the old row (this design's choice). The contents are not
// reset: the L2 TLB keeps the valid bits in registers outside this memory.
module tlb_sram #(
  parameter int unsigned DEPTH = 128,
  parameter int unsigned WAYS  = 8,
  parameter int unsigned WAY_W = 69,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                        clk,
  input  logic                        rd_en,
  input  logic [AW-1:0]               rd_addr,
  output logic [WAYS-1:0][WAY_W-1:0]  rd_data,
  input  logic                        wr_en,
  input  logic [AW-1:0]               wr_addr,
  input  logic [WAYS-1:0]             wr_mask,
  input  logic [WAYS-1:0][WAY_W-1:0]  wr_data
);

  logic [WAYS-1:0][WAY_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int w = 0; w < WAYS; w++)
        if (wr_mask[w]) mem[wr_addr][w] <= wr_data[w];
    end
  end

endmodule
