// l2_tlb: configurable set-associative shared L2 TLB.
//
// SETS x WAYS translations of 4 KB pages, any organisation from
// direct-mapped (WAYS=1) to fully associative (SETS=1). The tags and leaf
// data live in a synchronous-read memory (tlb_sram), one row per set; the
// valid bits live in registers, one vector per set, so they can be read and
// changed in the same cycle without touching the memory.
//
// Lookup is pipelined over two clock edges:
//   cycle 0  lookup_valid: the set's row is read from the memory and the
//            set's valid bits and the VPN are captured in registers;
//   cycle 1  the row arrives; the tags of the valid ways are compared with
//            the request's tag (pseudo-LRU state is touched on a hit);
//   cycle 2  resp_valid with resp_hit and resp_data, from registers.
// A lookup may start every cycle.
//
// Refill writes one way of a set through the memory's write mask: the first
// way whose valid bit is clear, else the replacement victim. REPL selects
// random replacement (an LFSR, a handful of flip-flops) or tree pseudo-LRU
// (WAYS-1 bits per set). With WAYS=1 neither is built.
//
// Flush (sfence.vma): finding one entry would need the memory read, so an
// sfence with an address clears every valid bit of the indexed set; one
// without an address clears all valid bits. A flush that touches a set
// whose lookup is in flight cancels that lookup's hit.
//
// What follows the TLB hierarchy design: memory for entries and registers
// for valid bits, extra pipeline registers for the memory's read delay,
// masked one-way refill, first-free-else-replacement, random and
// pseudo-LRU policies, whole-set flush. This design's own choices: the exact
// pipeline (result two cycles after the request), the flush-all, cancelling
// in-flight hits on a flush, stepping the LFSR once per refill, synchronous
// active-low reset.
module l2_tlb
  import tlb_pkg::*;
#(
  parameter int unsigned SETS = 128,
  parameter int unsigned WAYS = 8,
  parameter repl_e       REPL = REPL_RANDOM,
  localparam int unsigned IDX_BITS = $clog2(SETS),
  localparam int unsigned IDX_W    = (SETS > 1) ? IDX_BITS : 1,
  localparam int unsigned WAY_W    = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned TAG_W    = VPN_W - IDX_BITS
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      lookup_valid,
  input  vpn_t      lookup_vpn,
  output logic      resp_valid,
  output logic      resp_hit,
  output tlb_data_t resp_data,
  input  logic      refill_valid,
  input  vpn_t      refill_vpn,
  input  tlb_data_t refill_data,
  input  logic      sfence_valid,
  input  logic      sfence_rs1,
  input  vpn_t      sfence_vpn,
  output logic      miss_event
);

  typedef struct packed {
    logic [TAG_W-1:0] tag;
    tlb_data_t        data;
  } entry_t;

  function automatic logic [IDX_W-1:0] idx_of(vpn_t v);
    return (SETS > 1) ? IDX_W'(v) : '0;
  endfunction

  function automatic logic [TAG_W-1:0] tag_of(vpn_t v);
    return TAG_W'(v >> IDX_BITS);
  endfunction

  logic [WAYS-1:0] valid [SETS];

  // flush decode
  logic [IDX_W-1:0] fl_idx;
  assign fl_idx = idx_of(sfence_vpn);

  function automatic logic flush_hits(logic [IDX_W-1:0] set);
    return sfence_valid && (!sfence_rs1 || fl_idx == set);
  endfunction

  // ---------------------------------------------------------- memory
  logic [IDX_W-1:0]           s0_idx;
  logic [WAYS-1:0][$bits(entry_t)-1:0] rd_row;
  logic [WAYS-1:0][$bits(entry_t)-1:0] wr_row;
  logic [WAYS-1:0]            wr_mask;
  logic [IDX_W-1:0]           rf_idx;
  logic                       refill;

  assign s0_idx = idx_of(lookup_vpn);
  assign rf_idx = idx_of(refill_vpn);
  assign refill = refill_valid;

  tlb_sram #(.DEPTH(SETS), .WAYS(WAYS), .WAY_W($bits(entry_t))) u_mem (
    .clk     (clk),
    .rd_en   (lookup_valid),
    .rd_addr (s0_idx),
    .rd_data (rd_row),
    .wr_en   (refill),
    .wr_addr (rf_idx),
    .wr_mask (wr_mask),
    .wr_data (wr_row)
  );

  // ---------------------------------------------------------- stage 1
  logic             s1_valid;
  vpn_t             s1_vpn;
  logic [WAYS-1:0]  s1_vbits;
  logic [IDX_W-1:0] s1_idx;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_vpn   <= '0;
      s1_vbits <= '0;
    end else begin
      s1_valid <= lookup_valid;
      s1_vpn   <= lookup_vpn;
      s1_vbits <= flush_hits(s0_idx) ? '0 : valid[s0_idx];
    end
  end

  assign s1_idx = idx_of(s1_vpn);

  logic             s1_hit;
  logic [WAY_W-1:0] s1_way;
  tlb_data_t        s1_data;

  always_comb begin
    s1_hit  = 1'b0;
    s1_way  = '0;
    s1_data = '0;
    for (int w = 0; w < WAYS; w++) begin
      automatic entry_t e = entry_t'(rd_row[w]);
      if (s1_vbits[w] && e.tag == tag_of(s1_vpn)) begin
        s1_hit  = 1'b1;
        s1_way  = WAY_W'(w);
        s1_data = e.data;
      end
    end
    if (flush_hits(s1_idx)) s1_hit = 1'b0;
  end

  // ---------------------------------------------------------- stage 2
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      resp_valid <= 1'b0;
      resp_hit   <= 1'b0;
      resp_data  <= '0;
    end else begin
      resp_valid <= s1_valid;
      resp_hit   <= s1_valid && s1_hit;
      resp_data  <= s1_data;
    end
  end

  assign miss_event = s1_valid && !s1_hit;

  // ---------------------------------------------------------- replacement
  logic [WAY_W-1:0] victim_way;
  logic [WAY_W-1:0] rf_way;
  logic [WAYS-1:0]  rf_free;
  logic [WAY_W-1:0] rf_free_way;

  if (WAYS == 1) begin : g_dm
    assign victim_way = '0;
  end else if (REPL == REPL_RANDOM) begin : g_random
    lfsr_random #(.WAYS(WAYS)) u_rand (
      .clk        (clk),
      .rst_n      (rst_n),
      .advance    (refill && !(|rf_free)),
      .victim_way (victim_way)
    );
  end else begin : g_plru
    plru_tree #(.SETS(SETS), .WAYS(WAYS)) u_plru (
      .clk         (clk),
      .rst_n       (rst_n),
      .touch_valid (refill || (s1_valid && s1_hit)),
      .touch_set   (refill ? rf_idx : s1_idx),
      .touch_way   (refill ? rf_way : s1_way),
      .query_set   (rf_idx),
      .victim_way  (victim_way)
    );
  end

  always_comb begin
    rf_free     = ~valid[rf_idx];
    rf_free_way = '0;
    for (int w = WAYS - 1; w >= 0; w--)
      if (rf_free[w]) rf_free_way = WAY_W'(w);
    rf_way  = (|rf_free) ? rf_free_way : victim_way;
    wr_mask = '0;
    wr_mask[rf_way] = 1'b1;
    for (int w = 0; w < WAYS; w++)
      wr_row[w] = {tag_of(refill_vpn), refill_data};
  end

  // ---------------------------------------------------------- valid bits
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) valid[s] <= '0;
    end else begin
      if (refill) valid[rf_idx][rf_way] <= 1'b1;
      if (sfence_valid) begin
        if (!sfence_rs1) for (int s = 0; s < SETS; s++) valid[s] <= '0;
        else valid[fl_idx] <= '0;
      end
    end
  end

  // a set must not be refilled while its lookup is reading the memory
  a_no_refill_race: assert property (@(posedge clk) disable iff (!rst_n)
    !(refill_valid && lookup_valid && rf_idx == s0_idx));

endmodule
