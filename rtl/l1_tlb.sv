// l1_tlb: configurable set-associative L1 instruction or data TLB.
//
// The TLB holds SETS x WAYS translations of 4 KB pages in registers. Any
// organisation from direct-mapped (WAYS=1) to fully associative (SETS=1) is
// produced by the two parameters; with WAYS=1 the replacement logic is left
// out. A request's VPN is split into an index (its low log2(SETS) bits) and
// a tag (the rest). The index selects a set, whose ways are searched in
// parallel for a valid entry with the same tag. The valid bits form one
// register vector per set.
//
// Lookup: a request accepted at clock edge t (req_valid and req_ready) is
// answered in the cycle after it with resp_valid and either resp_hit (with
// resp_ppn and resp_fault) or resp_miss. A hit updates the set's pseudo-LRU
// state.
//
// Replacement (REPL): REPL_PLRU (default) keeps a tree pseudo-LRU per set,
// updated by hits and refills; REPL_RANDOM takes the victim from a 16-bit
// LFSR that steps on every refill into a full set.
//
// Miss: the TLB drops req_ready, raises ptw_req_valid with the missing VPN
// until the walker accepts it, then waits for ptw_resp_valid. The response
// is written into the first invalid way of the set or, when the set is full,
// into the replacement victim, and req_ready returns. The requester repeats
// the request, which then hits. A walk that ended in a page fault is stored
// with its pf bit set, so the repeated request is answered with resp_fault.
//
// Flush (sfence.vma): with an address (sfence_rs1) the indexed set is
// searched for the tag and that entry's valid bit is cleared; without an
// address every valid bit is cleared. A refill whose walk overlapped a flush
// is dropped, since it may carry a stale translation.
//
// Permissions: the instruction TLB (IS_ITLB=1) faults a fetch from a page
// without X; the data TLB faults a load without R and a store without W;
// either faults a user-mode access to a page without U.
//
// What follows the TLB hierarchy design: registers for the entries,
// tag/index split, per-set valid vectors, next-cycle hit/miss, refill into
// the first free way else pseudo-LRU, random replacement as the alternative,
// flush by index+tag search, 4 KB pages only. This design's own choices: the blocking miss handshake, the
// flush-all, dropping refills across a flush, storing faulting walks, the
// exact permission rules, and synchronous active-low reset.
module l1_tlb
  import tlb_pkg::*;
#(
  parameter int unsigned SETS    = 16,
  parameter int unsigned WAYS    = 8,
  parameter bit          IS_ITLB = 1'b0,
  parameter repl_e       REPL    = REPL_PLRU,
  localparam int unsigned IDX_BITS = $clog2(SETS),
  localparam int unsigned IDX_W    = (SETS > 1) ? IDX_BITS : 1,
  localparam int unsigned WAY_W    = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned TAG_W    = VPN_W - IDX_BITS
) (
  input  logic      clk,
  input  logic      rst_n,
  // translation requests
  input  logic      req_valid,
  output logic      req_ready,
  input  vpn_t      req_vpn,
  input  acc_e      req_acc,
  input  logic      req_user,
  // response, one cycle after the request
  output logic      resp_valid,
  output logic      resp_hit,
  output logic      resp_miss,
  output ppn_t      resp_ppn,
  output logic      resp_fault,
  // to the page table walker
  output logic      ptw_req_valid,
  input  logic      ptw_req_ready,
  output vpn_t      ptw_req_vpn,
  input  logic      ptw_resp_valid,
  input  ptw_resp_t ptw_resp,
  // sfence.vma
  input  logic      sfence_valid,
  input  logic      sfence_rs1,
  input  vpn_t      sfence_vpn,
  // one pulse per miss
  output logic      miss_event
);

  typedef enum logic [1:0] {S_READY, S_REQUEST, S_WAIT} state_e;

  function automatic logic [IDX_W-1:0] idx_of(vpn_t v);
    return (SETS > 1) ? IDX_W'(v) : '0;
  endfunction

  function automatic logic [TAG_W-1:0] tag_of(vpn_t v);
    return TAG_W'(v >> IDX_BITS);
  endfunction

  // entry storage
  logic [WAYS-1:0]  valid [SETS];
  logic [TAG_W-1:0] tags  [SETS][WAYS];
  tlb_data_t        data  [SETS][WAYS];

  state_e state;
  vpn_t   miss_vpn;
  logic   refill_killed;

  assign req_ready     = (state == S_READY);
  assign ptw_req_valid = (state == S_REQUEST);
  assign ptw_req_vpn   = miss_vpn;

  // ---------------------------------------------------------------- lookup
  logic [IDX_W-1:0] lk_idx;
  logic [TAG_W-1:0] lk_tag;
  logic [WAYS-1:0]  lk_match;
  logic             lk_hit;
  logic [WAY_W-1:0] lk_way;
  tlb_data_t        lk_data;
  logic             lk_fault;
  logic             lookup;

  assign lookup = req_valid && req_ready;
  assign lk_idx = idx_of(req_vpn);
  assign lk_tag = tag_of(req_vpn);

  always_comb begin
    lk_hit  = 1'b0;
    lk_way  = '0;
    lk_data = '0;
    for (int w = 0; w < WAYS; w++) begin
      lk_match[w] = valid[lk_idx][w] && (tags[lk_idx][w] == lk_tag);
      if (lk_match[w]) begin
        lk_hit  = 1'b1;
        lk_way  = WAY_W'(w);
        lk_data = data[lk_idx][w];
      end
    end
    lk_fault = lk_data.pf || (req_user && !lk_data.u);
    if (IS_ITLB) lk_fault = lk_fault || !lk_data.x;
    else begin
      if (req_acc == ACC_LOAD)  lk_fault = lk_fault || !lk_data.r;
      if (req_acc == ACC_STORE) lk_fault = lk_fault || !lk_data.w;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      resp_valid <= 1'b0;
      resp_hit   <= 1'b0;
      resp_miss  <= 1'b0;
      resp_ppn   <= '0;
      resp_fault <= 1'b0;
    end else begin
      resp_valid <= lookup;
      resp_hit   <= lookup && lk_hit;
      resp_miss  <= lookup && !lk_hit;
      resp_ppn   <= lk_data.ppn;
      resp_fault <= lookup && lk_hit && lk_fault;
    end
  end

  assign miss_event = lookup && !lk_hit;

  // ---------------------------------------------------------------- refill
  logic [IDX_W-1:0] rf_idx;
  logic [WAYS-1:0]  rf_free;
  logic             rf_any_free;
  logic [WAY_W-1:0] rf_free_way;
  logic [WAY_W-1:0] victim_way;
  logic [WAY_W-1:0] rf_way;
  logic             refill;

  assign refill = (state == S_WAIT) && ptw_resp_valid && !refill_killed && !sfence_valid;
  assign rf_idx = idx_of(ptw_resp.vpn);

  always_comb begin
    rf_free     = ~valid[rf_idx];
    rf_any_free = |rf_free;
    rf_free_way = '0;
    for (int w = WAYS - 1; w >= 0; w--)
      if (rf_free[w]) rf_free_way = WAY_W'(w);
    rf_way = rf_any_free ? rf_free_way : victim_way;
  end

  if (WAYS == 1) begin : g_dm
    assign victim_way = '0;
  end else if (REPL == REPL_RANDOM) begin : g_random
    // steps only when a refill has to evict
    lfsr_random #(.WAYS(WAYS)) u_rand (
      .clk        (clk),
      .rst_n      (rst_n),
      .advance    (refill && !rf_any_free),
      .victim_way (victim_way)
    );
  end else begin : g_plru
    // pseudo-LRU: touched by hits and by refills; queried for the refill set
    plru_tree #(.SETS(SETS), .WAYS(WAYS)) u_plru (
      .clk         (clk),
      .rst_n       (rst_n),
      .touch_valid ((lookup && lk_hit) || refill),
      .touch_set   (refill ? rf_idx : lk_idx),
      .touch_way   (refill ? rf_way : lk_way),
      .query_set   (rf_idx),
      .victim_way  (victim_way)
    );
  end

  // ------------------------------------------------------- control, storage
  logic [IDX_W-1:0] fl_idx;
  logic [TAG_W-1:0] fl_tag;
  assign fl_idx = idx_of(sfence_vpn);
  assign fl_tag = tag_of(sfence_vpn);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state         <= S_READY;
      miss_vpn      <= '0;
      refill_killed <= 1'b0;
      for (int s = 0; s < SETS; s++) valid[s] <= '0;
    end else begin
      unique case (state)
        S_READY: if (lookup && !lk_hit) begin
          state         <= S_REQUEST;
          miss_vpn      <= req_vpn;
          refill_killed <= 1'b0;
        end
        S_REQUEST: if (ptw_req_ready) state <= S_WAIT;
        S_WAIT:    if (ptw_resp_valid) state <= S_READY;
        default:   state <= S_READY;
      endcase
      if (sfence_valid && state != S_READY) refill_killed <= 1'b1;

      if (refill) begin
        valid[rf_idx][rf_way] <= 1'b1;
        tags[rf_idx][rf_way]  <= tag_of(ptw_resp.vpn);
        data[rf_idx][rf_way]  <= ptw_resp.data;
      end

      if (sfence_valid) begin
        if (!sfence_rs1) begin
          for (int s = 0; s < SETS; s++) valid[s] <= '0;
        end else begin
          for (int w = 0; w < WAYS; w++)
            if (tags[fl_idx][w] == fl_tag) valid[fl_idx][w] <= 1'b0;
        end
      end
    end
  end

  // the walker only answers the VPN this TLB asked for
  a_resp_vpn: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_WAIT && ptw_resp_valid) |-> ptw_resp.vpn == miss_vpn);
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    ptw_req_valid && !ptw_req_ready |=> ptw_req_valid && $stable(ptw_req_vpn));

endmodule
