// tlb_hierarchy: the configurable TLB hierarchy of one RV64 Sv39 core.
//
// Two L1 TLBs, one for instruction fetches and one for data accesses, are
// built from the same set-associative template (l1_tlb) and differ only in
// the permission they check. Their misses meet in a round-robin arbiter that
// passes one VPN at a time to the page table walker (ptw). The walker holds
// the shared set-associative L2 TLB (l2_tlb), which keeps both instruction
// and data translations; it answers an L1 miss from the L2 TLB or, on an L2
// miss, by walking the page table in memory, and sends the result back to
// the L1 TLB that asked, which refills itself. Four counters record ITLB
// misses, DTLB misses, L2 TLB misses and page walks.
//
// The default parameters are the largest configuration evaluated for this
// hierarchy: an 8-way 64-entry ITLB, an 8-way 128-entry DTLB and an 8-way
// 1024-entry L2 TLB with random replacement, with pseudo-LRU in the L1 TLBs.
// Any of the sizes may be changed, from direct-mapped to fully associative;
// L2_EN=0 removes the L2 TLB; L1_REPL and L2_REPL choose pseudo-LRU or
// random replacement.
//
// Interface, per side (i_ for instructions, d_ for data): a request is
// accepted when *_req_valid and *_req_ready are high; one cycle later
// *_resp_valid comes with *_resp_hit (and PPN and fault) or *_resp_miss.
// After a miss *_req_ready stays low until the refill, and the requester
// must repeat the request. sfence_* flushes all three TLBs. satp_ppn is the
// root of the page table. mem_* is the PTE read port of the walker. cnt_*
// are the miss counters, cleared by cnt_clear.
module tlb_hierarchy
  import tlb_pkg::*;
#(
  parameter int unsigned ITLB_SETS = 8,
  parameter int unsigned ITLB_WAYS = 8,
  parameter int unsigned DTLB_SETS = 16,
  parameter int unsigned DTLB_WAYS = 8,
  parameter repl_e       L1_REPL   = REPL_PLRU,
  parameter bit          L2_EN     = 1'b1,
  parameter int unsigned L2_SETS   = 128,
  parameter int unsigned L2_WAYS   = 8,
  parameter repl_e       L2_REPL   = REPL_RANDOM
) (
  input  logic        clk,
  input  logic        rst_n,
  // instruction side
  input  logic        i_req_valid,
  output logic        i_req_ready,
  input  vpn_t        i_req_vpn,
  input  logic        i_req_user,
  output logic        i_resp_valid,
  output logic        i_resp_hit,
  output logic        i_resp_miss,
  output ppn_t        i_resp_ppn,
  output logic        i_resp_fault,
  // data side
  input  logic        d_req_valid,
  output logic        d_req_ready,
  input  vpn_t        d_req_vpn,
  input  acc_e        d_req_acc,
  input  logic        d_req_user,
  output logic        d_resp_valid,
  output logic        d_resp_hit,
  output logic        d_resp_miss,
  output ppn_t        d_resp_ppn,
  output logic        d_resp_fault,
  // sfence.vma and SATP
  input  logic        sfence_valid,
  input  logic        sfence_rs1,
  input  vpn_t        sfence_vpn,
  input  ppn_t        satp_ppn,
  // page table memory
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output paddr_t      mem_req_addr,
  input  logic        mem_resp_valid,
  input  pte_t        mem_resp_pte,
  // miss counters
  input  logic        cnt_clear,
  output logic [63:0] cnt_itlb_miss,
  output logic [63:0] cnt_dtlb_miss,
  output logic [63:0] cnt_l2_miss,
  output logic [63:0] cnt_walk
);

  localparam int unsigned N_REQ = 2;   // 0: ITLB, 1: DTLB

  logic [N_REQ-1:0] ptw_req_valid, ptw_req_ready;
  vpn_t             ptw_req_vpn [N_REQ];
  logic             arb_valid, arb_ready;
  logic             arb_idx;
  logic             ptw_resp_valid;
  logic             ptw_resp_id;
  ptw_resp_t        ptw_resp;
  logic             itlb_miss, dtlb_miss, l2_miss, walk, l2_hit;

  l1_tlb #(.SETS(ITLB_SETS), .WAYS(ITLB_WAYS), .IS_ITLB(1'b1), .REPL(L1_REPL)) u_itlb (
    .clk            (clk),
    .rst_n          (rst_n),
    .req_valid      (i_req_valid),
    .req_ready      (i_req_ready),
    .req_vpn        (i_req_vpn),
    .req_acc        (ACC_FETCH),
    .req_user       (i_req_user),
    .resp_valid     (i_resp_valid),
    .resp_hit       (i_resp_hit),
    .resp_miss      (i_resp_miss),
    .resp_ppn       (i_resp_ppn),
    .resp_fault     (i_resp_fault),
    .ptw_req_valid  (ptw_req_valid[0]),
    .ptw_req_ready  (ptw_req_ready[0]),
    .ptw_req_vpn    (ptw_req_vpn[0]),
    .ptw_resp_valid (ptw_resp_valid && ptw_resp_id == 1'b0),
    .ptw_resp       (ptw_resp),
    .sfence_valid   (sfence_valid),
    .sfence_rs1     (sfence_rs1),
    .sfence_vpn     (sfence_vpn),
    .miss_event     (itlb_miss)
  );

  l1_tlb #(.SETS(DTLB_SETS), .WAYS(DTLB_WAYS), .IS_ITLB(1'b0), .REPL(L1_REPL)) u_dtlb (
    .clk            (clk),
    .rst_n          (rst_n),
    .req_valid      (d_req_valid),
    .req_ready      (d_req_ready),
    .req_vpn        (d_req_vpn),
    .req_acc        (d_req_acc),
    .req_user       (d_req_user),
    .resp_valid     (d_resp_valid),
    .resp_hit       (d_resp_hit),
    .resp_miss      (d_resp_miss),
    .resp_ppn       (d_resp_ppn),
    .resp_fault     (d_resp_fault),
    .ptw_req_valid  (ptw_req_valid[1]),
    .ptw_req_ready  (ptw_req_ready[1]),
    .ptw_req_vpn    (ptw_req_vpn[1]),
    .ptw_resp_valid (ptw_resp_valid && ptw_resp_id == 1'b1),
    .ptw_resp       (ptw_resp),
    .sfence_valid   (sfence_valid),
    .sfence_rs1     (sfence_rs1),
    .sfence_vpn     (sfence_vpn),
    .miss_event     (dtlb_miss)
  );

  rr_arbiter #(.N(N_REQ)) u_arb (
    .clk       (clk),
    .rst_n     (rst_n),
    .req_valid (ptw_req_valid),
    .req_ready (ptw_req_ready),
    .out_valid (arb_valid),
    .out_ready (arb_ready),
    .out_idx   (arb_idx)
  );

  ptw #(
    .L2_EN   (L2_EN),
    .L2_SETS (L2_SETS),
    .L2_WAYS (L2_WAYS),
    .L2_REPL (L2_REPL),
    .ID_W    (1)
  ) u_ptw (
    .clk            (clk),
    .rst_n          (rst_n),
    .req_valid      (arb_valid),
    .req_ready      (arb_ready),
    .req_vpn        (ptw_req_vpn[arb_idx]),
    .req_id         (arb_idx),
    .resp_valid     (ptw_resp_valid),
    .resp_id        (ptw_resp_id),
    .resp           (ptw_resp),
    .satp_ppn       (satp_ppn),
    .mem_req_valid  (mem_req_valid),
    .mem_req_ready  (mem_req_ready),
    .mem_req_addr   (mem_req_addr),
    .mem_resp_valid (mem_resp_valid),
    .mem_resp_pte   (mem_resp_pte),
    .sfence_valid   (sfence_valid),
    .sfence_rs1     (sfence_rs1),
    .sfence_vpn     (sfence_vpn),
    .l2_hit_event   (l2_hit),
    .l2_miss_event  (l2_miss),
    .walk_event     (walk)
  );

  logic [3:0][63:0] counts;

  tlb_event_counters #(.N(4), .W(64)) u_cnt (
    .clk   (clk),
    .rst_n (rst_n),
    .clear (cnt_clear),
    .inc   ({walk, l2_miss, dtlb_miss, itlb_miss}),
    .count (counts)
  );

  assign cnt_itlb_miss = counts[0];
  assign cnt_dtlb_miss = counts[1];
  assign cnt_l2_miss   = counts[2];
  assign cnt_walk      = counts[3];

endmodule
