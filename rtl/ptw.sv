// ptw: page table walker with the shared L2 TLB inside it.
//
// The walker takes one translation request at a time from the arbiter in
// front of the L1 TLBs (req_valid/req_ready, with the VPN and the requester's
// id). It first looks the VPN up in the L2 TLB (when L2_EN is set). On an L2
// hit the stored leaf is returned. On an L2 miss it walks the three-level
// Sv39 radix page table: starting from the root PPN in SATP, it reads the
// PTE at {base PPN, VPN slice of the level, 3'b000} through the memory port,
// and either follows a pointer PTE to the next level or stops at a leaf
// (R or X set). An invalid PTE (V clear, or W without R), a pointer at the
// last level, or a superpage whose PPN is not aligned ends the walk with a
// page fault. A 2 MB or 1 GB leaf is returned as the 4 KB translation of the
// requested page (the low PPN bits taken from the VPN), because the TLBs of
// this hierarchy hold 4 KB pages only. The result goes back on
// resp_valid/resp_id/resp for one cycle; a successful walk (not an L2 hit)
// is written into the L2 TLB in that same cycle, unless an sfence.vma
// arrived during the walk.
//
// Timing: on an L2 hit resp_valid is high three cycles after the cycle in
// which the request was accepted (two L2 pipeline cycles, then the result
// cycle); a walk adds, per level, the memory request handshake and the
// memory's latency.
//
// Memory port: mem_req_valid/mem_req_ready/mem_req_addr for an 8-byte PTE
// read, answered by one mem_resp_valid pulse with the PTE, in order. In a
// full processor this read goes through the L1 data cache. mem_req_addr[2:0]
// is always zero because PTEs are 8-byte aligned.
//
// What follows the TLB hierarchy design: the L2 TLB sits inside the walker
// and is consulted before the page table; misses reach it through a
// round-robin arbiter; the hierarchy is evaluated without a page-walk cache.
// The walk itself follows the RISC-V Sv39 rules. This design's own choices:
// one walk at a time, the memory handshake, splitting superpages, ignoring
// the A and D bits, not caching faults in the L2 TLB, and not rewriting an
// entry that was an L2 hit.
module ptw
  import tlb_pkg::*;
#(
  parameter bit          L2_EN   = 1'b1,
  parameter int unsigned L2_SETS = 128,
  parameter int unsigned L2_WAYS = 8,
  parameter repl_e       L2_REPL = REPL_RANDOM,
  parameter int unsigned ID_W    = 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // walk requests from the arbiter
  input  logic            req_valid,
  output logic            req_ready,
  input  vpn_t            req_vpn,
  input  logic [ID_W-1:0] req_id,
  // results to the L1 TLBs
  output logic            resp_valid,
  output logic [ID_W-1:0] resp_id,
  output ptw_resp_t       resp,
  // page table root
  input  ppn_t            satp_ppn,
  // PTE reads
  output logic            mem_req_valid,
  input  logic            mem_req_ready,
  output paddr_t          mem_req_addr,
  input  logic            mem_resp_valid,
  input  pte_t            mem_resp_pte,
  // sfence.vma
  input  logic            sfence_valid,
  input  logic            sfence_rs1,
  input  vpn_t            sfence_vpn,
  // events
  output logic            l2_hit_event,
  output logic            l2_miss_event,
  output logic            walk_event
);

  typedef enum logic [2:0] {S_IDLE, S_L2, S_MEM_REQ, S_MEM_WAIT, S_RESP} state_e;

  state_e          state;
  vpn_t            vpn;
  logic [ID_W-1:0] id;
  logic [1:0]      level;
  ppn_t            base;
  tlb_data_t       result;
  logic            killed;
  logic            walked;   // result came from the page table, not the L2 TLB

  assign req_ready     = (state == S_IDLE);
  assign mem_req_valid = (state == S_MEM_REQ);
  assign resp_valid    = (state == S_RESP);
  assign resp_id       = id;
  assign resp.vpn      = vpn;
  assign resp.data     = result;

  logic [LVL_BITS-1:0] vpn_slice;
  always_comb begin
    unique case (level)
      2'd2:    vpn_slice = vpn[26:18];
      2'd1:    vpn_slice = vpn[17:9];
      default: vpn_slice = vpn[8:0];
    endcase
  end
  assign mem_req_addr = {base, vpn_slice, 3'b000};

  // ---------------------------------------------------------- L2 TLB
  logic      l2_resp_valid, l2_resp_hit, l2_miss;
  tlb_data_t l2_resp_data;
  logic      l2_refill;

  assign l2_refill = (state == S_RESP) && walked && !result.pf && !killed && !sfence_valid;

  if (L2_EN) begin : g_l2
    l2_tlb #(.SETS(L2_SETS), .WAYS(L2_WAYS), .REPL(L2_REPL)) u_l2 (
      .clk          (clk),
      .rst_n        (rst_n),
      .lookup_valid (req_valid && req_ready),
      .lookup_vpn   (req_vpn),
      .resp_valid   (l2_resp_valid),
      .resp_hit     (l2_resp_hit),
      .resp_data    (l2_resp_data),
      .refill_valid (l2_refill),
      .refill_vpn   (vpn),
      .refill_data  (result),
      .sfence_valid (sfence_valid),
      .sfence_rs1   (sfence_rs1),
      .sfence_vpn   (sfence_vpn),
      .miss_event   (l2_miss)
    );
  end else begin : g_no_l2
    assign l2_resp_valid = 1'b0;
    assign l2_resp_hit   = 1'b0;
    assign l2_resp_data  = '0;
    assign l2_miss       = 1'b0;
  end

  assign l2_hit_event  = (state == S_L2) && l2_resp_valid && l2_resp_hit;
  assign l2_miss_event = l2_miss;

  // ---------------------------------------------------------- PTE decode
  pte_t pte;
  logic pte_invalid, pte_leaf, pte_misaligned;
  ppn_t leaf_ppn;

  assign pte            = mem_resp_pte;
  assign pte_invalid    = !pte.v || (pte.w && !pte.r);
  assign pte_leaf       = pte.r || pte.x;
  assign pte_misaligned = (level == 2'd2) ? (pte.ppn[17:0] != '0) :
                          (level == 2'd1) ? (pte.ppn[8:0]  != '0) : 1'b0;

  always_comb begin
    unique case (level)
      2'd2:    leaf_ppn = {pte.ppn[PPN_W-1:18], vpn[17:0]};
      2'd1:    leaf_ppn = {pte.ppn[PPN_W-1:9],  vpn[8:0]};
      default: leaf_ppn = pte.ppn;
    endcase
  end

  // ---------------------------------------------------------- control
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      vpn    <= '0;
      id     <= '0;
      level  <= 2'd2;
      base   <= '0;
      result <= '0;
      killed <= 1'b0;
      walked <= 1'b0;
    end else begin
      if (sfence_valid && state != S_IDLE) killed <= 1'b1;
      unique case (state)
        S_IDLE: if (req_valid) begin
          vpn    <= req_vpn;
          id     <= req_id;
          level  <= 2'd2;
          base   <= satp_ppn;
          killed <= 1'b0;
          walked <= 1'b0;
          state  <= L2_EN ? S_L2 : S_MEM_REQ;
        end
        S_L2: if (l2_resp_valid) begin
          if (l2_resp_hit) begin
            result <= l2_resp_data;
            state  <= S_RESP;
          end else begin
            state  <= S_MEM_REQ;
          end
        end
        S_MEM_REQ: if (mem_req_ready) begin
          state  <= S_MEM_WAIT;
          walked <= 1'b1;
        end
        S_MEM_WAIT: if (mem_resp_valid) begin
          if (pte_invalid || (pte_leaf && pte_misaligned) || (!pte_leaf && level == 2'd0)) begin
            result <= '{ppn: '0, u: 1'b0, x: 1'b0, w: 1'b0, r: 1'b0, pf: 1'b1};
            state  <= S_RESP;
          end else if (pte_leaf) begin
            result <= '{ppn: leaf_ppn, u: pte.u, x: pte.x, w: pte.w, r: pte.r, pf: 1'b0};
            state  <= S_RESP;
          end else begin
            base  <= pte.ppn;
            level <= level - 2'd1;
            state <= S_MEM_REQ;
          end
        end
        S_RESP:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign walk_event = (state == S_MEM_REQ) && mem_req_ready && (level == 2'd2);

  a_mem_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req_addr));

endmodule
