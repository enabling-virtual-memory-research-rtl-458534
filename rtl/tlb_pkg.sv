// tlb_pkg: types and constants shared by the TLB hierarchy.
//
// The hierarchy translates RV64 Sv39 virtual addresses: 39-bit virtual
// addresses, 4 KB base pages, a 27-bit virtual page number (VPN) made of three
// 9-bit slices, one per level of the radix page table, and a 44-bit physical
// page number (PPN). Page table entries (PTEs) are 64 bits wide, laid out as in
// the RISC-V privileged specification. These sizes are the Sv39 ones; the
// structs that carry a translation between the blocks (tlb_data_t, ptw_resp_t)
// and the replacement-policy enum are choices of this implementation.
package tlb_pkg;

  localparam int unsigned PGOFF_BITS = 12;   // 4 KB pages
  localparam int unsigned VPN_W      = 27;   // Sv39 VPN
  localparam int unsigned PPN_W      = 44;   // Sv39 PPN
  localparam int unsigned PA_W       = 56;   // physical address
  localparam int unsigned LEVELS     = 3;    // page table levels
  localparam int unsigned LVL_BITS   = 9;    // VPN bits per level

  typedef logic [VPN_W-1:0] vpn_t;
  typedef logic [PPN_W-1:0] ppn_t;
  typedef logic [PA_W-1:0]  paddr_t;

  // Sv39 page table entry.
  typedef struct packed {
    logic [9:0] reserved;
    ppn_t       ppn;
    logic [1:0] rsw;
    logic       d, a, g, u, x, w, r, v;
  } pte_t;

  // What a TLB entry holds besides its tag: the 4 KB PPN, the permission
  // bits, and pf when the walk ended in a page fault.
  typedef struct packed {
    ppn_t ppn;
    logic u, x, w, r;
    logic pf;
  } tlb_data_t;

  localparam int unsigned DATA_W = $bits(tlb_data_t);

  // Walk result sent from the PTW back to an L1 TLB.
  typedef struct packed {
    vpn_t      vpn;
    tlb_data_t data;
  } ptw_resp_t;

  // Kind of access, for the permission check in the L1 TLBs.
  typedef enum logic [1:0] {
    ACC_FETCH = 2'd0,
    ACC_LOAD  = 2'd1,
    ACC_STORE = 2'd2
  } acc_e;

  // Replacement policy of a set-associative TLB.
  typedef enum logic {
    REPL_PLRU   = 1'b0,
    REPL_RANDOM = 1'b1
  } repl_e;

endpackage
