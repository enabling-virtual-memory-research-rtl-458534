// pt_memory: behavioural page table memory for the walker testbenches.
//
// Not synthesizable. It stands in for the data cache and main memory that
// the page table walker reads PTEs through. Memory is a sparse array of
// 64-bit words indexed by physical address. A request is accepted when
// req_valid and req_ready are high (req_ready drops at random when
// RANDOM_READY is set); the PTE comes back on resp_valid after a random
// latency of 1..MAX_LAT cycles, in order, one request at a time.
//
// Page tables are built by the testbench through map(), which creates the
// pointer PTEs from the root down to the requested level on demand (page
// table pages are handed out from PT_BASE upwards) and writes the leaf.
// set_leaf() overwrites a leaf PTE, for faulting or remapped entries.
module pt_memory
  import tlb_pkg::*;
#(
  parameter int unsigned MAX_LAT      = 4,
  parameter bit          RANDOM_READY = 1'b1
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   req_valid,
  output logic   req_ready,
  input  paddr_t req_addr,
  output logic   resp_valid,
  output pte_t   resp_pte
);

  localparam ppn_t PT_BASE = 44'h80000;

  pte_t mem [paddr_t];
  ppn_t root_ppn = PT_BASE;
  ppn_t next_pt  = PT_BASE + 1;
  int   n_reads  = 0;

  function automatic pte_t read_word(paddr_t a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  function automatic paddr_t pte_addr(ppn_t table_ppn, vpn_t vpn, int level);
    return {table_ppn, vpn[9*level +: 9], 3'b000};
  endfunction

  // address of the PTE for vpn at `level`, allocating pointer PTEs above it
  function automatic paddr_t walk_alloc(vpn_t vpn, int level);
    ppn_t t = root_ppn;
    for (int l = 2; l > level; l--) begin
      paddr_t a = pte_addr(t, vpn, l);
      pte_t p = read_word(a);
      if (!p.v || p.r || p.x) begin
        p = '0;
        p.v = 1'b1;
        p.ppn = next_pt;
        next_pt++;
        mem[a] = p;
      end
      t = p.ppn;
    end
    return pte_addr(t, vpn, level);
  endfunction

  // map vpn (aligned to the page of `level`: 0 = 4 KB, 1 = 2 MB, 2 = 1 GB)
  function automatic void map(vpn_t vpn, ppn_t ppn, int level, logic [3:0] uxwr);
    pte_t p = '0;
    p.v = 1'b1;
    {p.u, p.x, p.w, p.r} = uxwr;
    p.a = 1'b1;
    p.d = 1'b1;
    p.ppn = ppn;
    mem[walk_alloc(vpn, level)] = p;
  endfunction

  function automatic void set_leaf(vpn_t vpn, int level, pte_t p);
    mem[walk_alloc(vpn, level)] = p;
  endfunction

  // request handling
  paddr_t q_addr [$];
  int     lat;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      req_ready  <= 1'b1;
      resp_valid <= 1'b0;
      lat        <= 0;
    end else begin
      resp_valid <= 1'b0;
      if (req_valid && req_ready) begin
        q_addr.push_back(req_addr);
        lat <= $urandom_range(1, MAX_LAT);
        n_reads <= n_reads + 1;
      end else if (q_addr.size() > 0) begin
        if (lat <= 1) begin
          resp_valid <= 1'b1;
          resp_pte   <= read_word(q_addr.pop_front());
        end else lat <= lat - 1;
      end
      req_ready <= RANDOM_READY ? ($urandom_range(0, 3) != 0) : 1'b1;
    end
  end

endmodule
