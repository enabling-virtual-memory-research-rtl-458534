// config_runner: one TLB hierarchy in a given configuration, its page table
// memory, and a deterministic access stream, for tb_configurations.
//
// Page tables map DPAGES data pages, vpn = 27'h20000 + j + k*1024
// (j < DPAGES/3, k < 3): three pages share every set of a 1024-set
// direct-mapped L2 TLB, but fit in any 4-way or 8-way L2 TLB of 1024
// entries, and their number exceeds the 128-entry DTLB so that the L1 keeps
// missing. ROUNDS passes go through them in order on the data side while
// the instruction side cycles through 16 code pages. Every hit is checked
// against the mapping (PPN = f(VPN)); the counters must agree with the
// misses seen. Results are left in checks, failures and the miss counts.
module config_runner
  import tlb_pkg::*;
#(
  parameter int unsigned ITLB_SETS = 8,
  parameter int unsigned ITLB_WAYS = 8,
  parameter int unsigned DTLB_SETS = 16,
  parameter int unsigned DTLB_WAYS = 8,
  parameter bit          L2_EN     = 1'b1,
  parameter int unsigned L2_SETS   = 128,
  parameter int unsigned L2_WAYS   = 8,
  parameter tlb_pkg::repl_e L1_REPL = tlb_pkg::REPL_PLRU,
  parameter tlb_pkg::repl_e L2_REPL = tlb_pkg::REPL_RANDOM,
  parameter int unsigned DPAGES    = 201,
  parameter int unsigned ROUNDS    = 4
) (
  input  logic clk,
  input  logic rst_n,
  output logic done
);

  logic i_req_valid = 0, i_req_ready, i_resp_valid, i_resp_hit, i_resp_miss, i_resp_fault;
  vpn_t i_req_vpn = '0;
  ppn_t i_resp_ppn;
  logic d_req_valid = 0, d_req_ready, d_resp_valid, d_resp_hit, d_resp_miss, d_resp_fault;
  vpn_t d_req_vpn = '0;
  ppn_t d_resp_ppn;
  logic mem_req_valid, mem_req_ready, mem_resp_valid;
  paddr_t mem_req_addr;
  pte_t mem_resp_pte;
  logic [63:0] cnt_itlb_miss, cnt_dtlb_miss, cnt_l2_miss, cnt_walk;

  int checks = 0, failures = 0;
  int i_miss = 0, d_miss = 0;
  int accesses = 0;

  pt_memory #(.MAX_LAT(2), .RANDOM_READY(1'b0)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_addr(mem_req_addr),
    .resp_valid(mem_resp_valid), .resp_pte(mem_resp_pte));

  tlb_hierarchy #(
    .ITLB_SETS(ITLB_SETS), .ITLB_WAYS(ITLB_WAYS), .DTLB_SETS(DTLB_SETS), .DTLB_WAYS(DTLB_WAYS),
    .L2_EN(L2_EN), .L2_SETS(L2_SETS), .L2_WAYS(L2_WAYS), .L1_REPL(L1_REPL), .L2_REPL(L2_REPL)
  ) dut (
    .clk, .rst_n,
    .i_req_valid, .i_req_ready, .i_req_vpn, .i_req_user(1'b0),
    .i_resp_valid, .i_resp_hit, .i_resp_miss, .i_resp_ppn, .i_resp_fault,
    .d_req_valid, .d_req_ready, .d_req_vpn, .d_req_acc(ACC_LOAD), .d_req_user(1'b0),
    .d_resp_valid, .d_resp_hit, .d_resp_miss, .d_resp_ppn, .d_resp_fault,
    .sfence_valid(1'b0), .sfence_rs1(1'b0), .sfence_vpn('0), .satp_ppn(u_mem.root_ppn),
    .mem_req_valid, .mem_req_ready, .mem_req_addr, .mem_resp_valid, .mem_resp_pte,
    .cnt_clear(1'b0), .cnt_itlb_miss, .cnt_dtlb_miss, .cnt_l2_miss, .cnt_walk);

  function automatic ppn_t ppn_of(vpn_t v);
    return ppn_t'(v) + 44'h300000;
  endfunction

  function automatic vpn_t dpage(int n);
    return vpn_t'(27'h20000 + (n / 3) + (n % 3) * 1024);
  endfunction

  function automatic vpn_t ipage(int n);
    return vpn_t'(27'h1000 + n);
  endfunction

  task automatic translate(bit is_i, vpn_t v);
    for (int tries = 0; tries < 10; tries++) begin
      if (is_i) begin
        while (!i_req_ready) @(negedge clk);
        i_req_valid = 1; i_req_vpn = v;
        @(negedge clk);
        i_req_valid = 0;
        if (i_resp_miss) begin i_miss++; continue; end
        checks++;
        if (!i_resp_hit || i_resp_fault || i_resp_ppn != ppn_of(v)) failures++;
      end else begin
        while (!d_req_ready) @(negedge clk);
        d_req_valid = 1; d_req_vpn = v;
        @(negedge clk);
        d_req_valid = 0;
        if (d_resp_miss) begin d_miss++; continue; end
        checks++;
        if (!d_resp_hit || d_resp_fault || d_resp_ppn != ppn_of(v)) failures++;
      end
      accesses++;
      return;
    end
    failures++;
  endtask

  initial begin
    done = 0;
    for (int n = 0; n < DPAGES; n++) u_mem.map(dpage(n), ppn_of(dpage(n)), 0, 4'b0011);
    for (int n = 0; n < 16; n++) u_mem.map(ipage(n), ppn_of(ipage(n)), 0, 4'b0101);
    @(posedge rst_n);
    @(negedge clk);
    fork
      for (int r = 0; r < ROUNDS; r++) for (int n = 0; n < DPAGES; n++) translate(1'b0, dpage(n));
      for (int r = 0; r < ROUNDS * 8; r++) for (int n = 0; n < 16; n++) translate(1'b1, ipage(n));
    join
    repeat (3) @(negedge clk);
    checks++;
    if (cnt_itlb_miss != 64'(i_miss) || cnt_dtlb_miss != 64'(d_miss) ||
        cnt_walk != (L2_EN ? cnt_l2_miss : cnt_itlb_miss + cnt_dtlb_miss)) begin
      failures++;
      $display("counter mismatch: itlb %0d/%0d dtlb %0d/%0d l2 %0d walks %0d",
               cnt_itlb_miss, i_miss, cnt_dtlb_miss, d_miss, cnt_l2_miss, cnt_walk);
    end
    done = 1;
  end

endmodule
