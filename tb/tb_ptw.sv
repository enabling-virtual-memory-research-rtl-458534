// tb_ptw: self-checking testbench of the page table walker with its L2 TLB.
//
// The walker (L2 TLB of 4 sets x 2 ways) reads a behavioural page table
// (pt_memory) holding 4 KB, 2 MB and 1 GB mappings and several faulting
// entries: an invalid leaf, a write-only leaf, a misaligned 2 MB leaf, and a
// pointer at the last level. For every request the testbench works out the
// expected result from its own list of mappings and the number of PTE reads
// the walk must make (three for a 4 KB page, two for 2 MB, one for 1 GB,
// none on an L2 hit). It checks the returned VPN, requester id, PPN,
// permissions and fault bit, and that an L2 hit answers three cycles after
// the request is accepted, and that only a successful walk (not an L2 hit,
// not a fault) writes the L2 TLB. A remapped page followed by sfence.vma must come
// back with its new translation.
module tb_ptw;
  import tlb_pkg::*;

  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready;
  vpn_t req_vpn = '0;
  logic req_id = 0;
  logic resp_valid, resp_id;
  ptw_resp_t resp;
  logic mem_req_valid, mem_req_ready, mem_resp_valid;
  paddr_t mem_req_addr;
  pte_t mem_resp_pte;
  logic sfence_valid = 0, sfence_rs1 = 0;
  vpn_t sfence_vpn = '0;
  logic l2_hit_event, l2_miss_event, walk_event;

  int checks = 0, failures = 0;
  int n_l2_hit = 0, n_walk4k = 0, n_walk2m = 0, n_walk1g = 0, n_fault = 0;

  pt_memory #(.MAX_LAT(3)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_addr(mem_req_addr),
    .resp_valid(mem_resp_valid), .resp_pte(mem_resp_pte));

  ptw #(.L2_EN(1'b1), .L2_SETS(4), .L2_WAYS(2), .L2_REPL(REPL_RANDOM), .ID_W(1)) dut (
    .clk, .rst_n, .req_valid, .req_ready, .req_vpn, .req_id, .resp_valid, .resp_id, .resp,
    .satp_ppn(u_mem.root_ppn), .mem_req_valid, .mem_req_ready, .mem_req_addr, .mem_resp_valid, .mem_resp_pte,
    .sfence_valid, .sfence_rs1, .sfence_vpn, .l2_hit_event, .l2_miss_event, .walk_event);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // the testbench's own list of mappings: key = vpn (4K), vpn>>9 (2M), vpn>>18 (1G)
  tlb_data_t map4k [vpn_t];
  tlb_data_t map2m [vpn_t];
  tlb_data_t map1g [vpn_t];
  int        reads4k [vpn_t];   // PTE reads for a faulting 4 KB-level entry

  function automatic tlb_data_t mk(ppn_t p, logic [3:0] uxwr);
    tlb_data_t d;
    d.ppn = p;
    {d.u, d.x, d.w, d.r} = uxwr;
    d.pf = 1'b0;
    return d;
  endfunction

  function automatic tlb_data_t fault_data();
    tlb_data_t d = '0;
    d.pf = 1'b1;
    return d;
  endfunction

  // expected result and number of PTE reads for vpn
  function automatic tlb_data_t expect_of(vpn_t v, output int reads);
    tlb_data_t d;
    if (map4k.exists(v)) begin
      reads = reads4k.exists(v) ? reads4k[v] : 3;
      return map4k[v];
    end
    if (map2m.exists(v >> 9)) begin
      d = map2m[v >> 9];
      reads = 2;
      if (!d.pf) d.ppn[8:0] = v[8:0];
      return d;
    end
    if (map1g.exists(v >> 18)) begin
      d = map1g[v >> 18];
      reads = 1;
      d.ppn[17:0] = v[17:0];
      return d;
    end
    reads = 1;   // the root PTE is invalid
    return fault_data();
  endfunction

  // one walk request; l2_expected: 1 = must hit in L2, 0 = must walk, -1 = either
  task automatic request(vpn_t v, logic id, int l2_expected);
    int exp_reads, reads0, cyc = 0;
    tlb_data_t exp_d = expect_of(v, exp_reads);
    bit was_l2_hit;
    while (!req_ready) @(negedge clk);
    reads0 = u_mem.n_reads;
    req_valid = 1; req_vpn = v; req_id = id;
    @(negedge clk);
    req_valid = 0;
    while (!resp_valid && cyc < 200) begin
      cyc++;
      @(negedge clk);
    end
    was_l2_hit = (u_mem.n_reads == reads0);
    // only a walk may write the L2 TLB (sampled in the result cycle)
    checks++;
    if (dut.l2_refill && (was_l2_hit || exp_d.pf)) begin
      failures++;
      $display("vpn %h: L2 TLB refilled after an L2 hit or a fault", v);
    end
    checks++;
    if (!resp_valid || resp.vpn != v || resp_id != id || resp.data != exp_d) begin
      failures++;
      $display("vpn %h: valid %0d id %0d data %h, expected %h", v, resp_valid, resp_id, resp.data, exp_d);
    end
    checks++;
    if (was_l2_hit) begin
      n_l2_hit++;
      if (cyc != 2 || l2_expected == 0) begin
        failures++;
        $display("vpn %h: L2 hit after %0d cycles (expected %0d)", v, cyc + 1, 3);
      end
    end else begin
      if (u_mem.n_reads - reads0 != exp_reads || l2_expected == 1) begin
        failures++;
        $display("vpn %h: %0d PTE reads, expected %0d", v, u_mem.n_reads - reads0, exp_reads);
      end
      if (exp_d.pf) n_fault++;
      else if (exp_reads == 3) n_walk4k++;
      else if (exp_reads == 2) n_walk2m++;
      else n_walk1g++;
    end
    @(negedge clk);
  endtask

  initial begin
    pte_t bad;
    vpn_t pool [$];
    // 4 KB pages
    for (int i = 0; i < 24; i++) begin
      automatic vpn_t v = vpn_t'(i * 5 + (i % 3) * 27'h40000 + 27'h100);
      automatic tlb_data_t d = mk(ppn_t'(44'h100000 + i * 3), 4'($urandom_range(1, 15)));
      if (!d.r && !d.x) d.r = 1'b1;   // a leaf needs R or X
      if (d.w && !d.r) d.r = 1'b1;
      u_mem.map(v, d.ppn, 0, {d.u, d.x, d.w, d.r});
      map4k[v] = d;
      pool.push_back(v);
    end
    // a 2 MB page and a 1 GB page
    u_mem.map(27'h0000600, 44'h200600, 1, 4'b0011);
    map2m[27'h0000600 >> 9] = mk(44'h200600, 4'b0011);
    pool.push_back(27'h0000600); pool.push_back(27'h0000605); pool.push_back(27'h00007ff);
    u_mem.map(27'h4000000, 44'h4000000, 2, 4'b1101);
    map1g[27'h4000000 >> 18] = mk(44'h4000000, 4'b1101);
    pool.push_back(27'h4000123); pool.push_back(27'h4012345);
    // faulting entries
    bad = '0;                                   // V clear
    u_mem.set_leaf(27'h0000901, 0, bad);
    map4k[27'h0000901] = fault_data(); pool.push_back(27'h0000901);
    bad = '0; bad.v = 1; bad.w = 1;             // W without R
    u_mem.set_leaf(27'h0000902, 0, bad);
    map4k[27'h0000902] = fault_data(); pool.push_back(27'h0000902);
    bad = '0; bad.v = 1; bad.r = 1; bad.ppn = 44'h300001;  // misaligned 2 MB leaf
    u_mem.set_leaf(27'h0000a00, 1, bad);
    map2m[27'h0000a00 >> 9] = fault_data(); pool.push_back(27'h0000a07);
    bad = '0; bad.v = 1; bad.ppn = 44'h5;       // pointer at the last level
    u_mem.set_leaf(27'h0000903, 0, bad);
    map4k[27'h0000903] = fault_data(); pool.push_back(27'h0000903);
    pool.push_back(27'h7000000);                // unmapped root entry

    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // the first access to a page walks, the second one hits in the L2 TLB
    request(27'h0000100, 1'b0, 0);
    request(27'h0000100, 1'b1, 1);
    for (int i = 0; i < 600; i++) begin
      automatic vpn_t v = pool[$urandom_range(0, pool.size() - 1)];
      request(v, 1'(i), -1);
    end

    // remap a page: stale entry until sfence.vma, new translation after it
    request(27'h000010f, 1'b0, -1);
    request(27'h000010f, 1'b0, 1);
    u_mem.map(27'h000010f, 44'h0ABCDE, 0, 4'b0011);
    sfence_valid = 1; sfence_rs1 = 1; sfence_vpn = 27'h000010f;
    @(negedge clk);
    sfence_valid = 0;
    map4k[27'h000010f] = mk(44'h0ABCDE, 4'b0011);
    request(27'h000010f, 1'b1, 0);
    request(27'h000010f, 1'b1, 1);

    $display("L2 hits %0d, walks 4K %0d 2M %0d 1G %0d, faults %0d", n_l2_hit, n_walk4k, n_walk2m, n_walk1g, n_fault);
    checks++;
    if (n_l2_hit == 0 || n_walk4k == 0 || n_walk2m == 0 || n_walk1g == 0 || n_fault == 0) begin
      failures++;
      $display("a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
