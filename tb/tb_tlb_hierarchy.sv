// tb_tlb_hierarchy: end-to-end test of the whole TLB hierarchy at its
// default sizes (8-way 64-entry ITLB, 8-way 128-entry DTLB, 8-way
// 1024-entry L2 TLB with random replacement).
//
// A behavioural page table (pt_memory) maps a few hundred 4 KB pages, a
// 2 MB and a 1 GB page, and some faulting entries. An instruction-fetch
// process and a data process run at the same time, each sending translations
// and, after a miss, repeating the request until it hits. Every hit is
// checked against the testbench's own list of mappings (PPN, and the fault
// from the permission bits). A third process issues sfence.vma with and
// without an address at random. Part of the pages share one L2 set and one
// DTLB set so that both TLB levels must evict. At the end one page is
// remapped, flushed with sfence.vma, and must come back with its new
// translation, and the miss counters are compared with the misses the
// testbench saw.
//
// Every mechanism of the hierarchy is counted and must occur at least once:
// L1 hits and misses on both sides, L1 and L2 evictions, L2 hits and misses,
// 4 KB / 2 MB / 1 GB walks, page faults, both walkers' requests waiting in
// the arbiter at once, flushes with and without an address, and a refill
// dropped because a flush overlapped its walk.
module tb_tlb_hierarchy;
  import tlb_pkg::*;

  logic clk = 0, rst_n = 0;
  logic i_req_valid = 0, i_req_ready, i_req_user = 0;
  vpn_t i_req_vpn = '0;
  logic i_resp_valid, i_resp_hit, i_resp_miss, i_resp_fault;
  ppn_t i_resp_ppn;
  logic d_req_valid = 0, d_req_ready, d_req_user = 0;
  vpn_t d_req_vpn = '0;
  acc_e d_req_acc = ACC_LOAD;
  logic d_resp_valid, d_resp_hit, d_resp_miss, d_resp_fault;
  ppn_t d_resp_ppn;
  logic sfence_valid = 0, sfence_rs1 = 0;
  vpn_t sfence_vpn = '0;
  logic mem_req_valid, mem_req_ready, mem_resp_valid;
  paddr_t mem_req_addr;
  pte_t mem_resp_pte;
  logic cnt_clear = 0;
  logic [63:0] cnt_itlb_miss, cnt_dtlb_miss, cnt_l2_miss, cnt_walk;

  int checks = 0, failures = 0;

  pt_memory #(.MAX_LAT(4)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_addr(mem_req_addr),
    .resp_valid(mem_resp_valid), .resp_pte(mem_resp_pte));

  ppn_t satp_ppn;
  assign satp_ppn = u_mem.root_ppn;

  tlb_hierarchy dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ mappings
  tlb_data_t map4k [vpn_t];
  tlb_data_t map2m [vpn_t];
  tlb_data_t map1g [vpn_t];
  vpn_t      pool [$];

  function automatic tlb_data_t mk(ppn_t p, logic [3:0] uxwr);
    tlb_data_t d;
    d.ppn = p;
    {d.u, d.x, d.w, d.r} = uxwr;
    d.pf = 1'b0;
    return d;
  endfunction

  function automatic tlb_data_t expect_of(vpn_t v);
    tlb_data_t d = '0;
    if (map4k.exists(v)) return map4k[v];
    if (map2m.exists(v >> 9)) begin
      d = map2m[v >> 9];
      d.ppn[8:0] = v[8:0];
      return d;
    end
    if (map1g.exists(v >> 18)) begin
      d = map1g[v >> 18];
      d.ppn[17:0] = v[17:0];
      return d;
    end
    d.pf = 1'b1;
    return d;
  endfunction

  // ------------------------------------------------------------ events
  int n_i_hit = 0, n_i_miss = 0, n_d_hit = 0, n_d_miss = 0, n_fault = 0;
  int n_l1_evict = 0, n_l2_evict = 0, n_l2_hit = 0, n_l2_miss = 0;
  int n_arb_both = 0, n_flush_one = 0, n_flush_all = 0, n_drop = 0;
  int n_w4k = 0, n_w2m = 0, n_w1g = 0;

  // walker state 3 = waiting for a PTE; L1 state 2 = waiting for the walker
  logic [2:0] ptw_state;
  logic [1:0] itlb_state, dtlb_state;
  assign ptw_state  = dut.u_ptw.state;
  assign itlb_state = dut.u_itlb.state;
  assign dtlb_state = dut.u_dtlb.state;

  always @(posedge clk) if (rst_n) begin
    if (dut.u_itlb.refill && !dut.u_itlb.rf_any_free) n_l1_evict++;
    if (dut.u_dtlb.refill && !dut.u_dtlb.rf_any_free) n_l1_evict++;
    if (dut.u_ptw.g_l2.u_l2.refill && !(|dut.u_ptw.g_l2.u_l2.rf_free)) n_l2_evict++;
    if (dut.u_ptw.l2_hit_event) n_l2_hit++;
    if (dut.u_ptw.l2_miss_event) n_l2_miss++;
    if (&dut.ptw_req_valid) n_arb_both++;
    if (ptw_state == 3'd3 && mem_resp_valid && (mem_resp_pte.r || mem_resp_pte.x) && mem_resp_pte.v) begin
      if (dut.u_ptw.level == 0) n_w4k++;
      else if (dut.u_ptw.level == 1) n_w2m++;
      else n_w1g++;
    end
    if ((itlb_state == 2'd2 && dut.u_itlb.ptw_resp_valid && (dut.u_itlb.refill_killed || sfence_valid)) ||
        (dtlb_state == 2'd2 && dut.u_dtlb.ptw_resp_valid && (dut.u_dtlb.refill_killed || sfence_valid)))
      n_drop++;
  end

  // ------------------------------------------------------------ requesters
  bit done_i = 0, done_d = 0;

  task automatic fetch(vpn_t v, logic u);
    tlb_data_t e = expect_of(v);
    for (int tries = 0; tries < 20; tries++) begin
      while (!i_req_ready) @(negedge clk);
      i_req_valid = 1; i_req_vpn = v; i_req_user = u;
      @(negedge clk);
      i_req_valid = 0;
      checks++;
      if (!i_resp_valid || i_resp_hit == i_resp_miss) begin
        failures++;
        $display("ITLB: no response one cycle after the request");
      end
      if (i_resp_miss) begin
        n_i_miss++;
        continue;
      end
      n_i_hit++;
      checks++;
      if (i_resp_fault != (e.pf || !e.x || (u && !e.u)) || (!e.pf && i_resp_ppn != e.ppn)) begin
        failures++;
        $display("ITLB vpn %h: ppn %h fault %0d, expected %h (pf %0d x %0d u %0d)", v, i_resp_ppn, i_resp_fault, e.ppn, e.pf, e.x, e.u);
      end
      if (i_resp_fault) n_fault++;
      return;
    end
    failures++;
    $display("ITLB vpn %h never hit", v);
  endtask

  task automatic access(vpn_t v, acc_e a, logic u);
    tlb_data_t e = expect_of(v);
    for (int tries = 0; tries < 20; tries++) begin
      while (!d_req_ready) @(negedge clk);
      d_req_valid = 1; d_req_vpn = v; d_req_acc = a; d_req_user = u;
      @(negedge clk);
      d_req_valid = 0;
      checks++;
      if (!d_resp_valid || d_resp_hit == d_resp_miss) begin
        failures++;
        $display("DTLB: no response one cycle after the request");
      end
      if (d_resp_miss) begin
        n_d_miss++;
        continue;
      end
      n_d_hit++;
      checks++;
      if (d_resp_fault != (e.pf || (u && !e.u) || (a == ACC_LOAD && !e.r) || (a == ACC_STORE && !e.w)) ||
          (!e.pf && d_resp_ppn != e.ppn)) begin
        failures++;
        $display("DTLB vpn %h: ppn %h fault %0d, expected %h", v, d_resp_ppn, d_resp_fault, e.ppn);
      end
      if (d_resp_fault) n_fault++;
      return;
    end
    failures++;
    $display("DTLB vpn %h never hit", v);
  endtask

  task automatic check_seen(string name, int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("mechanism never happened: %s", name);
    end
  endtask

  function automatic vpn_t pick();
    // mostly a small hot set, sometimes anything in the pool
    if ($urandom_range(0, 3) != 0) return pool[$urandom_range(0, 39)];
    return pool[$urandom_range(0, pool.size() - 1)];
  endfunction

  localparam int N_ACC = 3000;

  initial begin
    pte_t bad;
    // 4 KB pages: 40 hot pages, 32 pages that share L2 set 5 and DTLB set 5,
    // and 300 scattered pages
    for (int i = 0; i < 40; i++) begin
      automatic vpn_t v = vpn_t'(27'h10000 + i * 3);
      map4k[v] = mk(ppn_t'(44'h100000 + i), 4'b0111);
      u_mem.map(v, map4k[v].ppn, 0, 4'b0111);
      pool.push_back(v);
    end
    for (int i = 0; i < 32; i++) begin
      automatic vpn_t v = vpn_t'(27'h20005 + i * 128);
      automatic logic [3:0] p = 4'($urandom_range(0, 15)) | 4'b0001;
      map4k[v] = mk(ppn_t'(44'h200000 + i * 7), p);
      u_mem.map(v, map4k[v].ppn, 0, p);
      pool.push_back(v);
    end
    for (int i = 0; i < 300; i++) begin
      automatic vpn_t v = vpn_t'($urandom_range(27'h100000, 27'h3fffff));
      automatic logic [3:0] p = 4'($urandom_range(0, 15)) | 4'b0001;
      if (map4k.exists(v)) continue;
      map4k[v] = mk(ppn_t'(44'h300000 + i * 5), p);
      u_mem.map(v, map4k[v].ppn, 0, p);
      pool.push_back(v);
    end
    // superpages
    u_mem.map(27'h0000600, 44'h200600, 1, 4'b0111);
    map2m[27'h0000600 >> 9] = mk(44'h200600, 4'b0111);
    for (int i = 0; i < 4; i++) pool.push_back(vpn_t'(27'h600 + i * 37));
    u_mem.map(27'h4000000, 44'h4000000, 2, 4'b1111);
    map1g[27'h4000000 >> 18] = mk(44'h4000000, 4'b1111);
    for (int i = 0; i < 4; i++) pool.push_back(vpn_t'(27'h4000000 + i * 4111));
    // an invalid leaf and an unmapped region
    bad = '0;
    u_mem.set_leaf(27'h10001, 0, bad);
    pool.push_back(27'h10001);
    pool.push_back(27'h6000000);

    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    fork
      begin
        for (int k = 0; k < N_ACC; k++) fetch(pick(), $urandom_range(0, 7) == 0);
        done_i = 1;
      end
      begin
        for (int k = 0; k < N_ACC; k++) access(pick(), acc_e'($urandom_range(1, 2)), $urandom_range(0, 7) == 0);
        done_d = 1;
      end
      begin
        while (!(done_i && done_d)) begin
          repeat ($urandom_range(20, 400)) @(negedge clk);
          sfence_valid = 1;
          sfence_rs1 = $urandom_range(0, 4) != 0;
          sfence_vpn = pick();
          @(negedge clk);
          sfence_valid = 0;
          if (sfence_rs1) n_flush_one++; else n_flush_all++;
        end
      end
    join

    // remap a hot page: it stays stale until sfence.vma names it
    begin
      automatic vpn_t v = pool[0];
      access(v, ACC_LOAD, 1'b0);
      u_mem.map(v, 44'h0ABCDE, 0, 4'b0011);
      access(v, ACC_LOAD, 1'b0);          // still the old translation
      sfence_valid = 1; sfence_rs1 = 1; sfence_vpn = v;
      @(negedge clk);
      sfence_valid = 0;
      n_flush_one++;
      map4k[v] = mk(44'h0ABCDE, 4'b0011);
      access(v, ACC_STORE, 1'b0);         // new translation, through a walk
    end
    repeat (5) @(negedge clk);

    // counters against what the testbench saw
    checks++;
    if (cnt_itlb_miss != 64'(n_i_miss) || cnt_dtlb_miss != 64'(n_d_miss) ||
        cnt_l2_miss != 64'(n_l2_miss) || cnt_walk != cnt_l2_miss ||
        64'(n_l2_hit) + cnt_l2_miss != cnt_itlb_miss + cnt_dtlb_miss) begin
      failures++;
      $display("counters itlb %0d dtlb %0d l2 %0d walk %0d, seen itlb %0d dtlb %0d l2 miss %0d hit %0d",
               cnt_itlb_miss, cnt_dtlb_miss, cnt_l2_miss, cnt_walk, n_i_miss, n_d_miss, n_l2_miss, n_l2_hit);
    end
    cnt_clear = 1;
    @(negedge clk);
    cnt_clear = 0;
    checks++;
    if (cnt_itlb_miss != 0 || cnt_dtlb_miss != 0 || cnt_l2_miss != 0 || cnt_walk != 0) begin
      failures++;
      $display("counters not cleared");
    end

    $display("ITLB hit %0d miss %0d | DTLB hit %0d miss %0d | L1 evictions %0d | L2 hit %0d miss %0d evictions %0d",
             n_i_hit, n_i_miss, n_d_hit, n_d_miss, n_l1_evict, n_l2_hit, n_l2_miss, n_l2_evict);
    $display("walks 4K %0d 2M %0d 1G %0d | faults %0d | both L1 waiting %0d | flush one %0d all %0d | dropped refills %0d",
             n_w4k, n_w2m, n_w1g, n_fault, n_arb_both, n_flush_one, n_flush_all, n_drop);
    check_seen("itlb_hit", n_i_hit);     check_seen("itlb_miss", n_i_miss);
    check_seen("dtlb_hit", n_d_hit);     check_seen("dtlb_miss", n_d_miss);
    check_seen("l1_evict", n_l1_evict);  check_seen("l2_hit", n_l2_hit);
    check_seen("l2_miss", n_l2_miss);    check_seen("l2_evict", n_l2_evict);
    check_seen("walk_4k", n_w4k);        check_seen("walk_2m", n_w2m);
    check_seen("walk_1g", n_w1g);        check_seen("fault", n_fault);
    check_seen("arb_both", n_arb_both);  check_seen("flush_one", n_flush_one);
    check_seen("flush_all", n_flush_all); check_seen("drop", n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
