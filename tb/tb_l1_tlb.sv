// tb_l1_tlb: self-checking testbench of the set-associative L1 TLB.
//
// The testbench plays both the core and the page table walker for a data TLB
// of 4 sets x 4 ways. Translations come from a fixed function of the VPN
// (trans_of). A reference model keeps the same sets, valid bits and
// replacement state and predicts every hit, miss and victim. The test runs
// twice: first on a TLB with pseudo-LRU replacement, then, after a reset, on
// one with random replacement (the model then steps its own copy of the
// LFSR on every refill into a full set). Only the TLB under test sees the
// inputs; the outputs are taken from it.
//
// Each access is sent once; the response must come exactly one cycle later
// and agree with the model (hit, PPN, fault from the R/W/U bits and the pf
// bit). After a miss the testbench checks the walk request (VPN, held while
// not accepted, req_ready low), answers it after a random delay and
// replays the access, which must hit. sfence.vma with and without an address
// is issued at random, and once during a walk, after which the refill must
// be dropped and the replay must miss again. VPNs are drawn from a small
// pool so that sets overflow and the pseudo-LRU victim is exercised.
module tb_l1_tlb;
  import tlb_pkg::*;
  localparam int SETS = 4, WAYS = 4, LV = 2;

  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready;
  vpn_t req_vpn = '0;
  acc_e req_acc = ACC_LOAD;
  logic req_user = 0;
  logic resp_valid, resp_hit, resp_miss, resp_fault;
  ppn_t resp_ppn;
  logic ptw_req_valid, ptw_req_ready = 0;
  vpn_t ptw_req_vpn;
  logic ptw_resp_valid = 0;
  ptw_resp_t ptw_resp = '0;
  logic sfence_valid = 0, sfence_rs1 = 0;
  vpn_t sfence_vpn = '0;
  logic miss_event;

  int checks = 0, failures = 0;
  int n_hit = 0, n_miss = 0, n_evict = 0, n_flush_one = 0, n_flush_all = 0, n_drop = 0, n_fault = 0;

  // phase 0 drives the pseudo-LRU TLB, phase 1 the random one
  bit phase = 0;
  logic p_resp_valid, p_resp_hit, p_resp_miss, p_resp_fault, p_ptw_req_valid, p_req_ready, p_miss_event;
  logic r_resp_valid, r_resp_hit, r_resp_miss, r_resp_fault, r_ptw_req_valid, r_req_ready, r_miss_event;
  ppn_t p_resp_ppn, r_resp_ppn;
  vpn_t p_ptw_req_vpn, r_ptw_req_vpn;

  l1_tlb #(.SETS(SETS), .WAYS(WAYS), .IS_ITLB(1'b0), .REPL(REPL_PLRU)) dut (
    .clk, .rst_n, .req_valid(req_valid && !phase), .req_ready(p_req_ready), .req_vpn, .req_acc, .req_user,
    .resp_valid(p_resp_valid), .resp_hit(p_resp_hit), .resp_miss(p_resp_miss), .resp_ppn(p_resp_ppn),
    .resp_fault(p_resp_fault), .ptw_req_valid(p_ptw_req_valid), .ptw_req_ready(ptw_req_ready && !phase),
    .ptw_req_vpn(p_ptw_req_vpn), .ptw_resp_valid(ptw_resp_valid && !phase), .ptw_resp,
    .sfence_valid(sfence_valid && !phase), .sfence_rs1, .sfence_vpn, .miss_event(p_miss_event));

  l1_tlb #(.SETS(SETS), .WAYS(WAYS), .IS_ITLB(1'b0), .REPL(REPL_RANDOM)) dut_rand (
    .clk, .rst_n, .req_valid(req_valid && phase), .req_ready(r_req_ready), .req_vpn, .req_acc, .req_user,
    .resp_valid(r_resp_valid), .resp_hit(r_resp_hit), .resp_miss(r_resp_miss), .resp_ppn(r_resp_ppn),
    .resp_fault(r_resp_fault), .ptw_req_valid(r_ptw_req_valid), .ptw_req_ready(ptw_req_ready && phase),
    .ptw_req_vpn(r_ptw_req_vpn), .ptw_resp_valid(ptw_resp_valid && phase), .ptw_resp,
    .sfence_valid(sfence_valid && phase), .sfence_rs1, .sfence_vpn, .miss_event(r_miss_event));

  assign req_ready     = phase ? r_req_ready     : p_req_ready;
  assign resp_valid    = phase ? r_resp_valid    : p_resp_valid;
  assign resp_hit      = phase ? r_resp_hit      : p_resp_hit;
  assign resp_miss     = phase ? r_resp_miss     : p_resp_miss;
  assign resp_ppn      = phase ? r_resp_ppn      : p_resp_ppn;
  assign resp_fault    = phase ? r_resp_fault    : p_resp_fault;
  assign ptw_req_valid = phase ? r_ptw_req_valid : p_ptw_req_valid;
  assign ptw_req_vpn   = phase ? r_ptw_req_vpn   : p_ptw_req_vpn;
  assign miss_event    = phase ? r_miss_event    : p_miss_event;

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model
  bit        m_valid [SETS][WAYS];
  vpn_t      m_vpn   [SETS][WAYS];
  bit        m_plru  [SETS][WAYS];
  logic [15:0] m_lfsr;

  function automatic tlb_data_t trans_of(vpn_t v);
    tlb_data_t d;
    d.ppn = ppn_t'(v) * 44'd7 + 44'h1234;
    d.r   = v[0] | v[1];
    d.w   = v[1];
    d.x   = v[2];
    d.u   = v[3];
    d.pf  = (v % 11) == 0;
    return d;
  endfunction

  function automatic int plru_victim(int s);
    int node = 1;
    while (node < WAYS) node = 2 * node + int'(m_plru[s][node]);
    return node - WAYS;
  endfunction

  task automatic plru_touch(int s, int w);
    for (int l = 0; l < LV; l++)
      m_plru[s][(1 << l) + (w >> (LV - l))] = !((w >> (LV - 1 - l)) & 1);
  endtask

  function automatic int m_lookup(vpn_t v);
    int s = int'(v) % SETS;
    for (int w = 0; w < WAYS; w++) if (m_valid[s][w] && m_vpn[s][w] == v) return w;
    return -1;
  endfunction

  function automatic bit exp_fault(tlb_data_t d, acc_e a, logic u);
    return d.pf || (u && !d.u) || (a == ACC_LOAD && !d.r) || (a == ACC_STORE && !d.w);
  endfunction

  task automatic m_refill(vpn_t v);
    int s = int'(v) % SETS;
    int w = -1;
    for (int k = WAYS - 1; k >= 0; k--) if (!m_valid[s][k]) w = k;
    if (w < 0) begin
      if (phase) begin
        w = int'(m_lfsr[LV-1:0]);
        m_lfsr = {m_lfsr[14:0], m_lfsr[15] ^ m_lfsr[13] ^ m_lfsr[12] ^ m_lfsr[10]};
      end else w = plru_victim(s);
      n_evict++;
    end
    m_valid[s][w] = 1;
    m_vpn[s][w]   = v;
    plru_touch(s, w);
  endtask

  task automatic do_sfence(bit rs1, vpn_t v);
    sfence_valid = 1; sfence_rs1 = rs1; sfence_vpn = v;
    @(negedge clk);
    sfence_valid = 0;
    for (int s = 0; s < SETS; s++)
      for (int w = 0; w < WAYS; w++)
        if (!rs1 || (m_valid[s][w] && m_vpn[s][w] == v)) m_valid[s][w] = 0;
    if (rs1) n_flush_one++; else n_flush_all++;
  endtask

  // send one access; returns 1 on a hit
  task automatic access(vpn_t v, acc_e a, logic u, output bit hit);
    int  w;
    tlb_data_t d;
    while (!req_ready) @(negedge clk);
    w = m_lookup(v);
    d = trans_of(v);
    req_valid = 1; req_vpn = v; req_acc = a; req_user = u;
    @(negedge clk);
    req_valid = 0;
    checks++;
    if (!resp_valid || resp_hit != (w >= 0) || resp_miss != (w < 0)) begin
      failures++;
      $display("vpn %h: valid %0d hit %0d miss %0d, model way %0d", v, resp_valid, resp_hit, resp_miss, w);
    end
    if (w >= 0) begin
      plru_touch(int'(v) % SETS, w);
      checks++;
      if (resp_ppn != d.ppn || resp_fault != exp_fault(d, a, u)) begin
        failures++;
        $display("vpn %h: ppn %h fault %0d, expected %h %0d", v, resp_ppn, resp_fault, d.ppn, exp_fault(d, a, u));
      end
      if (resp_fault) n_fault++;
      n_hit++;
    end else n_miss++;
    hit = resp_hit;
  endtask

  // act as the walker for the outstanding miss of vpn v
  task automatic serve_walk(vpn_t v, bit flush_during);
    int delay = $urandom_range(0, 3);
    checks++;
    if (!ptw_req_valid || ptw_req_vpn != v || req_ready) begin
      failures++;
      $display("walk request missing or wrong: valid %0d vpn %h ready %0d", ptw_req_valid, ptw_req_vpn, req_ready);
    end
    repeat (delay) begin
      @(negedge clk);
      checks++;
      if (!ptw_req_valid || ptw_req_vpn != v) failures++;
    end
    ptw_req_ready = 1;
    @(negedge clk);
    ptw_req_ready = 0;
    repeat ($urandom_range(1, 4)) @(negedge clk);
    if (flush_during) do_sfence(1'b0, '0);
    ptw_resp_valid = 1;
    ptw_resp.vpn   = v;
    ptw_resp.data  = trans_of(v);
    @(negedge clk);
    ptw_resp_valid = 0;
    if (flush_during) n_drop++;
    else m_refill(v);
    checks++;
    if (!req_ready) begin
      failures++;
      $display("req_ready not back after refill");
    end
  endtask

  initial begin
    bit hit;
   for (int ph = 0; ph < 2; ph++) begin
    phase = ph[0];
    rst_n = 0;
    foreach (m_valid[s, w]) begin m_valid[s][w] = 0; m_plru[s][w] = 0; end
    m_lfsr = 16'hACE1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 3000; i++) begin
      automatic vpn_t v = vpn_t'($urandom_range(0, 40)) * vpn_t'(($urandom_range(0, 1) == 1) ? 1 : 4099);
      automatic acc_e a = acc_e'($urandom_range(1, 2));
      automatic logic u = $urandom_range(0, 3) == 0;
      automatic bit flush_during = (i % 500) == 250;
      access(v, a, u, hit);
      if (!hit) begin
        serve_walk(v, flush_during);
        access(v, a, u, hit);
        if (flush_during) begin
          checks++;
          if (hit) begin
            failures++;
            $display("refill across an sfence was not dropped");
          end
          serve_walk(v, 1'b0);
          access(v, a, u, hit);
        end
        checks++;
        if (!hit) begin
          failures++;
          $display("replay of %h did not hit", v);
        end
      end
      if ($urandom_range(0, 49) == 0) do_sfence(1'b1, m_valid[int'(v) % SETS][0] ? m_vpn[int'(v) % SETS][0] : v);
      if ($urandom_range(0, 399) == 0) do_sfence(1'b0, '0);
    end
    if (phase) $display("random replacement:");
    else       $display("pseudo-LRU replacement:");
    $display("hits %0d misses %0d evictions %0d faults %0d flush-one %0d flush-all %0d dropped %0d",
             n_hit, n_miss, n_evict, n_fault, n_flush_one, n_flush_all, n_drop);
    checks++;
    if (n_evict == 0 || n_flush_one == 0 || n_drop == 0 || n_fault == 0) begin
      failures++;
      $display("a mechanism was never exercised");
    end
    n_hit = 0; n_miss = 0; n_evict = 0; n_flush_one = 0; n_flush_all = 0; n_drop = 0; n_fault = 0;
   end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
