// tb_l2_tlb: self-checking testbench of the set-associative L2 TLB.
//
// Two L2 TLBs of 8 sets x 4 ways are driven with the same random stream of
// lookups, refills and sfence.vma flushes, one with random replacement and
// one with tree pseudo-LRU. For each a reference model (l2_model) holds the
// valid bits, the VPN in every way, the replacement state (a copy of the
// 16-bit LFSR, or the tree bits) and predicts the result of every lookup,
// which must appear exactly two cycles after it. Lookups are issued back to
// back, so the pipeline is full; a refill never targets the set of a lookup
// issued in the same cycle (the walker never does that). The model mirrors
// the whole-set flush, the cancelling of in-flight hits by a flush, and the
// pseudo-LRU touch at the compare stage (skipped when a refill touches the
// state in the same cycle).
module tb_l2_tlb;
  import tlb_pkg::*;
  localparam int SETS = 8, WAYS = 4;

  logic clk = 0, rst_n = 0;
  logic lookup_valid = 0, refill_valid = 0, sfence_valid = 0, sfence_rs1 = 0;
  vpn_t lookup_vpn = '0, refill_vpn = '0, sfence_vpn = '0;
  tlb_data_t refill_data = '0;
  logic      r_resp_valid, r_resp_hit, r_miss;
  tlb_data_t r_resp_data;
  logic      p_resp_valid, p_resp_hit, p_miss;
  tlb_data_t p_resp_data;

  int checks = 0, failures = 0;

  l2_tlb #(.SETS(SETS), .WAYS(WAYS), .REPL(REPL_RANDOM)) dut_rand (
    .clk, .rst_n, .lookup_valid, .lookup_vpn,
    .resp_valid(r_resp_valid), .resp_hit(r_resp_hit), .resp_data(r_resp_data),
    .refill_valid, .refill_vpn, .refill_data, .sfence_valid, .sfence_rs1, .sfence_vpn,
    .miss_event(r_miss));

  l2_tlb #(.SETS(SETS), .WAYS(WAYS), .REPL(REPL_PLRU)) dut_plru (
    .clk, .rst_n, .lookup_valid, .lookup_vpn,
    .resp_valid(p_resp_valid), .resp_hit(p_resp_hit), .resp_data(p_resp_data),
    .refill_valid, .refill_vpn, .refill_data, .sfence_valid, .sfence_rs1, .sfence_vpn,
    .miss_event(p_miss));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic tlb_data_t trans_of(vpn_t v);
    tlb_data_t d;
    d.ppn = ppn_t'(v) * 44'd13 + 44'h777;
    {d.u, d.x, d.w, d.r} = v[3:0];
    d.pf = 1'b0;
    return d;
  endfunction

  class l2_model;
    bit          plru;
    bit          valid [SETS][WAYS];
    vpn_t        vpn   [SETS][WAYS];
    bit          tree  [SETS][WAYS];
    logic [15:0] lfsr;
    int          evictions;
    // lookup in flight: [0] issued this cycle, [1] issued last cycle
    bit          fl_v [2];
    int          fl_set [2];
    int          fl_way [2];
    vpn_t        fl_vpn [2];
    // expected outputs: [1] is the result registered at the second clock
    // edge after the lookup, checked after that edge
    bit          exp_v [3];
    bit          exp_hit [3];
    vpn_t        exp_vpn [3];

    function new(bit p);
      plru = p;
      lfsr = 16'hACE1;
      evictions = 0;
      foreach (valid[s, w]) begin valid[s][w] = 0; tree[s][w] = 0; end
      foreach (fl_v[i]) fl_v[i] = 0;
      foreach (exp_v[i]) exp_v[i] = 0;
    endfunction

    function int victim(int s);
      int node = 1;
      if (!plru) return int'(lfsr[1:0]);
      while (node < WAYS) node = 2 * node + int'(tree[s][node]);
      return node - WAYS;
    endfunction

    function void touch(int s, int w);
      if (!plru) return;
      for (int l = 0; l < 2; l++) tree[s][(1 << l) + (w >> (2 - l))] = !((w >> (1 - l)) & 1);
    endfunction

    function int find(vpn_t v);
      int s = int'(v) % SETS;
      for (int w = 0; w < WAYS; w++) if (valid[s][w] && vpn[s][w] == v) return w;
      return -1;
    endfunction

    // one clock cycle with the given inputs
    function void cycle(bit lk, vpn_t lv, bit rf, vpn_t rv, bit fl, bit frs1, vpn_t fv);
      int fset = int'(fv) % SETS;
      // lookup issued now sees the state before this cycle's updates
      fl_v[0]   = lk;
      fl_set[0] = int'(lv) % SETS;
      fl_way[0] = lk ? find(lv) : -1;
      fl_vpn[0] = lv;
      // a flush now cancels both lookups in flight that hit its set
      for (int i = 0; i < 2; i++)
        if (fl && (!frs1 || fset == fl_set[i])) fl_way[i] = -1;
      // refill, else the compare-stage touch of last cycle's lookup
      if (rf) begin
        int s = int'(rv) % SETS;
        int w = -1;
        for (int k = WAYS - 1; k >= 0; k--) if (!valid[s][k]) w = k;
        if (w < 0) begin
          w = victim(s);
          evictions++;
          lfsr = {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
        end
        valid[s][w] = 1;
        vpn[s][w]   = rv;
        touch(s, w);
      end else if (fl_v[1] && fl_way[1] >= 0) touch(fl_set[1], fl_way[1]);
      if (fl)
        for (int s = 0; s < SETS; s++)
          if (!frs1 || s == fset) for (int w = 0; w < WAYS; w++) valid[s][w] = 0;
      // results: last cycle's lookup is decided now, seen next cycle
      exp_v[2]   = exp_v[1];   exp_hit[2] = exp_hit[1];   exp_vpn[2] = exp_vpn[1];
      exp_v[1]   = fl_v[1];    exp_hit[1] = fl_way[1] >= 0;
      exp_vpn[1] = fl_vpn[1];
      fl_vpn[1] = fl_vpn[0];
      fl_v[1] = fl_v[0]; fl_set[1] = fl_set[0]; fl_way[1] = fl_way[0];
    endfunction
  endclass

  l2_model mr, mp;

  task automatic check(string nm, l2_model m, logic v, logic h, tlb_data_t d);
    checks++;
    if (v != m.exp_v[1] || (m.exp_v[1] && h != m.exp_hit[1]) ||
        (m.exp_v[1] && m.exp_hit[1] && d != trans_of(m.exp_vpn[1]))) begin
      failures++;
      $display("%s: vpn %h valid %0d hit %0d, expected %0d %0d", nm, m.exp_vpn[1], v, h, m.exp_v[1], m.exp_hit[1]);
    end
  endtask

  initial begin
    int hits = 0, misses = 0, set_flushes = 0;
    mr = new(0);
    mp = new(1);
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 6000; i++) begin
      lookup_valid = $urandom_range(0, 2) != 0;
      lookup_vpn   = vpn_t'($urandom_range(0, 63)) * vpn_t'(($urandom_range(0, 1) == 1) ? 1 : 1001);
      refill_vpn   = vpn_t'($urandom_range(0, 63)) * vpn_t'(($urandom_range(0, 1) == 1) ? 1 : 1001);
      refill_valid = $urandom_range(0, 1) == 1 && mr.find(refill_vpn) < 0 && mp.find(refill_vpn) < 0 &&
                     !(lookup_valid && (int'(refill_vpn) % SETS) == (int'(lookup_vpn) % SETS));
      refill_data  = trans_of(refill_vpn);
      sfence_valid = $urandom_range(0, 59) == 0;
      sfence_rs1   = $urandom_range(0, 9) != 0;
      sfence_vpn   = lookup_vpn;
      if (sfence_valid && sfence_rs1) set_flushes++;
      mr.cycle(lookup_valid, lookup_vpn, refill_valid, refill_vpn, sfence_valid, sfence_rs1, sfence_vpn);
      mp.cycle(lookup_valid, lookup_vpn, refill_valid, refill_vpn, sfence_valid, sfence_rs1, sfence_vpn);
      @(negedge clk);
      check("random", mr, r_resp_valid, r_resp_hit, r_resp_data);
      check("plru", mp, p_resp_valid, p_resp_hit, p_resp_data);
      if (mr.exp_v[1]) begin
        if (mr.exp_hit[1]) hits++; else misses++;
      end
    end
    $display("hits %0d misses %0d evictions random %0d plru %0d set flushes %0d",
             hits, misses, mr.evictions, mp.evictions, set_flushes);
    checks++;
    if (hits == 0 || misses == 0 || mr.evictions == 0 || mp.evictions == 0 || set_flushes == 0) begin
      failures++;
      $display("a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
