// tb_configurations: the TLB hierarchy in each evaluated configuration.
//
// Runs one deterministic access stream (see config_runner) through seven
// hierarchies at once:
//   I    ITLB 1x32, DTLB 1x32 (fully associative), no L2 TLB
//   II   as I, L2 TLB 32x4 (4-way, 128 entries)
//   III  as I, L2 TLB 128x4 (4-way, 512 entries)
//   IV   ITLB 16x8 (128), DTLB 8x8 (64), L2 TLB 128x8 (1024)
//   V    ITLB 8x8 (64), DTLB 16x8 (128), L2 TLB 128x8 (1024), the default
//   DM   as V with a direct-mapped 1024-entry L2 TLB (1024x1)
//   4W   as V with a 4-way 1024-entry L2 TLB (256x4)
//   EXT  the two other extremes: direct-mapped L1 TLBs (ITLB 64x1, DTLB
//        128x1) and a fully associative 16-entry L2 TLB (1x16), pseudo-LRU
//   RND  as V with random replacement in the L1 TLBs and pseudo-LRU in the L2
// Every translation of every configuration is checked, as are the miss
// counters. The stream puts three data pages in each set of a 1024-set
// direct-mapped L2 TLB, so the test also checks the associativity effect:
// the direct-mapped L2 TLB must miss on every lookup, while the 4-way and
// 8-way ones of 512 and 1024 entries (III, IV, V, 4W) must take only the 217
// compulsory misses, and configurations with an L2 TLB must walk less than
// configuration I. The miss counts of all nine are printed.
module tb_configurations;
  logic clk = 0, rst_n = 0;
  logic done [9];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  config_runner #(.ITLB_SETS(1), .ITLB_WAYS(32), .DTLB_SETS(1), .DTLB_WAYS(32), .L2_EN(1'b0))
    c1 (.clk, .rst_n, .done(done[0]));
  config_runner #(.ITLB_SETS(1), .ITLB_WAYS(32), .DTLB_SETS(1), .DTLB_WAYS(32), .L2_SETS(32), .L2_WAYS(4))
    c2 (.clk, .rst_n, .done(done[1]));
  config_runner #(.ITLB_SETS(1), .ITLB_WAYS(32), .DTLB_SETS(1), .DTLB_WAYS(32), .L2_SETS(128), .L2_WAYS(4))
    c3 (.clk, .rst_n, .done(done[2]));
  config_runner #(.ITLB_SETS(16), .ITLB_WAYS(8), .DTLB_SETS(8), .DTLB_WAYS(8), .L2_SETS(128), .L2_WAYS(8))
    c4 (.clk, .rst_n, .done(done[3]));
  config_runner #(.ITLB_SETS(8), .ITLB_WAYS(8), .DTLB_SETS(16), .DTLB_WAYS(8), .L2_SETS(128), .L2_WAYS(8))
    c5 (.clk, .rst_n, .done(done[4]));
  config_runner #(.ITLB_SETS(8), .ITLB_WAYS(8), .DTLB_SETS(16), .DTLB_WAYS(8), .L2_SETS(1024), .L2_WAYS(1))
    cdm (.clk, .rst_n, .done(done[5]));
  config_runner #(.ITLB_SETS(8), .ITLB_WAYS(8), .DTLB_SETS(16), .DTLB_WAYS(8), .L2_SETS(256), .L2_WAYS(4))
    c4w (.clk, .rst_n, .done(done[6]));
  config_runner #(.ITLB_SETS(64), .ITLB_WAYS(1), .DTLB_SETS(128), .DTLB_WAYS(1), .L2_SETS(1), .L2_WAYS(16),
                  .L2_REPL(tlb_pkg::REPL_PLRU))
    cext (.clk, .rst_n, .done(done[7]));
  config_runner #(.ITLB_SETS(8), .ITLB_WAYS(8), .DTLB_SETS(16), .DTLB_WAYS(8), .L2_SETS(128), .L2_WAYS(8),
                  .L1_REPL(tlb_pkg::REPL_RANDOM), .L2_REPL(tlb_pkg::REPL_PLRU))
    crnd (.clk, .rst_n, .done(done[8]));

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic report(string name, int c, int f, longint im, longint dm, longint l2m, longint w, int acc);
    checks += c;
    failures += f;
    $display("%-4s accesses %5d  ITLB misses %5d  DTLB misses %5d  L2 misses %5d  walks %5d  failures %0d",
             name, acc, im, dm, l2m, w, f);
  endtask

  task automatic expect_less(string what, longint a, longint b);
    checks++;
    if (!(a < b)) begin
      failures++;
      $display("expected %s: %0d < %0d", what, a, b);
    end
  endtask

  task automatic expect_equal(string what, longint a, longint b);
    checks++;
    if (a != b) begin
      failures++;
      $display("expected %s: %0d == %0d", what, a, b);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (done[0] && done[1] && done[2] && done[3] && done[4] && done[5] && done[6] && done[7] && done[8]);
    report("I",   c1.checks,  c1.failures,  c1.cnt_itlb_miss,  c1.cnt_dtlb_miss,  c1.cnt_l2_miss,  c1.cnt_walk,  c1.accesses);
    report("II",  c2.checks,  c2.failures,  c2.cnt_itlb_miss,  c2.cnt_dtlb_miss,  c2.cnt_l2_miss,  c2.cnt_walk,  c2.accesses);
    report("III", c3.checks,  c3.failures,  c3.cnt_itlb_miss,  c3.cnt_dtlb_miss,  c3.cnt_l2_miss,  c3.cnt_walk,  c3.accesses);
    report("IV",  c4.checks,  c4.failures,  c4.cnt_itlb_miss,  c4.cnt_dtlb_miss,  c4.cnt_l2_miss,  c4.cnt_walk,  c4.accesses);
    report("V",   c5.checks,  c5.failures,  c5.cnt_itlb_miss,  c5.cnt_dtlb_miss,  c5.cnt_l2_miss,  c5.cnt_walk,  c5.accesses);
    report("DM",  cdm.checks, cdm.failures, cdm.cnt_itlb_miss, cdm.cnt_dtlb_miss, cdm.cnt_l2_miss, cdm.cnt_walk, cdm.accesses);
    report("4W",  c4w.checks, c4w.failures, c4w.cnt_itlb_miss, c4w.cnt_dtlb_miss, c4w.cnt_l2_miss, c4w.cnt_walk, c4w.accesses);
    report("EXT", cext.checks, cext.failures, cext.cnt_itlb_miss, cext.cnt_dtlb_miss, cext.cnt_l2_miss, cext.cnt_walk, cext.accesses);
    report("RND", crnd.checks, crnd.failures, crnd.cnt_itlb_miss, crnd.cnt_dtlb_miss, crnd.cnt_l2_miss, crnd.cnt_walk, crnd.accesses);
    expect_less("4-way L2 misses below direct-mapped", c4w.cnt_l2_miss, cdm.cnt_l2_miss);
    expect_less("8-way L2 misses below direct-mapped", c5.cnt_l2_miss, cdm.cnt_l2_miss);
    expect_less("conf. III walks below conf. I", c3.cnt_walk, c1.cnt_walk);
    expect_less("conf. V walks below conf. I", c5.cnt_walk, c1.cnt_walk);
    expect_less("conf. I has no L2 misses", c1.cnt_l2_miss, 1);
    // 201 data and 16 code pages: only compulsory misses where all fit
    expect_equal("conf. III L2 misses", c3.cnt_l2_miss, 217);
    expect_equal("conf. IV L2 misses", c4.cnt_l2_miss, 217);
    expect_equal("conf. V L2 misses", c5.cnt_l2_miss, 217);
    expect_equal("4-way 1024 L2 misses", c4w.cnt_l2_miss, 217);
    expect_equal("pseudo-LRU 8-way 1024 L2 misses", crnd.cnt_l2_miss, 217);
    expect_equal("direct-mapped L2 misses every lookup", cdm.cnt_l2_miss, cdm.cnt_itlb_miss + cdm.cnt_dtlb_miss);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
