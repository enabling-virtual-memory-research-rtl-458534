// tb_plru_tree: self-checking testbench of the tree pseudo-LRU.
//
// A reference model keeps, per set, the tree bits addressed level by level
// ((1<<level) + (way >> (LV-level))) and recomputes the victim by walking
// them. Random touches on 4 sets x 8 ways are compared with the model after
// every clock edge. Two properties of tree pseudo-LRU are also checked: the
// way just touched is never the victim, and after touching ways 0..7 in
// order the victim is way 0.
module tb_plru_tree;
  localparam int SETS = 4, WAYS = 8, LV = 3;
  logic clk = 0, rst_n = 0;
  logic touch_valid = 0;
  logic [1:0] touch_set = 0, query_set = 0;
  logic [2:0] touch_way = 0, victim_way;
  int checks = 0, failures = 0;
  bit model [SETS][WAYS];

  plru_tree #(.SETS(SETS), .WAYS(WAYS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int model_victim(int s);
    int node = 1;
    while (node < WAYS) node = 2 * node + int'(model[s][node]);
    return node - WAYS;
  endfunction

  task automatic model_touch(int s, int w);
    for (int l = 0; l < LV; l++) begin
      int node = (1 << l) + (w >> (LV - l));
      model[s][node] = !((w >> (LV - 1 - l)) & 1);
    end
  endtask

  task automatic check_all();
    for (int s = 0; s < SETS; s++) begin
      query_set = 2'(s);
      #1;
      checks++;
      if (int'(victim_way) != model_victim(s)) begin
        failures++;
        $display("set %0d victim %0d expected %0d", s, victim_way, model_victim(s));
      end
    end
  endtask

  initial begin
    foreach (model[s, n]) model[s][n] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check_all();
    for (int i = 0; i < 2000; i++) begin
      touch_valid = ($urandom_range(0, 3) != 0);
      touch_set   = 2'($urandom);
      touch_way   = 3'($urandom);
      @(negedge clk);
      if (touch_valid) model_touch(int'(touch_set), int'(touch_way));
      // the way just touched must not be the victim
      if (touch_valid) begin
        query_set = touch_set;
        #1;
        checks++;
        if (victim_way == touch_way) begin
          failures++;
          $display("victim equals the way just touched");
        end
      end
      touch_valid = 0;
      check_all();
    end
    // touching 0..7 in order leaves way 0 as the victim
    for (int w = 0; w < WAYS; w++) begin
      touch_valid = 1; touch_set = 2'd2; touch_way = 3'(w);
      @(negedge clk);
      model_touch(2, w);
    end
    touch_valid = 0;
    query_set = 2'd2;
    #1;
    checks++;
    if (victim_way != 3'd0) begin
      failures++;
      $display("after sequential touches victim %0d, expected 0", victim_way);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
