// tb_rr_arbiter: self-checking testbench of the round-robin arbiter.
//
// Three requesters raise random requests and the consumer accepts at random.
// A reference pointer predicts the winner (the first requester at or after
// the pointer) and moves past the winner on every accepted grant. The test
// also checks fairness: with all three asking all the time, the grants go
// 0, 1, 2, 0, 1, 2, ...
module tb_rr_arbiter;
  localparam int N = 3;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] req_valid = 0, req_ready;
  logic out_valid, out_ready = 0;
  logic [1:0] out_idx;
  int ptr = 0;
  int checks = 0, failures = 0;

  rr_arbiter #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step_and_check();
    int exp_idx = -1;
    for (int k = 0; k < N; k++)
      if (exp_idx < 0 && req_valid[(ptr + k) % N]) exp_idx = (ptr + k) % N;
    #1;
    checks++;
    if (out_valid != (exp_idx >= 0) || (exp_idx >= 0 && int'(out_idx) != exp_idx)) begin
      failures++;
      $display("req %b ptr %0d: valid %0d idx %0d expected %0d", req_valid, ptr, out_valid, out_idx, exp_idx);
    end
    checks++;
    if (req_ready != ((exp_idx >= 0 && out_ready) ? N'(1 << exp_idx) : '0)) begin
      failures++;
      $display("req_ready %b wrong", req_ready);
    end
    @(negedge clk);
    if (exp_idx >= 0 && out_ready) ptr = (exp_idx + 1) % N;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      req_valid = N'($urandom);
      out_ready = $urandom_range(0, 2) != 0;
      step_and_check();
    end
    req_valid = '1; out_ready = 1;
    for (int i = 0; i < 9; i++) begin
      automatic int want = ptr;
      step_and_check();
      checks++;
      if (ptr != (want + 1) % N) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
