// tb_tlb_event_counters: self-checking testbench of the miss counters.
//
// Random event pulses on four counters are counted in the testbench and
// compared with the counter outputs after every clock edge; clear is pulsed
// from time to time and must bring every counter back to zero.
module tb_tlb_event_counters;
  localparam int N = 4, W = 64;
  logic clk = 0, rst_n = 0, clear = 0;
  logic [N-1:0] inc = 0;
  logic [N-1:0][W-1:0] count;
  longint unsigned model [N];
  int checks = 0, failures = 0;

  tlb_event_counters #(.N(N), .W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (model[k]) model[k] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      inc   = N'($urandom);
      clear = $urandom_range(0, 499) == 0;
      @(negedge clk);
      for (int k = 0; k < N; k++) begin
        if (clear) model[k] = 0;
        else if (inc[k]) model[k]++;
        checks++;
        if (count[k] != model[k]) begin
          failures++;
          $display("counter %0d = %0d expected %0d", k, count[k], model[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
