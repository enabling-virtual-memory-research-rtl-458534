// tb_lfsr_random: self-checking testbench of the random replacement LFSR.
//
// A reference LFSR (x^16+x^14+x^13+x^11+1, seed 16'hACE1) is stepped in the
// testbench whenever advance is high and its low three bits are compared with
// victim_way after each clock edge. The test also checks that the output
// holds while advance is low and that all eight ways are chosen.
module tb_lfsr_random;
  logic clk = 0, rst_n = 0, advance = 0;
  logic [2:0] victim_way;
  logic [15:0] ref_lfsr;
  bit seen [8];
  int checks = 0, failures = 0;

  lfsr_random #(.WAYS(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_lfsr = 16'hACE1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 3000; i++) begin
      automatic logic [2:0] prev_way = victim_way;
      advance = $urandom_range(0, 1) == 1;
      @(negedge clk);
      if (advance) ref_lfsr = {ref_lfsr[14:0], ref_lfsr[15] ^ ref_lfsr[13] ^ ref_lfsr[12] ^ ref_lfsr[10]};
      checks++;
      if (victim_way != ref_lfsr[2:0]) begin
        failures++;
        $display("step %0d: victim %0d expected %0d", i, victim_way, ref_lfsr[2:0]);
      end
      if (!advance) begin
        checks++;
        if (victim_way != prev_way) failures++;
      end
      seen[victim_way] = 1;
    end
    foreach (seen[w]) begin
      checks++;
      if (!seen[w]) begin
        failures++;
        $display("way %0d never chosen", w);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
