// tb_tlb_sram: self-checking testbench of the masked synchronous memory.
//
// Random masked writes and reads on a 16-row, 4-way memory are mirrored in a
// reference array. Read data are checked one clock edge after the read, for
// rows written in earlier cycles; a read of the row written in the same
// cycle must return the old contents.
module tb_tlb_sram;
  localparam int DEPTH = 16, WAYS = 4, WAY_W = 12;
  logic clk = 0;
  logic rd_en = 0, wr_en = 0;
  logic [3:0] rd_addr = 0, wr_addr = 0;
  logic [WAYS-1:0] wr_mask = 0;
  logic [WAYS-1:0][WAY_W-1:0] rd_data, wr_data = '0;
  logic [WAYS-1:0][WAY_W-1:0] model [DEPTH];
  logic [WAYS-1:0][WAY_W-1:0] expect_row;
  int checks = 0, failures = 0;

  tlb_sram #(.DEPTH(DEPTH), .WAYS(WAYS), .WAY_W(WAY_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill every row with known data
    @(negedge clk);
    for (int r = 0; r < DEPTH; r++) begin
      wr_en = 1; wr_addr = 4'(r); wr_mask = '1;
      for (int w = 0; w < WAYS; w++) wr_data[w] = WAY_W'($urandom);
      model[r] = wr_data;
      @(negedge clk);
    end
    wr_en = 0;
    for (int i = 0; i < 2000; i++) begin
      wr_en   = $urandom_range(0, 1) == 1;
      wr_addr = 4'($urandom);
      wr_mask = 4'($urandom);
      for (int w = 0; w < WAYS; w++) wr_data[w] = WAY_W'($urandom);
      rd_en   = 1;
      rd_addr = $urandom_range(0, 3) == 0 ? wr_addr : 4'($urandom);
      expect_row = model[rd_addr];          // old contents
      @(negedge clk);
      if (wr_en) for (int w = 0; w < WAYS; w++) if (wr_mask[w]) model[wr_addr][w] = wr_data[w];
      checks++;
      if (rd_data !== expect_row) begin
        failures++;
        $display("read row %0d: %h expected %h", rd_addr, rd_data, expect_row);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
