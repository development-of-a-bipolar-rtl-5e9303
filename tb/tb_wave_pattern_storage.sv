// tb_wave_pattern_storage: self-checking test of the wave sample memory.
//
// Loads random samples through the write port while reading random
// addresses through the read port, and checks that each read returns, one
// clock after the address, the value of a reference model (including the
// case of reading an address that is being written, which returns the old
// word). Ends with the TB_RESULT line.
module tb_wave_pattern_storage;
  localparam int unsigned ADDR_W = 12;
  localparam int unsigned DATA_W = 32;

  logic              clk = 1'b0;
  logic              wr_en;
  logic [ADDR_W-1:0] wr_addr, rd_addr;
  logic [DATA_W-1:0] wr_data, rd_data;

  int checks = 0, failures = 0;

  wave_pattern_storage dut (.*);

  always #5 clk = ~clk;

  logic [DATA_W-1:0] ref_mem [2**ADDR_W];
  logic [DATA_W-1:0] expect_q;
  bit                expect_v = 0;

  initial begin
    wr_en = 0; wr_addr = 0; wr_data = 0; rd_addr = 0;
    for (int a = 0; a < 2**ADDR_W; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = ADDR_W'(a); wr_data = $urandom;
      ref_mem[a] = wr_data;
    end
    @(negedge clk) wr_en = 0;
    for (int i = 0; i < 6000; i++) begin
      @(negedge clk);
      // check the answer to the previous cycle's address
      if (expect_v) begin
        checks++;
        if (rd_data !== expect_q) begin
          failures++;
          if (failures < 10) $display("FAIL read: got %h want %h", rd_data, expect_q);
        end
      end
      rd_addr  = ADDR_W'($urandom);
      wr_en    = ($urandom_range(0, 1) == 1);
      wr_addr  = (i % 7 == 0) ? rd_addr : ADDR_W'($urandom);
      wr_data  = $urandom;
      expect_q = ref_mem[rd_addr];
      expect_v = 1;
      if (wr_en) ref_mem[wr_addr] = wr_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
