// tb_chunk_storage: self-checking test of the chunk table register file.
//
// Writes random entries to random addresses, keeps a reference copy in the
// testbench, and reads every written address back through the asynchronous
// read port, checking the three unpacked fields
// {chunk_repetition, chunk_length, chunk_offset}. Also checks that a write
// with ctrl_we low changes nothing and that a read sees a write on the
// clock edge that performs it. Ends with the TB_RESULT line.
module tb_chunk_storage;
  localparam int unsigned CTRL_DEPTH  = 8;
  localparam int unsigned WAVE_DEPTH  = 12;
  localparam int unsigned CHUNK_REP_W = 16;
  localparam int unsigned ENTRY_W     = CHUNK_REP_W + 2 * WAVE_DEPTH;

  logic                   clk = 1'b0;
  logic                   ctrl_we;
  logic [CTRL_DEPTH-1:0]  ctrl_addr, rd_addr;
  logic [ENTRY_W-1:0]     ctrl_data;
  logic [CHUNK_REP_W-1:0] rd_repetition;
  logic [WAVE_DEPTH-1:0]  rd_length, rd_offset;

  int checks = 0, failures = 0;

  chunk_storage dut (.*);

  always #5 clk = ~clk;

  logic [ENTRY_W-1:0] ref_mem [2**CTRL_DEPTH];
  bit                 written [2**CTRL_DEPTH];

  task automatic check_addr(input int a);
    rd_addr = CTRL_DEPTH'(a);
    #1;
    checks++;
    if ({rd_repetition, rd_length, rd_offset} !== ref_mem[a]) begin
      failures++;
      $display("FAIL addr %0d: got rep=%h len=%h off=%h, want %h", a, rd_repetition,
               rd_length, rd_offset, ref_mem[a]);
    end
  endtask

  initial begin
    ctrl_we = 0; ctrl_addr = 0; ctrl_data = 0; rd_addr = 0;
    // fill every entry with a known value first
    for (int a = 0; a < 2**CTRL_DEPTH; a++) begin
      @(negedge clk);
      ctrl_we = 1; ctrl_addr = CTRL_DEPTH'(a);
      ctrl_data = {16'(a * 3 + 1), 12'(a * 7), 12'(4095 - a)};
      ref_mem[a] = ctrl_data;
    end
    @(negedge clk) ctrl_we = 0;
    for (int a = 0; a < 2**CTRL_DEPTH; a++) check_addr(a);
    // random overwrites
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      ctrl_we   = ($urandom_range(0, 3) != 0);
      ctrl_addr = CTRL_DEPTH'($urandom);
      ctrl_data = {$urandom, $urandom};
      if (ctrl_we) ref_mem[ctrl_addr] = ctrl_data;
    end
    @(negedge clk) ctrl_we = 0;
    for (int a = 0; a < 2**CTRL_DEPTH; a++) check_addr(a);
    // field positions: repetition is the top 16 bits, offset the bottom
    @(negedge clk);
    ctrl_we = 1; ctrl_addr = 8'd5; ctrl_data = {16'hBEEF, 12'h123, 12'h456};
    ref_mem[5] = ctrl_data;
    @(negedge clk) ctrl_we = 0;
    rd_addr = 8'd5; #1;
    checks++;
    if (rd_repetition != 16'hBEEF || rd_length != 12'h123 || rd_offset != 12'h456) begin
      failures++; $display("FAIL field order");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
