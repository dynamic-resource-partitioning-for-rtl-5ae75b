// tb_drain_buffer: self-checking test of the result buffer.
//
// Each column gets its pointer set to a random base, then a random stream of
// valid results; a reference model tracks where each result must land. The
// host port then reads back every address and compares all columns.
module tb_drain_buffer;
  localparam int COLS = 6, DEPTH = 32, ACC_W = 32, AW = 5;
  logic clk = 0, rst_n = 0;
  logic [COLS-1:0]  start;
  logic [AW-1:0]    start_base [COLS];
  logic [COLS-1:0]  wr_en;
  logic [ACC_W-1:0] wr_data    [COLS];
  logic [AW-1:0]    rd_addr;
  logic [ACC_W-1:0] rd_data    [COLS];
  logic [ACC_W-1:0] ref_mem [COLS][DEPTH];
  logic             ref_ok  [COLS][DEPTH];
  int ptr [COLS];
  int checks = 0, failures = 0;

  drain_buffer #(.COLS(COLS), .DEPTH(DEPTH), .ACC_W(ACC_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = '0; wr_en = '0; rd_addr = '0;
    for (int c = 0; c < COLS; c++) begin start_base[c] = '0; wr_data[c] = '0; for (int a = 0; a < DEPTH; a++) ref_ok[c][a] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      @(negedge clk); start = '1;
      for (int c = 0; c < COLS; c++) begin start_base[c] = AW'($urandom); ptr[c] = start_base[c]; end
      for (int i = 0; i < 20; i++) begin
        @(negedge clk); start = '0;
        for (int c = 0; c < COLS; c++) begin
          wr_en[c] = ($urandom % 2);
          wr_data[c] = $urandom;
          if (wr_en[c]) begin ref_mem[c][ptr[c] % DEPTH] = wr_data[c]; ref_ok[c][ptr[c] % DEPTH] = 1; ptr[c]++; end
        end
      end
      @(negedge clk); wr_en = '0;
    end
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); rd_addr = AW'(a);
      @(posedge clk); #1;
      for (int c = 0; c < COLS; c++) if (ref_ok[c][a]) begin
        checks++;
        if (rd_data[c] !== ref_mem[c][a]) begin failures++; $display("FAIL col %0d addr %0d got %0h exp %0h", c, a, rd_data[c], ref_mem[c][a]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
