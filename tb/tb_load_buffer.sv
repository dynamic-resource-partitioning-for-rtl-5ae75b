// tb_load_buffer: self-checking test of the column-banked weight buffer.
//
// Writes random rows with random column masks into a reference copy and the
// buffer, then reads every column at its own random address and checks data
// and the one-cycle rd_valid.
module tb_load_buffer;
  localparam int COLS = 8, DEPTH = 32, DATA_W = 8, AW = 5;
  logic clk = 0, rst_n = 0;
  logic              wr_en;
  logic [AW-1:0]     wr_addr;
  logic [COLS-1:0]   wr_mask;
  logic [DATA_W-1:0] wr_data [COLS];
  logic [COLS-1:0]   rd_en;
  logic [AW-1:0]     rd_addr [COLS];
  logic [DATA_W-1:0] rd_data [COLS];
  logic [COLS-1:0]   rd_valid;
  logic [DATA_W-1:0] ref_mem [COLS][DEPTH];
  int checks = 0, failures = 0;

  load_buffer #(.COLS(COLS), .DEPTH(DEPTH), .DATA_W(DATA_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [AW-1:0]   a [COLS];
    logic [COLS-1:0] en;
    wr_en = 0; wr_addr = '0; wr_mask = '0; rd_en = '0;
    for (int c = 0; c < COLS; c++) begin wr_data[c] = '0; rd_addr[c] = '0; end
    repeat (2) @(posedge clk); rst_n = 1;
    // fill everything once, then overwrite with random masks
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); wr_en = 1; wr_addr = AW'(i); wr_mask = '1;
      for (int c = 0; c < COLS; c++) begin wr_data[c] = DATA_W'($urandom); ref_mem[c][i] = wr_data[c]; end
    end
    for (int i = 0; i < 100; i++) begin
      @(negedge clk); wr_en = 1; wr_addr = AW'($urandom); wr_mask = COLS'($urandom);
      for (int c = 0; c < COLS; c++) begin
        wr_data[c] = DATA_W'($urandom);
        if (wr_mask[c]) ref_mem[c][wr_addr] = wr_data[c];
      end
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 200; i++) begin
      en = COLS'($urandom);
      for (int c = 0; c < COLS; c++) a[c] = AW'($urandom);
      @(negedge clk); rd_en = en; for (int c = 0; c < COLS; c++) rd_addr[c] = a[c];
      @(posedge clk); #1;
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (rd_valid[c] !== en[c] || (en[c] && rd_data[c] !== ref_mem[c][a[c]])) begin
          failures++; $display("FAIL col %0d addr %0d got %0h/%b exp %0h/%b", c, a[c], rd_data[c], rd_valid[c], ref_mem[c][a[c]], en[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
