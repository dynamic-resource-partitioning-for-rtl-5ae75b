// tb_feed_buffer: self-checking test of the feed buffer and its skew.
//
// Writes random vectors, then issues reads with random tags on random cycles.
// Row k must present element k of the vector, with its tag and valid bit,
// exactly k+1 cycles after the command; in every other cycle fv_out[k] is 0.
module tb_feed_buffer;
  localparam int ROWS = 6, DEPTH = 16, DATA_W = 8, MAXP = 4, AW = 4, PID_W = 2;
  localparam int NCYC = 120;
  logic clk = 0, rst_n = 0;
  logic              wr_en;
  logic [AW-1:0]     wr_addr;
  logic [DATA_W-1:0] wr_data  [ROWS];
  logic              rd_en;
  logic [AW-1:0]     rd_addr;
  logic [PID_W-1:0]  rd_tag;
  logic [DATA_W-1:0] fd_out   [ROWS];
  logic [ROWS-1:0]   fv_out;
  logic [PID_W-1:0]  ftag_out [ROWS];
  logic [DATA_W-1:0] ref_mem [DEPTH][ROWS];
  logic              cmd_en  [NCYC];
  logic [AW-1:0]     cmd_a   [NCYC];
  logic [PID_W-1:0]  cmd_t   [NCYC];
  int checks = 0, failures = 0;

  feed_buffer #(.ROWS(ROWS), .DEPTH(DEPTH), .DATA_W(DATA_W), .MAXP(MAXP)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_addr = '0; rd_en = 0; rd_addr = '0; rd_tag = '0;
    for (int k = 0; k < ROWS; k++) wr_data[k] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); wr_en = 1; wr_addr = AW'(i);
      for (int k = 0; k < ROWS; k++) begin wr_data[k] = DATA_W'($urandom); ref_mem[i][k] = wr_data[k]; end
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < NCYC; t++) begin
      cmd_en[t] = (t < NCYC - ROWS - 2) ? ($urandom % 3 != 0) : 1'b0;
      cmd_a[t]  = AW'($urandom);
      cmd_t[t]  = PID_W'($urandom);
    end
    for (int t = 0; t < NCYC; t++) begin
      rd_en = cmd_en[t]; rd_addr = cmd_a[t]; rd_tag = cmd_t[t];
      @(posedge clk); #1;
      // outputs now reflect command of cycle t-k for row k
      for (int k = 0; k < ROWS; k++) begin
        int s;
        s = t - k;
        checks++;
        if (s >= 0) begin
          if (fv_out[k] !== cmd_en[s] ||
              (cmd_en[s] && (fd_out[k] !== ref_mem[cmd_a[s]][k] || ftag_out[k] !== cmd_t[s]))) begin
            failures++;
            $display("FAIL t=%0d row %0d fv=%b fd=%0h tag=%0d exp %b %0h %0d", t, k, fv_out[k], fd_out[k], ftag_out[k],
                     cmd_en[s], ref_mem[cmd_a[s]][k], cmd_t[s]);
          end
        end else if (fv_out[k] !== 1'b0) begin
          failures++; $display("FAIL t=%0d row %0d early valid", t, k);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
