// tb_partition_table: self-checking test of partition calculation and merge.
//
// Checks the reset state (one partition of all columns), equal splits for
// every n from 1 to MAXP against floor(COLS/n), rejection of n = 0, n > MAXP
// and of a split while a partition is busy, merges of adjacent free
// partitions, rejection of merges with a busy or missing neighbour, and the
// column map after every step.
module tb_partition_table;
  localparam int COLS = 16, MAXP = 4, PID_W = 2, CW = 5, NW = 3;
  logic clk = 0, rst_n = 0;
  logic             calc_req, merge_req;
  logic [NW-1:0]    calc_n;
  logic [PID_W-1:0] merge_idx;
  logic [MAXP-1:0]  busy;
  logic             cfg_ack, cfg_err;
  logic [CW-1:0]    part_base  [MAXP];
  logic [CW-1:0]    part_width [MAXP];
  logic [MAXP-1:0]  part_valid;
  logic [PID_W-1:0] col_part   [COLS];
  logic [COLS-1:0]  col_en;
  // reference table
  int rb [MAXP], rw [MAXP], rv [MAXP];
  int checks = 0, failures = 0;

  partition_table #(.COLS(COLS), .MAXP(MAXP)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(input string what);
    for (int p = 0; p < MAXP; p++) begin
      checks++;
      if (part_valid[p] !== rv[p][0] || (rv[p] && (part_base[p] != rb[p] || part_width[p] != rw[p]))) begin
        failures++; $display("FAIL %s entry %0d: v=%b b=%0d w=%0d exp v=%0d b=%0d w=%0d", what, p,
                             part_valid[p], part_base[p], part_width[p], rv[p], rb[p], rw[p]);
      end
    end
    for (int c = 0; c < COLS; c++) begin
      int ep = -1;
      for (int p = 0; p < MAXP; p++) if (rv[p] && c >= rb[p] && c < rb[p] + rw[p]) ep = p;
      checks++;
      if ((ep < 0 && col_en[c]) || (ep >= 0 && (!col_en[c] || col_part[c] != ep))) begin
        failures++; $display("FAIL %s col %0d: en=%b part=%0d exp %0d", what, c, col_en[c], col_part[c], ep);
      end
    end
  endtask

  task automatic req_calc(input int n, input logic exp_ok);
    @(negedge clk); calc_req = 1; calc_n = NW'(n);
    @(negedge clk); calc_req = 0;
    checks++;
    if (cfg_ack !== exp_ok || cfg_err !== !exp_ok) begin failures++; $display("FAIL calc %0d ack=%b err=%b", n, cfg_ack, cfg_err); end
    if (exp_ok) for (int p = 0; p < MAXP; p++) begin
      rv[p] = (p < n); rb[p] = (p < n) ? p * (COLS / n) : 0; rw[p] = (p < n) ? COLS / n : 0;
    end
    compare($sformatf("calc %0d", n));
  endtask

  task automatic req_merge(input int i, input logic exp_ok);
    @(negedge clk); merge_req = 1; merge_idx = PID_W'(i);
    @(negedge clk); merge_req = 0;
    checks++;
    if (cfg_ack !== exp_ok || cfg_err !== !exp_ok) begin failures++; $display("FAIL merge %0d ack=%b err=%b", i, cfg_ack, cfg_err); end
    if (exp_ok) begin
      int nb = -1;
      for (int p = 0; p < MAXP; p++) if (rv[p] && p != i && rb[p] == rb[i] + rw[i]) nb = p;
      rw[i] += rw[nb]; rv[nb] = 0;
    end
    compare($sformatf("merge %0d", i));
  endtask

  initial begin
    calc_req = 0; merge_req = 0; calc_n = '0; merge_idx = '0; busy = '0;
    for (int p = 0; p < MAXP; p++) begin rv[p] = (p == 0); rb[p] = 0; rw[p] = (p == 0) ? COLS : 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); compare("reset");
    for (int n = 1; n <= MAXP; n++) req_calc(n, 1);
    req_calc(0, 0);
    req_calc(MAXP + 1, 0);
    req_calc(3, 1);              // 16/3 = 5 columns, column 15 idle
    busy = 4'b0010;
    req_calc(2, 0);              // busy partition blocks a split
    req_merge(0, 0);             // neighbour 1 busy
    req_merge(1, 0);             // partition 1 itself busy
    busy = 4'b0001;
    req_merge(1, 1);             // 1 absorbs 2
    req_merge(1, 0);             // nothing to the right now
    req_merge(3, 0);             // invalid entry
    busy = '0;
    req_merge(0, 1);             // 0 absorbs 1: back to one partition of 15
    req_calc(4, 1);
    req_merge(2, 1);
    req_merge(0, 1);
    req_merge(0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
