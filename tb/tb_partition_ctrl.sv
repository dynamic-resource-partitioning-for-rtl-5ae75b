// tb_partition_ctrl: self-checking test of the per-partition sequencer.
//
// For several jobs: checks that the load step lasts exactly ROWS cycles with
// load-buffer addresses lb_base+ROWS-1 down to lb_base; that the feed step
// requests vectors at fb_base, fb_base+1, ... advancing only on a grant (grants
// are random); that results reported during feed and drain are counted and done
// pulses once, in the cycle the n_vec-th result arrives; that a start while
// busy is ignored; and that a job with n_vec = 0 only loads.
module tb_partition_ctrl;
  import mt_sa_pkg::*;
  localparam int ROWS = 4, LB_AW = 8, FB_AW = 10;
  logic clk = 0, rst_n = 0;
  logic             start, feed_gnt, last_col_valid;
  job_t             job;
  logic             busy, done, lb_rd_en, feed_req;
  part_state_t      state;
  logic [LB_AW-1:0] lb_rd_addr;
  logic [FB_AW-1:0] feed_addr;
  int checks = 0, failures = 0;

  partition_ctrl #(.ROWS(ROWS), .LB_AW(LB_AW), .FB_AW(FB_AW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic run_job(input int lb, input int fb, input int nv);
    int issued = 0, results = 0, pending = 0, cyc = 0;
    bit seen_done = 0;
    @(negedge clk);
    job = '{lb_base: ADDR_W'(lb), fb_base: ADDR_W'(fb), n_vec: ADDR_W'(nv), db_base: '0};
    start = 1;
    @(negedge clk); start = 0;
    // step 1
    for (int i = 0; i < ROWS; i++) begin
      chk(busy && state == PS_LOAD && lb_rd_en && !feed_req, "load step");
      chk(lb_rd_addr == LB_AW'(lb + ROWS - 1 - i), $sformatf("load addr %0d", i));
      // a second start while busy must be ignored
      start = (i == 1);
      @(negedge clk);
      start = 0;
    end
    // steps 2 and 3
    while (!seen_done) begin
      cyc++;
      chk(!lb_rd_en, "no load after step 1");
      if (issued < nv) begin
        chk(feed_req && state == PS_FEED && feed_addr == FB_AW'(fb + issued), $sformatf("feed req %0d", issued));
      end else begin
        chk(!feed_req, "no feed request after last vector");
      end
      feed_gnt = feed_req && ($urandom % 3 != 0);
      // results trail the issued vectors
      last_col_valid = (pending > 0) && ($urandom % 2 == 0);
      #1;
      if (done) begin
        seen_done = 1;
        chk(results + int'(last_col_valid) == nv, "done exactly at last result");
      end else begin
        chk(busy, "busy until done");
      end
      @(posedge clk);
      if (feed_gnt) begin issued++; pending++; end
      if (last_col_valid) begin results++; pending--; end
      @(negedge clk);
      feed_gnt = 0; last_col_valid = 0;
      if (cyc > 500) begin chk(0, "job never finished"); break; end
    end
    chk(!busy && state == PS_IDLE, "idle after done");
    chk(issued == nv, "all vectors issued");
  endtask

  initial begin
    start = 0; feed_gnt = 0; last_col_valid = 0; job = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); chk(!busy && state == PS_IDLE, "idle after reset");
    run_job(0, 0, 5);
    run_job(8, 100, 1);
    run_job(200, 37, 17);
    run_job(16, 5, 0);
    for (int j = 0; j < 10; j++) run_job($urandom % 250, $urandom % 900, $urandom % 20 + 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
