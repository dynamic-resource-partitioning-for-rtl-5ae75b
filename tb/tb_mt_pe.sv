// tb_mt_pe: self-checking test of one processing element.
//
// Drives random weights in load mode, then random feed words and partial sums
// in calculate mode with Mul_En random, and compares FD/GD against a reference
// computed here: GD = RD + (Mul_En ? LR*FD : 0), FD forwarded, both one cycle
// later. Also checks that LR holds while calculating and that GD forwards RD
// in load mode.
module tb_mt_pe;
  localparam int DATA_W = 8;
  localparam int ACC_W  = 32;

  logic clk = 0, rst_n = 0;
  logic load, mul_en;
  logic signed [DATA_W-1:0] fd_i, fd_o;
  logic signed [ACC_W-1:0]  rd_i, gd_o;
  int checks = 0, failures = 0;

  mt_pe #(.DATA_W(DATA_W), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic signed [ACC_W-1:0] exp_gd, input logic signed [DATA_W-1:0] exp_fd, input string what);
    checks++;
    if (gd_o !== exp_gd || fd_o !== exp_fd) begin
      failures++;
      $display("FAIL %s: gd=%0d exp %0d fd=%0d exp %0d", what, gd_o, exp_gd, fd_o, exp_fd);
    end
  endtask

  initial begin
    logic signed [DATA_W-1:0] w, f;
    logic signed [ACC_W-1:0]  r, exp_gd;
    logic                     me;
    int n_gated = 0;
    load = 0; mul_en = 0; fd_i = 0; rd_i = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      // load a new weight
      w = DATA_W'($urandom);
      @(negedge clk); load = 1; rd_i = ACC_W'(w); fd_i = DATA_W'($urandom);
      @(posedge clk); #1;
      check(ACC_W'(w), fd_i, "load forwards RD");
      // several calculate cycles with the same weight
      for (int s = 0; s < 5; s++) begin
        f  = DATA_W'($urandom);
        r  = ACC_W'($urandom % 100000) - 50000;
        me = $urandom % 2;
        @(negedge clk); load = 0; mul_en = me; fd_i = f; rd_i = r;
        @(posedge clk); #1;
        exp_gd = r + (me ? ACC_W'(int'(w) * int'(f)) : 0);
        if (!me) n_gated++;
        check(exp_gd, f, me ? "calc" : "calc gated");
      end
    end
    if (n_gated == 0) begin failures++; $display("FAIL no gated cycle"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
