// tb_pe_array: self-checking test of the partitioned systolic array.
//
// A 4x6 array is cut into two partitions of three columns. Weights are shifted
// in, then skewed input vectors with random partition tags are streamed one per
// cycle. Every bottom-row result with out_valid is compared with the dot
// product of the vector and the column's weights, and its arrival cycle with
// the expected ROWS-1+c cycles after the vector entered row 0. Columns of the
// other partition must not flag the vector. A second phase reloads only
// partition 1 while partition 0 keeps computing, then uses the new weights.
module tb_pe_array;
  localparam int ROWS = 4, COLS = 6, MAXP = 2, DATA_W = 8, ACC_W = 32, PID_W = 1;
  localparam int NV = 24;

  logic clk = 0, rst_n = 0;
  logic [COLS-1:0]          col_load;
  logic [PID_W-1:0]         col_part [COLS];
  logic [COLS-1:0]          col_en;
  logic signed [ACC_W-1:0]  top_in   [COLS];
  logic signed [DATA_W-1:0] fd_in    [ROWS];
  logic [ROWS-1:0]          fv_in;
  logic [PID_W-1:0]         ftag_in  [ROWS];
  logic signed [ACC_W-1:0]  out      [COLS];
  logic [COLS-1:0]          out_valid;

  pe_array #(.ROWS(ROWS), .COLS(COLS), .MAXP(MAXP), .DATA_W(DATA_W), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic signed [DATA_W-1:0] W [ROWS][COLS];
  logic signed [DATA_W-1:0] A [NV][ROWS];
  int tagv [NV];
  int t0v  [NV];
  // expected results per column, in order
  int exp_q  [COLS][$];
  int expt_q [COLS][$];
  int gated_seen = 0;

  task automatic do_load(input logic [COLS-1:0] mask);
    for (int i = 0; i < ROWS; i++) begin
      @(negedge clk);
      col_load = mask;
      for (int c = 0; c < COLS; c++) top_in[c] = ACC_W'(W[ROWS-1-i][c]);
    end
    @(negedge clk);
    col_load = '0;
    for (int c = 0; c < COLS; c++) top_in[c] = '0;
  endtask

  // Stream vectors v0..v1-1, vector v entering row 0 in cycle base+v-v0,
  // with tags restricted by tag_mask (bit p allowed).
  task automatic do_feed(input int v0, input int v1, input int tag_mask);
    int base;
    @(negedge clk);
    base = cyc;
    for (int v = v0; v < v1; v++) begin
      for (int k = 0; k < ROWS; k++) A[v][k] = DATA_W'($urandom);
      do tagv[v] = $urandom % 2; while (((tag_mask >> tagv[v]) & 1) == 0);
      t0v[v] = base + v - v0;
      for (int c = 0; c < COLS; c++) begin
        if (col_part[c] == PID_W'(tagv[v]) && col_en[c]) begin
          int s = 0;
          for (int k = 0; k < ROWS; k++) s += int'(W[k][c]) * int'(A[v][k]);
          exp_q[c].push_back(s);
          expt_q[c].push_back(t0v[v] + ROWS - 1 + c);
        end
      end
    end
    for (int t = 0; t < (v1 - v0) + ROWS; t++) begin
      for (int k = 0; k < ROWS; k++) begin
        int v = v0 + t - k;
        fv_in[k] = 1'b0; fd_in[k] = '0; ftag_in[k] = '0;
        if (v >= v0 && v < v1) begin
          fv_in[k] = 1'b1; fd_in[k] = A[v][k]; ftag_in[k] = PID_W'(tagv[v]);
        end
      end
      @(negedge clk);
    end
    fv_in = '0;
  endtask

  // Monitor: inputs of cycle t are sampled at the edge that ends cycle t.
  always @(posedge clk) begin
    #1;
    if (rst_n) begin
      for (int c = 0; c < COLS; c++) begin
        if (out_valid[c]) begin
          checks++;
          if (exp_q[c].size() == 0) begin
            failures++; $display("FAIL col %0d unexpected result %0d", c, out[c]);
          end else begin
            int e, et;
            e  = exp_q[c].pop_front();
            et = expt_q[c].pop_front();
            if (out[c] !== e || cyc - 1 != et) begin
              failures++;
              $display("FAIL col %0d got %0d at %0d exp %0d at %0d", c, out[c], cyc - 1, e, et);
            end
          end
        end
      end
      // a vector crossing a column of the other partition
      for (int k = 0; k < ROWS; k++)
        for (int c = 0; c < COLS; c++)
          if (dut.fv[k][c] && dut.tag[k][c] != col_part[c]) gated_seen++;
    end
  end

  initial begin
    col_load = '0; col_en = '1; fv_in = '0;
    for (int c = 0; c < COLS; c++) begin col_part[c] = (c < 3) ? 0 : 1; top_in[c] = '0; end
    for (int k = 0; k < ROWS; k++) begin fd_in[k] = '0; ftag_in[k] = '0; end
    for (int k = 0; k < ROWS; k++) for (int c = 0; c < COLS; c++) W[k][c] = DATA_W'($urandom);
    repeat (2) @(posedge clk);
    rst_n = 1;
    do_load('1);
    do_feed(0, 12, 3);
    repeat (ROWS + COLS + 2) @(negedge clk);
    // reload partition 1 only, while partition 0 computes
    for (int k = 0; k < ROWS; k++) for (int c = 3; c < COLS; c++) W[k][c] = DATA_W'($urandom);
    fork
      do_load(6'b111000);
      begin
        // partition 0 vectors during the reload: its weights did not change
        do_feed(12, 16, 1);
      end
    join
    repeat (ROWS + COLS + 2) @(negedge clk);
    do_feed(16, NV, 3);
    repeat (ROWS + COLS + 4) @(negedge clk);
    for (int c = 0; c < COLS; c++) begin
      checks++;
      if (exp_q[c].size() != 0) begin failures++; $display("FAIL col %0d missing %0d results", c, exp_q[c].size()); end
    end
    checks++;
    if (gated_seen == 0) begin failures++; $display("FAIL no gated pass-through seen"); end
    $display("gated pass-through PE cycles: %0d", gated_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
