// tb_mt_sa_top: end-to-end test of the multi-tenant systolic array.
//
// Acts as the host. Every layer is a ROWS x width weight matrix W and nv input
// vectors a_v; the expected results are o_v[j] = sum_k W[k][j] * a_v[k],
// computed here. The sequence:
//   A. after reset the whole array is one partition; one layer runs alone and
//      its completion time is checked against the pipeline latency;
//   B. the array is split into three partitions (columns left over by the
//      floor stay idle); three layers with different MAC counts are dispatched
//      together, the heaviest must land on partition 0 (equal widths, lowest
//      index), and their feed steps contend for the shared rows;
//   C. partitions 0 and 1 are merged; a heavy and a light layer are
//      dispatched, the heavy one must get the wider merged partition;
//      while they run, a merge touching a busy partition and a repartition
//      must be rejected, and a layer is dispatched onto a partition that frees
//      up while the other is still busy.
// Every drain-buffer result is read back and compared. The mechanisms are
// counted and each must have happened at least once: weight load, feed
// contention, a PE passing a foreign vector with Mul_En = 0, idle columns,
// repartition, merge, rejected configuration, concurrent partitions.
module tb_mt_sa_top;
  import mt_sa_pkg::*;
  localparam int ROWS = 8, COLS = 8, MAXP = 4, DATA_W = 8, ACC_W = 32;
  localparam int LB_DEPTH = 32, FB_DEPTH = 128, DB_DEPTH = 128;
  localparam int PID_W = 2, CW = 4, NW = 3, LB_AW = 5, FB_AW = 7, DB_AW = 7;
  localparam int MAXV = 16;

  logic clk = 0, rst_n = 0;
  logic              lb_wr_en;
  logic [LB_AW-1:0]  lb_wr_addr;
  logic [COLS-1:0]   lb_wr_mask;
  logic [DATA_W-1:0] lb_wr_data [COLS];
  logic              fb_wr_en;
  logic [FB_AW-1:0]  fb_wr_addr;
  logic [DATA_W-1:0] fb_wr_data [ROWS];
  logic [DB_AW-1:0]  db_rd_addr;
  logic [ACC_W-1:0]  db_rd_data [COLS];
  logic              calc_req;
  logic [NW-1:0]     calc_n;
  logic              merge_req;
  logic [PID_W-1:0]  merge_idx;
  logic              cfg_ack, cfg_err;
  logic              disp_req;
  logic [MAXP-1:0]   layer_valid;
  layer_shape_t      layer_shape [MAXP];
  job_t              layer_job   [MAXP];
  logic [MAXP-1:0]   asg_valid;
  logic [PID_W-1:0]  asg_part    [MAXP];
  logic [CW-1:0]     part_base   [MAXP];
  logic [CW-1:0]     part_width  [MAXP];
  logic [MAXP-1:0]   part_valid;
  logic [MAXP-1:0]   part_busy;
  logic [MAXP-1:0]   part_done;

  mt_sa_top #(.ROWS(ROWS), .COLS(COLS), .MAXP(MAXP), .DATA_W(DATA_W), .ACC_W(ACC_W),
              .LB_DEPTH(LB_DEPTH), .FB_DEPTH(FB_DEPTH), .DB_DEPTH(DB_DEPTH)) dut (.*);

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  // ------------------------------------------------------------ layer model
  logic signed [DATA_W-1:0] W [MAXP][ROWS][COLS];
  logic signed [DATA_W-1:0] A [MAXP][MAXV][ROWS];
  int l_nv [MAXP], l_part [MAXP], l_base [MAXP], l_width [MAXP];
  int l_start [MAXP];

  // mechanism counters
  int n_load = 0, n_contend = 0, n_gated = 0, n_idle_col = 0, n_calc = 0, n_merge = 0;
  int n_reject = 0, n_concurrent = 0;

  always @(posedge clk) if (rst_n) begin
    int nreq;
    nreq = $countones(dut.p_feed_req);
    if (nreq > 1) n_contend++;
    if ($countones(part_busy) > 1) n_concurrent++;
    if (dut.lb_rd_valid != '0) n_load++;
    for (int k = 0; k < ROWS; k++) for (int c = 0; c < COLS; c++)
      if (dut.u_arr.fv[k][c] && dut.col_en[c] && dut.u_arr.tag[k][c] != dut.col_part[c]) n_gated++;
    if (dut.col_en != '1) n_idle_col++;
  end

  task automatic set_layer(input int s, input int nv, input int m);
    l_nv[s] = nv;
    layer_shape[s] = '{m: SHAPE_W'(m), n: 1, c: SHAPE_W'(ROWS), r: 1, s: 1, h: SHAPE_W'(nv), w: 1};
    layer_job[s]   = '{lb_base: ADDR_W'(8 * (s % 2)), fb_base: ADDR_W'(s * MAXV), n_vec: ADDR_W'(nv),
                       db_base: ADDR_W'(s * MAXV)};
    for (int k = 0; k < ROWS; k++) begin
      for (int j = 0; j < COLS; j++) W[s][k][j] = DATA_W'($urandom);
      for (int v = 0; v < nv; v++) A[s][v][k] = DATA_W'($urandom);
    end
  endtask

  // Writes the layer's weights into its partition's columns and its vectors.
  task automatic write_layer(input int s);
    l_part[s]  = asg_part[s];
    l_base[s]  = part_base[l_part[s]];
    l_width[s] = part_width[l_part[s]];
    for (int k = 0; k < ROWS; k++) begin
      @(negedge clk);
      lb_wr_en = 1; lb_wr_addr = LB_AW'(layer_job[s].lb_base + k);
      lb_wr_mask = '0;
      for (int c = 0; c < COLS; c++) begin
        lb_wr_data[c] = '0;
        if (c >= l_base[s] && c < l_base[s] + l_width[s]) begin
          lb_wr_mask[c] = 1'b1; lb_wr_data[c] = W[s][k][c - l_base[s]];
        end
      end
    end
    @(negedge clk); lb_wr_en = 0;
    for (int v = 0; v < l_nv[s]; v++) begin
      fb_wr_en = 1; fb_wr_addr = FB_AW'(layer_job[s].fb_base + v);
      for (int k = 0; k < ROWS; k++) fb_wr_data[k] = A[s][v][k];
      @(negedge clk);
    end
    fb_wr_en = 0;
  endtask

  task automatic check_layer(input int s);
    for (int v = 0; v < l_nv[s]; v++) begin
      @(negedge clk); db_rd_addr = DB_AW'(layer_job[s].db_base + v);
      @(posedge clk); #1;
      for (int j = 0; j < l_width[s]; j++) begin
        int e;
        e = 0;
        for (int k = 0; k < ROWS; k++) e += int'(W[s][k][j]) * int'(A[s][v][k]);
        chk($signed(db_rd_data[l_base[s] + j]) == e,
            $sformatf("layer %0d vector %0d col %0d: got %0d exp %0d", s, v, j, $signed(db_rd_data[l_base[s] + j]), e));
      end
    end
  endtask

  task automatic dispatch(input logic [MAXP-1:0] which);
    @(negedge clk);
    layer_valid = which;
    #1;
    for (int s = 0; s < MAXP; s++) if (which[s]) chk(asg_valid[s], $sformatf("layer %0d assigned", s));
  endtask

  task automatic go();
    @(negedge clk); disp_req = 1;
    for (int s = 0; s < MAXP; s++) if (layer_valid[s]) l_start[s] = cyc;
    @(negedge clk); disp_req = 0; layer_valid = '0;
  endtask

  task automatic wait_idle();
    while (part_busy != '0) @(negedge clk);
  endtask

  task automatic cfg(input bit is_merge, input int arg, input bit exp_ok);
    @(negedge clk);
    if (is_merge) begin merge_req = 1; merge_idx = PID_W'(arg); end
    else begin calc_req = 1; calc_n = NW'(arg); end
    @(negedge clk); merge_req = 0; calc_req = 0;
    chk(cfg_ack == exp_ok && cfg_err == !exp_ok, $sformatf("cfg %s %0d", is_merge ? "merge" : "calc", arg));
    if (cfg_err) n_reject++;
    if (cfg_ack && is_merge) n_merge++;
    if (cfg_ack && !is_merge) n_calc++;
  endtask

  int done_cyc [MAXP];
  always @(posedge clk) begin
    for (int p = 0; p < MAXP; p++) if (part_done[p]) done_cyc[p] = cyc;
  end

  initial begin
    lb_wr_en = 0; lb_wr_addr = '0; lb_wr_mask = '0; fb_wr_en = 0; fb_wr_addr = '0; db_rd_addr = '0;
    calc_req = 0; calc_n = '0; merge_req = 0; merge_idx = '0; disp_req = 0; layer_valid = '0;
    for (int c = 0; c < COLS; c++) lb_wr_data[c] = '0;
    for (int k = 0; k < ROWS; k++) fb_wr_data[k] = '0;
    for (int s = 0; s < MAXP; s++) begin layer_shape[s] = '0; layer_job[s] = '0; end
    repeat (3) @(posedge clk); rst_n = 1;

    // ---- A: one layer on the whole array
    @(negedge clk);
    chk(part_valid == 4'b0001 && part_width[0] == COLS, "reset: one full-width partition");
    set_layer(0, 6, 64);
    dispatch(4'b0001);
    chk(asg_part[0] == 0, "A: layer on partition 0");
    write_layer(0);
    dispatch(4'b0001);
    go();
    wait_idle();
    @(posedge clk); #1;
    // dispatch edge at l_start; ROWS load cycles; one vector per cycle; result of the
    // last vector leaves column COLS-1 ROWS+COLS cycles after its feed cycle; done one later.
    chk(done_cyc[0] == l_start[0] + ROWS + 6 + ROWS + COLS + 1,
        $sformatf("A: done at %0d, expected %0d", done_cyc[0], l_start[0] + ROWS + 6 + ROWS + COLS + 1));
    check_layer(0);

    // ---- B: three partitions, three layers at once
    cfg(0, 0, 0);          // n = 0 rejected
    cfg(0, 3, 1);
    chk(part_width[0] == COLS / 3 && part_valid == 4'b0111, "B: three partitions of floor(COLS/3)");
    set_layer(1, 9, 10);   // light
    set_layer(2, 5, 500);  // heaviest
    set_layer(3, 7, 100);
    dispatch(4'b1110);
    chk(asg_part[2] == 0 && asg_part[3] == 1 && asg_part[1] == 2, "B: heaviest layer on lowest partition");
    for (int s = 1; s < 4; s++) write_layer(s);
    dispatch(4'b1110);
    go();
    wait_idle();
    for (int s = 1; s < 4; s++) check_layer(s);

    // ---- C: merge, then heavy layer on the wide partition
    cfg(1, 0, 1);
    chk(part_width[0] == 2 * (COLS / 3) && part_valid == 4'b0101, "C: 0 absorbed 1");
    set_layer(0, 12, 9);   // light, long
    set_layer(1, 4, 900);  // heavy, short
    dispatch(4'b0011);
    chk(asg_part[1] == 0 && asg_part[0] == 2, "C: heavy layer on merged partition");
    write_layer(0); write_layer(1);
    dispatch(4'b0011);
    go();
    cfg(1, 0, 0);          // merge with busy partitions rejected
    cfg(0, 2, 0);          // repartition while busy rejected
    while (part_busy[0]) @(negedge clk);
    chk(part_busy[2], "C: light layer still running");
    check_layer(1);
    // the merged partition is free again while partition 2 still runs
    set_layer(3, 3, 50);
    dispatch(4'b1000);
    chk(asg_part[3] == 0, "C: next layer on the freed partition");
    write_layer(3);
    dispatch(4'b1000);
    go();
    wait_idle();
    check_layer(0);
    check_layer(3);

    $display("mechanisms: load=%0d contention=%0d gated=%0d idle_col=%0d calc=%0d merge=%0d reject=%0d concurrent=%0d",
             n_load, n_contend, n_gated, n_idle_col, n_calc, n_merge, n_reject, n_concurrent);
    chk(n_load > 0, "weight load happened");
    chk(n_contend > 0, "feed contention happened");
    chk(n_gated > 0, "Mul_En=0 pass-through happened");
    chk(n_idle_col > 0, "idle columns happened");
    chk(n_calc > 0, "repartition happened");
    chk(n_merge > 0, "merge happened");
    chk(n_reject > 0, "rejected configuration happened");
    chk(n_concurrent > 0, "concurrent partitions happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
