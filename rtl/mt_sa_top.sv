// mt_sa_top: multi-tenant weight-stationary systolic array accelerator.
//
// One ROWS x COLS systolic array is shared by several DNN layers at once by
// cutting it into vertical partitions: groups of adjacent columns, each
// spanning every row. Each partition runs its own layer through the three
// dataflow steps (load weights, feed inputs, drain results) under its own
// sequencer. Weights and results stay inside a partition's columns; input
// vectors of all partitions share the row wires one vector per cycle and carry
// a partition tag, so a PE multiplies only vectors of its own partition
// (Mul_En) and merely forwards the rest.
//
// Blocks: load_buffer (weights, one bank per column), feed_buffer (inputs, one
// bank per row, with skew), pe_array, drain_buffer (results, one bank per
// column), partition_table (equal split and merge), task_assign (heaviest
// layer to widest free partition), one partition_ctrl per partition and an
// rr_arbiter for the feed rows.
//
// Host interface (all synchronous to clk):
//   lb_wr_*  write one load-buffer row: weight W[k][j] of a layer on a
//            partition starting at column b goes to column b+j, address
//            lb_base+k.
//   fb_wr_*  write one feed-buffer vector: element k of input vector v goes to
//            row k, address fb_base+v.
//   db_rd_*  read one drain-buffer address across all columns (1 cycle
//            latency); result j of vector v is at column b+j, address
//            db_base+v.
//   calc_req/calc_n, merge_req/merge_idx: repartition or merge (cfg_ack or
//            cfg_err one cycle later).
//   layer_valid/layer_shape/layer_job, disp_req: the available layers. asg_*
//            shows the assignment to free partitions at any time; disp_req
//            starts every assigned layer on its partition.
//   part_*   the partition table and each partition's busy/done status.
// The off-chip DRAM behind the buffers is not part of this RTL; the host ports
// stand in for it.
//
// Timing of one job: ROWS load cycles, then one vector per granted cycle; the
// result of a vector in column c is flagged at the array bottom ROWS + c + 1
// cycles after the cycle in which the vector was granted (one cycle feed read,
// c hops right, ROWS hops down), and done pulses one cycle after the
// partition's last column has given its last result. Uncontended, a job on a
// partition ending at column COLS-1 takes 2*ROWS + n_vec + COLS + 1 cycles
// from the dispatch edge to done.
module mt_sa_top
  import mt_sa_pkg::*;
#(
  parameter int unsigned ROWS     = 128,
  parameter int unsigned COLS     = 128,
  parameter int unsigned MAXP     = 8,
  parameter int unsigned DATA_W   = 8,
  parameter int unsigned ACC_W    = 32,
  parameter int unsigned LB_DEPTH = 256,
  parameter int unsigned FB_DEPTH = 1024,
  parameter int unsigned DB_DEPTH = 1024,
  localparam int unsigned PID_W = (MAXP > 1) ? $clog2(MAXP) : 1,
  localparam int unsigned CW    = $clog2(COLS + 1),
  localparam int unsigned NW    = $clog2(MAXP + 1),
  localparam int unsigned LB_AW = $clog2(LB_DEPTH),
  localparam int unsigned FB_AW = $clog2(FB_DEPTH),
  localparam int unsigned DB_AW = $clog2(DB_DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // load buffer write
  input  logic              lb_wr_en,
  input  logic [LB_AW-1:0]  lb_wr_addr,
  input  logic [COLS-1:0]   lb_wr_mask,
  input  logic [DATA_W-1:0] lb_wr_data [COLS],
  // feed buffer write
  input  logic              fb_wr_en,
  input  logic [FB_AW-1:0]  fb_wr_addr,
  input  logic [DATA_W-1:0] fb_wr_data [ROWS],
  // drain buffer read
  input  logic [DB_AW-1:0]  db_rd_addr,
  output logic [ACC_W-1:0]  db_rd_data [COLS],
  // partition configuration
  input  logic              calc_req,
  input  logic [NW-1:0]     calc_n,
  input  logic              merge_req,
  input  logic [PID_W-1:0]  merge_idx,
  output logic              cfg_ack,
  output logic              cfg_err,
  // layer dispatch
  input  logic              disp_req,
  input  logic [MAXP-1:0]   layer_valid,
  input  layer_shape_t      layer_shape [MAXP],
  input  job_t              layer_job   [MAXP],
  output logic [MAXP-1:0]   asg_valid,
  output logic [PID_W-1:0]  asg_part    [MAXP],
  // status
  output logic [CW-1:0]     part_base   [MAXP],
  output logic [CW-1:0]     part_width  [MAXP],
  output logic [MAXP-1:0]   part_valid,
  output logic [MAXP-1:0]   part_busy,
  output logic [MAXP-1:0]   part_done
);

  // ---------------------------------------------------------------- partitions
  logic [PID_W-1:0] col_part [COLS];
  logic [COLS-1:0]  col_en;

  partition_table #(.COLS(COLS), .MAXP(MAXP)) u_ptab (
    .clk, .rst_n,
    .calc_req, .calc_n, .merge_req, .merge_idx,
    .busy      (part_busy),
    .cfg_ack, .cfg_err,
    .part_base, .part_width, .part_valid,
    .col_part, .col_en
  );

  logic [OPR_W-1:0] opr [MAXP];

  task_assign #(.MAXP(MAXP), .CW(CW)) u_tasg (
    .layer_valid,
    .shape      (layer_shape),
    .part_width,
    .part_free  (part_valid & ~part_busy),
    .opr,
    .asg_valid,
    .asg_part
  );

  // Start each partition that received a layer.
  logic [MAXP-1:0] p_start;
  job_t            p_job [MAXP];
  always_comb begin
    for (int p = 0; p < int'(MAXP); p++) begin
      p_start[p] = 1'b0;
      p_job[p]   = '0;
      for (int i = 0; i < int'(MAXP); i++) begin
        if (disp_req && layer_valid[i] && asg_valid[i] && (int'(asg_part[i]) == p)) begin
          p_start[p] = 1'b1;
          p_job[p]   = layer_job[i];
        end
      end
    end
  end

  // ---------------------------------------------------------------- sequencers
  logic             p_lb_en   [MAXP];
  logic [LB_AW-1:0] p_lb_addr [MAXP];
  logic [MAXP-1:0]  p_feed_req;
  logic [FB_AW-1:0] p_feed_addr [MAXP];
  logic [MAXP-1:0]  p_gnt;
  logic [MAXP-1:0]  p_last_valid;
  part_state_t      p_state [MAXP];
  logic [PID_W-1:0] gnt_idx;
  logic             gnt_any;
  logic [COLS-1:0]  out_valid;

  for (genvar p = 0; p < MAXP; p++) begin : g_part
    partition_ctrl #(.ROWS(ROWS), .LB_AW(LB_AW), .FB_AW(FB_AW)) u_ctrl (
      .clk, .rst_n,
      .start          (p_start[p]),
      .job            (p_job[p]),
      .feed_gnt       (p_gnt[p]),
      .last_col_valid (p_last_valid[p]),
      .busy           (part_busy[p]),
      .done           (part_done[p]),
      .state          (p_state[p]),
      .lb_rd_en       (p_lb_en[p]),
      .lb_rd_addr     (p_lb_addr[p]),
      .feed_req       (p_feed_req[p]),
      .feed_addr      (p_feed_addr[p])
    );

    // Rightmost column of the partition.
    always_comb begin
      p_last_valid[p] = 1'b0;
      for (int c = 0; c < int'(COLS); c++) begin
        if (part_valid[p] && part_width[p] != '0 &&
            c == int'(part_base[p]) + int'(part_width[p]) - 1)
          p_last_valid[p] = out_valid[c];
      end
    end
  end

  rr_arbiter #(.N(MAXP)) u_arb (
    .clk, .rst_n,
    .req     (p_feed_req),
    .gnt     (p_gnt),
    .gnt_idx (gnt_idx),
    .gnt_any (gnt_any)
  );

  // ---------------------------------------------------------------- buffers
  logic [COLS-1:0]   lb_rd_en;
  logic [LB_AW-1:0]  lb_rd_addr [COLS];
  logic [DATA_W-1:0] lb_rd_data [COLS];
  logic [COLS-1:0]   lb_rd_valid;
  logic [COLS-1:0]   db_start;
  logic [DB_AW-1:0]  db_start_base [COLS];

  always_comb begin
    for (int c = 0; c < int'(COLS); c++) begin
      lb_rd_en[c]      = col_en[c] && p_lb_en[col_part[c]];
      lb_rd_addr[c]    = p_lb_addr[col_part[c]];
      db_start[c]      = col_en[c] && p_start[col_part[c]];
      db_start_base[c] = DB_AW'(p_job[col_part[c]].db_base);
    end
  end

  load_buffer #(.COLS(COLS), .DEPTH(LB_DEPTH), .DATA_W(DATA_W)) u_lb (
    .clk, .rst_n,
    .wr_en   (lb_wr_en),
    .wr_addr (lb_wr_addr),
    .wr_mask (lb_wr_mask),
    .wr_data (lb_wr_data),
    .rd_en   (lb_rd_en),
    .rd_addr (lb_rd_addr),
    .rd_data (lb_rd_data),
    .rd_valid(lb_rd_valid)
  );

  logic [DATA_W-1:0] fd_skew [ROWS];
  logic [ROWS-1:0]   fv_skew;
  logic [PID_W-1:0]  ftag_skew [ROWS];

  feed_buffer #(.ROWS(ROWS), .DEPTH(FB_DEPTH), .DATA_W(DATA_W), .MAXP(MAXP)) u_fb (
    .clk, .rst_n,
    .wr_en    (fb_wr_en),
    .wr_addr  (fb_wr_addr),
    .wr_data  (fb_wr_data),
    .rd_en    (gnt_any),
    .rd_addr  (p_feed_addr[gnt_idx]),
    .rd_tag   (gnt_idx),
    .fd_out   (fd_skew),
    .fv_out   (fv_skew),
    .ftag_out (ftag_skew)
  );

  // ---------------------------------------------------------------- array
  logic signed [ACC_W-1:0]  top_in [COLS];
  logic signed [DATA_W-1:0] fd_in  [ROWS];
  logic signed [ACC_W-1:0]  arr_out [COLS];
  logic [ACC_W-1:0]         db_wr_data [COLS];

  for (genvar c = 0; c < COLS; c++) begin : g_colw
    assign top_in[c]     = ACC_W'($signed(lb_rd_data[c]));
    assign db_wr_data[c] = arr_out[c];
  end
  for (genvar k = 0; k < ROWS; k++) begin : g_roww
    assign fd_in[k] = $signed(fd_skew[k]);
  end

  pe_array #(.ROWS(ROWS), .COLS(COLS), .MAXP(MAXP), .DATA_W(DATA_W), .ACC_W(ACC_W)) u_arr (
    .clk, .rst_n,
    .col_load (lb_rd_valid),
    .col_part (col_part),
    .col_en   (col_en),
    .top_in   (top_in),
    .fd_in    (fd_in),
    .fv_in    (fv_skew),
    .ftag_in  (ftag_skew),
    .out      (arr_out),
    .out_valid(out_valid)
  );

  drain_buffer #(.COLS(COLS), .DEPTH(DB_DEPTH), .ACC_W(ACC_W)) u_db (
    .clk, .rst_n,
    .start      (db_start),
    .start_base (db_start_base),
    .wr_en      (out_valid),
    .wr_data    (db_wr_data),
    .rd_addr    (db_rd_addr),
    .rd_data    (db_rd_data)
  );

endmodule
