// partition_ctrl: partitioned weight-stationary sequencer of one partition.
//
// A job (see mt_sa_pkg::job_t) runs the three steps of the dataflow on the
// partition's columns:
//
//   step 1, PS_LOAD : ROWS cycles with lb_rd_en = 1. The load-buffer address
//                     counts down from lb_base+ROWS-1 to lb_base, because the
//                     first weight pushed into a column ends in its bottom row.
//   step 2, PS_FEED : feed_req = 1 with feed_addr = fb_base + (vectors issued).
//                     Each cycle with feed_gnt issues one vector; the feed rows
//                     are shared by all partitions, so a round-robin arbiter
//                     outside grants one partition per cycle.
//   step 3, PS_DRAIN: waits until the partition's rightmost column has given
//                     n_vec valid results (last_col_valid), which is the last
//                     result of the last vector; results are counted from the
//                     first one, also while still feeding.
//
// start is taken only in PS_IDLE; busy is high from the cycle after start until
// done, a one-cycle pulse in the cycle the last result is seen. A job with
// n_vec = 0 only loads. The handshakes and the bottom-row-first load order are
// this design's choices; the step order is that of the published loop nest.
module partition_ctrl
  import mt_sa_pkg::*;
#(
  parameter int unsigned ROWS  = 128,
  parameter int unsigned LB_AW = 8,
  parameter int unsigned FB_AW = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  job_t             job,
  input  logic             feed_gnt,
  input  logic             last_col_valid,
  output logic             busy,
  output logic             done,
  output part_state_t      state,
  output logic             lb_rd_en,
  output logic [LB_AW-1:0] lb_rd_addr,
  output logic             feed_req,
  output logic [FB_AW-1:0] feed_addr
);

  localparam int unsigned CNT_W = (ROWS > 1) ? $clog2(ROWS) : 1;

  job_t              jr;
  logic [CNT_W-1:0]  lcnt;
  logic [ADDR_W-1:0] issued;
  logic [ADDR_W-1:0] drained;
  logic [ADDR_W-1:0] drained_nxt;

  assign busy        = (state != PS_IDLE);
  assign lb_rd_en    = (state == PS_LOAD);
  assign lb_rd_addr  = LB_AW'(jr.lb_base + ADDR_W'(ROWS - 1) - ADDR_W'(lcnt));
  assign feed_req    = (state == PS_FEED);
  assign feed_addr   = FB_AW'(jr.fb_base + issued);
  assign drained_nxt = drained + ADDR_W'(last_col_valid);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= PS_IDLE;
      jr      <= '0;
      lcnt    <= '0;
      issued  <= '0;
      drained <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        PS_IDLE: begin
          if (start) begin
            jr      <= job;
            lcnt    <= '0;
            issued  <= '0;
            drained <= '0;
            state   <= PS_LOAD;
          end
        end
        PS_LOAD: begin
          lcnt <= lcnt + 1'b1;
          if (int'(lcnt) == int'(ROWS) - 1) begin
            state <= (jr.n_vec == '0) ? PS_DRAIN : PS_FEED;
          end
        end
        PS_FEED: begin
          drained <= drained_nxt;
          if (feed_gnt) begin
            issued <= issued + 1'b1;
            if (issued + 1'b1 == jr.n_vec) state <= PS_DRAIN;
          end
        end
        PS_DRAIN: begin
          drained <= drained_nxt;
          if (drained_nxt >= jr.n_vec) begin
            state <= PS_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= PS_IDLE;
      endcase
    end
  end

  // A grant only ever answers a request.
  a_gnt_needs_req: assert property (@(posedge clk) disable iff (!rst_n) feed_gnt |-> feed_req);

endmodule
