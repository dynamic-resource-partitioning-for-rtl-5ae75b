// partition_table: the current vertical partitions of the array.
//
// Entry p holds the first column, the width and a valid bit of partition p;
// partitions always span every PE row. The table answers three requests:
//
//   calc_req  (Partition_Calculation) with n available layers, 1 <= n <= MAXP:
//             partitions 0..n-1 get floor(COLS/n) columns each, partition p
//             starting at column p*floor(COLS/n); columns left over by the floor
//             belong to no partition. Accepted only when no partition is busy.
//   merge_req with index i: partition i absorbs the partition that starts right
//             after its last column. Accepted only when both exist and neither
//             is busy; the absorbed entry becomes invalid.
//   reset:    one partition spanning the whole array (the first layer of the
//             first network runs on all PEs).
//
// A rejected request gives a one-cycle cfg_err, an accepted one a one-cycle
// cfg_ack, both the cycle after the request; the new table is visible from that
// cycle on. calc_req wins when both requests arrive together. col_part and
// col_en map every column to its partition, combinationally from the table.
// The equal split follows the published partition-size formula; the accept
// rules and the form of the merge request are this design's own.
module partition_table #(
  parameter int unsigned COLS = 128,
  parameter int unsigned MAXP = 8,
  localparam int unsigned PID_W = (MAXP > 1) ? $clog2(MAXP) : 1,
  localparam int unsigned CW    = $clog2(COLS + 1),
  localparam int unsigned NW    = $clog2(MAXP + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             calc_req,
  input  logic [NW-1:0]    calc_n,
  input  logic             merge_req,
  input  logic [PID_W-1:0] merge_idx,
  input  logic [MAXP-1:0]  busy,
  output logic             cfg_ack,
  output logic             cfg_err,
  output logic [CW-1:0]    part_base  [MAXP],
  output logic [CW-1:0]    part_width [MAXP],
  output logic [MAXP-1:0]  part_valid,
  output logic [PID_W-1:0] col_part   [COLS],
  output logic [COLS-1:0]  col_en
);

  // Partition_Calculation: width of each of n equal partitions.
  logic [CW-1:0] calc_w;
  logic          calc_ok;
  always_comb begin
    calc_ok = (calc_n != '0) && (int'(calc_n) <= int'(MAXP)) && (busy == '0);
    calc_w  = (calc_n != '0) ? CW'(COLS / int'(calc_n)) : '0;
  end

  // Merge: find the valid partition that starts where partition merge_idx ends.
  logic [PID_W-1:0] nb_idx;
  logic             nb_found;
  logic [CW:0]      mi_end;
  logic             merge_ok;
  always_comb begin
    mi_end   = {1'b0, part_base[merge_idx]} + {1'b0, part_width[merge_idx]};
    nb_found = 1'b0;
    nb_idx   = '0;
    for (int p = 0; p < int'(MAXP); p++) begin
      if (part_valid[p] && ({1'b0, part_base[p]} == mi_end) && (PID_W'(p) != merge_idx)) begin
        nb_found = 1'b1;
        nb_idx   = PID_W'(p);
      end
    end
    merge_ok = (int'(merge_idx) < int'(MAXP)) && part_valid[merge_idx] && nb_found &&
               !busy[merge_idx] && !busy[nb_idx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < int'(MAXP); p++) begin
        part_base[p]  <= '0;
        part_width[p] <= (p == 0) ? CW'(COLS) : '0;
        part_valid[p] <= (p == 0);
      end
      cfg_ack <= 1'b0;
      cfg_err <= 1'b0;
    end else begin
      cfg_ack <= 1'b0;
      cfg_err <= 1'b0;
      if (calc_req) begin
        if (calc_ok) begin
          for (int p = 0; p < int'(MAXP); p++) begin
            if (p < int'(calc_n)) begin
              part_base[p]  <= CW'(p * int'(calc_w));
              part_width[p] <= calc_w;
              part_valid[p] <= 1'b1;
            end else begin
              part_base[p]  <= '0;
              part_width[p] <= '0;
              part_valid[p] <= 1'b0;
            end
          end
          cfg_ack <= 1'b1;
        end else begin
          cfg_err <= 1'b1;
        end
      end else if (merge_req) begin
        if (merge_ok) begin
          part_width[merge_idx] <= part_width[merge_idx] + part_width[nb_idx];
          part_valid[nb_idx]    <= 1'b0;
          part_width[nb_idx]    <= '0;
          part_base[nb_idx]     <= '0;
          cfg_ack <= 1'b1;
        end else begin
          cfg_err <= 1'b1;
        end
      end
    end
  end

  // Column-to-partition map.
  always_comb begin
    for (int c = 0; c < int'(COLS); c++) begin
      col_part[c] = '0;
      col_en[c]   = 1'b0;
      for (int p = 0; p < int'(MAXP); p++) begin
        if (part_valid[p] && (c >= int'(part_base[p])) &&
            (c < int'(part_base[p]) + int'(part_width[p]))) begin
          col_part[c] = PID_W'(p);
          col_en[c]   = 1'b1;
        end
      end
    end
  end

endmodule
