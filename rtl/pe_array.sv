// pe_array: ROWS x COLS weight-stationary systolic array with vertical partitions.
//
// Feed words enter each row at the left edge and move one PE to the right per
// cycle; weights and partial sums move one PE down per cycle. Row k must receive
// a vector's element k exactly k cycles after row 0 (the feed buffer does this
// skewing), so one vector travels as a diagonal wavefront and the partial sum of
// column c leaves the bottom row ROWS + c cycles after row 0 saw the vector.
//
// Partitioning: every column c belongs to partition col_part[c] (when col_en[c]
// is set). A feed word carries a valid bit and the id of the partition it belongs
// to, registered alongside the data in every PE. A PE's Mul_En is
// valid & (tag == col_part[c]), so a vector is multiplied only inside the
// columns of its own partition and crosses the other partitions unchanged. Only
// columns are split, never rows, since partial sums always flow to the bottom.
//
// Loading: with col_load[c] set, column c shifts top_in[c] down its load
// registers, one row per cycle; after ROWS cycles row k holds the (ROWS-1-k)-th
// word pushed. Outside load mode the top row sees zero, so each wavefront starts
// its sum at zero. out_valid[c] marks a bottom-row result that was computed with
// Mul_En = 1, i.e. a finished dot product of column c's partition.
// The tag mechanism and the out_valid flag are this design's own way of driving
// Mul_En, which the published description leaves open.
module pe_array #(
  parameter int unsigned ROWS   = 128,
  parameter int unsigned COLS   = 128,
  parameter int unsigned MAXP   = 8,
  parameter int unsigned DATA_W = 8,
  parameter int unsigned ACC_W  = 32,
  localparam int unsigned PID_W = (MAXP > 1) ? $clog2(MAXP) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [COLS-1:0]          col_load,
  input  logic [PID_W-1:0]         col_part [COLS],
  input  logic [COLS-1:0]          col_en,
  input  logic signed [ACC_W-1:0]  top_in   [COLS],
  input  logic signed [DATA_W-1:0] fd_in    [ROWS],
  input  logic [ROWS-1:0]          fv_in,
  input  logic [PID_W-1:0]         ftag_in  [ROWS],
  output logic signed [ACC_W-1:0]  out      [COLS],
  output logic [COLS-1:0]          out_valid
);

  // Horizontal nets: index c is the input of PE column c, index COLS the right edge.
  logic signed [DATA_W-1:0] fd  [ROWS][COLS+1];
  logic                     fv  [ROWS][COLS+1];
  logic [PID_W-1:0]         tag [ROWS][COLS+1];
  // Vertical nets: index k is the input of PE row k, index ROWS the bottom edge.
  logic signed [ACC_W-1:0]  vd  [ROWS+1][COLS];
  logic                     men [ROWS][COLS];

  for (genvar k = 0; k < ROWS; k++) begin : g_row
    assign fd[k][0]  = fd_in[k];
    assign fv[k][0]  = fv_in[k];
    assign tag[k][0] = ftag_in[k];
    for (genvar c = 0; c < COLS; c++) begin : g_col
      assign men[k][c] = fv[k][c] && col_en[c] && (tag[k][c] == col_part[c]);

      mt_pe #(.DATA_W(DATA_W), .ACC_W(ACC_W)) u_pe (
        .clk   (clk),
        .rst_n (rst_n),
        .load  (col_load[c]),
        .mul_en(men[k][c]),
        .fd_i  (fd[k][c]),
        .rd_i  (vd[k][c]),
        .fd_o  (fd[k][c+1]),
        .gd_o  (vd[k+1][c])
      );

      // Valid bit and partition tag travel with the feed word.
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          fv[k][c+1]  <= 1'b0;
          tag[k][c+1] <= '0;
        end else begin
          fv[k][c+1]  <= fv[k][c];
          tag[k][c+1] <= tag[k][c];
        end
      end
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_edge
    assign vd[0][c] = col_load[c] ? top_in[c] : '0;
    assign out[c]   = vd[ROWS][c];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) out_valid[c] <= 1'b0;
      else        out_valid[c] <= men[ROWS-1][c] && !col_load[c];
    end
  end

endmodule
