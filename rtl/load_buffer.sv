// load_buffer: filter-weight ("reused data") buffer, one bank per PE column.
//
// Each bank is DEPTH words of DATA_W bits. The host writes one row of the
// buffer per cycle (one word per column, wr_mask selects the columns). Every
// column has its own read address, so each partition reads the weights of its
// own columns while the other partitions compute. Reads are synchronous:
// rd_data and rd_valid appear one cycle after rd_en. A partition's region of
// the buffer is its own set of columns, as in the partitioned layout of the
// load buffer; the depth of 256 words (two full weight tiles) is this design's
// choice, the capacity being unspecified.
module load_buffer #(
  parameter int unsigned COLS   = 128,
  parameter int unsigned DEPTH  = 256,
  parameter int unsigned DATA_W = 8,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  logic [AW-1:0]     wr_addr,
  input  logic [COLS-1:0]   wr_mask,
  input  logic [DATA_W-1:0] wr_data [COLS],
  input  logic [COLS-1:0]   rd_en,
  input  logic [AW-1:0]     rd_addr [COLS],
  output logic [DATA_W-1:0] rd_data [COLS],
  output logic [COLS-1:0]   rd_valid
);

  for (genvar c = 0; c < COLS; c++) begin : g_bank
    logic [DATA_W-1:0] mem [DEPTH];

    always_ff @(posedge clk) begin
      if (wr_en && wr_mask[c]) mem[wr_addr] <= wr_data[c];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        rd_data[c]  <= '0;
        rd_valid[c] <= 1'b0;
      end else begin
        rd_valid[c] <= rd_en[c];
        if (rd_en[c]) rd_data[c] <= mem[rd_addr[c]];
      end
    end
  end

endmodule
