// drain_buffer: output feature map ("generated data") buffer.
//
// One bank per PE column, DEPTH results of ACC_W bits each. Every column has
// its own write pointer: start[c] loads it with start_base[c] (done when a job
// begins on the column's partition), and each valid result (wr_en[c]) is
// written at the pointer, which then advances. Because each column keeps its
// own pointer, results that leave the array one cycle apart from column to
// column need no de-skewing. The host reads one address across all columns;
// rd_data is registered (one cycle latency). A start and a write to the same
// column in one cycle: the start wins and the result is dropped, which the
// sequencer never causes. Depth 1024 is this design's choice.
module drain_buffer #(
  parameter int unsigned COLS  = 128,
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned ACC_W = 32,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [COLS-1:0]  start,
  input  logic [AW-1:0]    start_base [COLS],
  input  logic [COLS-1:0]  wr_en,
  input  logic [ACC_W-1:0] wr_data    [COLS],
  input  logic [AW-1:0]    rd_addr,
  output logic [ACC_W-1:0] rd_data    [COLS]
);

  for (genvar c = 0; c < COLS; c++) begin : g_bank
    logic [ACC_W-1:0] mem [DEPTH];
    logic [AW-1:0]    ptr;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        ptr <= '0;
      end else if (start[c]) begin
        ptr <= start_base[c];
      end else if (wr_en[c]) begin
        ptr <= ptr + 1'b1;
      end
    end

    always_ff @(posedge clk) begin
      if (wr_en[c] && !start[c]) mem[ptr] <= wr_data[c];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) rd_data[c] <= '0;
      else        rd_data[c] <= mem[rd_addr];
    end
  end

endmodule
