// feed_buffer: input feature map ("feed data") buffer with wavefront skew.
//
// One bank per PE row, DEPTH words each; the host writes one whole vector
// (one word per row) per cycle. A read command (rd_en, rd_addr, rd_tag) asks
// for one vector. The command passes down a chain of registers, one stage per
// row, so row k reads its bank k cycles after row 0. The data of row k is then
// registered, which gives: fd_out[k], fv_out[k] and ftag_out[k] are valid
// k+1 cycles after the command. That is the staggering a weight-stationary
// array needs. Commands may be issued every cycle, and consecutive commands
// may belong to different partitions: the partition tag travels with the
// vector so that only the matching partition multiplies it.
// Each partition owns an address range of the buffer (set by the job's
// fb_base); the depth of 1024 vectors is this design's choice.
module feed_buffer #(
  parameter int unsigned ROWS   = 128,
  parameter int unsigned DEPTH  = 1024,
  parameter int unsigned DATA_W = 8,
  parameter int unsigned MAXP   = 8,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned PID_W = (MAXP > 1) ? $clog2(MAXP) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  logic [AW-1:0]     wr_addr,
  input  logic [DATA_W-1:0] wr_data  [ROWS],
  input  logic              rd_en,
  input  logic [AW-1:0]     rd_addr,
  input  logic [PID_W-1:0]  rd_tag,
  output logic [DATA_W-1:0] fd_out   [ROWS],
  output logic [ROWS-1:0]   fv_out,
  output logic [PID_W-1:0]  ftag_out [ROWS]
);

  // Command skew chain: stage k is the command seen by row k.
  logic             s_en   [ROWS];
  logic [AW-1:0]    s_addr [ROWS];
  logic [PID_W-1:0] s_tag  [ROWS];

  assign s_en[0]   = rd_en;
  assign s_addr[0] = rd_addr;
  assign s_tag[0]  = rd_tag;

  for (genvar k = 1; k < ROWS; k++) begin : g_skew
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        s_en[k]   <= 1'b0;
        s_addr[k] <= '0;
        s_tag[k]  <= '0;
      end else begin
        s_en[k]   <= s_en[k-1];
        s_addr[k] <= s_addr[k-1];
        s_tag[k]  <= s_tag[k-1];
      end
    end
  end

  for (genvar k = 0; k < ROWS; k++) begin : g_bank
    logic [DATA_W-1:0] mem [DEPTH];

    always_ff @(posedge clk) begin
      if (wr_en) mem[wr_addr] <= wr_data[k];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        fd_out[k]   <= '0;
        fv_out[k]   <= 1'b0;
        ftag_out[k] <= '0;
      end else begin
        fv_out[k]   <= s_en[k];
        ftag_out[k] <= s_tag[k];
        fd_out[k]   <= s_en[k] ? mem[s_addr[k]] : '0;
      end
    end
  end

endmodule
