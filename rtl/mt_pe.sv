// mt_pe: processing element of the partitioned weight-stationary array.
//
// The PE holds one weight in its load register (LR). Feed data (FD) arrives from
// the left and leaves to the right one cycle later. The vertical input RD and the
// output GD carry weights while loading and partial sums while calculating,
// because both use the same link between vertically adjacent PEs.
//
//   load = 1 : LR <= RD and GD <= RD (the weight moves one row down per cycle).
//   load = 0 : GD <= RD + (mul_en ? LR * FD : 0).
//
// mul_en is the control that makes multi-tenancy possible: when feed data of
// another partition passes through, the product is kept away from the adder and
// the PE only forwards FD to the right and RD downwards. The published circuit
// draws a tri-state buffer between multiplier and adder; this RTL drives a zero
// into the adder instead, which gives the same sum without a floating net.
// The load-mode polarity (1 = load) follows the dataflow description and the
// proposed-PE drawing; the 8-bit signed operands, 32-bit partial sums and the
// registered outputs are this design's choices.
module mt_pe #(
  parameter int unsigned DATA_W = 8,
  parameter int unsigned ACC_W  = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     load,
  input  logic                     mul_en,
  input  logic signed [DATA_W-1:0] fd_i,
  input  logic signed [ACC_W-1:0]  rd_i,
  output logic signed [DATA_W-1:0] fd_o,
  output logic signed [ACC_W-1:0]  gd_o
);

  logic signed [DATA_W-1:0]   lr;
  logic signed [2*DATA_W-1:0] prod;
  logic signed [ACC_W-1:0]    gated;

  always_comb begin
    prod  = lr * fd_i;
    // Mul_En gate between multiplier and adder.
    gated = mul_en ? ACC_W'(prod) : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lr   <= '0;
      fd_o <= '0;
      gd_o <= '0;
    end else begin
      fd_o <= fd_i;
      if (load) begin
        lr   <= rd_i[DATA_W-1:0];
        gd_o <= rd_i;
      end else begin
        gd_o <= rd_i + gated;
      end
    end
  end

endmodule
