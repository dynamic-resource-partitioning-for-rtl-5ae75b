// task_assign: maps available layers onto free partitions (Task_Assignment).
//
// For each filled layer slot i the block forms the MAC count
// Opr(i) = M*N*C*R*S*H*W at full width. Layers are ranked from the highest
// Opr down (equal Opr: lower slot first); free partitions are ranked from the
// widest down (equal width: lower index first). The layer of rank r is given
// the partition of rank r, so heavier layers land on wider partitions; layers
// ranked beyond the number of free partitions get none (asg_valid = 0).
// The block is purely combinational. Ranking by counting, for every entry, how
// many others beat it avoids an explicit sorting network; this form, the tie
// rules and the 16-bit shape fields are this design's own choices.
module task_assign
  import mt_sa_pkg::*;
#(
  parameter int unsigned MAXP = 8,
  parameter int unsigned CW   = 8,
  localparam int unsigned PID_W = (MAXP > 1) ? $clog2(MAXP) : 1,
  localparam int unsigned RW    = $clog2(MAXP + 1)
) (
  input  logic [MAXP-1:0]  layer_valid,
  input  layer_shape_t     shape      [MAXP],
  input  logic [CW-1:0]    part_width [MAXP],
  input  logic [MAXP-1:0]  part_free,
  output logic [OPR_W-1:0] opr        [MAXP],
  output logic [MAXP-1:0]  asg_valid,
  output logic [PID_W-1:0] asg_part   [MAXP]
);

  logic [RW-1:0] lrank [MAXP];
  logic [RW-1:0] prank [MAXP];

  always_comb begin
    for (int i = 0; i < int'(MAXP); i++) begin
      opr[i] = OPR_W'(shape[i].m) * OPR_W'(shape[i].n) * OPR_W'(shape[i].c) *
               OPR_W'(shape[i].r) * OPR_W'(shape[i].s) * OPR_W'(shape[i].h) *
               OPR_W'(shape[i].w);
    end
    for (int i = 0; i < int'(MAXP); i++) begin
      lrank[i] = '0;
      prank[i] = '0;
      for (int j = 0; j < int'(MAXP); j++) begin
        if (j != i && layer_valid[j] &&
            ((opr[j] > opr[i]) || ((opr[j] == opr[i]) && (j < i))))
          lrank[i] = lrank[i] + 1'b1;
        if (j != i && part_free[j] &&
            ((part_width[j] > part_width[i]) || ((part_width[j] == part_width[i]) && (j < i))))
          prank[i] = prank[i] + 1'b1;
      end
    end
    for (int i = 0; i < int'(MAXP); i++) begin
      asg_valid[i] = 1'b0;
      asg_part[i]  = '0;
      if (layer_valid[i]) begin
        for (int p = 0; p < int'(MAXP); p++) begin
          if (part_free[p] && (prank[p] == lrank[i])) begin
            asg_valid[i] = 1'b1;
            asg_part[i]  = PID_W'(p);
          end
        end
      end
    end
  end

endmodule
