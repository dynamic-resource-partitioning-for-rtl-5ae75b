// tb_task_assign: self-checking test of layer-to-partition assignment.
//
// Random sets of layers (random shapes, some slots empty, some equal MAC
// counts) and random partition tables (random widths, some partitions busy or
// missing) are applied. The reference sorts layers by Opr = M*N*C*R*S*H*W
// (descending, lower slot first on ties) and free partitions by width
// (descending, lower index first) with a plain selection sort and pairs them
// rank by rank; Opr itself is also checked.
module tb_task_assign;
  import mt_sa_pkg::*;
  localparam int MAXP = 8, CW = 8, PID_W = 3;
  logic [MAXP-1:0]  layer_valid;
  layer_shape_t     shape      [MAXP];
  logic [CW-1:0]    part_width [MAXP];
  logic [MAXP-1:0]  part_free;
  logic [OPR_W-1:0] opr        [MAXP];
  logic [MAXP-1:0]  asg_valid;
  logic [PID_W-1:0] asg_part   [MAXP];
  int checks = 0, failures = 0;
  int n_multi = 0;
  int tmp;

  task_assign #(.MAXP(MAXP), .CW(CW)) dut (.*);

  initial begin
    #100000;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int trial = 0; trial < 300; trial++) begin
      logic [OPR_W-1:0] ropr [MAXP];
      int lorder [$], porder [$];
      int exp_part [MAXP];
      lorder.delete();
      porder.delete();
      for (int i = 0; i < MAXP; i++) begin
        layer_valid[i] = ($urandom % 4 != 0);
        shape[i].m = SHAPE_W'($urandom % 600 + 1);
        shape[i].n = SHAPE_W'($urandom % 4 + 1);
        shape[i].c = SHAPE_W'($urandom % 600 + 1);
        shape[i].r = SHAPE_W'($urandom % 7 + 1);
        shape[i].s = SHAPE_W'($urandom % 7 + 1);
        shape[i].h = SHAPE_W'($urandom % 200 + 1);
        shape[i].w = SHAPE_W'($urandom % 200 + 1);
        if (i > 0 && $urandom % 5 == 0) shape[i] = shape[i-1];   // ties
        part_width[i] = CW'(16 * ($urandom % 4 + 1));
        part_free[i]  = ($urandom % 3 != 0);
        ropr[i] = OPR_W'(shape[i].m) * OPR_W'(shape[i].n) * OPR_W'(shape[i].c) * OPR_W'(shape[i].r) *
                  OPR_W'(shape[i].s) * OPR_W'(shape[i].h) * OPR_W'(shape[i].w);
        exp_part[i] = -1;
      end
      // selection sort of layers and partitions
      for (int i = 0; i < MAXP; i++) if (layer_valid[i]) lorder.push_back(i);
      for (int a = 0; a < lorder.size(); a++)
        for (int b = a + 1; b < lorder.size(); b++)
          if (ropr[lorder[b]] > ropr[lorder[a]]) begin tmp = lorder[a]; lorder[a] = lorder[b]; lorder[b] = tmp; end
          else if (ropr[lorder[b]] == ropr[lorder[a]] && lorder[b] < lorder[a]) begin tmp = lorder[a]; lorder[a] = lorder[b]; lorder[b] = tmp; end
      for (int i = 0; i < MAXP; i++) if (part_free[i]) porder.push_back(i);
      for (int a = 0; a < porder.size(); a++)
        for (int b = a + 1; b < porder.size(); b++)
          if (part_width[porder[b]] > part_width[porder[a]] ||
              (part_width[porder[b]] == part_width[porder[a]] && porder[b] < porder[a])) begin
            tmp = porder[a]; porder[a] = porder[b]; porder[b] = tmp;
          end
      for (int r = 0; r < lorder.size() && r < porder.size(); r++) exp_part[lorder[r]] = porder[r];
      if (lorder.size() > 1 && porder.size() > 1) n_multi++;
      #10;
      for (int i = 0; i < MAXP; i++) begin
        checks++;
        if (opr[i] !== ropr[i]) begin failures++; $display("FAIL opr %0d", i); end
        checks++;
        if ((exp_part[i] < 0 && asg_valid[i]) || (exp_part[i] >= 0 && (!asg_valid[i] || asg_part[i] != exp_part[i]))) begin
          failures++; $display("FAIL trial %0d layer %0d: valid=%b part=%0d exp %0d", trial, i, asg_valid[i], asg_part[i], exp_part[i]);
        end
      end
    end
    checks++;
    if (n_multi == 0) begin failures++; $display("FAIL no multi-layer trial"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
