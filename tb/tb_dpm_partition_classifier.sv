// tb_dpm_partition_classifier: compares the basic partitions P0..P7 with the
// reference classification for random sources and destination sets, and
// checks the edge and corner cases (a top-edge source has no partitions
// above it; a top-right corner source keeps only P3, P4 and P5).
module tb_dpm_partition_classifier;
  import dpm_pkg::*;
  import dpm_ref_pkg::*;

  node_id_t   src;
  node_mask_t dmask;
  node_mask_t pm [8];
  int checks = 0, failures = 0;

  dpm_partition_classifier dut (.src(src), .dst_mask(dmask), .part_mask(pm));

  task automatic compare();
    node_mask_t exp [8];
    for (int p = 0; p < 8; p++) exp[p] = '0;
    for (int i = 0; i < NN; i++)
      if (dmask[i] && rpart(int'(src), i) >= 0) exp[rpart(int'(src), i)][i] = 1'b1;
    for (int p = 0; p < 8; p++) begin
      checks++;
      if (pm[p] !== exp[p]) begin
        failures++;
        $display("FAIL src=%0d P%0d got %h exp %h", src, p, pm[p], exp[p]);
      end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // every source with the full destination set
    for (int s = 0; s < NN; s++) begin
      src = node_id_t'(s); dmask = '1; #1; compare();
    end
    // random sets
    for (int t = 0; t < 300; t++) begin
      src = node_id_t'($urandom_range(NN - 1));
      dmask = {$urandom, $urandom};
      #1; compare();
    end
    // top edge (x=3,y=7): P0, P1, P2 empty; top-right corner (7,7): only P3,P4,P5
    src = xy_lab(3'd3, 3'd7); dmask = '1; #1;
    checks++; if ((pm[0] | pm[1] | pm[2]) != '0) failures++;
    checks++; if (pm[3] == '0 || pm[7] == '0) failures++;
    src = xy_lab(3'd7, 3'd7); dmask = '1; #1;
    checks++; if ((pm[0] | pm[1] | pm[2] | pm[6] | pm[7]) != '0) failures++;
    checks++; if (pm[3] == '0 || pm[4] == '0 || pm[5] == '0) failures++;
    // the source's own bit lands nowhere
    checks++; begin
      node_mask_t all = '0;
      for (int p = 0; p < 8; p++) all |= pm[p];
      if (all[src] || $countones(all) != NN - 1) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
