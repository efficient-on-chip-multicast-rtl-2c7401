// tb_dpm_engine: runs the DPM engine on the published 6x6 worked example
// (source (2,2), ten destinations, placed at the same coordinates of the 8x8
// mesh) and on random destination sets, and compares every emitted partition
// (destinations, representative, routing, cost) and the number of clocks to
// the first partition (27 + number of merges) with the reference model.
module tb_dpm_engine;
  import dpm_pkg::*;
  import dpm_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              start = 0, busy, done, out_valid, out_ready, out_dp, out_last;
  node_id_t          src, out_rep;
  node_mask_t        dst_mask, out_mask;
  logic [COST_W-1:0] out_cost;
  int checks = 0, failures = 0;

  dpm_engine dut (.*);

  function automatic node_mask_t at(int x, int y);
    return node_mask_t'(1) << rlab(x, y);
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // run one set; returns the emitted partitions as a list of masks
  task automatic run(input int s, input node_mask_t m, output node_mask_t got[$],
                     output node_id_t reps[$], output bit dps[$]);
    logic [23:0] fin;
    node_mask_t exp[$];
    int lat, nsel, ec, er; bit ed;
    fin = rdpm(s, m);
    for (int k = 0; k < 24; k++) if (fin[k]) exp.push_back(rcand(s, m, k));
    nsel = 0;
    for (int k = 8; k < 24; k++) if (fin[k]) nsel++;
    got.delete(); reps.delete(); dps.delete();
    @(negedge clk);
    src = node_id_t'(s); dst_mask = m; start = 1;
    @(negedge clk); start = 0;
    lat = 1;
    while (!out_valid && !done) begin @(negedge clk); lat++; end
    if (exp.size() > 0) check(lat == 27 + nsel, $sformatf("latency %0d exp %0d", lat, 27 + nsel));
    while (busy) begin
      if (out_valid && out_ready) begin
        rcost(s, out_mask, ec, er, ed);
        check(int'(out_rep) == er && out_dp == ed && int'(out_cost) == ec,
              $sformatf("partition rep %0d/%0d dp %0d/%0d cost %0d/%0d", out_rep, er, out_dp, ed, out_cost, ec));
        got.push_back(out_mask); reps.push_back(out_rep); dps.push_back(out_dp);
        if (out_last) check(got.size() == exp.size(), "out_last on the last partition");
      end
      @(negedge clk);
      out_ready = ($urandom_range(3) != 0);
    end
    check(got.size() == exp.size(), $sformatf("count %0d exp %0d", got.size(), exp.size()));
    for (int i = 0; i < got.size() && i < exp.size(); i++)
      check(got[i] == exp[i], $sformatf("partition %0d mask", i));
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    node_mask_t got[$], m;
    node_id_t reps[$];
    bit dps[$];
    int s;
    out_ready = 1; src = '0; dst_mask = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // worked example: D = {(0,5),(1,4),(2,5),(3,5),(5,5),(5,4),(0,1),(2,1),(2,0),(4,1)}
    m = at(0,5) | at(1,4) | at(2,5) | at(3,5) | at(5,5) | at(5,4) | at(0,1) | at(2,1) | at(2,0) | at(4,1);
    out_ready = 1;
    run(rlab(2,2), m, got, reps, dps);
    // P2 alone with R=(1,4) and unicast; P0P1 merged with R=(2,5) and dual path;
    // P4, P5 and P6 merged (Algorithm 1 ranks P4P5P6 above P4P5) with R=(2,1)
    check(got.size() == 3, "example: three partitions");
    if (got.size() == 3) begin
      check(got[0] == (at(0,5) | at(1,4)) && reps[0] == rlab(1,4) && !dps[0], "example P2");
      check(got[1] == (at(2,5) | at(3,5) | at(5,5) | at(5,4)) && reps[1] == rlab(2,5) && dps[1], "example P0P1");
      check(got[2] == (at(0,1) | at(2,1) | at(2,0) | at(4,1)) && reps[2] == rlab(2,1), "example P4P5P6");
    end
    // empty set finishes without output
    run(5, '0, got, reps, dps);
    check(got.size() == 0, "empty set");
    // random sets, 2 to 16 destinations, every kind of source
    for (int t = 0; t < 150; t++) begin
      s = $urandom_range(NN - 1);
      m = '0;
      for (int d = 0; d < 2 + int'($urandom_range(14)); d++) m[$urandom_range(NN - 1)] = 1'b1;
      run(s, m, got, reps, dps);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
