// tb_dpm_cost_unit: checks representative node, routing choice and cost of
// candidate partitions. First the partitions of the published 6x6 example
// (source (2,2)), placed at the same coordinates in the 8x8 mesh where label
// order within the rows is the same; then random partitions against the
// reference model, whose dual-path cost walks the label routing hop by hop.
module tb_dpm_cost_unit;
  import dpm_pkg::*;
  import dpm_ref_pkg::*;

  node_id_t          src, rep;
  node_mask_t        mask;
  logic              empty, use_dp;
  logic [COST_W-1:0] ct, cp, cost;
  int checks = 0, failures = 0;

  dpm_cost_unit dut (.src(src), .mask(mask), .empty(empty), .rep(rep),
                     .ct(ct), .cp(cp), .cost(cost), .use_dp(use_dp));

  function automatic node_mask_t at(int x, int y);
    return node_mask_t'(1) << rlab(x, y);
  endfunction

  task automatic expect_cost(string what, int ecost, int erep, bit edp);
    checks++;
    if (int'(cost) != ecost || int'(rep) != erep || use_dp != edp || empty != (mask == '0)) begin
      failures++;
      $display("FAIL %s: cost %0d/%0d rep %0d/%0d dp %0d/%0d", what, cost, ecost, rep, erep, use_dp, edp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ec, er; bit ed;
    src = node_id_t'(rlab(2, 2));
    // P0P1 = {(3,5),(5,5),(5,4),(2,5)}: R=(2,5), dual path, 3 + 4 hops
    mask = at(3,5) | at(5,5) | at(5,4) | at(2,5); #1;
    expect_cost("P0P1", 7, rlab(2,5), 1'b1);
    // P4P5 = {(0,1),(2,1),(2,0)}: R=(2,1), Ct = Cp = 3 -> multiple unicast, 1 + 3
    mask = at(0,1) | at(2,1) | at(2,0); #1;
    expect_cost("P4P5", 4, rlab(2,1), 1'b0);
    checks++; if (ct != 3 || cp != 3) failures++;
    // P2 = {(0,5),(1,4)}: R=(1,4), 3 + 2
    mask = at(0,5) | at(1,4); #1;
    expect_cost("P2", 5, rlab(1,4), 1'b0);
    // single destination: plain distance
    mask = at(4,1); #1;
    expect_cost("P6", 3, rlab(4,1), 1'b0);
    // empty
    mask = '0; #1;
    checks++; if (!empty || cost != 0) failures++;
    // random partitions
    for (int t = 0; t < 400; t++) begin
      src = node_id_t'($urandom_range(NN - 1));
      mask = {$urandom, $urandom};
      if (t % 3 == 0) mask = mask & {$urandom, $urandom} & {$urandom, $urandom};
      if (t % 5 == 0) mask = node_mask_t'(1) << $urandom_range(NN - 1) | node_mask_t'(1) << $urandom_range(NN - 1);
      #1;
      rcost(int'(src), mask, ec, er, ed);
      expect_cost("random", ec, er, ed);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
