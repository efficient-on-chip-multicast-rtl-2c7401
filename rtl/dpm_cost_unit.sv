// dpm_cost_unit: routing cost of one candidate destination partition.
//
// For a partition V and source S it finds
//   R   the representative node: the destination of V nearest to S (Manhattan
//       distance; on equal distance the lower label wins - this design's choice),
//   Ct  multiple-unicast cost from R: sum over d in V of dist(d, R),
//   Cp  dual-path cost from R: the destinations above L(R) are visited in
//       ascending label order and those below in descending order, each path
//       starting at R; Cp is the sum of the hops between consecutive visits.
//       Label routing in a 2D mesh is minimal, so each leg is a Manhattan
//       distance. With last[j]/next[j] = nearest set label below/above j,
//       Cp = sum_{j>L(R)} dist(j,last[j]) + sum_{j<L(R)} dist(j,next[j]).
//   cost = dist(S,R) + min(Ct, Cp); use_dp = (Cp < Ct), so a tie picks multiple
//       unicast, which the algorithm prefers because it needs no path split.
// The DPM definitions give C = min(Ct, Cp) from R. The S->R hops are added here
// because the published worked example only gains from merging P0 and P1
// when they are counted; this is the design's reading of the algorithm.
//
// Purely combinational (one evaluation per clock in dpm_engine).
module dpm_cost_unit
  import dpm_pkg::*;
(
  input  node_id_t            src,
  input  node_mask_t          mask,
  output logic                empty,
  output node_id_t            rep,
  output logic [COST_W-1:0]   ct,
  output logic [COST_W-1:0]   cp,
  output logic [COST_W-1:0]   cost,
  output logic                use_dp
);

  logic [CRD_W:0] best_d;
  logic [COST_W-1:0] dist_sr;
  node_id_t last_lab [NODES];
  node_id_t next_lab [NODES];

  // representative node: nearest destination to the source
  always_comb begin
    rep    = '0;
    best_d = '1;
    for (int i = 0; i < NODES; i++) begin
      if (mask[i] && hops(node_id_t'(i), src) < best_d) begin
        best_d = hops(node_id_t'(i), src);
        rep    = node_id_t'(i);
      end
    end
    dist_sr = COST_W'(best_d);
  end

  // nearest set label below / above every label
  always_comb begin
    node_id_t run;
    run = '0;
    for (int j = 0; j < NODES; j++) begin
      last_lab[j] = run;
      if (mask[j]) run = node_id_t'(j);
    end
    run = '0;
    for (int j = NODES - 1; j >= 0; j--) begin
      next_lab[j] = run;
      if (mask[j]) run = node_id_t'(j);
    end
  end

  always_comb begin
    ct = '0;
    cp = '0;
    for (int j = 0; j < NODES; j++) begin
      if (mask[j]) begin
        ct = ct + COST_W'(hops(node_id_t'(j), rep));
        if (node_id_t'(j) > rep)      cp = cp + COST_W'(hops(node_id_t'(j), last_lab[j]));
        else if (node_id_t'(j) < rep) cp = cp + COST_W'(hops(node_id_t'(j), next_lab[j]));
      end
    end
  end

  assign empty  = (mask == '0);
  assign use_dp = (cp < ct);
  assign cost   = empty ? '0 : dist_sr + (use_dp ? cp : ct);

endmodule
