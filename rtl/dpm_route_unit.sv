// dpm_route_unit: routing computation of one router.
//
// The network is split into two subnetworks by the snake labelling: a packet
// whose destination label is above the current label travels in the
// high-channel subnetwork (every hop goes to a higher label), otherwise in the
// low-channel subnetwork (every hop goes to a lower label). Inside a
// subnetwork the next hop is the neighbour with the largest label not above
// the destination (high) or the smallest label not below it (low) - the
// dual-path routing function - which gives a minimal path in a 2D mesh and
// never makes a turn the subnetwork forbids. Unicast packets, packets on their
// way to a representative node and dual-path packets all use this rule.
//
// Purely combinational. Ports: L=0, N=1 (y+1), E=2 (x+1), S=3 (y-1), W=4 (x-1).
// high = 1 selects the high-channel VC class (VCs 0,1), 0 the low class (2,3).
module dpm_route_unit
  import dpm_pkg::*;
(
  input  node_id_t cur,
  input  node_id_t dst,
  output port_e    port,
  output logic     high
);

  logic [CRD_W-1:0] cx, cy;
  assign cx = lab_x(cur);
  assign cy = lab_y(cur);

  always_comb begin
    logic     ok   [1:4];
    node_id_t nb   [1:4];
    node_id_t best;
    logic     found;
    ok[1] = (cy != CRD_W'(MESH_N - 1)); nb[1] = xy_lab(cx, cy + 1'b1);
    ok[2] = (cx != CRD_W'(MESH_N - 1)); nb[2] = xy_lab(cx + 1'b1, cy);
    ok[3] = (cy != '0);                 nb[3] = xy_lab(cx, cy - 1'b1);
    ok[4] = (cx != '0);                 nb[4] = xy_lab(cx - 1'b1, cy);
    high  = (dst > cur);
    port  = PORT_L;
    best  = cur;
    found = 1'b0;
    for (int p = 1; p <= 4; p++) begin
      if (ok[p]) begin
        if (high && nb[p] > cur && nb[p] <= dst && (!found || nb[p] > best)) begin
          best = nb[p]; port = port_e'(p); found = 1'b1;
        end
        if (!high && dst != cur && nb[p] < cur && nb[p] >= dst && (!found || nb[p] < best)) begin
          best = nb[p]; port = port_e'(p); found = 1'b1;
        end
      end
    end
  end

endmodule
