// dpm_noc: MESH_N x MESH_N mesh network-on-chip with Dynamic Partition
// Merging multicast (8x8 by default, as in the evaluated network).
//
// Every node, named by its snake label, has a dpm_router and a dpm_ni. The
// routers are joined to their north/east/south/west neighbours by flit links
// and credit returns; each network interface connects to the local router
// port. The cores are outside: each node offers a send-request port (unicast
// to req_dst, or multicast to the req_mask bit string) and a delivery port.
// A multicast request is partitioned by the node's DPM engine, each partition
// travels to its representative node, and from there it continues as dual-path
// packets or multiple unicasts; every destination core sees the packet once.
//
// Interface arrays are indexed by node label. All handshakes are valid/ready
// and sampled at the rising clock edge; rst_n is an active-low asynchronous
// reset.
module dpm_noc
  import dpm_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     req_valid   [NODES],
  output logic                     req_ready   [NODES],
  input  logic                     req_mcast   [NODES],
  input  node_id_t                 req_dst     [NODES],
  input  node_mask_t               req_mask    [NODES],
  input  logic [PKT_PAYLOAD_W-1:0] req_payload [NODES],
  output logic                     dlv_valid   [NODES],
  input  logic                     dlv_ready   [NODES],
  output node_id_t                 dlv_src     [NODES],
  output logic                     dlv_mcast   [NODES],
  output logic [PKT_PAYLOAD_W-1:0] dlv_payload [NODES]
);

  link_t   r_in   [NODES][NUM_PORTS];
  link_t   r_out  [NODES][NUM_PORTS];
  credit_t r_cin  [NODES][NUM_PORTS];    // credits a router receives from downstream
  credit_t r_cout [NODES][NUM_PORTS];    // credits a router returns upstream

  for (genvar l = 0; l < NODES; l++) begin : g_node
    localparam int X = int'(lab_x(node_id_t'(l)));
    localparam int Y = int'(lab_y(node_id_t'(l)));
    localparam int LN = (Y < MESH_N - 1) ? int'(xy_lab(CRD_W'(X), CRD_W'(Y + 1))) : 0;
    localparam int LE = (X < MESH_N - 1) ? int'(xy_lab(CRD_W'(X + 1), CRD_W'(Y))) : 0;
    localparam int LS = (Y > 0)          ? int'(xy_lab(CRD_W'(X), CRD_W'(Y - 1))) : 0;
    localparam int LW = (X > 0)          ? int'(xy_lab(CRD_W'(X - 1), CRD_W'(Y))) : 0;

    dpm_router u_router (
      .clk, .rst_n,
      .node      (node_id_t'(l)),
      .in_link   (r_in[l]),
      .in_credit (r_cout[l]),
      .out_link  (r_out[l]),
      .out_credit(r_cin[l])
    );

    dpm_ni u_ni (
      .clk, .rst_n,
      .node       (node_id_t'(l)),
      .req_valid  (req_valid[l]),
      .req_ready  (req_ready[l]),
      .req_mcast  (req_mcast[l]),
      .req_dst    (req_dst[l]),
      .req_mask   (req_mask[l]),
      .req_payload(req_payload[l]),
      .dlv_valid  (dlv_valid[l]),
      .dlv_ready  (dlv_ready[l]),
      .dlv_src    (dlv_src[l]),
      .dlv_mcast  (dlv_mcast[l]),
      .dlv_payload(dlv_payload[l]),
      .to_router         (r_in[l][PORT_L]),
      .to_router_credit  (r_cout[l][PORT_L]),
      .from_router       (r_out[l][PORT_L]),
      .from_router_credit(r_cin[l][PORT_L])
    );

    // mesh links: a flit leaving my north port arrives at the neighbour's south port
    if (Y < MESH_N - 1) begin : g_n
      assign r_in[l][PORT_N] = r_out[LN][PORT_S];
      assign r_cin[l][PORT_N] = r_cout[LN][PORT_S];
    end else begin : g_n_edge
      assign r_in[l][PORT_N] = '0;
      assign r_cin[l][PORT_N] = '0;
    end
    if (X < MESH_N - 1) begin : g_e
      assign r_in[l][PORT_E] = r_out[LE][PORT_W];
      assign r_cin[l][PORT_E] = r_cout[LE][PORT_W];
    end else begin : g_e_edge
      assign r_in[l][PORT_E] = '0;
      assign r_cin[l][PORT_E] = '0;
    end
    if (Y > 0) begin : g_s
      assign r_in[l][PORT_S] = r_out[LS][PORT_N];
      assign r_cin[l][PORT_S] = r_cout[LS][PORT_N];
    end else begin : g_s_edge
      assign r_in[l][PORT_S] = '0;
      assign r_cin[l][PORT_S] = '0;
    end
    if (X > 0) begin : g_w
      assign r_in[l][PORT_W] = r_out[LW][PORT_E];
      assign r_cin[l][PORT_W] = r_cout[LW][PORT_E];
    end else begin : g_w_edge
      assign r_in[l][PORT_W] = '0;
      assign r_cin[l][PORT_W] = '0;
    end
  end

endmodule
