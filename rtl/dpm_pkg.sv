// dpm_pkg: constants, types and helper functions shared by the DPM multicast NoC.
//
// Nodes of the n x n mesh are named by their snake ("boustrophedon") label:
// L(x,y) = y*n + x on even rows and y*n + n-1-x on odd rows. This labelling
// orders the nodes along a Hamiltonian path; it defines the high-channel
// (label increasing) and low-channel (label decreasing) subnetworks and the
// order in which a dual-path packet visits its destinations. Multicast
// destination sets are bit strings with bit i standing for node label i.
//
// Flit format (header field order as in the published packet format):
//   head : type | packet U/M | routing MU/DP | src | dst | multicast bit string
//   body / tail : type | payload
// The field widths are this design's choice: 2+1+1+6+6+64 = 80 bits for an
// 8x8 mesh. Packets are 4 flits long (head, two body, tail).
package dpm_pkg;

  // ---------------------------------------------------------------- sizes
  parameter int unsigned MESH_N    = 8;                 // mesh is MESH_N x MESH_N
  parameter int unsigned NODES     = MESH_N * MESH_N;
  parameter int unsigned ID_W      = $clog2(NODES);
  parameter int unsigned CRD_W     = (MESH_N > 1) ? $clog2(MESH_N) : 1; // coordinate width
  parameter int unsigned NUM_VC    = 4;                 // 0,1 high subnet; 2,3 low subnet
  parameter int unsigned VC_W      = $clog2(NUM_VC);
  parameter int unsigned BUF_DEPTH = 4;                 // flits per VC buffer
  parameter int unsigned PKT_FLITS = 4;                 // flits per packet
  parameter int unsigned COST_W    = 12;                // hop-count arithmetic width
  parameter int unsigned NUM_PORTS = 5;

  // ---------------------------------------------------------------- ports
  typedef enum logic [2:0] {
    PORT_L = 3'd0, PORT_N = 3'd1, PORT_E = 3'd2, PORT_S = 3'd3, PORT_W = 3'd4
  } port_e;

  // ---------------------------------------------------------------- flits
  typedef enum logic [1:0] {
    FLIT_HEAD = 2'd1, FLIT_BODY = 2'd2, FLIT_TAIL = 2'd3
  } flit_type_e;

  typedef enum logic { PKT_UNICAST = 1'b0, PKT_MULTICAST = 1'b1 } pkt_kind_e;
  typedef enum logic { RT_MU = 1'b0, RT_DP = 1'b1 } route_alg_e;

  typedef logic [NODES-1:0] node_mask_t;
  typedef logic [ID_W-1:0]  node_id_t;

  typedef struct packed {
    flit_type_e ftype;
    pkt_kind_e  kind;
    route_alg_e alg;
    node_id_t   src;
    node_id_t   dst;
    node_mask_t mdst;
  } head_flit_t;

  parameter int unsigned FLIT_W    = $bits(head_flit_t);
  parameter int unsigned PAYLOAD_W = FLIT_W - 2;         // data bits of a body/tail flit
  parameter int unsigned PKT_PAYLOAD_W = PAYLOAD_W * (PKT_FLITS - 1);

  typedef struct packed {
    flit_type_e            ftype;
    logic [PAYLOAD_W-1:0]  data;
  } data_flit_t;

  typedef logic [FLIT_W-1:0] flit_t;

  // ---------------------------------------------------------------- links
  // one flit per clock on a link, tagged with the VC it is written into
  typedef struct packed {
    logic                valid;
    logic [VC_W-1:0]     vc;
    flit_t               flit;
  } link_t;

  // one credit per clock, returned to the upstream sender of VC vc
  typedef struct packed {
    logic                valid;
    logic [VC_W-1:0]     vc;
  } credit_t;

  // ---------------------------------------------------------------- labels
  function automatic logic [CRD_W-1:0] lab_x(input node_id_t l);
    logic [CRD_W-1:0] col;
    logic             odd_row;
    odd_row = ((int'(l) / MESH_N) % 2) == 1;
    col = CRD_W'(int'(l) % MESH_N);
    return odd_row ? CRD_W'(MESH_N - 1) - col : col;
  endfunction

  function automatic logic [CRD_W-1:0] lab_y(input node_id_t l);
    return CRD_W'(int'(l) / MESH_N);
  endfunction

  function automatic node_id_t xy_lab(input logic [CRD_W-1:0] x, input logic [CRD_W-1:0] y);
    return y[0] ? ID_W'(int'(y) * MESH_N + MESH_N - 1 - int'(x))
                : ID_W'(int'(y) * MESH_N + int'(x));
  endfunction

  // Manhattan distance between two labelled nodes, in hops.
  function automatic logic [CRD_W:0] hops(input node_id_t a, input node_id_t b);
    logic [CRD_W-1:0] ax, ay, bx, by, dx, dy;
    ax = lab_x(a); ay = lab_y(a); bx = lab_x(b); by = lab_y(b);
    dx = (ax > bx) ? ax - bx : bx - ax;
    dy = (ay > by) ? ay - by : by - ay;
    return {1'b0, dx} + {1'b0, dy};
  endfunction

endpackage
