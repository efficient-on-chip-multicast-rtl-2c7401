// dpm_ni: network interface of one node of the DPM multicast mesh.
//
// It sits between a core and the local port of its router and does all the
// multicast work outside the routers:
//
// Sending (core request, valid/ready):
//   * unicast: one packet, Packet=U, Dst = the destination;
//   * multicast: the destination bit string goes to the dpm_engine, and for
//     each final partition it returns one packet is sent with Packet=M,
//     Routing = MU or DP as the engine chose, Dst = the partition's
//     representative node R and the partition as the multicast bit string.
// Receiving (whole packets, one reassembly buffer per VC):
//   * every packet is delivered to the core (dlv_* handshake);
//   * a multicast packet whose bit string still holds other destinations is
//     forwarded from here. Routing=MU: one unicast packet per remaining
//     destination, lowest label first. Routing=DP: the remaining destinations
//     above this node's label go in one packet to the lowest of them, those
//     below in one packet to the highest of them; at R this splits the
//     partition into its two dual paths, at later nodes of a path only one
//     side is left, so the packet moves on to the next destination.
//   The reassembly buffer and its credits are released when both delivery and
//   forwarding are done.
// Packet assembly follows the published format (head: type, U/M, MU/DP, src,
// dst, bit string; then two body flits and a tail with the payload). Forwarding
// by re-injection at each destination, the priorities (forwarding, then the
// engine's partitions, then new unicasts) and the VC choice (class by
// destination label, alternating between the two VCs of the class) are this
// design's own choices.
//
// Timing: a packet leaves at one flit per clock when credits allow; the first
// flit of a new packet leaves one clock after the descriptor is taken.
module dpm_ni
  import dpm_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  node_id_t                 node,          // this node's snake label (tie to a constant)
  // core send request
  input  logic                     req_valid,
  output logic                     req_ready,
  input  logic                     req_mcast,
  input  node_id_t                 req_dst,
  input  node_mask_t               req_mask,
  input  logic [PKT_PAYLOAD_W-1:0] req_payload,
  // core delivery
  output logic                     dlv_valid,
  input  logic                     dlv_ready,
  output node_id_t                 dlv_src,
  output logic                     dlv_mcast,
  output logic [PKT_PAYLOAD_W-1:0] dlv_payload,
  // router local port
  output link_t                    to_router,
  input  credit_t                  to_router_credit,
  input  link_t                    from_router,
  output credit_t                  from_router_credit
);

  localparam int NV   = NUM_VC;
  localparam int HALF = NV / 2;
  localparam int CW   = $clog2(BUF_DEPTH + 1);
  localparam int FW   = $clog2(PKT_FLITS);
  node_id_t ME;
  assign ME = node;

  if (BUF_DEPTH != PKT_FLITS) begin : g_size_check
    $error("dpm_ni keeps one packet per VC: BUF_DEPTH must equal PKT_FLITS");
  end

  // packet descriptor handed to the transmitter
  typedef struct packed {
    pkt_kind_e                  kind;
    route_alg_e                 alg;
    node_id_t                   src;
    node_id_t                   dst;
    node_mask_t                 mdst;
    logic [PKT_PAYLOAD_W-1:0]   payload;
  } desc_t;

  function automatic node_id_t lowest(input node_mask_t m);
    node_id_t r;
    r = '0;
    for (int i = NODES - 1; i >= 0; i--) if (m[i]) r = node_id_t'(i);
    return r;
  endfunction

  function automatic node_id_t highest(input node_mask_t m);
    node_id_t r;
    r = '0;
    for (int i = 0; i < NODES; i++) if (m[i]) r = node_id_t'(i);
    return r;
  endfunction

  // mask of labels above / below this node
  node_mask_t above_me, below_me;
  always_comb
    for (int i = 0; i < NODES; i++) begin
      above_me[i] = (node_id_t'(i) > node);
      below_me[i] = (node_id_t'(i) < node);
    end

  // ======================================================== transmitter
  logic            tx_busy;
  desc_t           tx_d;
  logic [FW-1:0]   tx_cnt;
  logic [VC_W-1:0] tx_vc;
  logic            tx_alt;
  logic [CW-1:0]   tx_crd [NV];
  logic            tx_take;                 // a descriptor is accepted this clock
  desc_t           tx_next;
  logic            tx_send;

  assign tx_send = tx_busy && tx_crd[tx_vc] != '0;

  flit_t tx_flit;
  always_comb begin
    head_flit_t h;
    data_flit_t b;
    h.ftype = FLIT_HEAD;
    h.kind  = tx_d.kind;
    h.alg   = tx_d.alg;
    h.src   = tx_d.src;
    h.dst   = tx_d.dst;
    h.mdst  = tx_d.mdst;
    b.ftype = (tx_cnt == FW'(PKT_FLITS - 1)) ? FLIT_TAIL : FLIT_BODY;
    b.data  = tx_d.payload[(int'(tx_cnt) - 1) * PAYLOAD_W +: PAYLOAD_W];
    tx_flit = (tx_cnt == '0) ? flit_t'(h) : flit_t'(b);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_busy   <= 1'b0;
      tx_d      <= '0;
      tx_cnt    <= '0;
      tx_vc     <= '0;
      tx_alt    <= 1'b0;
      to_router <= '0;
      for (int v = 0; v < NV; v++) tx_crd[v] <= CW'(BUF_DEPTH);
    end else begin
      to_router.valid <= 1'b0;
      if (tx_send) begin
        to_router.valid <= 1'b1;
        to_router.vc    <= tx_vc;
        to_router.flit  <= tx_flit;
        tx_cnt <= tx_cnt + 1'b1;
        if (tx_cnt == FW'(PKT_FLITS - 1)) tx_busy <= 1'b0;
      end
      if (tx_take) begin
        tx_busy <= 1'b1;
        tx_d    <= tx_next;
        tx_cnt  <= '0;
        tx_alt  <= ~tx_alt;
        // high-channel class (VCs 0..HALF-1) when the destination label is higher
        tx_vc   <= VC_W'(((tx_next.dst > ME) ? 0 : HALF) + (tx_alt ? 1 : 0));
      end
      for (int v = 0; v < NV; v++)
        tx_crd[v] <= tx_crd[v]
                   + CW'(to_router_credit.valid && to_router_credit.vc == VC_W'(v))
                   - CW'(tx_send && tx_vc == VC_W'(v));
    end
  end

  logic tx_free;                              // transmitter can take a descriptor
  assign tx_free = !tx_busy || (tx_send && tx_cnt == FW'(PKT_FLITS - 1));

  // ======================================================== DPM engine (multicast send)
  logic                     mc_busy;
  logic [PKT_PAYLOAD_W-1:0] mc_payload;
  logic                     eng_start, eng_busy, eng_done;
  logic                     eng_valid, eng_ready, eng_dp, eng_last;
  node_mask_t               eng_mask;
  node_id_t                 eng_rep;
  logic [COST_W-1:0]        eng_cost;

  dpm_engine u_dpm (
    .clk, .rst_n,
    .start(eng_start), .src(ME), .dst_mask(req_mask),
    .busy(eng_busy), .done(eng_done),
    .out_valid(eng_valid), .out_ready(eng_ready),
    .out_mask(eng_mask), .out_rep(eng_rep), .out_dp(eng_dp),
    .out_cost(eng_cost), .out_last(eng_last)
  );

  // ======================================================== receiver
  flit_t           rx_buf  [NV][PKT_FLITS];
  logic [FW-1:0]   rx_wr   [NV];
  logic            rx_full [NV];
  logic [CW-1:0]   rx_crd_pend [NV];
  data_flit_t      rx_in;
  assign rx_in = data_flit_t'(from_router.flit);

  // packet being worked on
  logic            wk_busy;
  logic [VC_W-1:0] wk_vc;
  logic            wk_dlv;                  // delivery still pending
  logic            wk_is_mc;
  route_alg_e      wk_alg;
  node_id_t        wk_src;
  node_mask_t      wk_mu;                   // MU: destinations left to send
  node_mask_t      wk_hi, wk_lo;            // DP: the two paths left to send
  logic [PKT_PAYLOAD_W-1:0] wk_payload;

  logic            wk_pick;
  logic [VC_W-1:0] wk_pick_vc;
  always_comb begin
    wk_pick    = 1'b0;
    wk_pick_vc = '0;
    for (int v = NV - 1; v >= 0; v--)
      if (rx_full[v]) begin
        wk_pick    = 1'b1;
        wk_pick_vc = VC_W'(v);
      end
    if (wk_busy) wk_pick = 1'b0;
  end

  // forwarding descriptor
  logic  fwd_valid;
  desc_t fwd_d;
  always_comb begin
    fwd_d.src     = wk_src;
    fwd_d.payload = wk_payload;
    fwd_d.alg     = wk_alg;
    if (wk_alg == RT_MU) begin
      fwd_valid  = wk_busy && wk_mu != '0;
      fwd_d.kind = PKT_UNICAST;
      fwd_d.dst  = lowest(wk_mu);
      fwd_d.mdst = '0;
    end else if (wk_hi != '0) begin
      fwd_valid  = wk_busy;
      fwd_d.kind = PKT_MULTICAST;
      fwd_d.dst  = lowest(wk_hi);
      fwd_d.mdst = wk_hi;
    end else begin
      fwd_valid  = wk_busy && wk_lo != '0;
      fwd_d.kind = PKT_MULTICAST;
      fwd_d.dst  = highest(wk_lo);
      fwd_d.mdst = wk_lo;
    end
  end

  // ======================================================== transmit arbitration
  logic take_fwd, take_eng, take_uni;
  always_comb begin
    take_fwd = tx_free && fwd_valid;
    take_eng = tx_free && !fwd_valid && eng_valid;
    take_uni = tx_free && !fwd_valid && !mc_busy && req_valid && !req_mcast;
    tx_take  = take_fwd || take_eng || take_uni;
    if (take_fwd) tx_next = fwd_d;
    else if (take_eng) begin
      tx_next.kind    = PKT_MULTICAST;
      tx_next.alg     = eng_dp ? RT_DP : RT_MU;
      tx_next.src     = ME;
      tx_next.dst     = eng_rep;
      tx_next.mdst    = eng_mask;
      tx_next.payload = mc_payload;
    end else begin
      tx_next.kind    = PKT_UNICAST;
      tx_next.alg     = RT_MU;
      tx_next.src     = ME;
      tx_next.dst     = req_dst;
      tx_next.mdst    = '0;
      tx_next.payload = req_payload;
    end
  end

  assign eng_ready = take_eng;
  assign eng_start = !mc_busy && req_valid && req_mcast;
  assign req_ready = req_mcast ? !mc_busy : take_uni;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mc_busy    <= 1'b0;
      mc_payload <= '0;
    end else begin
      if (eng_start) begin
        mc_busy    <= 1'b1;
        mc_payload <= req_payload;
      end else if (eng_done) begin
        mc_busy    <= 1'b0;
      end
    end
  end

  // ======================================================== receive / forward state
  head_flit_t wk_head;
  node_mask_t wk_rem;                       // destinations left after this node
  assign wk_head = head_flit_t'(rx_buf[wk_pick_vc][0]);
  assign wk_rem  = wk_head.mdst & ~(node_mask_t'(1) << ME);

  // next VC with credits to return (lowest first)
  logic            crd_any;
  logic [VC_W-1:0] crd_vc;
  always_comb begin
    crd_any = 1'b0;
    crd_vc  = '0;
    for (int v = NV - 1; v >= 0; v--)
      if (rx_crd_pend[v] != '0) begin
        crd_any = 1'b1;
        crd_vc  = VC_W'(v);
      end
  end

  assign dlv_valid   = wk_busy && wk_dlv;
  assign dlv_src     = wk_src;
  assign dlv_mcast   = wk_is_mc;
  assign dlv_payload = wk_payload;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int v = 0; v < NV; v++) begin
        rx_wr[v]       <= '0;
        rx_full[v]     <= 1'b0;
        rx_crd_pend[v] <= '0;
      end
      wk_busy    <= 1'b0;
      wk_vc      <= '0;
      wk_dlv     <= 1'b0;
      wk_alg     <= RT_MU;
      wk_src     <= '0;
      wk_mu      <= '0;
      wk_hi      <= '0;
      wk_lo      <= '0;
      wk_is_mc   <= 1'b0;
      wk_payload <= '0;
      from_router_credit <= '0;
    end else begin
      // flit arrival
      if (from_router.valid) begin
        rx_wr[from_router.vc] <= rx_wr[from_router.vc] + 1'b1;
        if (rx_in.ftype == FLIT_TAIL) begin
          rx_full[from_router.vc] <= 1'b1;
          rx_wr[from_router.vc]   <= '0;
        end
      end
      // start work on a complete packet
      if (wk_pick) begin
        wk_busy    <= 1'b1;
        wk_vc      <= wk_pick_vc;
        wk_dlv     <= 1'b1;
        wk_alg     <= wk_head.alg;
        wk_src     <= wk_head.src;
        wk_is_mc   <= (wk_head.kind == PKT_MULTICAST);
        for (int f = 1; f < PKT_FLITS; f++)
          wk_payload[(f - 1) * PAYLOAD_W +: PAYLOAD_W] <= rx_buf[wk_pick_vc][f][PAYLOAD_W-1:0];
        if (wk_head.kind == PKT_MULTICAST && wk_head.alg == RT_MU) wk_mu <= wk_rem;
        else wk_mu <= '0;
        if (wk_head.kind == PKT_MULTICAST && wk_head.alg == RT_DP) begin
          wk_hi <= wk_rem & above_me;
          wk_lo <= wk_rem & below_me;
        end else begin
          wk_hi <= '0;
          wk_lo <= '0;
        end
      end
      // progress of the current packet
      if (wk_busy) begin
        if (dlv_valid && dlv_ready) wk_dlv <= 1'b0;
        if (take_fwd) begin
          if (wk_alg == RT_MU)      wk_mu[fwd_d.dst] <= 1'b0;
          else if (wk_hi != '0)     wk_hi <= '0;
          else                      wk_lo <= '0;
        end
        if ((!wk_dlv || dlv_ready) && !fwd_valid) begin
          wk_busy            <= 1'b0;
          rx_full[wk_vc]     <= 1'b0;
          rx_crd_pend[wk_vc] <= CW'(PKT_FLITS);
        end
      end
      // return the freed buffer space, one credit per clock
      from_router_credit.valid <= crd_any;
      from_router_credit.vc    <= crd_vc;
      if (crd_any) rx_crd_pend[crd_vc] <= rx_crd_pend[crd_vc] - 1'b1;
    end
  end

  always_ff @(posedge clk)
    if (from_router.valid) rx_buf[from_router.vc][rx_wr[from_router.vc]] <= from_router.flit;

  // a packet fits its VC buffer and a head always starts it
  a_rx_order: assert property (@(posedge clk) disable iff (!rst_n)
    from_router.valid |-> ((rx_wr[from_router.vc] == '0) == (rx_in.ftype == FLIT_HEAD)));
  a_rx_room: assert property (@(posedge clk) disable iff (!rst_n)
    from_router.valid |-> !rx_full[from_router.vc]);

endmodule
