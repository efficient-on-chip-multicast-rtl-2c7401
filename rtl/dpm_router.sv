// dpm_router: five-port wormhole virtual-channel router of the DPM mesh.
//
// Ports L (local network interface), N, E, S, W. Every input port has NUM_VC
// virtual channels with a BUF_DEPTH-flit buffer each (4 and 4 in the evaluated
// network). VCs 0 and 1 belong to the high-channel subnetwork, VCs 2 and 3 to
// the low-channel subnetwork; a packet stays in its subnetwork on every hop
// because its route is label-monotonic, which keeps the two VC classes
// deadlock-free. Flow control is credit based, one credit per flit.
//
// Per clock (this design's own single-stage organisation; the routing rule is
// the only part the DPM scheme prescribes):
//   * a head flit at the front of an idle input VC is routed (dpm_route_unit)
//     and asks for a free output VC of its class at the chosen port; one
//     request per output port is granted per clock, round robin;
//   * switch allocation: each input port offers one of its VCs that holds an
//     output VC, a flit and a downstream credit (round robin), and each output
//     port takes one of the offering inputs (round robin);
//   * the winning flit is written to the output link register, a credit is
//     returned upstream, and a tail flit frees its output VC.
// A head flit spends one clock in VC allocation and one in switch allocation,
// so a hop costs 3 clocks to the head (buffer write, VA, SA + link) and body
// flits follow one per clock.
//
// Ejected packets keep their VC class on the local output port.
module dpm_router
  import dpm_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  node_id_t node,                   // this router's snake label (tie to a constant)
  input  link_t   in_link   [NUM_PORTS],   // flits arriving
  output credit_t in_credit [NUM_PORTS],   // credits back to the upstream senders
  output link_t   out_link  [NUM_PORTS],   // flits leaving
  input  credit_t out_credit[NUM_PORTS]    // credits from the downstream receivers
);

  localparam int NP  = NUM_PORTS;
  localparam int NV  = NUM_VC;
  localparam int NIV = NP * NV;            // input VCs
  localparam int HALF = NV / 2;

  // ------------------------------------------------------------ input VCs
  flit_t      fifo_dout [NP][NV];
  logic       fifo_empty[NP][NV];
  logic       fifo_full [NP][NV];
  logic       fifo_pop  [NP][NV];

  logic       vc_active [NP][NV];          // holds an output VC
  port_e      vc_oport  [NP][NV];
  logic [VC_W-1:0] vc_ovc [NP][NV];

  port_e      rc_port   [NP][NV];
  logic       rc_high   [NP][NV];

  for (genvar p = 0; p < NP; p++) begin : g_in
    for (genvar v = 0; v < NV; v++) begin : g_vc
      head_flit_t hf;
      assign hf = head_flit_t'(fifo_dout[p][v]);
      dpm_vc_fifo u_fifo (
        .clk, .rst_n,
        .push (in_link[p].valid && in_link[p].vc == VC_W'(v)),
        .din  (in_link[p].flit),
        .pop  (fifo_pop[p][v]),
        .dout (fifo_dout[p][v]),
        .empty(fifo_empty[p][v]),
        .full (fifo_full[p][v])
      );
      dpm_route_unit u_rc (
        .cur(node), .dst(hf.dst), .port(rc_port[p][v]), .high(rc_high[p][v])
      );
    end
  end

  // ------------------------------------------------------------ output VC state
  logic            ovc_busy [NP][NV];
  localparam int CRW = $clog2(BUF_DEPTH + 1);
  logic [CRW-1:0]  crd      [NP][NV];

  // ------------------------------------------------------------ VC allocation
  // request of input VC i = p*NV+v: idle, head flit at the front
  logic            va_req   [NIV];
  port_e           va_port  [NIV];
  logic            va_cls   [NIV];         // 0 high (VCs 0..HALF-1), 1 low
  logic            va_gnt   [NIV];
  logic [VC_W-1:0] va_vc    [NIV];
  logic [$clog2(NIV)-1:0] va_rr [NP];

  always_comb begin
    for (int p = 0; p < NP; p++)
      for (int v = 0; v < NV; v++) begin
        automatic int i;
        automatic head_flit_t hf;
        i  = p * NV + v;
        hf = head_flit_t'(fifo_dout[p][v]);
        va_req[i]  = !vc_active[p][v] && !fifo_empty[p][v] && hf.ftype == FLIT_HEAD;
        va_port[i] = rc_port[p][v];
        // ejection keeps the class the packet arrived in
        va_cls[i]  = (rc_port[p][v] == PORT_L) ? (v >= HALF) : !rc_high[p][v];
      end
  end

  always_comb begin
    for (int i = 0; i < NIV; i++) begin
      va_gnt[i] = 1'b0;
      va_vc[i]  = '0;
    end
    for (int o = 0; o < NP; o++) begin
      automatic logic done;
      done = 1'b0;
      for (int k = 0; k < NIV; k++) begin
        automatic int i;
        i = (int'(va_rr[o]) + k) % NIV;
        if (!done && va_req[i] && va_port[i] == port_e'(o)) begin
          for (int w = HALF - 1; w >= 0; w--) begin
            if (!ovc_busy[o][va_cls[i] ? w + HALF : w]) begin
              va_gnt[i] = 1'b1;
              va_vc[i]  = VC_W'(va_cls[i] ? w + HALF : w);
              done      = 1'b1;
            end
          end
        end
      end
    end
  end

  // ------------------------------------------------------------ switch allocation
  logic            sa_in_ok  [NP];
  logic [VC_W-1:0] sa_in_vc  [NP];
  logic [VC_W-1:0] sa_in_rr  [NP];
  logic            sa_out_ok [NP];
  logic [2:0]      sa_out_in [NP];
  logic [2:0]      sa_out_rr [NP];

  always_comb begin
    for (int p = 0; p < NP; p++) begin
      sa_in_ok[p] = 1'b0;
      sa_in_vc[p] = '0;
      for (int k = NV - 1; k >= 0; k--) begin
        automatic int v;
        v = (int'(sa_in_rr[p]) + k) % NV;
        if (vc_active[p][v] && !fifo_empty[p][v] && crd[vc_oport[p][v]][vc_ovc[p][v]] != '0) begin
          sa_in_ok[p] = 1'b1;
          sa_in_vc[p] = VC_W'(v);
        end
      end
    end
    for (int o = 0; o < NP; o++) begin
      sa_out_ok[o] = 1'b0;
      sa_out_in[o] = '0;
      for (int k = NP - 1; k >= 0; k--) begin
        automatic int p;
        p = (int'(sa_out_rr[o]) + k) % NP;
        if (sa_in_ok[p] && vc_oport[p][sa_in_vc[p]] == port_e'(o)) begin
          sa_out_ok[o] = 1'b1;
          sa_out_in[o] = 3'(p);
        end
      end
    end
  end

  // the flit each output port takes this clock
  flit_t           sa_out_flit [NP];
  logic [VC_W-1:0] sa_out_vc   [NP];
  logic            sa_out_tail [NP];
  always_comb
    for (int o = 0; o < NP; o++) begin
      automatic data_flit_t df;
      sa_out_flit[o] = fifo_dout[sa_out_in[o]][sa_in_vc[sa_out_in[o]]];
      sa_out_vc[o]   = vc_ovc[sa_out_in[o]][sa_in_vc[sa_out_in[o]]];
      df             = data_flit_t'(sa_out_flit[o]);
      sa_out_tail[o] = (df.ftype == FLIT_TAIL);
    end

  // which input VC moves a flit this clock
  always_comb begin
    for (int p = 0; p < NP; p++)
      for (int v = 0; v < NV; v++)
        fifo_pop[p][v] = 1'b0;
    for (int o = 0; o < NP; o++)
      if (sa_out_ok[o]) fifo_pop[sa_out_in[o]][sa_in_vc[sa_out_in[o]]] = 1'b1;
  end

  // ------------------------------------------------------------ state update
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NP; p++) begin
        out_link[p]  <= '0;
        in_credit[p] <= '0;
        sa_in_rr[p]  <= '0;
        sa_out_rr[p] <= '0;
        va_rr[p]     <= '0;
        for (int v = 0; v < NV; v++) begin
          vc_active[p][v] <= 1'b0;
          vc_oport[p][v]  <= PORT_L;
          vc_ovc[p][v]    <= '0;
          ovc_busy[p][v]  <= 1'b0;
          crd[p][v]       <= CRW'(BUF_DEPTH);
        end
      end
    end else begin
      // VC allocation results
      for (int p = 0; p < NP; p++)
        for (int v = 0; v < NV; v++)
          if (va_gnt[p * NV + v]) begin
            vc_active[p][v] <= 1'b1;
            vc_oport[p][v]  <= va_port[p * NV + v];
            vc_ovc[p][v]    <= va_vc[p * NV + v];
            ovc_busy[va_port[p * NV + v]][va_vc[p * NV + v]] <= 1'b1;
            va_rr[va_port[p * NV + v]] <= ($clog2(NIV))'((p * NV + v + 1) % NIV);
          end
      // credits returned by downstream receivers, minus the flits sent below
      for (int o = 0; o < NP; o++)
        for (int v = 0; v < NV; v++)
          crd[o][v] <= crd[o][v]
                     + CRW'(out_credit[o].valid && out_credit[o].vc == VC_W'(v))
                     - CRW'(sa_out_ok[o] && sa_out_vc[o] == VC_W'(v));
      // switch traversal
      for (int p = 0; p < NP; p++) in_credit[p] <= '0;
      for (int o = 0; o < NP; o++) begin
        out_link[o].valid <= 1'b0;
        if (sa_out_ok[o]) begin
          out_link[o].valid <= 1'b1;
          out_link[o].vc    <= sa_out_vc[o];
          out_link[o].flit  <= sa_out_flit[o];
          in_credit[sa_out_in[o]].valid <= 1'b1;
          in_credit[sa_out_in[o]].vc    <= sa_in_vc[sa_out_in[o]];
          sa_in_rr[sa_out_in[o]] <= sa_in_vc[sa_out_in[o]] + 1'b1;
          sa_out_rr[o] <= (sa_out_in[o] == 3'(NP - 1)) ? 3'd0 : sa_out_in[o] + 3'd1;
          if (sa_out_tail[o]) begin
            vc_active[sa_out_in[o]][sa_in_vc[sa_out_in[o]]] <= 1'b0;
            ovc_busy[o][sa_out_vc[o]] <= 1'b0;
          end
        end
      end
    end
  end

  // a flit never arrives for a full buffer (credit protocol)
  for (genvar p = 0; p < NP; p++) begin : g_chk
    a_credit_respected: assert property (@(posedge clk) disable iff (!rst_n)
      in_link[p].valid |-> !fifo_full[p][in_link[p].vc] || fifo_pop[p][in_link[p].vc]);
  end

endmodule
