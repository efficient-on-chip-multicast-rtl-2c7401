// tb_dpm_router: one router (the node at (3,3)) with five senders and five
// receivers that follow the credit protocol. Random 4-flit packets to random
// destinations enter on every port and VC class. Checks:
//   * each packet leaves on the port of the next hop of the label routing
//     (computed by the reference model), or the local port at its destination;
//   * it uses a VC of the right subnetwork (0,1 when the destination label is
//     higher, 2,3 when lower; ejection keeps the class);
//   * its four flits stay in order on one VC and none is lost or duplicated;
//   * the head of a packet entering an idle router leaves 3 clocks later;
//   * with credits withheld the router stops after BUF_DEPTH flits per output
//     VC and resumes when they return.
module tb_dpm_router;
  import dpm_pkg::*;
  import dpm_ref_pkg::*;

  localparam int ME = 28;                         // label of (3,3)

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  link_t   in_link   [NUM_PORTS];
  credit_t in_credit [NUM_PORTS];
  link_t   out_link  [NUM_PORTS];
  credit_t out_credit[NUM_PORTS];

  dpm_router  dut (.*, .node(node_id_t'(ME)));

  int checks = 0, failures = 0;
  int sent_pk = 0, recv_pk = 0;
  bit hold_credits = 0;
  int seq_id = 1;

  // sender state
  int snd_crd [NUM_PORTS][NUM_VC];
  bit port_claim[NUM_PORTS];                      // one flit per link per clock
  // receiver state: packet id being received on each output VC, flit count
  int rcv_id  [NUM_PORTS][NUM_VC];
  int rcv_cnt [NUM_PORTS][NUM_VC];
  int rcv_pend[NUM_PORTS][NUM_VC];                // credits still to return
  int exp_port[int];
  int exp_cls [int];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s @%0t", what, $time);
    end
  endtask

  function automatic int port_of(int dst);
    int nx;
    int x = rx(ME), y = ry(ME);
    if (dst == ME) return 0;
    nx = rnext(ME, dst);
    if (rx(nx) == x && ry(nx) == y + 1) return 1;
    if (rx(nx) == x + 1) return 2;
    if (ry(nx) == y - 1) return 3;
    return 4;
  endfunction

  // ----------------------------------------------------------- receivers
  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < NUM_PORTS; o++) begin
      out_credit[o] <= '0;
      if (out_link[o].valid) begin
        int v, id;
        data_flit_t df;
        head_flit_t hf;
        v  = int'(out_link[o].vc);
        df = data_flit_t'(out_link[o].flit);
        hf = head_flit_t'(out_link[o].flit);
        rcv_pend[o][v]++;
        check(rcv_pend[o][v] <= BUF_DEPTH, "credit overrun");
        if (rcv_cnt[o][v] == 0) begin
          id = int'(hf.mdst[31:0]);
          check(df.ftype == FLIT_HEAD, "head first");
          check(exp_port.exists(id) && exp_port[id] == o, $sformatf("packet %0d on port %0d", id, o));
          check(exp_cls.exists(id) && exp_cls[id] == v / 2, $sformatf("packet %0d class vc %0d", id, v));
          rcv_id[o][v] = id;
        end else begin
          check(int'(df.data[31:0]) == rcv_id[o][v], "body flit of the same packet");
          check(df.ftype == ((rcv_cnt[o][v] == PKT_FLITS - 1) ? FLIT_TAIL : FLIT_BODY), "flit type order");
        end
        rcv_cnt[o][v]++;
        if (rcv_cnt[o][v] == PKT_FLITS) begin
          rcv_cnt[o][v] = 0;
          recv_pk++;
        end
      end
      // return one credit per clock when allowed
      if (!hold_credits) begin
        for (int v = 0; v < NUM_VC; v++)
          if (rcv_pend[o][v] > 0 && $urandom_range(3) != 0) begin
            out_credit[o].valid <= 1'b1;
            out_credit[o].vc    <= VC_W'(v);
            rcv_pend[o][v]--;
            break;
          end
      end
    end
  end

  // credits returned to the senders
  always @(posedge clk) if (rst_n)
    for (int p = 0; p < NUM_PORTS; p++)
      if (in_credit[p].valid) snd_crd[p][in_credit[p].vc]++;

  // send one packet on port p, VC v (blocking on credits)
  task automatic send_pkt(int p, int v, int dst);
    int id;
    head_flit_t h;
    data_flit_t b;
    id = seq_id++;
    exp_port[id] = port_of(dst);
    exp_cls[id]  = (dst == ME) ? v / 2 : (dst > ME ? 0 : 1);
    for (int f = 0; f < PKT_FLITS; f++) begin
      while (snd_crd[p][v] == 0 || port_claim[p]) @(negedge clk);
      snd_crd[p][v]--;
      port_claim[p] = 1'b1;
      h = '0; b = '0;
      h.ftype = FLIT_HEAD; h.kind = PKT_UNICAST; h.dst = node_id_t'(dst);
      h.mdst  = node_mask_t'(id);
      b.ftype = (f == PKT_FLITS - 1) ? FLIT_TAIL : FLIT_BODY;
      b.data  = PAYLOAD_W'(id);
      in_link[p].valid = 1'b1;
      in_link[p].vc    = VC_W'(v);
      in_link[p].flit  = (f == 0) ? flit_t'(h) : flit_t'(b);
      @(negedge clk);
      in_link[p].valid = 1'b0;
      port_claim[p] = 1'b0;
    end
    sent_pk++;
  endtask

  function automatic int rand_dst(int v);
    // a destination in the subnetwork of VC v (ejection also allowed)
    int d;
    do d = $urandom_range(NN - 1);
    while (!((v < 2 && d >= ME) || (v >= 2 && d <= ME)));
    return d;
  endfunction

  initial begin
    #3000000;
    failures++;
    $display("watchdog: sent %0d received %0d", sent_pk, recv_pk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, lat;
    for (int p = 0; p < NUM_PORTS; p++) begin
      in_link[p] = '0;
      out_credit[p] = '0;
      port_claim[p] = 1'b0;
      for (int v = 0; v < NUM_VC; v++) begin
        snd_crd[p][v] = BUF_DEPTH; rcv_cnt[p][v] = 0; rcv_pend[p][v] = 0;
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // latency of one head through an idle router: west input, going east
    t0 = $time;
    fork send_pkt(4, 2, ME - 1); join_none
    lat = 0;
    while (!out_link[2].valid) begin @(negedge clk); lat++; end
    check(lat == 3, $sformatf("head latency %0d", lat));
    repeat (10) @(negedge clk);

    // random traffic on all ports and VCs
    for (int p = 0; p < NUM_PORTS; p++)
      for (int v = 0; v < NUM_VC; v++) begin
        automatic int pp = p, vv = v;
        fork
          for (int k = 0; k < 12; k++) begin
            send_pkt(pp, vv, rand_dst(vv));
            repeat ($urandom_range(4)) @(negedge clk);
          end
        join_none
      end
    wait (sent_pk == 1 + NUM_PORTS * NUM_VC * 12);
    repeat (200) @(negedge clk);
    check(recv_pk == sent_pk, $sformatf("received %0d of %0d", recv_pk, sent_pk));

    // back-pressure: no credits returned, 3 packets into local-out VC class 0
    hold_credits = 1;
    begin
      int n_before, cnt;
      n_before = 0;
      for (int v = 0; v < NUM_VC; v++) n_before += rcv_pend[0][v];
      fork
        send_pkt(1, 0, ME);
        send_pkt(2, 1, ME);
        send_pkt(3, 0, ME);
      join_none
      repeat (60) @(negedge clk);
      cnt = 0;
      for (int v = 0; v < NUM_VC; v++) cnt += rcv_pend[0][v];
      // class 0 has two VCs of BUF_DEPTH credits each
      check(cnt - n_before <= 2 * BUF_DEPTH, $sformatf("stall: %0d flits passed", cnt - n_before));
      check(recv_pk < sent_pk, "stall holds a packet back");
      hold_credits = 0;
      repeat (200) @(negedge clk);
      check(recv_pk == sent_pk, "all delivered after the stall");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
