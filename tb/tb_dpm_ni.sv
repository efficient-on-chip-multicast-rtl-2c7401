// tb_dpm_ni: one network interface (node (3,3)) with the testbench playing the
// router's local port (credit protocol both ways) and the core. Checks:
//   * a unicast request becomes one 4-flit packet (head fields, payload order,
//     VC class by destination label);
//   * a multicast request becomes one packet per final DPM partition, with the
//     representative as Dst, the partition as bit string and MU/DP as the
//     reference algorithm chooses;
//   * a received unicast is delivered to the core only;
//   * a received dual-path packet is delivered and forwarded as one packet to
//     the lowest remaining label above the node and one to the highest below;
//   * a received multiple-unicast packet is delivered and sent on as unicasts,
//     lowest label first;
//   * buffer credits go back to the router only after delivery (stall test).
module tb_dpm_ni;
  import dpm_pkg::*;
  import dpm_ref_pkg::*;

  localparam int ME = 28;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                     req_valid, req_ready, req_mcast;
  node_id_t                 req_dst;
  node_mask_t               req_mask;
  logic [PKT_PAYLOAD_W-1:0] req_payload;
  logic                     dlv_valid, dlv_ready, dlv_mcast;
  node_id_t                 dlv_src;
  logic [PKT_PAYLOAD_W-1:0] dlv_payload;
  link_t   to_router, from_router;
  credit_t to_router_credit, from_router_credit;

  dpm_ni  dut (.*, .node(node_id_t'(ME)));

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s @%0t", what, $time);
    end
  endtask

  // ------------------------------------------------ packets leaving the NI
  typedef struct {
    head_flit_t               h;
    int                       vc;
    logic [PKT_PAYLOAD_W-1:0] pl;
  } pkt_t;
  pkt_t out_q[$];
  pkt_t cur [NUM_VC];
  int   cnt [NUM_VC];
  int   crd_back = 0;                            // credits the NI returned

  always @(posedge clk) if (rst_n) begin
    to_router_credit <= '0;
    if (to_router.valid) begin
      int v;
      v = int'(to_router.vc);
      if (cnt[v] == 0) begin
        cur[v].h  = head_flit_t'(to_router.flit);
        cur[v].vc = v;
      end else begin
        cur[v].pl[(cnt[v] - 1) * PAYLOAD_W +: PAYLOAD_W] = to_router.flit[PAYLOAD_W-1:0];
      end
      cnt[v]++;
      if (cnt[v] == PKT_FLITS) begin
        out_q.push_back(cur[v]);
        cnt[v] = 0;
      end
      // the router takes flits at once and returns the credit
      to_router_credit.valid <= 1'b1;
      to_router_credit.vc    <= to_router.vc;
    end
    if (from_router_credit.valid) crd_back++;
  end

  // ------------------------------------------------ packets entering the NI
  int ni_crd [NUM_VC];
  always @(posedge clk) if (rst_n && from_router_credit.valid) ni_crd[from_router_credit.vc]++;

  task automatic inject(int v, pkt_kind_e k, route_alg_e a, int src, int dst,
                        node_mask_t m, logic [PKT_PAYLOAD_W-1:0] pl);
    head_flit_t h;
    data_flit_t b;
    h.ftype = FLIT_HEAD; h.kind = k; h.alg = a; h.src = node_id_t'(src);
    h.dst = node_id_t'(dst); h.mdst = m;
    for (int f = 0; f < PKT_FLITS; f++) begin
      while (ni_crd[v] == 0) @(negedge clk);
      ni_crd[v]--;
      b.ftype = (f == PKT_FLITS - 1) ? FLIT_TAIL : FLIT_BODY;
      b.data  = pl[(f > 0 ? f - 1 : 0) * PAYLOAD_W +: PAYLOAD_W];
      from_router.valid = 1'b1;
      from_router.vc    = VC_W'(v);
      from_router.flit  = (f == 0) ? flit_t'(h) : flit_t'(b);
      @(negedge clk);
      from_router.valid = 1'b0;
    end
  endtask

  task automatic core_send(bit mc, int dst, node_mask_t m, logic [PKT_PAYLOAD_W-1:0] pl);
    req_valid = 1; req_mcast = mc; req_dst = node_id_t'(dst); req_mask = m; req_payload = pl;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    @(negedge clk);
    req_valid = 0;
  endtask

  function automatic logic [PKT_PAYLOAD_W-1:0] rand_pl();
    logic [PKT_PAYLOAD_W-1:0] r;
    for (int i = 0; i < PKT_PAYLOAD_W; i += 32) r[i +: 32] = $urandom;
    return r;
  endfunction

  task automatic wait_out(int n);
    int t = 0;
    while (out_q.size() < n && t < 2000) begin @(negedge clk); t++; end
  endtask

  // deliveries seen by the core
  int dlv_cnt = 0;
  node_id_t dlv_last_src;
  logic [PKT_PAYLOAD_W-1:0] dlv_last_pl;
  bit dlv_last_mc;
  always @(posedge clk) if (rst_n && dlv_valid && dlv_ready) begin
    dlv_cnt++; dlv_last_src = dlv_src; dlv_last_pl = dlv_payload; dlv_last_mc = dlv_mcast;
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [PKT_PAYLOAD_W-1:0] pl;
    node_mask_t m, hi, lo;
    pkt_t p;
    logic [23:0] fin;
    int k, d;
    req_valid = 0; req_mcast = 0; req_dst = '0; req_mask = '0; req_payload = '0;
    dlv_ready = 1; from_router = '0;
    for (int v = 0; v < NUM_VC; v++) begin cnt[v] = 0; ni_crd[v] = BUF_DEPTH; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // 1. unicast requests, both directions
    for (int t = 0; t < 6; t++) begin
      do d = $urandom_range(NN - 1); while (d == ME);
      pl = rand_pl();
      core_send(0, d, '0, pl);
      wait_out(1);
      check(out_q.size() == 1, "unicast: one packet");
      if (out_q.size() > 0) begin
        p = out_q.pop_front();
        check(p.h.ftype == FLIT_HEAD && p.h.kind == PKT_UNICAST && int'(p.h.dst) == d &&
              int'(p.h.src) == ME && p.pl == pl, "unicast: head and payload");
        check((p.vc < 2) == (d > ME), "unicast: VC class");
      end
    end

    // 2. multicast requests: one packet per final partition
    for (int t = 0; t < 20; t++) begin
      m = '0;
      for (int j = 0; j < 2 + int'($urandom_range(14)); j++) m[$urandom_range(NN - 1)] = 1'b1;
      m[ME] = 1'b0;
      pl = rand_pl();
      fin = rdpm(ME, m);
      core_send(1, 0, m, pl);
      wait_out($countones(fin));
      repeat (5) @(negedge clk);
      check(out_q.size() == $countones(fin), $sformatf("multicast: %0d packets, expected %0d", out_q.size(), $countones(fin)));
      k = 0;
      while (out_q.size() > 0) begin
        int ec, er; bit ed;
        node_mask_t cm;
        p = out_q.pop_front();
        while (k < 24 && !fin[k]) k++;
        cm = rcand(ME, m, k);
        rcost(ME, cm, ec, er, ed);
        check(p.h.kind == PKT_MULTICAST && p.h.mdst == cm && int'(p.h.dst) == er &&
              (p.h.alg == RT_DP) == ed && p.pl == pl && (p.vc < 2) == (er > ME),
              $sformatf("multicast partition %0d", k));
        k++;
      end
    end

    // 3. received unicast: delivered, nothing forwarded
    pl = rand_pl();
    inject(0, PKT_UNICAST, RT_MU, 5, ME, '0, pl);
    repeat (10) @(negedge clk);
    check(dlv_cnt == 1 && dlv_last_src == 5 && dlv_last_pl == pl && !dlv_last_mc, "unicast delivery");
    check(out_q.size() == 0, "unicast not forwarded");

    // 4. received dual-path packet at a node in the middle of its partition
    m = '0; m[ME] = 1; m[30] = 1; m[45] = 1; m[40] = 1; m[20] = 1; m[3] = 1;
    pl = rand_pl();
    inject(2, PKT_MULTICAST, RT_DP, 9, ME, m, pl);
    wait_out(2);
    repeat (5) @(negedge clk);
    check(dlv_cnt == 2 && dlv_last_src == 9 && dlv_last_pl == pl && dlv_last_mc, "dual-path delivery");
    check(out_q.size() == 2, "dual-path split into two packets");
    hi = '0; hi[30] = 1; hi[45] = 1; hi[40] = 1;
    lo = '0; lo[20] = 1; lo[3] = 1;
    if (out_q.size() == 2) begin
      p = out_q.pop_front();
      check(p.h.kind == PKT_MULTICAST && p.h.alg == RT_DP && p.h.dst == 30 && p.h.mdst == hi &&
            p.h.src == 9 && p.pl == pl && p.vc < 2, "dual-path high packet");
      p = out_q.pop_front();
      check(p.h.kind == PKT_MULTICAST && p.h.alg == RT_DP && p.h.dst == 20 && p.h.mdst == lo &&
            p.vc >= 2, "dual-path low packet");
    end
    out_q.delete();

    // 5. received multiple-unicast packet at its representative
    m = '0; m[ME] = 1; m[29] = 1; m[36] = 1; m[19] = 1;
    pl = rand_pl();
    inject(1, PKT_MULTICAST, RT_MU, 12, ME, m, pl);
    wait_out(3);
    repeat (5) @(negedge clk);
    check(out_q.size() == 3, "multiple unicast: three packets");
    if (out_q.size() == 3) begin
      int exp_d[3] = '{19, 29, 36};
      for (int i = 0; i < 3; i++) begin
        p = out_q.pop_front();
        check(p.h.kind == PKT_UNICAST && int'(p.h.dst) == exp_d[i] && p.h.src == 12 && p.pl == pl,
              $sformatf("multiple unicast %0d", i));
      end
    end
    out_q.delete();

    // 6. delivery stall holds the buffer and its credits
    dlv_ready = 0;
    k = crd_back;
    inject(3, PKT_UNICAST, RT_MU, 7, ME, '0, rand_pl());
    repeat (30) @(negedge clk);
    check(crd_back == k, "no credits while the core stalls");
    dlv_ready = 1;
    repeat (20) @(negedge clk);
    check(crd_back == k + PKT_FLITS, "credits after delivery");
    check(dlv_cnt == 4, "stalled packet delivered");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
