// tb_dpm_noc: end-to-end test of the full 8x8 DPM multicast mesh at its
// default parameters.
//
// Every core injects random traffic: 90% unicast, 10% multicast with a
// destination set drawn from the four evaluated destination ranges (2-5, 4-8,
// 7-10, 10-16). The published 6x6 worked example (source (2,2), ten
// destinations) is sent first, at the same coordinates. Cores accept
// deliveries on 90% of the clocks to create back-pressure. A scoreboard keeps
// every (destination, packet) pair still owed; each delivery must match one,
// with the right source and payload, and at the end none may be left. A
// unicast must arrive flagged as unicast; a multicast copy may arrive flagged
// either way, because the last leg of a multiple-unicast partition is a
// unicast packet.
//
// The testbench also counts how often each mechanism of the design happened
// and fails if one never did: a merged partition chosen by the DPM engine,
// dual-path and multiple-unicast partitions, a dual-path split into both
// directions at a representative node, dual-path forwarding, multiple-unicast
// forwarding, use of both subnetworks, an output-VC wait in a router, a
// credit stall at injection and a delivery stall.
module tb_dpm_noc;
  import dpm_pkg::*;
  import dpm_ref_pkg::*;

  localparam int INJECT_CYCLES = 3000;
  localparam int RATE_PERMILLE = 20;              // new requests per core per 1000 clocks

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                     req_valid   [NODES];
  logic                     req_ready   [NODES];
  logic                     req_mcast   [NODES];
  node_id_t                 req_dst     [NODES];
  node_mask_t               req_mask    [NODES];
  logic [PKT_PAYLOAD_W-1:0] req_payload [NODES];
  logic                     dlv_valid   [NODES];
  logic                     dlv_ready   [NODES];
  node_id_t                 dlv_src     [NODES];
  logic                     dlv_mcast   [NODES];
  logic [PKT_PAYLOAD_W-1:0] dlv_payload [NODES];

  dpm_noc dut (.*);

  int checks = 0, failures = 0;
  int next_id = 1;
  int owed = 0, delivered = 0, n_uni = 0, n_mc = 0;
  // scoreboard: key = id * 64 + destination; value = source * 2 + multicast
  int sb[longint];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s @%0t", what, $time);
    end
  endtask

  function automatic logic [PKT_PAYLOAD_W-1:0] make_pl(int id);
    logic [PKT_PAYLOAD_W-1:0] r;
    r = '0;
    r[31:0] = id;
    for (int i = 32; i + 32 <= PKT_PAYLOAD_W; i += 32) r[i +: 32] = id * 32'h9e3779b9 + i;
    return r;
  endfunction

  // ------------------------------------------------ mechanism counters
  int c_merge = 0, c_part_dp = 0, c_part_mu = 0, c_split2 = 0, c_fwd_dp = 0;
  int c_fwd_mu = 0, c_high = 0, c_low = 0, c_va_wait = 0, c_tx_stall = 0, c_dlv_stall = 0;

  for (genvar n = 0; n < NODES; n++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      if (dut.g_node[n].u_ni.u_dpm.state == 3'd3 && dut.g_node[n].u_ni.u_dpm.best_a != '0) c_merge++;
      if (dut.g_node[n].u_ni.take_eng) begin
        if (dut.g_node[n].u_ni.eng_dp) c_part_dp++; else c_part_mu++;
      end
      if (dut.g_node[n].u_ni.take_fwd) begin
        if (dut.g_node[n].u_ni.wk_alg == RT_MU) c_fwd_mu++;
        else begin
          c_fwd_dp++;
          if (dut.g_node[n].u_ni.wk_hi != '0 && dut.g_node[n].u_ni.wk_lo != '0) c_split2++;
        end
      end
      if (dut.g_node[n].u_ni.tx_take) begin
        if (dut.g_node[n].u_ni.tx_next.dst > node_id_t'(n)) c_high++; else c_low++;
      end
      if (dut.g_node[n].u_ni.tx_busy && !dut.g_node[n].u_ni.tx_send) c_tx_stall++;
      if (dlv_valid[n] && !dlv_ready[n]) c_dlv_stall++;
      for (int k = 0; k < NUM_PORTS * NUM_VC; k++)
        if (dut.g_node[n].u_router.va_req[k] && !dut.g_node[n].u_router.va_gnt[k]) c_va_wait++;
    end

    // deliveries
    always @(posedge clk) if (rst_n && dlv_valid[n] && dlv_ready[n]) begin
      int id;
      longint key;
      id  = int'(dlv_payload[n][31:0]);
      key = longint'(id) * 64 + n;
      checks++;
      if (!sb.exists(key)) begin
        failures++;
        if (failures < 20) $display("FAIL unexpected delivery id %0d at node %0d", id, n);
      end else begin
        // a multicast destination served by multiple unicast gets a unicast packet
        if (sb[key] / 2 != int'(dlv_src[n]) || (sb[key] % 2 == 0 && dlv_mcast[n]) ||
            dlv_payload[n] != make_pl(id)) begin
          failures++;
          if (failures < 20)
            $display("FAIL wrong contents id %0d at node %0d: src/mc %0d/%0d expected %0d/%0d, payload %s",
                     id, n, dlv_src[n], dlv_mcast[n], sb[key] / 2, sb[key] % 2,
                     dlv_payload[n] == make_pl(id) ? "ok" : "wrong");
        end
        sb.delete(key);
        delivered++;
      end
    end

    always @(negedge clk) dlv_ready[n] <= ($urandom_range(9) != 0);
  end

  // ------------------------------------------------ traffic
  task automatic request(int s, bit mc, int dst, node_mask_t m);
    int id;
    id = next_id++;
    req_mcast[s] = mc; req_dst[s] = node_id_t'(dst); req_mask[s] = m;
    req_payload[s] = make_pl(id);
    if (mc) begin
      for (int d = 0; d < NN; d++) if (m[d] && d != s) begin sb[longint'(id) * 64 + d] = s * 2 + 1; owed++; end
      n_mc++;
    end else begin
      sb[longint'(id) * 64 + dst] = s * 2; owed++;
      n_uni++;
    end
    req_valid[s] = 1'b1;
    @(posedge clk);
    while (!req_ready[s]) @(posedge clk);
    @(negedge clk);
    req_valid[s] = 1'b0;
  endtask

  function automatic node_mask_t rand_set(int s);
    int lo_hi[4][2] = '{'{2, 5}, '{4, 8}, '{7, 10}, '{10, 16}};
    int r, n;
    node_mask_t m;
    r = $urandom_range(3);
    n = lo_hi[r][0] + $urandom_range(lo_hi[r][1] - lo_hi[r][0]);
    m = '0;
    while ($countones(m) < n) begin
      int d;
      d = $urandom_range(NN - 1);
      if (d != s) m[d] = 1'b1;
    end
    return m;
  endfunction

  initial begin
    #50000000;
    failures++;
    $display("watchdog: owed %0d delivered %0d", owed, delivered);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit gen_done [NODES];

  initial begin
    node_mask_t ex;
    for (int n = 0; n < NODES; n++) begin
      req_valid[n] = 0; req_mcast[n] = 0; req_dst[n] = '0; req_mask[n] = '0; req_payload[n] = '0;
      gen_done[n] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // the worked example, alone in the network
    ex = '0;
    ex[rlab(0,5)] = 1; ex[rlab(1,4)] = 1; ex[rlab(2,5)] = 1; ex[rlab(3,5)] = 1; ex[rlab(5,5)] = 1;
    ex[rlab(5,4)] = 1; ex[rlab(0,1)] = 1; ex[rlab(2,1)] = 1; ex[rlab(2,0)] = 1; ex[rlab(4,1)] = 1;
    request(rlab(2,2), 1, 0, ex);
    begin
      int t = 0;
      while (delivered < owed && t < 5000) begin @(negedge clk); t++; end
      check(delivered == owed, "worked example delivered to all ten destinations");
      $display("worked example: all destinations reached after %0d clocks", t);
    end

    // random traffic from every core
    for (int n = 0; n < NODES; n++) begin
      automatic int s = n;
      fork begin
        automatic int t0 = 0;
        while (t0 < INJECT_CYCLES) begin
          if ($urandom_range(999) < RATE_PERMILLE) begin
            if ($urandom_range(9) == 0) request(s, 1, 0, rand_set(s));
            else begin
              automatic int d;
              do d = $urandom_range(NN - 1); while (d == s);
              request(s, 0, d, '0);
            end
          end else @(negedge clk);
          t0++;
        end
        gen_done[s] = 1;
      end join_none
    end
    for (int n = 0; n < NODES; n++) wait (gen_done[n]);
    begin
      int t = 0;
      while (delivered < owed && t < 20000) begin @(negedge clk); t++; end
    end
    check(delivered == owed && sb.size() == 0, $sformatf("all delivered: %0d of %0d", delivered, owed));
    $display("requests: %0d unicast, %0d multicast; deliveries %0d", n_uni, n_mc, delivered);
    $display("mechanisms: merge %0d, DP partitions %0d, MU partitions %0d, two-way DP split %0d,",
             c_merge, c_part_dp, c_part_mu, c_split2);
    $display("  DP forwards %0d, MU forwards %0d, high-subnet packets %0d, low-subnet packets %0d,",
             c_fwd_dp, c_fwd_mu, c_high, c_low);
    $display("  output-VC waits %0d, injection credit stalls %0d, delivery stalls %0d",
             c_va_wait, c_tx_stall, c_dlv_stall);
    check(c_merge > 0, "merge happened");
    check(c_part_dp > 0, "dual-path partition happened");
    check(c_part_mu > 0, "multiple-unicast partition happened");
    check(c_split2 > 0, "two-way dual-path split happened");
    check(c_fwd_dp > 0, "dual-path forward happened");
    check(c_fwd_mu > 0, "multiple-unicast forward happened");
    check(c_high > 0 && c_low > 0, "both subnetworks used");
    check(c_va_wait > 0, "output-VC wait happened");
    check(c_tx_stall > 0, "injection credit stall happened");
    check(c_dlv_stall > 0, "delivery stall happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
