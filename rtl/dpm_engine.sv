// dpm_engine: Dynamic Partition Merging at the source node.
//
// Given the source S and a multicast destination set D it
//   1. splits D into the basic partitions P0..P7 (dpm_partition_classifier),
//   2. costs all 24 candidates V: Pi (index i), PiP(i+1) (index 8+i) and
//      PiP(i+1)P(i+2) (index 16+i), indices mod 8, one candidate per clock
//      through a single dpm_cost_unit,
//   3. computes the saving of every merged candidate,
//      A = max(0, sum of its basic partitions' costs - its own cost),
//   4. repeatedly selects the merged candidate with the largest saving (one per
//      clock; ties go to the lower index, i.e. pairs before triples and then the
//      smaller starting partition) and clears the saving of every candidate that
//      shares a non-empty basic partition with it, until no saving is left,
//   5. emits the selected merged partitions and every non-empty basic partition
//      not covered by them, in candidate-index order.
// Steps 1-5 follow the published algorithm; the one-candidate-per-clock schedule
// is this design's choice. Latency for a new set: 1 + 24 + 1 + (selections + 1)
// clocks before the first partition is offered.
//
// Interface: start (one-cycle pulse while !busy) with src/dst_mask; each final
// partition is offered with a valid/ready handshake (out_*); out_last marks the
// last one; done pulses when the set is finished (also for an empty set).
module dpm_engine
  import dpm_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  node_id_t           src,
  input  node_mask_t         dst_mask,
  output logic               busy,
  output logic               done,
  output logic               out_valid,
  input  logic               out_ready,
  output node_mask_t         out_mask,
  output node_id_t           out_rep,
  output logic               out_dp,
  output logic [COST_W-1:0]  out_cost,
  output logic               out_last
);

  localparam int NCAND = 24;

  typedef enum logic [2:0] {S_IDLE, S_COST, S_SAVE, S_SEL, S_EMIT} state_e;
  state_e state;

  node_id_t   src_r;
  node_mask_t mask_r;
  node_mask_t part_mask [8];
  logic [7:0] nonempty;

  logic [4:0]        idx;
  logic [COST_W-1:0] cost_r [NCAND];
  node_id_t          rep_r  [NCAND];
  logic              dp_r   [NCAND];
  logic [COST_W-1:0] save_r [NCAND];
  logic [NCAND-1:0]  final_set;
  logic [7:0]        covered;

  // basic partitions a candidate is made of
  function automatic logic [7:0] comps(input logic [4:0] k);
    logic [7:0] b;
    logic [2:0] base;
    base = k[2:0];
    b = 8'b1 << base;
    if (k >= 5'd8)  b = b | (8'b1 << 3'(base + 3'd1));
    if (k >= 5'd16) b = b | (8'b1 << 3'(base + 3'd2));
    return b;
  endfunction

  dpm_partition_classifier u_cls (
    .src(src_r), .dst_mask(mask_r), .part_mask(part_mask)
  );

  always_comb
    for (int p = 0; p < 8; p++) nonempty[p] = |part_mask[p];

  // destinations of candidate sel_k
  logic [4:0] sel_k;
  node_mask_t cand_mask;
  always_comb begin
    logic [7:0] c;
    c = comps(sel_k);
    cand_mask = '0;
    for (int p = 0; p < 8; p++) if (c[p]) cand_mask = cand_mask | part_mask[p];
  end

  logic              cu_empty, cu_dp;
  node_id_t          cu_rep;
  logic [COST_W-1:0] cu_ct, cu_cp, cu_cost;
  dpm_cost_unit u_cost (
    .src(src_r), .mask(cand_mask), .empty(cu_empty), .rep(cu_rep),
    .ct(cu_ct), .cp(cu_cp), .cost(cu_cost), .use_dp(cu_dp)
  );

  // best remaining saving
  logic [4:0]        best_k;
  logic [COST_W-1:0] best_a;
  always_comb begin
    best_k = 5'd8;
    best_a = '0;
    for (int k = 8; k < NCAND; k++)
      if (save_r[k] > best_a) begin
        best_a = save_r[k];
        best_k = 5'(k);
      end
  end

  // next partition to emit
  logic [4:0] emit_k;
  logic       emit_any, emit_more;
  always_comb begin
    emit_k   = '0;
    emit_any = 1'b0;
    for (int k = NCAND - 1; k >= 0; k--)
      if (final_set[k]) begin
        emit_k   = 5'(k);
        emit_any = 1'b1;
      end
    emit_more = |(final_set & ~(NCAND'(1) << emit_k));
  end

  // saving of every merged candidate: A = max(0, sum of parts - merged cost)
  logic [COST_W-1:0] save_new [NCAND];
  always_comb
    for (int k = 0; k < NCAND; k++) begin
      logic [COST_W-1:0] sum;
      sum = '0;
      for (int p = 0; p < 8; p++) if (comps(5'(k))[p]) sum = sum + cost_r[p];
      save_new[k] = (k >= 8 && sum > cost_r[k]) ? sum - cost_r[k] : '0;
    end

  // basic partitions taken by the selected candidate
  logic [7:0] taken;
  assign taken = comps(best_k) & nonempty;

  assign sel_k     = (state == S_EMIT) ? emit_k : idx;
  assign busy      = (state != S_IDLE);
  assign out_valid = (state == S_EMIT) && emit_any;
  assign out_mask  = cand_mask;
  assign out_rep   = rep_r[emit_k];
  assign out_dp    = dp_r[emit_k];
  assign out_cost  = cost_r[emit_k];
  assign out_last  = !emit_more;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      src_r     <= '0;
      mask_r    <= '0;
      idx       <= '0;
      final_set <= '0;
      covered   <= '0;
      done      <= 1'b0;
      for (int k = 0; k < NCAND; k++) begin
        cost_r[k] <= '0;
        rep_r[k]  <= '0;
        dp_r[k]   <= 1'b0;
        save_r[k] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          src_r     <= src;
          mask_r    <= dst_mask & ~(node_mask_t'(1) << src);
          idx       <= '0;
          final_set <= '0;
          covered   <= '0;
          state     <= S_COST;
        end
        S_COST: begin
          cost_r[idx] <= cu_cost;
          rep_r[idx]  <= cu_rep;
          dp_r[idx]   <= cu_dp;
          idx         <= idx + 5'd1;
          if (idx == 5'(NCAND - 1)) state <= S_SAVE;
        end
        S_SAVE: begin
          for (int k = 0; k < NCAND; k++) save_r[k] <= save_new[k];
          state <= S_SEL;
        end
        S_SEL: begin
          if (best_a == '0) begin
            for (int p = 0; p < 8; p++)
              if (nonempty[p] && !covered[p]) final_set[p] <= 1'b1;
            state <= S_EMIT;
          end else begin
            final_set[best_k] <= 1'b1;
            covered <= covered | taken;
            for (int k = 8; k < NCAND; k++)
              if ((comps(5'(k)) & taken) != 8'd0) save_r[k] <= '0;
          end
        end
        S_EMIT: begin
          if (!emit_any) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else if (out_ready) begin
            final_set[emit_k] <= 1'b0;
            if (!emit_more) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the basic partitions of the final set never overlap
  property p_disjoint;
    @(posedge clk) disable iff (!rst_n)
      (state == S_SEL && best_a != '0) |-> ((comps(best_k) & nonempty & covered) == 8'd0);
  endproperty
  a_disjoint: assert property (p_disjoint);

endmodule
