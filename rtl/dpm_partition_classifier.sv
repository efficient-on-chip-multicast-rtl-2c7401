// dpm_partition_classifier: splits a multicast destination set into the eight
// basic partitions P0..P7 around the source node S = (sx, sy).
//
// For each destination L = (lx, ly) (the rule of the DPM algorithm):
//   P0: lx>sx, ly>sy   P1: lx=sx, ly>sy   P2: lx<sx, ly>sy   P3: lx<sx, ly=sy
//   P4: lx<sx, ly<sy   P5: lx=sx, ly<sy   P6: lx>sx, ly<sy   P7: lx>sx, ly=sy
// The partitions go counter-clockwise from the north-east, so Pi and P(i+1 mod 8)
// are neighbours; merging works only on such consecutive runs. Sources on an
// edge or corner use the same rule and simply get empty partitions.
// The source's own bit, if set, lands in no partition (this design's choice).
//
// Purely combinational. Interface: src (label), dst_mask (bit i = label i) in;
// part_mask[p] = the destinations of partition p out.
module dpm_partition_classifier
  import dpm_pkg::*;
(
  input  node_id_t   src,
  input  node_mask_t dst_mask,
  output node_mask_t part_mask [8]
);

  logic [CRD_W-1:0] sx, sy;
  assign sx = lab_x(src);
  assign sy = lab_y(src);

  always_comb begin
    for (int p = 0; p < 8; p++) part_mask[p] = '0;
    for (int i = 0; i < NODES; i++) begin
      logic [CRD_W-1:0] lx, ly;
      logic [2:0] p;
      lx = lab_x(node_id_t'(i));
      ly = lab_y(node_id_t'(i));
      if      (ly > sy) p = (lx > sx) ? 3'd0 : (lx == sx) ? 3'd1 : 3'd2;
      else if (ly < sy) p = (lx < sx) ? 3'd4 : (lx == sx) ? 3'd5 : 3'd6;
      else              p = (lx < sx) ? 3'd3 : 3'd7;
      if (dst_mask[i] && !(lx == sx && ly == sy)) part_mask[p][i] = 1'b1;
    end
  end

endmodule
