// compression_unit: removes the masked sampling points from the work list.
//
// The point mask of one query holds NP bits per level (point p of level l is bit
// l*NP + p). For each level the unit packs the indices of the kept points to the front
// of a list (list[l][j] = index of the j-th kept point, found by a prefix count) and
// reports their number cnt[l]. max_cnt is the largest count over the levels: the
// levels are processed in parallel, so a query costs max_cnt issue cycles instead of
// NP. Combinational. That the compression unit removes masked data follows the
// architecture; the per-level index lists are this design's choice.
module compression_unit
  import defa_pkg::*;
(
  input  logic [NPTS-1:0]         mask,
  output logic [$clog2(NP)-1:0]   list [NL][NP],
  output logic [$clog2(NP+1)-1:0] cnt  [NL],
  output logic [$clog2(NP+1)-1:0] max_cnt
);

  localparam int PIW = $clog2(NP);
  localparam int CNW = $clog2(NP+1);

  always_comb begin
    max_cnt = '0;
    for (int l = 0; l < NL; l++) begin
      cnt[l] = '0;
      for (int j = 0; j < NP; j++) list[l][j] = '0;
      for (int p = 0; p < NP; p++) begin
        if (mask[l*NP + p]) begin
          list[l][cnt[l][PIW-1:0]] = PIW'(p);
          cnt[l] = cnt[l] + 1'b1;
        end
      end
      if (cnt[l] > max_cnt) max_cnt = cnt[l];
    end
  end

  // CNW is one bit wider than PIW; keep the relation explicit for readers.
  if (CNW != PIW + 1) begin : g_chk
    $error("compression_unit: NP must be a power of two");
  end

endmodule
