// recfg_pe: one reconfigurable processing element with four multipliers.
//
// BA mode (bilinear interpolation + aggregation) evaluates, for one channel of one
// sampling point,
//     S = N0 + (N2-N0)*t0 + [(N1-N0) + (N3-N2-N1+N0)*t0]*t1
//     ba_out = prob * S
// with three multipliers and seven adders for S (the rearranged bilinear formula, in
// which x1 = x0+1 and y1 = y0+1) and the fourth multiplier for the attention weight.
// t0 = y-y0 and t1 = x-x0 arrive already computed (unsigned, TF fraction bits). Each
// product with t0/t1 is shifted back by TF bits (arithmetic shift, i.e. floor) and S is
// saturated to INT12. ba_out keeps the Q0.12 scale of prob (no shift).
//
// MM mode reuses the same four multipliers as four MACs of a matrix product:
// mm_out[i] = q * w[i].
//
// Purely combinational; the lane that instantiates it holds the accumulators.
// The formula, the multiplier/adder count and the mode sharing follow the
// architecture; the fixed-point scaling and truncation are this design's choices.
module recfg_pe
  import defa_pkg::*;
(
  input  pe_mode_e mode,
  // BA mode
  input  data_t    n [4],      // N0 top-left, N1 top-right, N2 bottom-left, N3 bottom-right
  input  frac_t    t0,         // y - y0
  input  frac_t    t1,         // x - x0
  input  prob_t    prob,       // attention probability, Q0.12
  // MM mode
  input  data_t    q,
  input  data_t    w [4],
  // results
  output acc_t     ba_out,     // prob * S
  output data_t    s_out,      // interpolated sample S
  output acc_t     mm_out [4]  // q * w[i]
);

  // seven adders of the BI operator (d20, d10, d32, d3210, a1, s0, s1)
  logic signed [DW:0]   d20, d10, d32;
  logic signed [DW+1:0] d3210;
  logic signed [DW+2:0] a1;
  logic signed [DW+3:0] s_wide;

  // shared multiplier operands
  logic signed [16:0] ma [4];
  logic signed [16:0] mb [4];
  logic signed [33:0] mp [4];

  always_comb begin
    d20   = (DW+1)'(n[2]) - (DW+1)'(n[0]);
    d10   = (DW+1)'(n[1]) - (DW+1)'(n[0]);
    d32   = (DW+1)'(n[3]) - (DW+1)'(n[2]);
    d3210 = (DW+2)'(d32) - (DW+2)'(d10);

    if (mode == MODE_BA) begin
      ma[0] = 17'(d20);
      mb[0] = {9'd0, t0};
      ma[1] = 17'(d3210);
      mb[1] = {9'd0, t0};
    end else begin
      ma[0] = 17'(q);  mb[0] = 17'(w[0]);
      ma[1] = 17'(q);  mb[1] = 17'(w[1]);
    end
    mp[0] = ma[0] * mb[0];
    mp[1] = ma[1] * mb[1];

    a1 = (DW+3)'(d10) + (DW+3)'(mp[1] >>> TF);
    if (mode == MODE_BA) begin
      ma[2] = 17'(a1);
      mb[2] = {9'd0, t1};
    end else begin
      ma[2] = 17'(q);  mb[2] = 17'(w[2]);
    end
    mp[2] = ma[2] * mb[2];

    s_wide = (DW+4)'(n[0]) + (DW+4)'(mp[0] >>> TF) + (DW+4)'(mp[2] >>> TF);
    if (s_wide > (DW+4)'(2**(DW-1) - 1))       s_out = data_t'(2**(DW-1) - 1);
    else if (s_wide < -(DW+4)'(2**(DW-1)))     s_out = data_t'(-(2**(DW-1)));
    else                                       s_out = data_t'(s_wide);

    if (mode == MODE_BA) begin
      ma[3] = 17'(s_out);
      mb[3] = {5'd0, prob};
    end else begin
      ma[3] = 17'(q);  mb[3] = 17'(w[3]);
    end
    mp[3] = ma[3] * mb[3];

    ba_out = acc_t'(mp[3]);
    for (int i = 0; i < 4; i++) mm_out[i] = acc_t'(mp[i]);
  end

endmodule
