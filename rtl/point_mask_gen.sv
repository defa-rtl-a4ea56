// point_mask_gen: probability-aware point pruning (PAP).
//
// Every attention probability below the threshold thr is treated as zero: its bit in
// the point mask is cleared and the probability passed on is 0, so the sampling point
// that would have produced the (zero-weighted) sampling value is never generated,
// fetched or interpolated. A probability equal to thr is kept. kept_cnt counts the
// surviving points. Registered: outputs are valid the clock after valid_in and are
// flagged by valid_out. The threshold rule follows the architecture; keeping the
// equal case and the register stage are this design's choices.
module point_mask_gen
  import defa_pkg::*;
#(
  parameter int N = NPTS
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          valid_in,
  input  prob_t         probs [N],
  input  prob_t         thr,
  output logic          valid_out,
  output logic [N-1:0]  mask,
  output prob_t         pruned [N],
  output logic [$clog2(N+1)-1:0] kept_cnt
);

  logic [N-1:0] m_c;
  logic [$clog2(N+1)-1:0] cnt_c;
  always_comb begin
    cnt_c = '0;
    for (int i = 0; i < N; i++) begin
      m_c[i] = (probs[i] >= thr);
      cnt_c += {{($clog2(N+1)-1){1'b0}}, m_c[i]};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_out <= 1'b0;
      mask      <= '0;
      kept_cnt  <= '0;
      for (int i = 0; i < N; i++) pruned[i] <= '0;
    end else begin
      valid_out <= valid_in;
      if (valid_in) begin
        mask     <= m_c;
        kept_cnt <= cnt_c;
        for (int i = 0; i < N; i++) pruned[i] <= m_c[i] ? probs[i] : '0;
      end
    end
  end

endmodule
