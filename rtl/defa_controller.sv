// defa_controller: sequences one query (one reference point, one head, one
// LANES-channel slice) through the accelerator and switches the PE array between its
// two modes.
//
// States, in the order the dataflow needs them:
//   IDLE    accepts a query (q_start) and clears the PE accumulators; while idle, MM
//           steps from outside (mm_step, mm_clr) drive the PE array in MM mode.
//   SMX     softmax of the 16 logits (waits for smx_done).
//   PAP     one clock for the point mask generator and the compression unit.
//   LOAD    makes the fmap SRAM hold every level's bounded range around the new
//           reference point. Per level: nothing to load if the point has not moved;
//           one column (the one entering the window) if it slid by +1 in x on the same
//           row - the rest of the window is reused; otherwise the whole window. Pixels
//           outside the fmap are never loaded (samples are clamped into the fmap). Each
//           pixel goes to the decompression unit (ld_valid/ld_ready).
//   BA      issues the kept points, one per level per clock (four levels in parallel),
//           for max_cnt clocks: iss_j selects the j-th kept point of every level and
//           iss_lvl[l] tells which levels still have one. PE enables follow one clock
//           later (SRAM read latency).
//   DRAIN   the last PE accumulation.
//   DONE    res_valid for one clock; the accumulators hold the head output slice.
// Events ev_reuse/ev_slide/ev_full pulse once per level and query for the three load
// cases. The order softmax -> PAP -> sampling follows the dataflow of the architecture;
// the state machine, its handshakes and the window bookkeeping are this design's own.
module defa_controller
  import defa_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  // query
  input  logic                  q_valid,
  output logic                  q_ready,
  input  coord_t                ref_x [NL],
  input  coord_t                ref_y [NL],
  // softmax / PAP
  output logic                  smx_start,
  input  logic                  smx_done,
  output logic                  pap_valid,
  input  logic [$clog2(NP+1)-1:0] cnt [NL],
  input  logic [$clog2(NP+1)-1:0] max_cnt,
  // loader
  output logic                  ld_valid,
  input  logic                  ld_ready,
  output logic [$clog2(NL)-1:0] ld_level,
  output coord_t                ld_x,
  output coord_t                ld_y,
  // BA issue
  output logic                  iss_valid,
  output logic [$clog2(NP)-1:0] iss_j,
  output logic [NL-1:0]         iss_lvl,
  output logic                  pe_en_ba,
  output logic [NL-1:0]         pe_lvl_ba,
  output pe_mode_e              pe_mode,
  output logic                  pe_clr,
  // MM steps from outside
  input  logic                  mm_clr,
  input  logic                  mm_step,
  output logic                  pe_en,
  // result and events
  output logic                  res_valid,
  output logic                  ev_reuse,
  output logic                  ev_slide,
  output logic                  ev_full
);

  typedef enum logic [2:0] {C_IDLE, C_SMX, C_PAP, C_LSETUP, C_LOAD, C_BA, C_DRAIN, C_DONE} cstate_e;
  cstate_e state;

  localparam int LW = $clog2(NL);
  localparam int SW = XW + 2;   // signed loop coordinates
  typedef logic signed [SW-1:0] scoord_t;

  coord_t  rx [NL], ry [NL];
  logic    win_v [NL];
  coord_t  win_x [NL], win_y [NL];

  logic [LW-1:0] lvl;
  scoord_t cx, cx_end, cy, cy_beg, cy_end;
  logic    ld_busy;        // a pixel range is being issued
  logic [$clog2(NP)-1:0] j;

  // per-level geometry (runtime level index)
  function automatic scoord_t hb_of(input logic [LW-1:0] l);
    return SW'(br_size(int'(l)) / 2);
  endfunction
  function automatic scoord_t fw_of(input logic [LW-1:0] l);
    return SW'(fmap_w(int'(l)));
  endfunction
  function automatic scoord_t fh_of(input logic [LW-1:0] l);
    return SW'(fmap_h(int'(l)));
  endfunction
  function automatic scoord_t smax(input scoord_t a, input scoord_t b);
    return (a > b) ? a : b;
  endfunction
  function automatic scoord_t smin(input scoord_t a, input scoord_t b);
    return (a < b) ? a : b;
  endfunction

  // geometry of the level being loaded
  scoord_t hb, x, y;
  assign hb = hb_of(lvl);
  assign x  = SW'(rx[lvl]);
  assign y  = SW'(ry[lvl]);

  assign q_ready   = (state == C_IDLE);
  assign ld_valid  = (state == C_LOAD) && ld_busy;
  assign ld_level  = lvl;
  assign ld_x      = coord_t'(cx);
  assign ld_y      = coord_t'(cy);
  assign iss_valid = (state == C_BA);
  assign iss_j     = j;
  assign pe_mode   = (state == C_BA || state == C_DRAIN) ? MODE_BA : MODE_MM;
  assign pe_clr    = (state == C_IDLE) ? (mm_clr || q_valid) : 1'b0;
  assign pe_en     = (state == C_IDLE) ? (mm_step && !q_valid) : pe_en_ba;
  assign res_valid = (state == C_DONE);

  always_comb begin
    for (int l = 0; l < NL; l++) iss_lvl[l] = (state == C_BA) && (4'(j) < 4'(cnt[l]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= C_IDLE;
      smx_start <= 1'b0;
      pap_valid <= 1'b0;
      lvl       <= '0;
      cx <= '0; cx_end <= '0; cy <= '0; cy_beg <= '0; cy_end <= '0;
      ld_busy   <= 1'b0;
      j         <= '0;
      pe_en_ba  <= 1'b0;
      pe_lvl_ba <= '0;
      ev_reuse  <= 1'b0;
      ev_slide  <= 1'b0;
      ev_full   <= 1'b0;
      for (int l = 0; l < NL; l++) begin
        rx[l] <= '0; ry[l] <= '0;
        win_v[l] <= 1'b0; win_x[l] <= '0; win_y[l] <= '0;
      end
    end else begin
      smx_start <= 1'b0;
      pap_valid <= 1'b0;
      ev_reuse  <= 1'b0;
      ev_slide  <= 1'b0;
      ev_full   <= 1'b0;
      pe_en_ba  <= iss_valid;
      pe_lvl_ba <= iss_lvl;
      case (state)
        C_IDLE: if (q_valid) begin
          for (int l = 0; l < NL; l++) begin
            rx[l] <= ref_x[l];
            ry[l] <= ref_y[l];
          end
          smx_start <= 1'b1;
          state     <= C_SMX;
        end
        C_SMX: if (smx_done) begin
          pap_valid <= 1'b1;
          state     <= C_PAP;
        end
        C_PAP: begin
          lvl   <= '0;
          state <= C_LSETUP;
        end
        C_LSETUP: begin
          // choose what level lvl has to load
          cy_beg <= smax(y - hb, '0);
          cy     <= smax(y - hb, '0);
          cy_end <= smin(y + hb - 1, fh_of(lvl) - 1);
          win_v[lvl] <= 1'b1;
          win_x[lvl] <= rx[lvl];
          win_y[lvl] <= ry[lvl];
          if (win_v[lvl] && win_y[lvl] == ry[lvl] && win_x[lvl] == rx[lvl]) begin
            ev_reuse <= 1'b1;
            ld_busy  <= 1'b0;
          end else if (win_v[lvl] && win_y[lvl] == ry[lvl] && rx[lvl] == win_x[lvl] + 1'b1) begin
            ev_slide <= 1'b1;
            cx       <= x + hb - 1;
            cx_end   <= x + hb - 1;
            ld_busy  <= (x + hb - 1) < fw_of(lvl);
          end else begin
            ev_full  <= 1'b1;
            cx       <= smax(x - hb, '0);
            cx_end   <= smin(x + hb - 1, fw_of(lvl) - 1);
            ld_busy  <= 1'b1;
          end
          state <= C_LOAD;
        end
        C_LOAD: begin
          if (ld_busy) begin
            if (ld_ready) begin
              if (cy == cy_end) begin
                cy <= cy_beg;
                if (cx == cx_end) ld_busy <= 1'b0;
                else              cx <= cx + 1'b1;
              end else begin
                cy <= cy + 1'b1;
              end
            end
          end else if (ld_ready) begin
            // last pixel of this level written
            if (lvl == LW'(NL - 1)) begin
              j     <= '0;
              state <= (max_cnt == 0) ? C_DRAIN : C_BA;
            end else begin
              lvl   <= lvl + 1'b1;
              state <= C_LSETUP;
            end
          end
        end
        C_BA: begin
          if (4'(j) + 4'd1 >= 4'(max_cnt)) state <= C_DRAIN;
          j <= j + 1'b1;
        end
        C_DRAIN: state <= C_DONE;
        C_DONE:  state <= C_IDLE;
        default: state <= C_IDLE;
      endcase
    end
  end

endmodule
