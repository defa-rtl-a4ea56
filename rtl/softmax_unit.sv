// softmax_unit: normalises the N attention logits of one head and query
// (N = NL*NP = 16 points over all levels) into probabilities.
//
// Steps, one state each:
//   MAX  - register the largest logit (comparator tree);
//   EXP  - e_i = 2^(-(max - x_i)*log2(e)) for all i in parallel, Q1.15, and their sum.
//          (max-x)*log2(e) is formed as (d*1477)>>10; its integer part shifts, the top
//          five fraction bits index a 32-entry table of round(32768 * 2^(-i/32));
//   DIV  - one shared divider forms p_i = min(4095, (e_i * 4096) / sum), one per cycle.
// Interface: pulse start with logits valid; probabilities are valid, and done pulses,
// N+3 clocks later. busy is high in between; start is ignored while busy.
// Logits are INT12 with LF fraction bits; probabilities are unsigned Q0.12.
// What the unit computes follows the architecture; the exponent approximation, the
// formats and the shared divider are this design's choices.
module softmax_unit
  import defa_pkg::*;
#(
  parameter int N = NPTS
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  data_t logits [N],
  output logic  busy,
  output logic  done,
  output prob_t probs  [N]
);

  typedef enum logic [1:0] {S_IDLE, S_MAX, S_EXP, S_DIV} state_e;
  state_e state;

  localparam int IW = $clog2(N);
  localparam int SW = 16 + IW + 1;

  data_t              x_r [N];
  data_t              mx_r;
  logic [15:0]        e_r [N];
  logic [SW-1:0]      sum_r;
  logic [IW-1:0]      idx;

  function automatic logic [15:0] exp2_lut(input logic [4:0] i);
    case (i)
      5'd0:  return 16'd32768; 5'd1:  return 16'd32066; 5'd2:  return 16'd31379; 5'd3:  return 16'd30706;
      5'd4:  return 16'd30048; 5'd5:  return 16'd29405; 5'd6:  return 16'd28774; 5'd7:  return 16'd28158;
      5'd8:  return 16'd27554; 5'd9:  return 16'd26964; 5'd10: return 16'd26386; 5'd11: return 16'd25821;
      5'd12: return 16'd25268; 5'd13: return 16'd24726; 5'd14: return 16'd24196; 5'd15: return 16'd23678;
      5'd16: return 16'd23170; 5'd17: return 16'd22674; 5'd18: return 16'd22188; 5'd19: return 16'd21713;
      5'd20: return 16'd21247; 5'd21: return 16'd20792; 5'd22: return 16'd20347; 5'd23: return 16'd19911;
      5'd24: return 16'd19484; 5'd25: return 16'd19066; 5'd26: return 16'd18658; 5'd27: return 16'd18258;
      5'd28: return 16'd17867; 5'd29: return 16'd17484; 5'd30: return 16'd17109; default: return 16'd16743;
    endcase
  endfunction

  // e^(-d), d >= 0 with LF fraction bits, Q1.15
  function automatic logic [15:0] exp_neg(input logic [DW:0] d);
    logic [DW+11:0] y;       // d*log2(e), LF fraction bits
    logic [DW+11:0] yi;
    logic [LF-1:0]  yf;
    y  = ((DW+12)'(d) * (DW+12)'(1477)) >> 10;
    yi = y >> LF;
    yf = y[LF-1:0];
    if (yi > 15) return 16'd0;
    return exp2_lut(yf[LF-1 -: 5]) >> yi[3:0];
  endfunction

  data_t mx_c;
  always_comb begin
    mx_c = x_r[0];
    for (int i = 1; i < N; i++) if (x_r[i] > mx_c) mx_c = x_r[i];
  end

  logic [15:0]   e_c [N];
  logic [SW-1:0] sum_c;
  always_comb begin
    sum_c = '0;
    for (int i = 0; i < N; i++) begin
      e_c[i] = exp_neg((DW+1)'(mx_r) - (DW+1)'(x_r[i]));
      sum_c += SW'(e_c[i]);
    end
  end

  // shared divider
  logic [SW+12:0] quo;
  assign quo = (SW+13)'({e_r[idx], 12'd0}) / (SW+13)'(sum_r);

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      idx   <= '0;
      mx_r  <= '0;
      sum_r <= '0;
      for (int i = 0; i < N; i++) begin
        x_r[i]   <= '0;
        e_r[i]   <= '0;
        probs[i] <= '0;
      end
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          for (int i = 0; i < N; i++) x_r[i] <= logits[i];
          state <= S_MAX;
        end
        S_MAX: begin
          mx_r  <= mx_c;
          state <= S_EXP;
        end
        S_EXP: begin
          for (int i = 0; i < N; i++) e_r[i] <= e_c[i];
          sum_r <= sum_c;
          idx   <= '0;
          state <= S_DIV;
        end
        S_DIV: begin
          probs[idx] <= (quo > 4095) ? prob_t'(4095) : prob_t'(quo);
          if (idx == IW'(N-1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
          idx <= idx + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
