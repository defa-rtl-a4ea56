// decompression_unit: brings fmap pixels on chip while expanding the pruned fmap.
//
// External memory holds only the pixels kept by frequency-weighted pruning. For each
// pixel the loader asks for (in_valid/in_ready handshake, with the fmap-mask bit
// in_keep looked up for it) the unit either
//   - writes a zero vector into the fmap SRAM at once, without touching external
//     memory, when the pixel is pruned (in_keep = 0), or
//   - issues one external request (mem_req_valid/mem_req_ready), waits for
//     mem_rsp_valid and writes the returned vector.
// wr_done pulses with each SRAM write (we). skipped pulses for each pruned pixel, so
// the fetches saved by the fmap mask can be counted. One request is outstanding at a
// time; in_ready is high only when idle. That masked data are expanded here follows the
// architecture; the handshake and the single outstanding request are this design's
// choices.
module decompression_unit
  import defa_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  // pixel requests from the loader
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [$clog2(NL)-1:0] in_level,
  input  coord_t                in_x,
  input  coord_t                in_y,
  input  logic                  in_keep,
  // external memory
  output logic                  mem_req_valid,
  input  logic                  mem_req_ready,
  output logic [$clog2(NL)-1:0] mem_req_level,
  output coord_t                mem_req_x,
  output coord_t                mem_req_y,
  input  logic                  mem_rsp_valid,
  input  pix_t                  mem_rsp_data,
  // fmap SRAM write
  output logic                  we,
  output logic [$clog2(NL)-1:0] wlevel,
  output coord_t                wx,
  output coord_t                wy,
  output pix_t                  wdata,
  output logic                  wr_done,
  output logic                  skipped
);

  typedef enum logic [1:0] {D_IDLE, D_REQ, D_WAIT} dstate_e;
  dstate_e state;

  logic [$clog2(NL)-1:0] lvl_r;
  coord_t                x_r, y_r;

  assign in_ready      = (state == D_IDLE);
  assign mem_req_valid = (state == D_REQ);
  assign mem_req_level = lvl_r;
  assign mem_req_x     = x_r;
  assign mem_req_y     = y_r;

  always_comb begin
    we     = 1'b0;
    wlevel = lvl_r;
    wx     = x_r;
    wy     = y_r;
    wdata  = '0;
    if (state == D_IDLE && in_valid && !in_keep) begin
      we     = 1'b1;
      wlevel = in_level;
      wx     = in_x;
      wy     = in_y;
    end else if (state == D_WAIT && mem_rsp_valid) begin
      we    = 1'b1;
      wdata = mem_rsp_data;
    end
  end
  assign wr_done = we;
  assign skipped = (state == D_IDLE) && in_valid && !in_keep;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= D_IDLE;
      lvl_r <= '0;
      x_r   <= '0;
      y_r   <= '0;
    end else begin
      case (state)
        D_IDLE: if (in_valid && in_keep) begin
          lvl_r <= in_level;
          x_r   <= in_x;
          y_r   <= in_y;
          state <= D_REQ;
        end
        D_REQ:  if (mem_req_ready) state <= D_WAIT;
        D_WAIT: if (mem_rsp_valid) state <= D_IDLE;
        default: state <= D_IDLE;
      endcase
    end
  end

endmodule
