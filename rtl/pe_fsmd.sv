// pe_fsmd: the fine grained layer of a PE, its finite state machine with datapath.
//
// The controller runs one frame at a time. In IDLE it waits for start; if the PE is
// enabled (not bypassed) it latches the frame size and the context number and goes to
// RUN. In RUN it opens the PE's input (run = 1) and counts the accepted pixels in raster
// order (col, row). For every accepted pixel it tells the datapath whether the 3x3 window
// ending at that pixel lies wholly inside the image (win_ok: col >= 2 and row >= 2), so a
// W x H frame yields (W-2) x (H-2) results. After the last pixel of the frame it passes
// through DONE, which pulses done for one clock, back to IDLE.
//
// Interface: start, enable, img_w, img_h, ctx_sel and accept (a pixel entered the PE this
// clock) in; run, col, win_ok, ctx_q, busy and done out. col and win_ok describe
// the pixel being accepted in the current clock. Frames smaller than 3x3 give no
// results. The frame-at-a-time protocol, the valid-window rule and the switching of
// contexts only at frame boundaries are this design's choices.
module pe_fsmd
  import pe_pkg::*;
#(
  parameter int unsigned MAX_W = 640,
  parameter int unsigned MAX_H = 480,
  parameter int unsigned N_CTX = 4,
  localparam int unsigned COL_W = $clog2(MAX_W),
  localparam int unsigned ROW_W = $clog2(MAX_H),
  localparam int unsigned DIMW_W = $clog2(MAX_W + 1),
  localparam int unsigned DIMH_W = $clog2(MAX_H + 1),
  localparam int unsigned CTX_IDX_W = (N_CTX > 1) ? $clog2(N_CTX) : 1
)(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic                  enable,
  input  logic [DIMW_W-1:0]     img_w,
  input  logic [DIMH_W-1:0]     img_h,
  input  logic [CTX_IDX_W-1:0]  ctx_sel,
  input  logic                  accept,
  output logic                  run,
  output logic [COL_W-1:0]      col,
  output logic                  win_ok,
  output logic [CTX_IDX_W-1:0]  ctx_q,
  output logic                  busy,
  output logic                  done
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_e;

  state_e              state;
  logic [COL_W-1:0]    col_q;
  logic [ROW_W-1:0]    row_q;
  logic [DIMW_W-1:0]   w_q;
  logic [DIMH_W-1:0]   h_q;
  logic                end_of_row;
  logic                last;

  assign run        = (state == S_RUN);
  assign busy       = (state != S_IDLE);
  assign done       = (state == S_DONE);
  assign col        = col_q;
  assign end_of_row = (32'(col_q) + 1 >= 32'(w_q));
  assign last       = end_of_row && (32'(row_q) + 1 >= 32'(h_q));
  assign win_ok     = (col_q >= COL_W'(2)) && (row_q >= ROW_W'(2));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      col_q <= '0;
      row_q <= '0;
      w_q   <= '0;
      h_q   <= '0;
      ctx_q <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (start && enable && img_w != '0 && img_h != '0) begin
            w_q   <= (32'(img_w) > MAX_W) ? DIMW_W'(MAX_W) : img_w;
            h_q   <= (32'(img_h) > MAX_H) ? DIMH_W'(MAX_H) : img_h;
            ctx_q <= ctx_sel;
            col_q <= '0;
            row_q <= '0;
            state <= S_RUN;
          end
        end
        S_RUN: begin
          if (accept) begin
            if (last) begin
              state <= S_DONE;
            end else if (end_of_row) begin
              col_q <= '0;
              row_q <= row_q + 1'b1;
            end else begin
              col_q <= col_q + 1'b1;
            end
          end
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // accept is only legal while the input is open.
  a_accept_in_run: assert property (@(posedge clk) disable iff (!rst_n) accept |-> run);

endmodule
