// conv_window: line buffer and 3x3 window generator for a streamed feature map.
//
// Pixels of an H x W map (C channels in parallel) arrive in raster order:
// row 0 column 0..W-1, then row 1, and so on. In this network a row is one
// time step and a column one spatial point. Rows are kept in a four-slot
// circular row buffer (slot = row mod 4). Output row e needs input rows e-1, e,
// e+1, so it is emitted as soon as row e+1 is complete (row H-1 once the frame
// is complete), one window per cycle, columns 0..W-1. Positions outside the map
// read as zero ("same" padding), so the output map is also H x W.
// While row e is emitted the input keeps flowing into the fourth slot; the input
// is held off (in_ready low) only when it would overwrite row e-1, and at the end
// of a frame until its last row has been emitted.
// Interface: valid/ready on both sides; a beat moves when valid and ready are
// both high. out_win[c][k] is tap k = 3*(dr+1) + (dc+1) of channel c. out_win is
// registered; it stays stable while out_valid is high and out_ready low.
// Timing: output row e starts one cycle after the last pixel of row e+1 is taken.
// The streaming line-buffer structure is this design's own: the paper asks for
// no block RAM, which rules out buffering whole feature maps.
module conv_window
  import dscnn_pkg::*;
#(
  parameter int H = 256,
  parameter int W = 11,
  parameter int C = 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  act_t [C-1:0]      in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output act_t [C-1:0][8:0] out_win
);

  localparam int RW = $clog2(H + 4);
  localparam int CW = (W > 1) ? $clog2(W) : 1;

  act_t [C-1:0] rowbuf [4][W];

  logic [RW-1:0] wr_r, em_r;
  logic [CW-1:0] wr_c, em_c;
  logic          emit_ok, load, in_fire;
  act_t [C-1:0][8:0] win_next;

  always_comb begin
    int need;
    need     = (int'(em_r) + 2 > H) ? H : int'(em_r) + 2;
    emit_ok  = int'(wr_r) >= need;
    in_ready = (int'(wr_r) < H) && (int'(wr_r) < int'(em_r) + 3);
  end

  assign in_fire = in_valid && in_ready;
  assign load    = emit_ok && (!out_valid || out_ready);

  // Assemble the window of position (em_r, em_c) with zero padding.
  always_comb begin
    int rr, cc;
    for (int dr = 0; dr < 3; dr++) begin
      for (int dc = 0; dc < 3; dc++) begin
        rr = int'(em_r) + dr - 1;
        cc = int'(em_c) + dc - 1;
        for (int ch = 0; ch < C; ch++) begin
          if (rr >= 0 && rr < H && cc >= 0 && cc < W)
            win_next[ch][3*dr+dc] = rowbuf[rr % 4][cc][ch];
          else
            win_next[ch][3*dr+dc] = '0;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_r      <= '0;
      wr_c      <= '0;
      em_r      <= '0;
      em_c      <= '0;
      out_valid <= 1'b0;
      out_win   <= '0;
    end else begin
      if (in_fire) begin
        if (int'(wr_c) == W - 1) begin
          wr_c <= '0;
          wr_r <= wr_r + 1'b1;
        end else begin
          wr_c <= wr_c + 1'b1;
        end
      end

      if (out_valid && out_ready) out_valid <= 1'b0;

      if (load) begin
        out_valid <= 1'b1;
        out_win   <= win_next;
        if (int'(em_c) == W - 1) begin
          em_c <= '0;
          if (int'(em_r) == H - 1) begin
            // Frame finished: the buffer is free for the next frame.
            em_r <= '0;
            wr_r <= '0;
          end else begin
            em_r <= em_r + 1'b1;
          end
        end else begin
          em_c <= em_c + 1'b1;
        end
      end
    end
  end

  // The row buffer needs no reset: a slot is always written before it is read.
  always_ff @(posedge clk) begin
    if (in_fire) rowbuf[int'(wr_r) % 4][wr_c] <= in_data;
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_win));

endmodule
