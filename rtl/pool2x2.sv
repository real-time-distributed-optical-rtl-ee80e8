// pool2x2: 2x2 pooling with stride 2 on a pixel stream, max or average.
//
// An H x W x C map arrives in raster order; the (H/2) x (W/2) x C result leaves
// in raster order. For odd W the last column is dropped (floor), which gives the
// map sizes of the network: 11 -> 5 and 5 -> 2 columns. One partial result per
// output column is kept: the even input row starts it, the odd row completes
// it, and the output pixel is sent when the lower-right input of its 2x2 block
// arrives. MODE = POOL_MAX takes the maximum; MODE = POOL_AVG sums the four
// values and shifts right by 2 (floor).
// Interface: valid/ready streams; out_data is registered. An input beat is
// taken whenever the output register is empty or being read.
// Timing: the output pixel appears one cycle after the input that completes it.
// Max pooling after the first two layers and average pooling after the third
// follow the paper; the 2x2 window, stride 2 and floor are read off the map
// sizes of the network figure (256x11 -> 128x5 -> 64x2 -> 32x1).
module pool2x2
  import dscnn_pkg::*;
#(
  parameter int         H    = 256,
  parameter int         W    = 11,
  parameter int         C    = 8,
  parameter pool_mode_e MODE = POOL_MAX
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  act_t [C-1:0]  in_data,
  output logic          out_valid,
  input  logic          out_ready,
  output act_t [C-1:0]  out_data
);

  localparam int WO = W / 2;
  localparam int RW = $clog2(H + 1);
  localparam int CW = (W > 1) ? $clog2(W) : 1;
  localparam int SW = ACT_W + 2;  // a sum of four activations

  typedef logic signed [SW-1:0] part_t;

  part_t [C-1:0] part [WO];
  logic [RW-1:0] r;
  logic [CW-1:0] c;
  logic          in_fire, in_use, first_row, first_col;
  part_t [C-1:0] comb_val;

  assign in_ready  = !out_valid || out_ready;
  assign in_fire   = in_valid && in_ready;
  assign in_use    = int'(c) < 2 * WO;
  assign first_row = !r[0];
  assign first_col = !c[0];

  // Combine the incoming pixel with the partial result of its output column.
  always_comb begin
    for (int ch = 0; ch < C; ch++) begin
      part_t a, b;
      a = part[int'(c) / 2][ch];
      b = part_t'(in_data[ch]);
      if (first_row && first_col) comb_val[ch] = b;
      else if (MODE == POOL_MAX)  comb_val[ch] = (b > a) ? b : a;
      else                        comb_val[ch] = a + b;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r         <= '0;
      c         <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_fire) begin
        if (in_use && !first_row && !first_col) begin
          out_valid <= 1'b1;
          for (int ch = 0; ch < C; ch++)
            out_data[ch] <= (MODE == POOL_MAX) ? act_t'(comb_val[ch]) : act_t'(comb_val[ch] >>> 2);
        end
        if (int'(c) == W - 1) begin
          c <= '0;
          r <= (int'(r) == H - 1) ? '0 : r + 1'b1;
        end else begin
          c <= c + 1'b1;
        end
      end
    end
  end

  // Partial results need no reset: each is started before it is read.
  always_ff @(posedge clk) begin
    if (in_fire && in_use) part[int'(c) / 2] <= comb_val;
  end

endmodule
