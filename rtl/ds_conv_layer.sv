// ds_conv_layer: one depth-wise separable convolution layer on a pixel stream.
//
// A raster stream of an H x W x CIN feature map goes in; a raster stream of the
// H x W x COUT output map comes out ("same" 3x3 padding, stride 1). Inside, a
// conv_window produces one 3x3 window per cycle, dw_conv3x3 filters each
// channel with its own kernel, and pw_conv1x1 mixes the channels, adds the
// (batch-norm folded) bias and applies ReLU. All channels and all taps are
// computed in parallel, so the layer finishes one output pixel per cycle.
// Interface: valid/ready streams; out_data is registered.
// Timing: an output pixel leaves two cycles after its window can be formed:
// one register in conv_window and one here, the depth-wise and point-wise
// arithmetic being combinational between them.
// The depth-wise/point-wise split, the channel counts and the per-layer
// structure follow the network; full parallelism within a pixel, the register
// placement and the activation function are this design's choices.
module ds_conv_layer
  import dscnn_pkg::*;
#(
  parameter int H     = 256,
  parameter int W     = 11,
  parameter int CIN   = 1,
  parameter int COUT  = 8,
  parameter int LAYER = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  act_t [CIN-1:0]   in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output act_t [COUT-1:0]  out_data
);

  logic                  win_valid, win_ready;
  act_t [CIN-1:0][8:0]   win;
  act_t [CIN-1:0]        dw_y;
  act_t [COUT-1:0]       pw_y;

  conv_window #(.H(H), .W(W), .C(CIN)) u_win (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data,
    .out_valid(win_valid), .out_ready(win_ready), .out_win(win)
  );

  dw_conv3x3 #(.C(CIN), .LAYER(LAYER)) u_dw (.win(win), .y(dw_y));

  pw_conv1x1 #(.CIN(CIN), .COUT(COUT), .LAYER(LAYER)) u_pw (.x(dw_y), .y(pw_y));

  assign win_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (win_ready) begin
      out_valid <= win_valid;
      if (win_valid) out_data <= pw_y;
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
