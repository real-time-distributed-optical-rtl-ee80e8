// dscnn3_top: streaming inference accelerator for the DSCNN-3 vibration
// classifier of a phase-sensitive OTDR (distributed vibration sensing) system.
//
// One sample is H x W = 256 x 11 values: 256 consecutive traces (one per ms)
// at 11 neighbouring fiber positions. The sample is sent row by row (one time
// step of 11 positions, then the next) as signed 8-bit values, one per beat.
// The network, all of it in logic with hard-wired shift-add weights:
//   layer 1  depth-wise separable 3x3 conv  1 -> 8 ch   256x11
//            2x2 max pool                              -> 128x5
//   layer 2  depth-wise separable 3x3 conv  8 -> 16 ch  128x5
//            2x2 max pool                              -> 64x2
//   layer 3  depth-wise separable 3x3 conv 16 -> 32 ch  64x2
//            2x2 average pool                          -> 32x1
//   flatten 1024 -> fully connected -> 3 classes, arg-max
// The stages run concurrently as a dataflow pipeline joined by valid/ready
// streams; every stage keeps up with one input value per cycle. A sample
// streamed without gaps is classified H*W + 2*(W + W/2 + W/4) + 7 cycles after
// its first value is taken (2,859 cycles at the default size, 6.4 us at the
// 2.24 ns clock reported for the FPGA build); each layer's last two output rows
// can only be formed after its last input row, which is where the 2*W terms
// come from. The next sample may start as soon as layer 1 has emitted its last
// row (2*W + 1 cycles after the previous sample's last value), so one sample
// per H*W + 2*W cycles (2,838) is sustained.
// Interface: in_valid/in_ready/in_data is the sample stream; res_valid,
// res_class (0 hammer, 1 air pick, 2 excavator) and res_logits are held until
// res_ready.
// The layer sequence, channel counts, pooling types, map sizes and shift-add
// arithmetic follow the paper; the stream order, number formats, padding,
// activation, flatten order and the weight values (placeholders from
// dscnn_pkg) are this design's choices.
module dscnn3_top
  import dscnn_pkg::*;
#(
  parameter int H  = 256,
  parameter int W  = 11,
  parameter int C1 = 8,
  parameter int C2 = 16,
  parameter int C3 = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  act_t                 in_data,
  output logic                 res_valid,
  input  logic                 res_ready,
  output class_e               res_class,
  output fc_acc_t [NCLASS-1:0] res_logits
);

  localparam int H2 = H / 2, W2 = W / 2;
  localparam int H3 = H2 / 2, W3 = W2 / 2;
  localparam int HF = H3 / 2, WF = W3 / 2;

  logic             l1_v, l1_r, p1_v, p1_r, l2_v, l2_r, p2_v, p2_r, l3_v, l3_r, p3_v, p3_r;
  act_t [C1-1:0]    l1_d, p1_d;
  act_t [C2-1:0]    l2_d, p2_d;
  act_t [C3-1:0]    l3_d, p3_d;
  act_t [0:0]       x;

  assign x[0] = in_data;

  ds_conv_layer #(.H(H), .W(W), .CIN(1), .COUT(C1), .LAYER(1)) u_l1 (
    .clk, .rst_n, .in_valid, .in_ready, .in_data(x),
    .out_valid(l1_v), .out_ready(l1_r), .out_data(l1_d));

  pool2x2 #(.H(H), .W(W), .C(C1), .MODE(POOL_MAX)) u_p1 (
    .clk, .rst_n, .in_valid(l1_v), .in_ready(l1_r), .in_data(l1_d),
    .out_valid(p1_v), .out_ready(p1_r), .out_data(p1_d));

  ds_conv_layer #(.H(H2), .W(W2), .CIN(C1), .COUT(C2), .LAYER(2)) u_l2 (
    .clk, .rst_n, .in_valid(p1_v), .in_ready(p1_r), .in_data(p1_d),
    .out_valid(l2_v), .out_ready(l2_r), .out_data(l2_d));

  pool2x2 #(.H(H2), .W(W2), .C(C2), .MODE(POOL_MAX)) u_p2 (
    .clk, .rst_n, .in_valid(l2_v), .in_ready(l2_r), .in_data(l2_d),
    .out_valid(p2_v), .out_ready(p2_r), .out_data(p2_d));

  ds_conv_layer #(.H(H3), .W(W3), .CIN(C2), .COUT(C3), .LAYER(3)) u_l3 (
    .clk, .rst_n, .in_valid(p2_v), .in_ready(p2_r), .in_data(p2_d),
    .out_valid(l3_v), .out_ready(l3_r), .out_data(l3_d));

  pool2x2 #(.H(H3), .W(W3), .C(C3), .MODE(POOL_AVG)) u_p3 (
    .clk, .rst_n, .in_valid(l3_v), .in_ready(l3_r), .in_data(l3_d),
    .out_valid(p3_v), .out_ready(p3_r), .out_data(p3_d));

  fc_classifier #(.NPOS(HF * WF), .C(C3), .LAYER(4)) u_fc (
    .clk, .rst_n, .in_valid(p3_v), .in_ready(p3_r), .in_data(p3_d),
    .res_valid, .res_ready, .res_class, .res_logits);

endmodule
