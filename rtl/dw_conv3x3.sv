// dw_conv3x3: depth-wise 3x3 convolution of one window position.
//
// Each of the C input channels is filtered by its own 3x3 kernel (no mixing
// between channels), a per-channel bias is added, and the sum is brought back
// to activation scale (arithmetic shift right by EMAX, i.e. floor) and
// saturated to 8 bits. No activation function follows the depth-wise stage;
// batch normalisation and ReLU act after the point-wise stage.
// Interface: win[c][k] is tap k = 3*(dr+1) + (dc+1) of channel c, row offset dr
// and column offset dc in -1..1. Weights are constants from dscnn_pkg::wcode
// of layer LAYER. Purely combinational: 9 shift-add products per channel.
// The depth-wise split and the 3x3 kernel follow the network; the 3x3 size is
// derived from its parameter count (4141), not stated outright.
module dw_conv3x3
  import dscnn_pkg::*;
#(
  parameter int C     = 8,
  parameter int LAYER = 2
) (
  input  act_t [C-1:0][8:0] win,
  output act_t [C-1:0]      y
);

  for (genvar c = 0; c < C; c++) begin : g_ch
    prod_t [8:0] p;
    for (genvar k = 0; k < 9; k++) begin : g_tap
      localparam wcode_t WC = wcode(LAYER, KIND_DW, c * 9 + k);
      shift_mul u_mul (.act(win[c][k]), .code(WC), .prod(p[k]));
    end

    acc_t sum;
    always_comb begin
      sum = acc_t'(bias(LAYER, KIND_DWB, c)) <<< EMAX;
      for (int k = 0; k < 9; k++) sum += acc_t'(p[k]);
      y[c] = sat_act(sum >>> EMAX);
    end
  end

endmodule
