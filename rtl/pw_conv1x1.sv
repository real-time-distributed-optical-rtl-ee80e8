// pw_conv1x1: point-wise (1x1) convolution of one pixel, with bias, ReLU and
// requantization.
//
// Every output channel o is sum_i x[i] * w[o][i] + b[o], each product a
// shift-add (dscnn_pkg::wcode of layer LAYER). Batch normalisation is assumed
// folded into w and b before quantization. The sum is shifted back to activation
// scale (floor), passed through ReLU and saturated to 0..127.
// Purely combinational: CIN*COUT shift-add products and COUT adder trees.
// The 1x1 channel-combining stage follows the network; ReLU, the folding of
// batch normalisation and the rounding are this design's choices.
module pw_conv1x1
  import dscnn_pkg::*;
#(
  parameter int CIN   = 8,
  parameter int COUT  = 16,
  parameter int LAYER = 2
) (
  input  act_t [CIN-1:0]  x,
  output act_t [COUT-1:0] y
);

  for (genvar o = 0; o < COUT; o++) begin : g_out
    prod_t [CIN-1:0] p;
    for (genvar i = 0; i < CIN; i++) begin : g_in
      localparam wcode_t WC = wcode(LAYER, KIND_PW, o * CIN + i);
      shift_mul u_mul (.act(x[i]), .code(WC), .prod(p[i]));
    end

    acc_t sum;
    acc_t q;
    always_comb begin
      sum = acc_t'(bias(LAYER, KIND_PWB, o)) <<< EMAX;
      for (int i = 0; i < CIN; i++) sum += acc_t'(p[i]);
      q = sum >>> EMAX;
      y[o] = (q < 0) ? act_t'(0) : sat_act(q);
    end
  end

endmodule
