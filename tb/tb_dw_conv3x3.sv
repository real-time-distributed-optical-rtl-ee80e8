// tb_dw_conv3x3: random windows through the depth-wise 3x3 stage of layer 2
// (8 channels) and of layer 3 (16 channels); each channel output is compared
// with the reference model, including the saturation corners.
module tb_dw_conv3x3;
  import dscnn_pkg::*;
  import tb_ref_pkg::*;

  act_t [7:0][8:0]  win2;
  act_t [7:0]       y2;
  act_t [15:0][8:0] win3;
  act_t [15:0]      y3;
  int checks = 0, failures = 0;

  dw_conv3x3 #(.C(8),  .LAYER(2)) dut2 (.win(win2), .y(y2));
  dw_conv3x3 #(.C(16), .LAYER(3)) dut3 (.win(win3), .y(y3));

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int taps[9];
    for (int t = 0; t < 2000; t++) begin
      for (int c = 0; c < 16; c++)
        for (int k = 0; k < 9; k++) begin
          // mix of small values and extremes
          act_t v;
          v = (t % 4 == 0) ? act_t'(($urandom % 2) ? 127 : -128) : act_t'($urandom);
          if (c < 8) win2[c][k] = v;
          win3[c][k] = act_t'($urandom);
        end
      #1;
      for (int c = 0; c < 8; c++) begin
        for (int k = 0; k < 9; k++) taps[k] = int'(win2[c][k]);
        checks++;
        if (int'(y2[c]) != ref_dw(2, c, taps)) begin
          failures++;
          if (failures < 10) $display("L2 ch%0d got %0d exp %0d", c, y2[c], ref_dw(2, c, taps));
        end
      end
      for (int c = 0; c < 16; c++) begin
        for (int k = 0; k < 9; k++) taps[k] = int'(win3[c][k]);
        checks++;
        if (int'(y3[c]) != ref_dw(3, c, taps)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
