// tb_pw_conv1x1: random pixels through the point-wise stages of layer 2
// (8 -> 16) and layer 3 (16 -> 32); outputs are compared with the reference
// model, and the test makes sure both ReLU clamping and positive outputs occur.
module tb_pw_conv1x1;
  import dscnn_pkg::*;
  import tb_ref_pkg::*;

  act_t [7:0]  x2;
  act_t [15:0] y2;
  act_t [15:0] x3;
  act_t [31:0] y3;
  int checks = 0, failures = 0, zeros = 0, positives = 0;

  pw_conv1x1 #(.CIN(8),  .COUT(16), .LAYER(2)) dut2 (.x(x2), .y(y2));
  pw_conv1x1 #(.CIN(16), .COUT(32), .LAYER(3)) dut3 (.x(x3), .y(y3));

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v2[], v3[];
    v2 = new[8];
    v3 = new[16];
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < 8; i++)  begin x2[i] = act_t'($urandom); v2[i] = int'(x2[i]); end
      for (int i = 0; i < 16; i++) begin x3[i] = act_t'($urandom); v3[i] = int'(x3[i]); end
      #1;
      for (int o = 0; o < 16; o++) begin
        checks++;
        if (int'(y2[o]) != ref_pw(2, 8, o, v2)) begin
          failures++;
          if (failures < 10) $display("L2 o%0d got %0d exp %0d", o, y2[o], ref_pw(2, 8, o, v2));
        end
        if (y2[o] == 0) zeros++; else positives++;
      end
      for (int o = 0; o < 32; o++) begin
        checks++;
        if (int'(y3[o]) != ref_pw(3, 16, o, v3)) failures++;
      end
    end
    checks++;
    if (zeros == 0 || positives == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
