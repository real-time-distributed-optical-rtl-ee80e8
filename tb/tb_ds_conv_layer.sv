// tb_ds_conv_layer: two depth-wise separable layers of reduced size (10 x 5,
// 4 -> 8 channels with the layer-2 weights, and 8 x 3, 16 -> 32 channels with
// the layer-3 weights) each get three random frames with random input gaps and
// output back-pressure; every output pixel is compared with the reference model
// (padding, depth-wise, point-wise, ReLU). A final gap-free frame checks that
// the layer takes one pixel per cycle and that its last output leaves
// 2*W + 2 cycles after the last input.
module tb_ds_conv_layer;
  import dscnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int NFRAMES = 4;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0, cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic done_a = 0, done_b = 0;

  // One test harness per configuration.
  `define DS_HARNESS(NAME, HH, WW, CI, CO, LY, DONE)                                   \
  logic NAME``_iv, NAME``_ir, NAME``_ov, NAME``_or;                                    \
  act_t [CI-1:0] NAME``_id;                                                            \
  act_t [CO-1:0] NAME``_od;                                                            \
  ds_conv_layer #(.H(HH), .W(WW), .CIN(CI), .COUT(CO), .LAYER(LY)) NAME (              \
    .clk, .rst_n, .in_valid(NAME``_iv), .in_ready(NAME``_ir), .in_data(NAME``_id),     \
    .out_valid(NAME``_ov), .out_ready(NAME``_or), .out_data(NAME``_od));               \
  int NAME``_frames[NFRAMES][];                                                        \
  int NAME``_ref[NFRAMES][];                                                           \
  bit NAME``_fast = 0;                                                                 \
  int NAME``_lin, NAME``_lout;                                                         \
  initial begin                                                                        \
    NAME``_iv = 0;                                                                     \
    NAME``_id = '0;                                                                    \
    for (int f = 0; f < NFRAMES; f++) begin                                            \
      NAME``_frames[f] = new[HH * WW * CI];                                            \
      foreach (NAME``_frames[f][i]) NAME``_frames[f][i] = int'(act_t'($urandom % 128)); \
      ref_layer(HH, WW, CI, CO, LY, NAME``_frames[f], NAME``_ref[f]);                  \
    end                                                                                \
    wait (rst_n);                                                                      \
    for (int f = 0; f < NFRAMES; f++) begin                                            \
      if (f == NFRAMES - 1) begin                                                      \
        repeat (3 * WW + 10) @(negedge clk);                                           \
        NAME``_fast = 1;                                                               \
      end                                                                              \
      for (int p = 0; p < HH * WW; p++) begin                                          \
        @(negedge clk);                                                                \
        while (!NAME``_fast && $urandom % 3 == 0) begin                                \
          NAME``_iv = 0;                                                               \
          @(negedge clk);                                                              \
        end                                                                            \
        NAME``_iv = 1;                                                                 \
        for (int ch = 0; ch < CI; ch++) NAME``_id[ch] = act_t'(NAME``_frames[f][p*CI+ch]); \
        while (!NAME``_ir) begin                                                       \
          if (NAME``_fast) failures++;                                                 \
          @(negedge clk);                                                              \
        end                                                                            \
        NAME``_lin = cycle;                                                            \
      end                                                                              \
      @(negedge clk);                                                                  \
      NAME``_iv = 0;                                                                   \
    end                                                                                \
  end                                                                                  \
  /* out_ready changes after the rising edge only, so that in_ready is      */ \
  /* stable when the driver looks at it on the falling edge.                */ \
  always @(posedge clk) NAME``_or <= NAME``_fast ? 1'b1 : ($urandom % 4 != 0);             \
  initial begin                                                                        \
    NAME``_or = 1;                                                                     \
    for (int f = 0; f < NFRAMES; f++)                                                  \
      for (int p = 0; p < HH * WW; p++) begin                                          \
        forever begin                                                                  \
          @(negedge clk);                                                              \
          if (NAME``_ov && NAME``_or) break;                                           \
        end                                                                            \
        for (int o = 0; o < CO; o++) begin                                             \
          checks++;                                                                    \
          if (int'(NAME``_od[o]) != NAME``_ref[f][p*CO+o]) begin                       \
            failures++;                                                                \
            if (failures < 10) $display(`"NAME f%0d p%0d o%0d got %0d exp %0d`",       \
                                        f, p, o, NAME``_od[o], NAME``_ref[f][p*CO+o]);  \
          end                                                                          \
        end                                                                            \
        NAME``_lout = cycle;                                                           \
      end                                                                              \
    checks++;                                                                          \
    if (NAME``_lout - NAME``_lin != 2 * WW + 2) begin                                  \
      failures++;                                                                      \
      $display(`"NAME latency %0d, expected %0d`", NAME``_lout - NAME``_lin, 2*WW+2);  \
    end                                                                                \
    DONE = 1;                                                                          \
  end

  `DS_HARNESS(dut_a, 10, 5, 4, 8, 2, done_a)
  `DS_HARNESS(dut_b, 8, 3, 16, 32, 3, done_b)

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done_a && done_b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
