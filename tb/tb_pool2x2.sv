// tb_pool2x2: a max-pooling and an average-pooling instance (8 x 5 map, 3
// channels, so the odd last column is dropped) each get three random frames
// with random input gaps and output back-pressure. Every output pixel is
// compared with the reference pooling. A final gap-free frame checks that the
// pool never holds off its input and that its last output leaves one cycle
// after the input completing it (with odd W, in the cycle the dropped last
// column arrives).
module tb_pool2x2;
  import dscnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int H = 8, W = 5, C = 3, NFRAMES = 4;
  localparam int HO = H / 2, WO = W / 2;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0, cycle = 0;
  logic done_max = 0, done_avg = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  `define POOL_HARNESS(NAME, MD, ISAVG, DONE)                                          \
  logic NAME``_iv, NAME``_ir, NAME``_ov, NAME``_or;                                    \
  act_t [C-1:0] NAME``_id, NAME``_od;                                                  \
  pool2x2 #(.H(H), .W(W), .C(C), .MODE(MD)) NAME (                                     \
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
      NAME``_frames[f] = new[H * W * C];                                               \
      foreach (NAME``_frames[f][i]) NAME``_frames[f][i] = int'(act_t'($urandom));      \
      ref_pool(H, W, C, ISAVG, NAME``_frames[f], NAME``_ref[f]);                       \
    end                                                                                \
    wait (rst_n);                                                                      \
    for (int f = 0; f < NFRAMES; f++) begin                                            \
      if (f == NFRAMES - 1) begin                                                      \
        repeat (10) @(negedge clk);                                                    \
        NAME``_fast = 1;                                                               \
      end                                                                              \
      for (int p = 0; p < H * W; p++) begin                                            \
        @(negedge clk);                                                                \
        while (!NAME``_fast && $urandom % 3 == 0) begin                                \
          NAME``_iv = 0;                                                               \
          @(negedge clk);                                                              \
        end                                                                            \
        NAME``_iv = 1;                                                                 \
        for (int ch = 0; ch < C; ch++) NAME``_id[ch] = act_t'(NAME``_frames[f][p*C+ch]); \
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
  always @(posedge clk) NAME``_or <= NAME``_fast ? 1'b1 : ($urandom % 3 != 0);             \
  initial begin                                                                        \
    NAME``_or = 1;                                                                     \
    for (int f = 0; f < NFRAMES; f++)                                                  \
      for (int p = 0; p < HO * WO; p++) begin                                          \
        forever begin                                                                  \
          @(negedge clk);                                                              \
          if (NAME``_ov && NAME``_or) break;                                           \
        end                                                                            \
        for (int ch = 0; ch < C; ch++) begin                                           \
          checks++;                                                                    \
          if (int'(NAME``_od[ch]) != NAME``_ref[f][p*C+ch]) begin                      \
            failures++;                                                                \
            if (failures < 10) $display(`"NAME f%0d p%0d ch%0d got %0d exp %0d`",      \
                                        f, p, ch, NAME``_od[ch], NAME``_ref[f][p*C+ch]); \
          end                                                                          \
        end                                                                            \
        NAME``_lout = cycle;                                                           \
      end                                                                              \
    repeat (3) @(negedge clk);  /* let the driver finish the dropped last column */    \
    checks++;                                                                          \
    if (NAME``_lout - NAME``_lin != 1 - (W - 2 * WO)) begin                            \
      failures++;                                                                      \
      $display(`"NAME latency %0d (in %0d out %0d)`", NAME``_lout - NAME``_lin, NAME``_lin, NAME``_lout);                        \
    end                                                                                \
    DONE = 1;                                                                          \
  end

  `POOL_HARNESS(dut_max, POOL_MAX, 1'b0, done_max)
  `POOL_HARNESS(dut_avg, POOL_AVG, 1'b1, done_avg)

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done_max && done_avg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
