// tb_fc_classifier: the full-size 1024 -> 3 layer (32 positions x 32 channels)
// receives random feature maps with random input gaps and random result
// back-pressure. The three logits and the class are compared with the reference
// model for each map; a result must stay put while res_ready is low, and must
// appear one cycle after the last input beat. The sparse random maps make
// every class win at least once, which the test requires.
module tb_fc_classifier;
  import dscnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int NPOS = 32, C = 32, NFRAMES = 40;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, res_valid, res_ready;
  act_t [C-1:0]         in_data;
  class_e               res_class;
  fc_acc_t [NCLASS-1:0] res_logits;
  int checks = 0, failures = 0, cycle = 0, holds = 0;
  int frames[NFRAMES][];
  int class_seen[3] = '{0, 0, 0};
  int lin, lout;  // lout kept for debugging

  fc_classifier #(.NPOS(NPOS), .C(C), .LAYER(4)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;
  always @(posedge clk) res_ready <= ($urandom % 3 != 0);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0;
    in_data  = '0;
    for (int f = 0; f < NFRAMES; f++) begin
      frames[f] = new[NPOS * C];
      // Sparse non-negative maps, as after ReLU.
      foreach (frames[f][i]) frames[f][i] = ($urandom % 4 == 0) ? int'($urandom % 128) : 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NFRAMES; f++)
      for (int p = 0; p < NPOS; p++) begin
        @(negedge clk);
        while ($urandom % 4 == 0) begin
          in_valid = 0;
          @(negedge clk);
        end
        in_valid = 1;
        for (int ch = 0; ch < C; ch++) in_data[ch] = act_t'(frames[f][p * C + ch]);
        while (!in_ready) @(negedge clk);
        lin = cycle;
      end
    @(negedge clk);
    in_valid = 0;
  end

  initial begin
    longint logits[3];
    int cls;
    for (int f = 0; f < NFRAMES; f++) begin
      int first;
      first = -1;
      forever begin
        @(negedge clk);
        if (res_valid && first < 0) first = cycle;
        if (res_valid && !res_ready) holds++;
        if (res_valid && res_ready) break;
      end
      lout = cycle;
      ref_fc(NPOS, C, frames[f], logits, cls);
      for (int k = 0; k < 3; k++) begin
        checks++;
        if (longint'(res_logits[k]) != logits[k]) begin
          failures++;
          if (failures < 10) $display("frame %0d logit %0d got %0d exp %0d", f, k, res_logits[k], logits[k]);
        end
      end
      checks++;
      if (int'(res_class) != cls) failures++;
      class_seen[cls]++;
      // Output one cycle after the last beat, unless it waited for res_ready.
      checks++;
      if (first - lin != 1) begin
        failures++;
        $display("frame %0d: result %0d cycles after the last beat", f, first - lin);
      end
      @(negedge clk);
    end
    $display("classes seen %0d %0d %0d, result holds %0d", class_seen[0], class_seen[1], class_seen[2], holds);
    checks++;
    if (holds == 0 || class_seen[0] == 0 || class_seen[1] == 0 || class_seen[2] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
