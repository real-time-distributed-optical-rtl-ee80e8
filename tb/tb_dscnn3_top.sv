// tb_dscnn3_top: end-to-end test of the accelerator at its default size
// (256 x 11 samples, 8/16/32 channels, 1024 -> 3 classifier).
//
// Synthetic vibration samples are generated in the testbench: a decaying burst
// of a sine at a sample-dependent frequency, strongest at the centre fiber
// position, plus noise, quantised to 8 bits. Each sample is classified by the
// reference model of the whole network and the class and logits of the design
// are compared with it.
// Sample 0 is streamed without gaps while results are always accepted; its
// latency (first value in to result out) must be the pipeline's 2,859 cycles
// and must be within the 8,469 cycles per sample reported for the FPGA
// implementation. Samples 1 and 2 follow back to back without gaps; the
// interval between their first values must be H*W + 2*W cycles. The last
// samples are streamed with random gaps and random result back-pressure. The test counts how often the
// mechanisms of the design happen and fails if one never does: input held off
// (in_ready low), a result held by back-pressure, a sample entering while the
// previous one is still in flight, and ReLU clamping and max/average pooling
// changing values (seen in the reference model).
module tb_dscnn3_top;
  import dscnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int H = 256, W = 11, NS = 5;
  // Last input at H*W-1; each layer adds 2*W+2 (its last two rows are emitted
// after its last input), the average pool 1 and the classifier 1.
  localparam int EXP_LATENCY = H * W - 1 + (2 * W + 2) + (2 * (W / 2) + 2) + (2 * (W / 4) + 2) + 2;
  localparam int PAPER_CYCLES = 8469;
  // Back to back, layer 1 holds the next sample off while it emits its last
  // two rows: one sample per H*W + 2*W cycles.
  localparam int EXP_INTERVAL = H * W + 2 * W;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, res_valid, res_ready;
  act_t in_data;
  class_e res_class;
  fc_acc_t [NCLASS-1:0] res_logits;

  int checks = 0, failures = 0, cycle = 0;
  int samples[NS][];
  bit fast = 1;
  int t_first_in[NS], t_res[NS];
  int n_in_stall = 0, n_res_hold = 0, n_overlap = 0;
  int class_seen[3] = '{0, 0, 0};
  int sent = 0, received = 0;

  dscnn3_top dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;
  always @(posedge clk) res_ready <= fast ? 1'b1 : ($urandom % 4 == 0);

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog: %0d of %0d results", received, NS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Synthetic sample.
  function automatic void make_sample(input int idx, output int s[]);
    real f, amp, ph, v;
    s = new[H * W];
    f   = 5.0 + 37.0 * idx;               // Hz, traces at 1 kHz
    amp = 40.0 + 15.0 * (idx % 3);
    ph  = 0.3 * idx;
    for (int t = 0; t < H; t++)
      for (int x = 0; x < W; x++) begin
        real env, d;
        d   = (x - 5.0) / 3.0;
        env = $exp(-d * d) * $exp(-((t % 128) / 60.0));
        v   = amp * env * $sin(6.2831853 * f * t / 1000.0 + ph + 0.4 * x)
              + ($urandom % 17) - 8.0;
        s[t * W + x] = (v > 127.0) ? 127 : (v < -128.0) ? -128 : int'(v);
      end
  endfunction

  // Driver.
  initial begin
    in_valid = 0;
    in_data  = '0;
    for (int i = 0; i < NS; i++) make_sample(i, samples[i]);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NS; i++) begin
      if (i == 3) fast = 0;
      for (int p = 0; p < H * W; p++) begin
        @(negedge clk);
        while (!fast && $urandom % 8 == 0) begin
          in_valid = 0;
          @(negedge clk);
        end
        in_valid = 1;
        in_data  = act_t'(samples[i][p]);
        while (!in_ready) begin
          n_in_stall++;
          @(negedge clk);
        end
        if (p == 0) begin
          t_first_in[i] = cycle;
          if (sent > received) n_overlap++;
        end
      end
      sent++;
      if (i == 0) begin
        // Let sample 0 finish alone so that its latency is clean.
        @(negedge clk);
        in_valid = 0;
        wait (received == 1);
      end
    end
    @(negedge clk);
    in_valid = 0;
  end

  // Monitor and reference.
  initial begin
    int f1[], p1[], f2[], p2[], f3[], p3[];
    longint logits[3];
    int cls, relu_zero, pool_changed;
    relu_zero = 0;
    pool_changed = 0;
    for (int i = 0; i < NS; i++) begin
      int first;
      first = -1;
      forever begin
        @(negedge clk);
        if (res_valid && first < 0) first = cycle;
        if (res_valid && !res_ready) n_res_hold++;
        if (res_valid && res_ready) break;
      end
      t_res[i] = first;
      received++;
      ref_layer(H, W, 1, 8, 1, samples[i], f1);
      ref_pool(H, W, 8, 1'b0, f1, p1);
      ref_layer(H / 2, W / 2, 8, 16, 2, p1, f2);
      ref_pool(H / 2, W / 2, 16, 1'b0, f2, p2);
      ref_layer(H / 4, W / 4, 16, 32, 3, p2, f3);
      ref_pool(H / 4, W / 4, 32, 1'b1, f3, p3);
      ref_fc(H / 8, 32, p3, logits, cls);
      foreach (f1[j]) if (f1[j] == 0) relu_zero++;
      foreach (p3[j]) if (p3[j] != f3[((j / 32) * 2) * 2 * 32 + (j % 32)]) pool_changed++;
      for (int k = 0; k < 3; k++) begin
        checks++;
        if (longint'(res_logits[k]) != logits[k]) begin
          failures++;
          $display("sample %0d logit %0d got %0d exp %0d", i, k, longint'(res_logits[k]), logits[k]);
        end
      end
      checks++;
      if (int'(res_class) != cls) failures++;
      class_seen[cls]++;
      $display("sample %0d: class %0d, logits %0d %0d %0d, latency %0d cycles", i, res_class,
               longint'(res_logits[0]), longint'(res_logits[1]), longint'(res_logits[2]), t_res[i] - t_first_in[i]);
    end

    checks++;
    if (t_res[0] - t_first_in[0] != EXP_LATENCY) begin
      failures++;
      $display("latency %0d, expected %0d", t_res[0] - t_first_in[0], EXP_LATENCY);
    end
    checks++;
    if (t_res[0] - t_first_in[0] > PAPER_CYCLES) failures++;
    // Samples 1 and 2 follow each other without gaps: sustained interval.
    checks++;
    if (t_first_in[2] - t_first_in[1] != EXP_INTERVAL) begin
      failures++;
      $display("sample interval %0d, expected %0d", t_first_in[2] - t_first_in[1], EXP_INTERVAL);
    end

    $display("mechanisms: input stalls %0d, result holds %0d, overlapped samples %0d, ReLU zeros %0d, avg-pool changes %0d",
             n_in_stall, n_res_hold, n_overlap, relu_zero, pool_changed);
    $display("classes: %0d %0d %0d", class_seen[0], class_seen[1], class_seen[2]);
    checks++; if (n_in_stall == 0)   failures++;
    checks++; if (n_res_hold == 0)   failures++;
    checks++; if (n_overlap == 0)    failures++;
    checks++; if (relu_zero == 0)    failures++;
    checks++; if (pool_changed == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
