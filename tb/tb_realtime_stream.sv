// tb_realtime_stream: continuous monitoring workload. A long run of synthetic
// 256 x 11 patches (different fiber segments) is streamed back to back with no
// gaps into the full-size accelerator, as in real-time operation where patches
// of every 12.5 m segment arrive every 0.256 s. Every result is compared with
// the reference network, results must come out in order, and the measured
// time per patch is held against the real-time budgets: 168.7 km of fiber at a
// 2.24 ns clock allows 8,469 cycles per patch, 103.1 km at 4.9 ns allows
// 6,334. The steady-state interval must be H*W + 2*W cycles.
module tb_realtime_stream;
  import dscnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int H = 256, W = 11, NS = 120;
  localparam int BUDGET_HIGH = 8469;   // 0.256 s / (168,700 m / 12.5 m) / 2.24 ns
  localparam int BUDGET_LOW  = 6334;   // 0.256 s / (103,100 m / 12.5 m) / 4.9 ns
  localparam int EXP_INTERVAL = H * W + 2 * W;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, res_valid;
  logic res_ready = 1'b1;
  act_t in_data;
  class_e res_class;
  fc_acc_t [NCLASS-1:0] res_logits;

  int checks = 0, failures = 0, cycle = 0;
  int t_first[NS];
  int t_res_last;
  int samples[NS][];

  dscnn3_top dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    repeat (NS * (H * W + 100) + 10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Patch i: vibration of random frequency, amplitude and position, or quiet
  // background, plus noise.
  function automatic void make_sample(output int s[]);
    real f, amp, ph, x0, v;
    s   = new[H * W];
    f   = 2.0 + ($urandom % 200);
    amp = ($urandom % 4 == 0) ? 0.0 : 20.0 + ($urandom % 90);
    ph  = ($urandom % 628) / 100.0;
    x0  = $urandom % 11;
    for (int t = 0; t < H; t++)
      for (int x = 0; x < W; x++) begin
        real d;
        d = (x - x0) / 2.5;
        v = amp * $exp(-d * d) * $sin(6.2831853 * f * t / 1000.0 + ph) + ($urandom % 25) - 12.0;
        s[t * W + x] = (v > 127.0) ? 127 : (v < -128.0) ? -128 : int'(v);
      end
  endfunction

  initial begin
    in_valid = 0;
    in_data  = '0;
    for (int i = 0; i < NS; i++) make_sample(samples[i]);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NS; i++)
      for (int p = 0; p < H * W; p++) begin
        @(negedge clk);
        in_valid = 1;
        in_data  = act_t'(samples[i][p]);
        while (!in_ready) @(negedge clk);
        if (p == 0) t_first[i] = cycle;
      end
    @(negedge clk);
    in_valid = 0;
  end

  initial begin
    int f1[], p1[], f2[], p2[], f3[], p3[];
    longint logits[3];
    int cls;
    int seen[3] = '{0, 0, 0};
    for (int i = 0; i < NS; i++) begin
      do @(negedge clk); while (!res_valid);
      t_res_last = cycle;
      ref_layer(H, W, 1, 8, 1, samples[i], f1);
      ref_pool(H, W, 8, 1'b0, f1, p1);
      ref_layer(H / 2, W / 2, 8, 16, 2, p1, f2);
      ref_pool(H / 2, W / 2, 16, 1'b0, f2, p2);
      ref_layer(H / 4, W / 4, 16, 32, 3, p2, f3);
      ref_pool(H / 4, W / 4, 32, 1'b1, f3, p3);
      ref_fc(H / 8, 32, p3, logits, cls);
      checks++;
      if (int'(res_class) != cls) failures++;
      for (int k = 0; k < 3; k++) begin
        checks++;
        if (longint'(res_logits[k]) != logits[k]) failures++;
      end
      seen[cls]++;
    end
    begin
      real per_patch;
      per_patch = real'(t_res_last - t_first[0]) / NS;
      $display("%0d patches in %0d cycles: %.1f cycles per patch (budgets %0d and %0d)",
               NS, t_res_last - t_first[0], per_patch, BUDGET_HIGH, BUDGET_LOW);
      $display("classes %0d %0d %0d", seen[0], seen[1], seen[2]);
      checks++;
      if (per_patch > BUDGET_HIGH) failures++;
      checks++;
      if (per_patch > BUDGET_LOW) failures++;
    end
    for (int i = 1; i < NS; i++) begin
      checks++;
      if (t_first[i] - t_first[i - 1] != EXP_INTERVAL) begin
        failures++;
        $display("interval %0d -> %0d: %0d cycles", i - 1, i, t_first[i] - t_first[i - 1]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
