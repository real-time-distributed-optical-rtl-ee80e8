// tb_conv_window: streams frames of a small map (6 x 5, 2 channels) through the
// window generator, with random gaps on the input and random back-pressure on
// the output, and compares every window (zero padding included) with windows
// cut from the stored frame. A last frame is sent without gaps or back-pressure
// to check the timing: rows H-2 and H-1 can only be emitted once the last row
// is in, so the final window must leave 2*W + 1 cycles after the last input pixel, and the input must never be held off.
module tb_conv_window;
  import dscnn_pkg::*;

  localparam int H = 6, W = 5, C = 2, NFRAMES = 4;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  act_t [C-1:0]      in_data;
  act_t [C-1:0][8:0] out_win;
  int checks = 0, failures = 0, in_stalls = 0, out_holds = 0;
  int frame_data[NFRAMES][H][W][C];
  bit fast;
  int last_in_cycle, last_out_cycle, cycle = 0;

  conv_window #(.H(H), .W(W), .C(C)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Driver.
  initial begin
    in_valid = 0;
    in_data  = '0;
    fast     = 0;
    foreach (frame_data[f, r, c, ch]) frame_data[f][r][c][ch] = int'(act_t'($urandom));
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NFRAMES; f++) begin
      if (f == NFRAMES - 1) begin
        wait (!out_valid);
        repeat (4) @(posedge clk);
        fast = 1;
      end
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          // Signals change at the falling edge; a beat moves at the next
          // rising edge when in_ready (a function of registers only) is high.
          @(negedge clk);
          while (!fast && ($urandom % 3 == 0)) begin
            in_valid = 0;
            @(negedge clk);
          end
          in_valid = 1;
          for (int ch = 0; ch < C; ch++) in_data[ch] = act_t'(frame_data[f][r][c][ch]);
          while (!in_ready) begin
            in_stalls++;
            if (fast) failures++;
            @(negedge clk);
          end
          last_in_cycle = cycle;
        end
      @(negedge clk);
      in_valid = 0;
    end
  end

  // out_ready changes after the rising edge only, so that in_ready is stable
  // when the driver looks at it on the falling edge.
  always @(posedge clk) out_ready <= fast ? 1'b1 : ($urandom % 4 != 0);

  // Monitor.
  initial begin
    out_ready = 1;
    for (int f = 0; f < NFRAMES; f++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          forever begin
            @(negedge clk);
            if (out_valid && !out_ready) out_holds++;
            if (out_valid && out_ready) break;
          end
          for (int ch = 0; ch < C; ch++)
            for (int k = 0; k < 9; k++) begin
              int rr, cc, e;
              rr = r + k / 3 - 1;
              cc = c + k % 3 - 1;
              e = (rr >= 0 && rr < H && cc >= 0 && cc < W) ? frame_data[f][rr][cc][ch] : 0;
              checks++;
              if (int'(out_win[ch][k]) != e) begin
                failures++;
                if (failures < 10) $display("f%0d r%0d c%0d ch%0d k%0d got %0d exp %0d",
                                            f, r, c, ch, k, out_win[ch][k], e);
              end
            end
          last_out_cycle = cycle;
        end
    @(posedge clk);
    checks++;
    if (last_out_cycle - last_in_cycle != 2 * W + 1) begin
      failures++;
      $display("timing: last window %0d cycles after last input, expected %0d",
               last_out_cycle - last_in_cycle, 2 * W + 1);
    end
    checks++;
    if (in_stalls == 0 || out_holds == 0) failures++;
    $display("input stalls %0d, output holds %0d", in_stalls, out_holds);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
