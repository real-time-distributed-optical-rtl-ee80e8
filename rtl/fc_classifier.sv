// fc_classifier: fully connected output layer and class decision.
//
// The last feature map (NPOS rows x 1 column x C channels, 32 x 1 x 32 = 1024
// values) arrives as NPOS beats of C channels. It is flattened channel-major,
// f = c*NPOS + p, as a framework flattening a C x NPOS x 1 tensor would. Each
// beat adds C shift-add products into each of the NCLASS accumulators, so all
// NCLASS*C products of a beat are formed in parallel. After the last beat the
// biases are added and the arg-max (lowest index on a tie) gives the class.
// Interface: valid/ready input stream; the result (class and the three logits in
// 2^EMAX scale) is held with res_valid until res_ready; no input is taken while
// a result waits.
// Timing: the result appears one cycle after the last input beat.
// The 1024 -> 3 layer follows the network; the flatten order, the tie rule and
// the logit format are this design's choices.
module fc_classifier
  import dscnn_pkg::*;
#(
  parameter int NPOS  = 32,
  parameter int C     = 32,
  parameter int LAYER = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  act_t [C-1:0]         in_data,
  output logic                 res_valid,
  input  logic                 res_ready,
  output class_e               res_class,
  output fc_acc_t [NCLASS-1:0] res_logits
);

  localparam int FLAT = NPOS * C;
  localparam int PW   = (NPOS > 1) ? $clog2(NPOS) : 1;

  fc_acc_t [NCLASS-1:0] acc, acc_next;
  fc_acc_t [NCLASS-1:0] logits;
  logic [PW-1:0]        pos;
  logic                 in_fire;
  class_e               best;

  // Hard-wired weights of the current position, one per (class, channel), muxed
  // by pos. For each class a multiplexer picks the code of flat index c*NPOS+pos.
  wcode_t [NCLASS-1:0][C-1:0] wsel;
  for (genvar k = 0; k < NCLASS; k++) begin : g_k
    for (genvar ch = 0; ch < C; ch++) begin : g_c
      wcode_t [NPOS-1:0] rom;
      for (genvar p = 0; p < NPOS; p++) begin : g_p
        assign rom[p] = wcode(LAYER, KIND_PW, k * FLAT + ch * NPOS + p);
      end
      assign wsel[k][ch] = rom[pos];
    end
  end

  for (genvar k = 0; k < NCLASS; k++) begin : g_acc
    prod_t [C-1:0] p;
    for (genvar ch = 0; ch < C; ch++) begin : g_mul
      shift_mul u_mul (.act(in_data[ch]), .code(wsel[k][ch]), .prod(p[ch]));
    end
    always_comb begin
      fc_acc_t s;
      s = (int'(pos) == 0) ? fc_acc_t'(0) : acc[k];
      for (int ch = 0; ch < C; ch++) s += fc_acc_t'(p[ch]);
      acc_next[k] = s;
      logits[k]   = s + (fc_acc_t'(bias(LAYER, KIND_PWB, k)) <<< EMAX);
    end
  end

  always_comb begin
    best = CLS_HAMMER;
    for (int k = 1; k < NCLASS; k++)
      if (logits[k] > logits[int'(best)]) best = class_e'(k);
  end

  assign in_ready = !res_valid || res_ready;
  assign in_fire  = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc        <= '0;
      pos        <= '0;
      res_valid  <= 1'b0;
      res_class  <= CLS_HAMMER;
      res_logits <= '0;
    end else begin
      if (res_valid && res_ready) res_valid <= 1'b0;
      if (in_fire) begin
        acc <= acc_next;
        if (int'(pos) == NPOS - 1) begin
          pos        <= '0;
          res_valid  <= 1'b1;
          res_class  <= best;
          res_logits <= logits;
        end else begin
          pos <= pos + 1'b1;
        end
      end
    end
  end

  a_res_hold: assert property (@(posedge clk) disable iff (!rst_n)
    res_valid && !res_ready |=> res_valid && $stable(res_class) && $stable(res_logits));

endmodule
