// nn_dense_core: the FPGA-RICH particle-identification network.
//
// A fully connected network with N_IN = 64 inputs and three layers of 64,
// 16 and 4 neurons. Weights and biases are fixed point <8,1> (8 bits, 7 of
// them fraction), activations <16,6> (16 bits, 10 fraction). Each neuron
// sums input x weight over its inputs, adds its bias, and keeps bits
// [22:7] of the 17-fraction-bit sum, i.e. truncation and wrap-around as
// ap_fixed does by default. ReLU follows layers 1 and 2. The 4 outputs are
// the scores of the charged-multiplicity classes 0, 1, 2, 3+; the core gives
// the scores and the index of the largest (ties to the lower class). The
// layer sizes, the number formats and ReLU after layer 1 are the paper's; the
// rest (ReLU after layer 2, argmax in place of an output activation, the
// schedule below) is this design's.
//
// Schedule: layer 1 computes 8 neurons per cycle (512 multipliers) for 8
// cycles, layer 2 two neurons per cycle for 8 cycles, layer 3 one neuron per
// cycle for 4 cycles, and the argmax takes two cycles (pairs, then the two
// winners). Each layer has its own input register, so the layers work on
// three different events at once. An event accepted at clock edge 0
// (in_valid && in_ready) gives out_valid after edge 22, and a new event can
// be accepted every 8 cycles: at 150 MHz that is the paper's 146.66 ns and
// 18.75 MHz.
//
// Weights live in registers written by the host: wt_addr 0..4095 layer-1
// weights (neuron*64 + input), 4096..4159 layer-1 biases, 4160..5183
// layer-2 weights (neuron*64 + input), 5184..5199 layer-2 biases,
// 5200..5263 layer-3 weights (neuron*16 + input), 5264..5267 layer-3
// biases. Trained values are not part of the design.
module nn_dense_core #(
  parameter int N_IN   = 64,
  parameter int N_L1   = 64,
  parameter int N_L2   = 16,
  parameter int N_L3   = 4,
  parameter int P1     = 8,      // layer-1 neurons per cycle
  parameter int P2     = 2,      // layer-2 neurons per cycle
  parameter int P3     = 1,      // layer-3 neurons per cycle
  parameter int AW     = 13
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         wt_we,
  input  logic [AW-1:0]                wt_addr,
  input  logic signed [7:0]            wt_data,
  input  logic                         in_valid,
  output logic                         in_ready,
  input  logic signed [N_IN-1:0][15:0] in_x,
  output logic                         out_valid,
  output logic [1:0]                   out_class,
  output logic signed [N_L3-1:0][15:0] out_score
);
  localparam int C1 = N_L1 / P1;
  localparam int C2 = N_L2 / P2;
  localparam int C3 = N_L3 / P3;
  localparam int A_B1 = N_L1 * N_IN;
  localparam int A_W2 = A_B1 + N_L1;
  localparam int A_B2 = A_W2 + N_L2 * N_L1;
  localparam int A_W3 = A_B2 + N_L2;
  localparam int A_B3 = A_W3 + N_L3 * N_L2;

  typedef logic signed [15:0] act_t;
  typedef logic signed [7:0]  wgt_t;
  typedef logic signed [31:0] acc_t;

  wgt_t w1 [N_L1][N_IN];
  wgt_t b1 [N_L1];
  wgt_t w2 [N_L2][N_L1];
  wgt_t b2 [N_L2];
  wgt_t w3 [N_L3][N_L2];
  wgt_t b3 [N_L3];

  always_ff @(posedge clk) begin
    if (wt_we) begin
      if (int'(wt_addr) < A_B1)      w1[int'(wt_addr) / N_IN][int'(wt_addr) % N_IN] <= wt_data;
      else if (int'(wt_addr) < A_W2) b1[int'(wt_addr) - A_B1] <= wt_data;
      else if (int'(wt_addr) < A_B2) w2[(int'(wt_addr) - A_W2) / N_L1][(int'(wt_addr) - A_W2) % N_L1] <= wt_data;
      else if (int'(wt_addr) < A_W3) b2[int'(wt_addr) - A_B2] <= wt_data;
      else if (int'(wt_addr) < A_B3) w3[(int'(wt_addr) - A_W3) / N_L2][(int'(wt_addr) - A_W3) % N_L2] <= wt_data;
      else if (int'(wt_addr) < A_B3 + N_L3) b3[int'(wt_addr) - A_B3] <= wt_data;
    end
  end

  // <8,1> bias aligned to the 17 fraction bits of a product sum
  function automatic acc_t bias_acc(input wgt_t b);
    return acc_t'(b) <<< 10;
  endfunction
  // sum with 17 fraction bits -> <16,6>: truncate 7 bits, wrap
  function automatic act_t quant(input acc_t a);
    return a[22:7];
  endfunction
  function automatic act_t relu(input act_t a);
    return a[15] ? '0 : a;
  endfunction

  // ---------------- layer 1 ----------------
  act_t x0 [N_IN];
  act_t h1w [N_L1];          // layer-1 results being built
  act_t h1 [N_L1];           // complete layer-1 output, input of layer 2
  logic l1_busy;
  logic [$clog2(C1)-1:0] l1_k;
  logic l1_fin;
  act_t l1_res [P1];

  assign l1_fin   = l1_busy && int'(l1_k) == C1 - 1;
  assign in_ready = !l1_busy || l1_fin;

  always_comb begin
    for (int j = 0; j < P1; j++) begin
      acc_t s;
      s = bias_acc(b1[int'(l1_k) * P1 + j]);
      for (int i = 0; i < N_IN; i++) s += acc_t'(x0[i]) * acc_t'(w1[int'(l1_k) * P1 + j][i]);
      l1_res[j] = relu(quant(s));
    end
  end

  // ---------------- layer 2 ----------------
  act_t h2w [N_L2];
  act_t h2 [N_L2];
  logic l2_busy;
  logic [$clog2(C2)-1:0] l2_k;
  logic l2_fin;
  act_t l2_res [P2];
  assign l2_fin = l2_busy && int'(l2_k) == C2 - 1;

  always_comb begin
    for (int j = 0; j < P2; j++) begin
      acc_t s;
      s = bias_acc(b2[int'(l2_k) * P2 + j]);
      for (int i = 0; i < N_L1; i++) s += acc_t'(h1[i]) * acc_t'(w2[int'(l2_k) * P2 + j][i]);
      l2_res[j] = relu(quant(s));
    end
  end

  // ---------------- layer 3 ----------------
  act_t h3w [N_L3];
  act_t h3 [N_L3];
  logic l3_busy;
  logic [$clog2(C3)-1:0] l3_k;
  logic l3_done;
  act_t l3_res [P3];

  always_comb begin
    for (int j = 0; j < P3; j++) begin
      acc_t s;
      s = bias_acc(b3[int'(l3_k) * P3 + j]);
      for (int i = 0; i < N_L2; i++) s += acc_t'(h2[i]) * acc_t'(w3[int'(l3_k) * P3 + j][i]);
      l3_res[j] = quant(s);
    end
  end

  // ---------------- argmax, two stages ----------------
  logic       am_valid;
  logic [1:0] am_idx [2];
  act_t       am_val [2];
  act_t       am_score [N_L3];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l1_busy <= 1'b0; l1_k <= '0;
      l2_busy <= 1'b0; l2_k <= '0;
      l3_busy <= 1'b0; l3_k <= '0; l3_done <= 1'b0;
      am_valid <= 1'b0; out_valid <= 1'b0;
      out_class <= '0;
      for (int i = 0; i < N_L3; i++) out_score[i] <= '0;
    end else begin
      // layer 1
      if (l1_busy) begin
        for (int j = 0; j < P1; j++) h1w[int'(l1_k) * P1 + j] <= l1_res[j];
        if (int'(l1_k) == C1 - 1) begin
          for (int n = 0; n < N_L1; n++) h1[n] <= (n / P1 == C1 - 1) ? l1_res[n % P1] : h1w[n];
          l1_busy <= 1'b0;
          l1_k    <= '0;
        end else l1_k <= l1_k + 1'b1;
      end
      if (in_valid && in_ready) begin
        for (int i = 0; i < N_IN; i++) x0[i] <= in_x[i];
        l1_busy <= 1'b1;
        l1_k    <= '0;
      end
      // layer 2
      if (l2_busy) begin
        for (int j = 0; j < P2; j++) h2w[int'(l2_k) * P2 + j] <= l2_res[j];
        if (int'(l2_k) == C2 - 1) begin
          for (int n = 0; n < N_L2; n++) h2[n] <= (n / P2 == C2 - 1) ? l2_res[n % P2] : h2w[n];
          l2_busy <= 1'b0;
          l2_k    <= '0;
        end else l2_k <= l2_k + 1'b1;
      end
      if (l1_fin) begin l2_busy <= 1'b1; l2_k <= '0; end
      // layer 3
      l3_done <= 1'b0;
      if (l3_busy) begin
        for (int j = 0; j < P3; j++) h3w[int'(l3_k) * P3 + j] <= l3_res[j];
        if (int'(l3_k) == C3 - 1) begin
          for (int n = 0; n < N_L3; n++) h3[n] <= (n / P3 == C3 - 1) ? l3_res[n % P3] : h3w[n];
          l3_done <= 1'b1;
          l3_busy <= 1'b0;
          l3_k    <= '0;
        end else l3_k <= l3_k + 1'b1;
      end
      if (l2_fin) begin l3_busy <= 1'b1; l3_k <= '0; end
      // argmax stage A: best of (0,1) and of (2,3)
      am_valid <= l3_done;
      if (l3_done) begin
        am_idx[0] <= (h3[1] > h3[0]) ? 2'd1 : 2'd0;
        am_val[0] <= (h3[1] > h3[0]) ? h3[1] : h3[0];
        am_idx[1] <= (h3[3] > h3[2]) ? 2'd3 : 2'd2;
        am_val[1] <= (h3[3] > h3[2]) ? h3[3] : h3[2];
        for (int n = 0; n < N_L3; n++) am_score[n] <= h3[n];
      end
      // argmax stage B
      out_valid <= am_valid;
      if (am_valid) begin
        out_class <= (am_val[1] > am_val[0]) ? am_idx[1] : am_idx[0];
        for (int n = 0; n < N_L3; n++) out_score[n] <= am_score[n];
      end
    end
  end

  initial assert (N_L3 == 4 && N_L1 % P1 == 0 && N_L2 % P2 == 0 && N_L3 % P3 == 0 && C1 > 1 && C2 > 1 && C3 > 1);
  a_ii: assert property (@(posedge clk) disable iff (!rst_n) l1_fin |-> (!l2_busy || l2_fin));
endmodule
