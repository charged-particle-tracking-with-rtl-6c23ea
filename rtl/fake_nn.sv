// fake_nn: the overlap and fake-rejection network, 30 x 32 x 32 x 1.
//
// Input: the (x, y, z) of up to 10 hits of a candidate track after
// pre-processing (rotated, scaled, ordered by radius), zero-padded when the
// track has fewer than 10 hits. Output: one score in [0, 1] that grows with
// the probability that the track comes from a real particle.
// Structure: Dense(32) -> BatchNorm -> ReLU -> Dense(32) -> BatchNorm -> ReLU
// -> Dense(1) -> sigmoid. The two batch-normalisation layers follow the layer
// list of the trained network; placing the ReLU after them, and the sigmoid
// at the output, are this design's choices (the score is shown on a 0..1
// scale and is cut at 0.5).
//
// Weights are loaded through cfg_*, in this order (row-major):
//   W1[32][30], b1[32], s1[32], o1[32], W2[32][32], b2[32], s2[32], o2[32],
//   W3[1][32], b3[1]          (s = BN scale, o = BN offset; 2209 values)
// Fully parallel; LATENCY = 6 clocks (30 ns at 200 MHz), one track per clock.
module fake_nn
  import trk_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  logic [11:0] cfg_addr,
  input  fx_t         cfg_data,
  input  logic        in_valid,
  input  fx_t         x [FK_IN],
  output logic        out_valid,
  output fx_t         score
);
  localparam int unsigned LATENCY = 6;

  localparam int unsigned O_W1 = 0;
  localparam int unsigned O_B1 = O_W1 + FK_HID * FK_IN;
  localparam int unsigned O_S1 = O_B1 + FK_HID;
  localparam int unsigned O_C1 = O_S1 + FK_HID;
  localparam int unsigned O_W2 = O_C1 + FK_HID;
  localparam int unsigned O_B2 = O_W2 + FK_HID * FK_HID;
  localparam int unsigned O_S2 = O_B2 + FK_HID;
  localparam int unsigned O_C2 = O_S2 + FK_HID;
  localparam int unsigned O_W3 = O_C2 + FK_HID;
  localparam int unsigned O_B3 = O_W3 + FK_HID;
  localparam int unsigned N_PARAMS = O_B3 + 1;   // 2209

  fx_t prm [N_PARAMS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_PARAMS; i++) prm[i] <= '0;
    end else if (cfg_we && cfg_addr < 12'(N_PARAMS)) begin
      prm[cfg_addr] <= cfg_data;
    end
  end

  fx_t w1 [FK_HID][FK_IN];  fx_t b1 [FK_HID]; fx_t s1 [FK_HID]; fx_t c1 [FK_HID];
  fx_t w2 [FK_HID][FK_HID]; fx_t b2 [FK_HID]; fx_t s2 [FK_HID]; fx_t c2 [FK_HID];
  fx_t w3 [1][FK_HID];      fx_t b3 [1];
  fx_t unit_s [1];          fx_t zero_b [1];

  always_comb begin
    for (int o = 0; o < FK_HID; o++) begin
      for (int i = 0; i < FK_IN; i++)  w1[o][i] = prm[O_W1 + o*FK_IN + i];
      for (int i = 0; i < FK_HID; i++) w2[o][i] = prm[O_W2 + o*FK_HID + i];
      b1[o] = prm[O_B1 + o]; s1[o] = prm[O_S1 + o]; c1[o] = prm[O_C1 + o];
      b2[o] = prm[O_B2 + o]; s2[o] = prm[O_S2 + o]; c2[o] = prm[O_C2 + o];
      w3[0][o] = prm[O_W3 + o];
    end
    b3[0]     = prm[O_B3];
    unit_s[0] = FX_ONE;
    zero_b[0] = '0;
  end

  logic v1, v2;
  fx_t  h1 [FK_HID];
  fx_t  h2 [FK_HID];
  fx_t  yo [1];

  dense_layer #(.N_IN(FK_IN),  .N_OUT(FK_HID), .ACT(ACT_RELU), .BN(1'b1)) u_l1 (
    .clk, .rst_n, .in_valid(in_valid), .x(x), .w(w1), .b(b1),
    .bn_s(s1), .bn_b(c1), .out_valid(v1), .y(h1));
  dense_layer #(.N_IN(FK_HID), .N_OUT(FK_HID), .ACT(ACT_RELU), .BN(1'b1)) u_l2 (
    .clk, .rst_n, .in_valid(v1), .x(h1), .w(w2), .b(b2),
    .bn_s(s2), .bn_b(c2), .out_valid(v2), .y(h2));
  dense_layer #(.N_IN(FK_HID), .N_OUT(1), .ACT(ACT_SIGMOID), .BN(1'b0)) u_l3 (
    .clk, .rst_n, .in_valid(v2), .x(h2), .w(w3), .b(b3),
    .bn_s(unit_s), .bn_b(zero_b), .out_valid(out_valid), .y(yo));

  assign score = yo[0];
endmodule
