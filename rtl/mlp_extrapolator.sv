// mlp_extrapolator: the next-hit predictor, a 14 x 32 x 32 x 32 x 3 MLP.
//
// Input: the (x, y, z) of the three most recent hits of a track, oldest first,
// followed by a 5-wide one-hot layer code (14 values). Output: the predicted
// (x, y, z) of the next hit in the same normalised units (tanh keeps it in
// [-1, 1], i.e. within +-1024 mm). Three hidden layers of 32 nodes with ReLU,
// then a 3-node output layer with tanh, as the network description gives.
//
// The trained weights are not part of the hardware description, so they live
// in a register bank written through the cfg_* port, one 16-bit value per
// write, in this order (row-major, output index outermost):
//   W1[32][14], b1[32], W2[32][32], b2[32], W3[32][32], b3[32], W4[3][32], b4[3]
// 2691 values in all (addresses 0..2690). Pruned weights are simply zero.
// All layers are fully parallel (one multiplier per weight), so a prediction
// can start every clock; LATENCY = 8 clocks from in_valid to out_valid,
// i.e. 40 ns at a 200 MHz clock.
module mlp_extrapolator
  import trk_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // parameter load
  input  logic        cfg_we,
  input  logic [11:0] cfg_addr,
  input  fx_t         cfg_data,
  // inference
  input  logic        in_valid,
  input  fx_t         x [EX_IN],
  output logic        out_valid,
  output fx_t         y [EX_OUT]
);
  localparam int unsigned LATENCY = 8;

  localparam int unsigned O_W1 = 0;
  localparam int unsigned O_B1 = O_W1 + EX_HID * EX_IN;
  localparam int unsigned O_W2 = O_B1 + EX_HID;
  localparam int unsigned O_B2 = O_W2 + EX_HID * EX_HID;
  localparam int unsigned O_W3 = O_B2 + EX_HID;
  localparam int unsigned O_B3 = O_W3 + EX_HID * EX_HID;
  localparam int unsigned O_W4 = O_B3 + EX_HID;
  localparam int unsigned O_B4 = O_W4 + EX_OUT * EX_HID;
  localparam int unsigned N_PARAMS = O_B4 + EX_OUT;   // 2691

  fx_t prm [N_PARAMS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_PARAMS; i++) prm[i] <= '0;
    end else if (cfg_we && cfg_addr < 12'(N_PARAMS)) begin
      prm[cfg_addr] <= cfg_data;
    end
  end

  fx_t w1 [EX_HID][EX_IN];  fx_t b1 [EX_HID];
  fx_t w2 [EX_HID][EX_HID]; fx_t b2 [EX_HID];
  fx_t w3 [EX_HID][EX_HID]; fx_t b3 [EX_HID];
  fx_t w4 [EX_OUT][EX_HID]; fx_t b4 [EX_OUT];
  fx_t unit_s [EX_HID];     fx_t zero_b [EX_HID];

  always_comb begin
    for (int o = 0; o < EX_HID; o++) begin
      for (int i = 0; i < EX_IN; i++)  w1[o][i] = prm[O_W1 + o*EX_IN + i];
      for (int i = 0; i < EX_HID; i++) w2[o][i] = prm[O_W2 + o*EX_HID + i];
      for (int i = 0; i < EX_HID; i++) w3[o][i] = prm[O_W3 + o*EX_HID + i];
      b1[o] = prm[O_B1 + o];
      b2[o] = prm[O_B2 + o];
      b3[o] = prm[O_B3 + o];
      unit_s[o] = FX_ONE;
      zero_b[o] = '0;
    end
    for (int o = 0; o < EX_OUT; o++) begin
      for (int i = 0; i < EX_HID; i++) w4[o][i] = prm[O_W4 + o*EX_HID + i];
      b4[o] = prm[O_B4 + o];
    end
  end

  logic v1, v2, v3;
  fx_t  h1 [EX_HID];
  fx_t  h2 [EX_HID];
  fx_t  h3 [EX_HID];

  dense_layer #(.N_IN(EX_IN),  .N_OUT(EX_HID), .ACT(ACT_RELU), .BN(1'b0)) u_l1 (
    .clk, .rst_n, .in_valid(in_valid), .x(x),  .w(w1), .b(b1),
    .bn_s(unit_s), .bn_b(zero_b), .out_valid(v1), .y(h1));
  dense_layer #(.N_IN(EX_HID), .N_OUT(EX_HID), .ACT(ACT_RELU), .BN(1'b0)) u_l2 (
    .clk, .rst_n, .in_valid(v1), .x(h1), .w(w2), .b(b2),
    .bn_s(unit_s), .bn_b(zero_b), .out_valid(v2), .y(h2));
  dense_layer #(.N_IN(EX_HID), .N_OUT(EX_HID), .ACT(ACT_RELU), .BN(1'b0)) u_l3 (
    .clk, .rst_n, .in_valid(v2), .x(h2), .w(w3), .b(b3),
    .bn_s(unit_s), .bn_b(zero_b), .out_valid(v3), .y(h3));
  dense_layer #(.N_IN(EX_HID), .N_OUT(EX_OUT), .ACT(ACT_TANH), .BN(1'b0)) u_l4 (
    .clk, .rst_n, .in_valid(v3), .x(h3), .w(w4), .b(b4),
    .bn_s(unit_s[0:EX_OUT-1]), .bn_b(zero_b[0:EX_OUT-1]), .out_valid(out_valid), .y(y));
endmodule
