// dense_layer: one fully parallel layer  y = act(bn(W x + b)).
//
// Every product W[o][i]*x[i] has its own multiplier (an HLS reuse factor of
// 1, the lowest-latency setting), so a new input vector can enter on every
// clock. Two pipeline stages:
//   stage 1  registers all N_OUT*N_IN products (full 32-bit precision);
//   stage 2  adds them with the bias, drops the extra fraction bits by
//            truncation, saturates to 16 bits, applies the optional
//            per-channel batch-normalisation scale and offset, then the
//            activation, and registers y.
// Latency is 2 clocks, throughput one vector per clock; out_valid follows
// in_valid. Weights come in as ports so that they can be loaded at run time.
// With BN=0 the bn_* ports are ignored.
// Arithmetic rules (truncation, saturation) are this design's choice; the
// layer equation and the batch-normalisation layers follow the network
// description.
module dense_layer
  import trk_pkg::*;
#(
  parameter int unsigned N_IN  = 14,
  parameter int unsigned N_OUT = 32,
  parameter act_e        ACT   = ACT_RELU,
  parameter bit          BN    = 1'b0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  fx_t  x     [N_IN],
  input  fx_t  w     [N_OUT][N_IN],
  input  fx_t  b     [N_OUT],
  input  fx_t  bn_s  [N_OUT],
  input  fx_t  bn_b  [N_OUT],
  output logic out_valid,
  output fx_t  y     [N_OUT]
);
  typedef logic signed [2*FX_W-1:0] prod_t;

  prod_t prod_q [N_OUT][N_IN];
  logic  v_q;

  always_ff @(posedge clk) begin
    for (int o = 0; o < N_OUT; o++)
      for (int i = 0; i < N_IN; i++)
        prod_q[o][i] <= prod_t'(w[o][i]) * prod_t'(x[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q       <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v_q       <= in_valid;
      out_valid <= v_q;
    end
  end

  fx_t pre_act [N_OUT];
  fx_t act_out [N_OUT];

  always_comb begin
    for (int o = 0; o < N_OUT; o++) begin
      logic signed [63:0] acc;
      fx_t s;
      acc = 64'(signed'(b[o])) <<< FX_F;
      for (int i = 0; i < N_IN; i++) acc = acc + 64'(prod_q[o][i]);
      s = fx_sat(acc >>> FX_F);
      if (BN) begin
        acc = (64'(signed'(s)) * 64'(signed'(bn_s[o]))) >>> FX_F;
        s   = fx_sat(acc + 64'(signed'(bn_b[o])));
      end
      pre_act[o] = s;
    end
  end

  for (genvar o = 0; o < N_OUT; o++) begin : g_act
    if (ACT == ACT_TANH || ACT == ACT_SIGMOID) begin : g_lut
      act_lut #(.FUNC(ACT)) u_lut (.x(pre_act[o]), .y(act_out[o]));
    end else if (ACT == ACT_RELU) begin : g_relu
      assign act_out[o] = pre_act[o][FX_W-1] ? '0 : pre_act[o];
    end else begin : g_lin
      assign act_out[o] = pre_act[o];
    end
  end

  always_ff @(posedge clk) begin
    for (int o = 0; o < N_OUT; o++) y[o] <= act_out[o];
  end
endmodule
