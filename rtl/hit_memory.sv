// hit_memory: the event's hit store, one bank of DEPTH entries per layer.
//
// Hits are written one per clock with their layer number and are appended to
// that layer's bank; wr_idx reports the slot given to the hit, so that
// (layer, slot) is the hit's identifier from then on. A hit written to a full
// bank is dropped and sets the sticky 'overflow' flag. 'clear' empties all
// banks for a new event. Reads are synchronous (rd_hit is valid one clock
// after rd_en), like a block RAM. count[l] is the number of hits in layer l.
// The store, its depth and its organisation by layer are this design's
// choice: the extrapolation only needs the hits of the next layer.
module hit_memory
  import trk_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 wr_en,
  input  logic [LAYER_W-1:0]   wr_layer,
  input  hit_t                 wr_hit,
  output logic [HIT_IDX_W-1:0] wr_idx,
  output logic                 overflow,
  input  logic                 rd_en,
  input  logic [LAYER_W-1:0]   rd_layer,
  input  logic [HIT_IDX_W-1:0] rd_idx,
  output hit_t                 rd_hit,
  output logic [HIT_IDX_W:0]   count [N_LAYERS]
);
  localparam int unsigned DEPTH = 1 << HIT_IDX_W;

  hit_t mem [N_LAYERS * DEPTH];

  assign wr_idx = count[wr_layer][HIT_IDX_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < N_LAYERS; l++) count[l] <= '0;
      overflow <= 1'b0;
    end else if (clear) begin
      for (int l = 0; l < N_LAYERS; l++) count[l] <= '0;
      overflow <= 1'b0;
    end else if (wr_en && wr_layer < LAYER_W'(N_LAYERS)) begin
      if (count[wr_layer] == (HIT_IDX_W+1)'(DEPTH)) overflow <= 1'b1;
      else count[wr_layer] <= count[wr_layer] + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en && !clear && wr_layer < LAYER_W'(N_LAYERS) &&
        count[wr_layer] != (HIT_IDX_W+1)'(DEPTH))
      mem[{wr_layer, wr_idx}] <= wr_hit;
    if (rd_en)
      rd_hit <= mem[{rd_layer, rd_idx}];
  end
endmodule
