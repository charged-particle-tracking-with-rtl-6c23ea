// nn_tracker_top: NN-based track finding for one detector region per event.
//
// Data flow:
//   hits  -> hit_memory (per-layer banks)
//   seeds -> extrap_controller <-> mlp_extrapolator (next-hit prediction)
//                              <-> hit_memory + window_matcher (hit search)
//         -> candidate tracks -> track_preproc (rotate, order by radius)
//         -> fake_nn (score)  -> hit_warrior (score cut, overlap removal)
//         -> output tracks, sent when the event is flushed.
// Use: pulse event_clear, write the event's hits (hit_wr_*), feed its seeds
// (seed_*), pulse event_end after the last seed. Once every candidate has
// been scored the top flushes the overlap buffer; the surviving tracks come
// out on out_* (valid/ready), then event_done pulses. Network weights are
// loaded at any time before use through ext_cfg_* and fk_cfg_*.
// The chain of steps follows the tracking method; the way the steps are
// joined (one candidate at a time through the pre-processor, a delay line
// that carries hit identifiers alongside the network, flush once idle) is this
// design's choice.
module nn_tracker_top
  import trk_pkg::*;
#(
  parameter int unsigned STACK_DEPTH = 32,
  parameter int unsigned KEEP_CAP    = 64,
  parameter int unsigned OVERLAP_N   = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  win_e                 win,
  // network weights
  input  logic                 ext_cfg_we,
  input  logic [11:0]          ext_cfg_addr,
  input  fx_t                  ext_cfg_data,
  input  logic                 fk_cfg_we,
  input  logic [11:0]          fk_cfg_addr,
  input  fx_t                  fk_cfg_data,
  // event hits
  input  logic                 event_clear,
  input  logic                 hit_wr_en,
  input  logic [LAYER_W-1:0]   hit_wr_layer,
  input  hit_t                 hit_wr,
  output logic [HIT_IDX_W-1:0] hit_wr_idx,
  output logic                 hit_overflow,
  // seeds
  input  logic                 seed_valid,
  output logic                 seed_ready,
  input  hit_t                 seed_hit [SEED_HITS],
  input  hit_id_t              seed_id  [SEED_HITS],
  input  logic                 event_end,
  // tracks out
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [NHITS_W-1:0]   out_n,
  output hit_id_t              out_id [MAX_HITS],
  output fx_t                  out_score,
  output logic                 event_done,
  output tracker_stats_t       stats
);
  // ---- hit store -----------------------------------------------------------
  logic                 mem_rd_en;
  logic [LAYER_W-1:0]   mem_rd_layer;
  logic [HIT_IDX_W-1:0] mem_rd_idx;
  hit_t                 mem_rd_hit;
  logic [HIT_IDX_W:0]   mem_count [N_LAYERS];

  hit_memory u_hits (
    .clk, .rst_n, .clear(event_clear),
    .wr_en(hit_wr_en), .wr_layer(hit_wr_layer), .wr_hit(hit_wr),
    .wr_idx(hit_wr_idx), .overflow(hit_overflow),
    .rd_en(mem_rd_en), .rd_layer(mem_rd_layer), .rd_idx(mem_rd_idx),
    .rd_hit(mem_rd_hit), .count(mem_count));

  // ---- extrapolation -----------------------------------------------------
  logic   nn_valid, nn_out_valid;
  fx_t    nn_x [EX_IN];
  fx_t    nn_y [EX_OUT];
  logic   cand_valid, cand_ready;
  track_t cand;
  logic   ctrl_busy;

  mlp_extrapolator u_ext (
    .clk, .rst_n, .cfg_we(ext_cfg_we), .cfg_addr(ext_cfg_addr), .cfg_data(ext_cfg_data),
    .in_valid(nn_valid), .x(nn_x), .out_valid(nn_out_valid), .y(nn_y));

  extrap_controller #(.STACK_DEPTH(STACK_DEPTH)) u_ctrl (
    .clk, .rst_n, .win,
    .seed_valid, .seed_ready, .seed_hit, .seed_id,
    .nn_valid, .nn_x, .nn_out_valid, .nn_y,
    .mem_rd_en, .mem_rd_layer, .mem_rd_idx, .mem_rd_hit, .mem_count,
    .trk_valid(cand_valid), .trk_ready(cand_ready), .trk(cand),
    .busy(ctrl_busy),
    .n_predict(stats.predictions), .n_branch(stats.branches),
    .n_edge(stats.stop_edge), .n_nomatch(stats.stop_nomatch),
    .n_overflow(stats.stack_overflow));

  // ---- pre-processing and scoring -----------------------------------------
  logic   pp_valid;
  fx_t    pp_x [FK_IN];
  track_t pp_trk;

  track_preproc u_pre (
    .clk, .rst_n, .in_valid(cand_valid), .in_ready(cand_ready), .in_trk(cand),
    .out_valid(pp_valid), .out_ready(1'b1), .out_x(pp_x), .out_trk(pp_trk));

  logic fk_valid;
  fx_t  fk_score;

  fake_nn u_fake (
    .clk, .rst_n, .cfg_we(fk_cfg_we), .cfg_addr(fk_cfg_addr), .cfg_data(fk_cfg_data),
    .in_valid(pp_valid), .x(pp_x), .out_valid(fk_valid), .score(fk_score));

  // hit identifiers travel alongside the network
  localparam int unsigned FK_LAT = 6;
  logic               dl_v [FK_LAT];
  logic [NHITS_W-1:0] dl_n [FK_LAT];
  hit_id_t            dl_id [FK_LAT][MAX_HITS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < FK_LAT; s++) begin
        dl_v[s] <= 1'b0; dl_n[s] <= '0;
        for (int i = 0; i < MAX_HITS; i++) dl_id[s][i] <= '0;
      end
    end else begin
      dl_v[0] <= pp_valid;
      dl_n[0] <= pp_trk.n_hits;
      for (int i = 0; i < MAX_HITS; i++) dl_id[0][i] <= pp_trk.id[i];
      for (int s = 1; s < FK_LAT; s++) begin
        dl_v[s] <= dl_v[s-1]; dl_n[s] <= dl_n[s-1]; dl_id[s] <= dl_id[s-1];
      end
    end
  end

  // ---- overlap removal -----------------------------------------------------
  logic hw_in_ready, flush;

  hit_warrior #(.CAP(KEEP_CAP), .OVERLAP_N(OVERLAP_N)) u_hw (
    .clk, .rst_n,
    .in_valid(fk_valid), .in_ready(hw_in_ready), .in_n(dl_n[FK_LAT-1]),
    .in_id(dl_id[FK_LAT-1]), .in_score(fk_score),
    .flush, .out_valid, .out_ready, .out_n, .out_id, .out_score,
    .flush_done(event_done),
    .n_fake(stats.fakes), .n_dup(stats.duplicates), .n_replaced(stats.replaced),
    .n_overflow(stats.kept_overflow), .n_kept(stats.kept));

  // ---- end of event: flush once nothing is left in flight -----------------
  logic end_pending, in_flight;
  always_comb begin
    in_flight = ctrl_busy || seed_valid || !cand_ready || pp_valid;
    for (int s = 0; s < FK_LAT; s++) in_flight = in_flight || dl_v[s];
  end
  assign flush = end_pending && !in_flight;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         end_pending <= 1'b0;
    else if (event_end) end_pending <= 1'b1;
    else if (flush)     end_pending <= 1'b0;
  end

  // the network's latency and the delay line must agree
  assert property (@(posedge clk) disable iff (!rst_n) fk_valid == dl_v[FK_LAT-1]);
  assert property (@(posedge clk) disable iff (!rst_n) fk_valid |-> hw_in_ready);
endmodule
