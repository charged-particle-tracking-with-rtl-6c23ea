// extrap_controller: the iterative NN track-extrapolation loop.
//
// A seed (three hits on the three innermost layers) becomes the first partial
// track. For the partial track in hand the controller
//   1. stops and emits it if its last hit is on the outermost layer
//      (edge of the detector);
//   2. otherwise sends its three most recent hits and the one-hot code of its
//      last layer to the extrapolation network and waits for the prediction;
//   3. reads every hit of the next layer from the hit store (one per clock)
//      and, for each hit within the search window, pushes a copy of the track
//      extended by that hit onto a work stack;
//   4. if no hit matched, emits the track as it stands.
// Partial tracks are taken from the stack before new seeds are accepted, so
// the search is depth-first and the stack holds at most one branch point per
// layer times the branching factor. A branch that finds the stack full is
// dropped and counted in n_overflow.
// The stopping rules and the "one new track per hit in the window" rule follow
// the algorithm description; the search over the next layer only, the stack,
// the layer code (bit l/2 set for layer l) and the one-track-at-a-time use of
// the network are this design's choices.
//
// Interfaces: seed_* and trk_* are valid/ready handshakes; the network is
// driven by a one-clock nn_valid pulse and answers with nn_out_valid at its
// fixed latency; the hit store answers a read one clock after mem_rd_en.
module extrap_controller
  import trk_pkg::*;
#(
  parameter int unsigned STACK_DEPTH = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  win_e                 win,
  // seeds
  input  logic                 seed_valid,
  output logic                 seed_ready,
  input  hit_t                 seed_hit [SEED_HITS],
  input  hit_id_t              seed_id  [SEED_HITS],
  // extrapolation network
  output logic                 nn_valid,
  output fx_t                  nn_x [EX_IN],
  input  logic                 nn_out_valid,
  input  fx_t                  nn_y [EX_OUT],
  // hit store
  output logic                 mem_rd_en,
  output logic [LAYER_W-1:0]   mem_rd_layer,
  output logic [HIT_IDX_W-1:0] mem_rd_idx,
  input  hit_t                 mem_rd_hit,
  input  logic [HIT_IDX_W:0]   mem_count [N_LAYERS],
  // finished tracks
  output logic                 trk_valid,
  input  logic                 trk_ready,
  output track_t               trk,
  // status
  output logic                 busy,
  output logic [31:0]          n_predict,
  output logic [31:0]          n_branch,
  output logic [31:0]          n_edge,
  output logic [31:0]          n_nomatch,
  output logic [31:0]          n_overflow
);
  localparam int unsigned SP_W = $clog2(STACK_DEPTH + 1);

  typedef enum logic [2:0] {S_IDLE, S_CHECK, S_WAIT, S_SCAN, S_EMIT} state_e;
  state_e state;

  track_t stack [STACK_DEPTH];
  logic [SP_W-1:0] sp;

  track_t cur;
  hit_t   pred;
  logic [LAYER_W-1:0]   nxt_layer;
  logic [HIT_IDX_W:0]   issue_i;
  logic                 rd_v;
  logic [HIT_IDX_W-1:0] rd_i;
  logic [HIT_IDX_W:0]   n_match;

  // last layer of the track in hand
  logic [NHITS_W-1:0] last_n;
  logic [LAYER_W-1:0] last_layer;
  assign last_n     = cur.n_hits - 1'b1;
  assign last_layer = cur.id[last_n].layer;

  // network features: three most recent hits, oldest first, then layer code
  always_comb begin
    for (int k = 0; k < SEED_HITS; k++) begin
      hit_t h;
      h = cur.hit[cur.n_hits - NHITS_W'(SEED_HITS) + NHITS_W'(k)];
      nn_x[3*k]     = h.x;
      nn_x[3*k + 1] = h.y;
      nn_x[3*k + 2] = h.z;
    end
    for (int c = 0; c < CODE_W; c++)
      nn_x[SEED_HITS*3 + c] = (int'(last_layer) / 2 == c) ? FX_ONE : '0;
  end

  logic match;
  window_matcher u_match (.pred(pred), .hit(mem_rd_hit), .win(win), .d2(), .match(match));

  logic scan_issue;
  assign scan_issue   = (state == S_SCAN) && (issue_i < mem_count[nxt_layer]);
  assign mem_rd_en    = scan_issue;
  assign mem_rd_layer = nxt_layer;
  assign mem_rd_idx   = issue_i[HIT_IDX_W-1:0];

  assign seed_ready = (state == S_IDLE) && (sp == '0);
  assign nn_valid   = (state == S_CHECK) && (last_layer != LAYER_W'(N_LAYERS - 1));
  assign trk_valid  = (state == S_EMIT);
  assign trk        = cur;
  assign busy       = (state != S_IDLE) || (sp != '0);

  track_t ext;
  always_comb begin
    ext = cur;
    ext.hit[cur.n_hits]       = mem_rd_hit;
    ext.id[cur.n_hits].layer  = nxt_layer;
    ext.id[cur.n_hits].idx    = rd_i;
    ext.n_hits                = cur.n_hits + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      sp         <= '0;
      cur        <= '0;
      pred       <= '0;
      nxt_layer  <= '0;
      issue_i    <= '0;
      rd_v       <= 1'b0;
      rd_i       <= '0;
      n_match    <= '0;
      n_predict  <= '0;
      n_branch   <= '0;
      n_edge     <= '0;
      n_nomatch  <= '0;
      n_overflow <= '0;
    end else begin
      case (state)
        S_IDLE: begin
          if (sp != '0) begin
            cur   <= stack[sp - 1'b1];
            sp    <= sp - 1'b1;
            state <= S_CHECK;
          end else if (seed_valid) begin
            track_t t;
            t = '0;
            for (int k = 0; k < SEED_HITS; k++) begin
              t.hit[k] = seed_hit[k];
              t.id[k]  = seed_id[k];
            end
            t.n_hits = NHITS_W'(SEED_HITS);
            cur   <= t;
            state <= S_CHECK;
          end
        end
        S_CHECK: begin
          if (last_layer == LAYER_W'(N_LAYERS - 1)) begin
            n_edge <= n_edge + 1;
            state  <= S_EMIT;
          end else begin
            n_predict <= n_predict + 1;
            state     <= S_WAIT;
          end
        end
        S_WAIT: begin
          if (nn_out_valid) begin
            pred      <= '{x: nn_y[0], y: nn_y[1], z: nn_y[2]};
            nxt_layer <= last_layer + 1'b1;
            issue_i   <= '0;
            n_match   <= '0;
            state     <= S_SCAN;
          end
        end
        S_SCAN: begin
          rd_v <= scan_issue;
          rd_i <= issue_i[HIT_IDX_W-1:0];
          if (scan_issue) issue_i <= issue_i + 1'b1;
          if (rd_v && match) begin
            n_match <= n_match + 1'b1;
            if (n_match != '0) n_branch <= n_branch + 1;
            if (sp == SP_W'(STACK_DEPTH)) begin
              n_overflow <= n_overflow + 1;
            end else begin
              stack[sp] <= ext;
              sp        <= sp + 1'b1;
            end
          end
          if (!scan_issue && !rd_v) begin
            if (n_match == '0) begin
              n_nomatch <= n_nomatch + 1;
              state     <= S_EMIT;
            end else begin
              state     <= S_IDLE;
            end
          end
        end
        S_EMIT: begin
          if (trk_ready) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A prediction is requested only for a track that has at least three hits.
  assert property (@(posedge clk) disable iff (!rst_n)
                   nn_valid |-> cur.n_hits >= NHITS_W'(SEED_HITS));
endmodule
