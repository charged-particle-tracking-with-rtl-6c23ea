// hit_warrior: fake-track cut and overlap removal for one event.
//
// Each incoming candidate carries the identifiers of its hits and its
// network score. It is
//   - dropped as a fake if score <= SCORE_CUT (0.5);
//   - otherwise compared, in one clock, with every track already kept: the
//     number of hits the two share is counted (all hit pairs compared). A
//     kept track that shares at least OVERLAP_N hits is an overlap. If any
//     overlapping kept track has a score >= the newcomer's, the newcomer is
//     dropped; else all overlapping kept tracks are removed and the newcomer
//     takes a free slot.
// A newcomer that finds no free slot is dropped and counted in n_overflow.
// flush (a one-clock pulse, issued once the event's candidates are in) sends
// the kept tracks out, one per accepted out_ready, empties the buffer and
// pulses flush_done. New candidates are refused (in_ready low) while flushing.
// The score cut of 0.5, the overlap threshold of 8 hits and "keep the track
// with the highest score" follow the description of the method; the buffer,
// its size, the tie rule (the earlier track stays) and the overflow policy are
// this design's choices.
module hit_warrior
  import trk_pkg::*;
#(
  parameter int unsigned CAP       = 64,
  parameter int unsigned OVERLAP_N = 8,
  parameter fx_t         SCORE_CUT = FX_HALF
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [NHITS_W-1:0] in_n,
  input  hit_id_t            in_id [MAX_HITS],
  input  fx_t                in_score,
  input  logic               flush,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [NHITS_W-1:0] out_n,
  output hit_id_t            out_id [MAX_HITS],
  output fx_t                out_score,
  output logic               flush_done,
  output logic [31:0]        n_fake,
  output logic [31:0]        n_dup,
  output logic [31:0]        n_replaced,
  output logic [31:0]        n_overflow,
  output logic [31:0]        n_kept
);
  localparam int unsigned IDX_W = $clog2(CAP);

  logic               v   [CAP];
  logic [NHITS_W-1:0] n   [CAP];
  hit_id_t            ids [CAP][MAX_HITS];
  fx_t                sc  [CAP];

  logic flushing;
  logic [IDX_W:0] fptr;

  // ---- compare the newcomer with every kept track -------------------------
  logic [NHITS_W:0] shared [CAP];
  logic             ovl    [CAP];
  logic             beaten;
  logic             any_free;
  logic [IDX_W-1:0] free_i;
  logic [IDX_W:0]   n_ovl;

  for (genvar e = 0; e < CAP; e++) begin : g_cmp
    always_comb begin
      shared[e] = '0;
      for (int i = 0; i < MAX_HITS; i++)
        for (int j = 0; j < MAX_HITS; j++)
          if (NHITS_W'(i) < n[e] && NHITS_W'(j) < in_n && ids[e][i] == in_id[j])
            shared[e] = shared[e] + 1'b1;
      ovl[e] = v[e] && (shared[e] >= (NHITS_W+1)'(OVERLAP_N));
    end
  end

  always_comb begin
    beaten   = 1'b0;
    any_free = 1'b0;
    free_i   = '0;
    n_ovl    = '0;
    for (int e = 0; e < CAP; e++) begin
      if (ovl[e]) n_ovl = n_ovl + 1'b1;
      if (ovl[e] && sc[e] >= in_score) beaten = 1'b1;
    end
    // lowest slot that is empty, or becomes empty because it is replaced
    for (int e = CAP - 1; e >= 0; e--)
      if (!v[e] || ovl[e]) begin
        any_free = 1'b1;
        free_i   = IDX_W'(e);
      end
  end

  logic take;
  assign in_ready = !flushing;
  assign take     = in_valid && in_ready;

  // ---- output during flush ----------------------------------------------
  logic [IDX_W-1:0] fidx;
  assign fidx      = fptr[IDX_W-1:0];
  assign out_valid = flushing && (fptr < (IDX_W+1)'(CAP)) && v[fidx];
  assign out_n     = n[fidx];
  assign out_id    = ids[fidx];
  assign out_score = sc[fidx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < CAP; e++) begin
        v[e] <= 1'b0; n[e] <= '0; sc[e] <= '0;
        for (int i = 0; i < MAX_HITS; i++) ids[e][i] <= '0;
      end
      flushing   <= 1'b0;
      fptr       <= '0;
      flush_done <= 1'b0;
      n_fake     <= '0;
      n_dup      <= '0;
      n_replaced <= '0;
      n_overflow <= '0;
      n_kept     <= '0;
    end else begin
      flush_done <= 1'b0;
      if (take) begin
        if (in_score <= SCORE_CUT) begin
          n_fake <= n_fake + 1;
        end else if (beaten) begin
          n_dup <= n_dup + 1;
        end else if (!any_free) begin
          n_overflow <= n_overflow + 1;
        end else begin
          for (int e = 0; e < CAP; e++)
            if (ovl[e]) begin
              v[e] <= 1'b0;
            end
          n_replaced <= n_replaced + 32'(n_ovl);
          v[free_i]   <= 1'b1;
          n[free_i]   <= in_n;
          ids[free_i] <= in_id;
          sc[free_i]  <= in_score;
          n_kept      <= n_kept + 1;
        end
      end
      if (flush && !flushing) begin
        flushing <= 1'b1;
        fptr     <= '0;
      end else if (flushing) begin
        if (fptr == (IDX_W+1)'(CAP)) begin
          flushing   <= 1'b0;
          flush_done <= 1'b1;
        end else if (!v[fidx]) begin
          fptr <= fptr + 1'b1;
        end else if (out_ready) begin
          v[fidx] <= 1'b0;
          fptr    <= fptr + 1'b1;
        end
      end
    end
  end
endmodule
