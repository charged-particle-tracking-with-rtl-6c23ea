// tb_extrap_controller: runs the extrapolation loop on a synthetic event.
//
// Layers sit at radii 30, 60, ..., 300 mm; tracks are straight lines from the
// origin. The network is replaced by a model that answers 8 clocks after each
// request with the linear extrapolation 2*last - previous hit (exact for
// equally spaced layers). The event has a clean track (stops at the outermost
// layer), a track that ends at layer 5 (stops for lack of hits), a track with
// nearby decoy hits (branching, and with a 4-deep stack, lost branches), a
// track in the x < 0 half, and random noise hits. A software model of the
// same search (depth-first, next layer only, distance squared <= R^2)
// predicts every emitted track and the counters; emission order, hit
// identifiers, coordinates and counters are compared. trk_ready is randomly
// held low to exercise the output handshake.
module tb_extrap_controller;
  import trk_pkg::*;

  localparam int DEPTH = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // hit store
  logic clear = 0, wr_en = 0, mem_rd_en;
  logic [LAYER_W-1:0] wr_layer = 0, mem_rd_layer;
  logic [HIT_IDX_W-1:0] wr_idx, mem_rd_idx;
  hit_t wr_hit = '0, mem_rd_hit;
  logic [HIT_IDX_W:0] mem_count [N_LAYERS];
  logic mem_ovf;
  hit_memory u_mem (.clk, .rst_n, .clear, .wr_en, .wr_layer, .wr_hit, .wr_idx, .overflow(mem_ovf),
                    .rd_en(mem_rd_en), .rd_layer(mem_rd_layer), .rd_idx(mem_rd_idx),
                    .rd_hit(mem_rd_hit), .count(mem_count));

  // controller
  win_e win = WIN_10MM;
  logic seed_valid = 0, seed_ready;
  hit_t seed_hit [SEED_HITS];
  hit_id_t seed_id [SEED_HITS];
  logic nn_valid, nn_out_valid = 0;
  fx_t nn_x [EX_IN];
  fx_t nn_y [EX_OUT];
  logic trk_valid, trk_ready = 0, busy;
  track_t trk;
  logic [31:0] n_predict, n_branch, n_edge, n_nomatch, n_overflow;

  extrap_controller #(.STACK_DEPTH(DEPTH)) dut (
    .clk, .rst_n, .win, .seed_valid, .seed_ready, .seed_hit, .seed_id,
    .nn_valid, .nn_x, .nn_out_valid, .nn_y,
    .mem_rd_en, .mem_rd_layer, .mem_rd_idx, .mem_rd_hit, .mem_count,
    .trk_valid, .trk_ready, .trk, .busy,
    .n_predict, .n_branch, .n_edge, .n_nomatch, .n_overflow);

  // ---- network model: linear extrapolation, 8-clock latency ----------------
  int nn_due [$];
  hit_t nn_res [$];
  int cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    nn_out_valid <= 1'b0;
    if (nn_valid) begin
      nn_due.push_back(cyc + 7);
      nn_res.push_back('{x: fx_t'(2*nn_x[6] - nn_x[3]), y: fx_t'(2*nn_x[7] - nn_x[4]),
                         z: fx_t'(2*nn_x[8] - nn_x[5])});
    end
    if (nn_due.size() > 0 && nn_due[0] == cyc) begin
      hit_t r;
      void'(nn_due.pop_front());
      r = nn_res.pop_front();
      nn_out_valid <= 1'b1;
      nn_y[0] <= r.x; nn_y[1] <= r.y; nn_y[2] <= r.z;
    end
  end

  // ---- event -----------------------------------------------------------------
  typedef struct { int x; int y; int z; } ihit_t;
  ihit_t ev [N_LAYERS][$];
  typedef struct { int n; int lay[10]; int idx[10]; ihit_t h[10]; } rtrk_t;
  rtrk_t seeds [$];
  rtrk_t expect_q [$];
  int m_edge = 0, m_nomatch = 0, m_overflow = 0, m_branch = 0, m_predict = 0;

  function automatic ihit_t on_line(input real phi, input real c, input int l);
    real r;
    r = 30.0 * real'(l + 1);
    return '{x: $rtoi(r * $cos(phi)), y: $rtoi(r * $sin(phi)), z: $rtoi(r * c)};
  endfunction

  function automatic void add_hit(input int l, input ihit_t h);
    ev[l].push_back(h);
  endfunction

  function automatic void add_track(input real phi, input real c, input int last_layer);
    rtrk_t s;
    for (int l = 0; l <= last_layer; l++) add_hit(l, on_line(phi, c, l));
    s.n = 3;
    for (int l = 0; l < 3; l++) begin
      s.lay[l] = l; s.idx[l] = ev[l].size() - 1; s.h[l] = ev[l][ev[l].size() - 1];
    end
    seeds.push_back(s);
  endfunction

  // reference search
  function automatic void reference(input int r2);
    rtrk_t st [$];
    foreach (seeds[s]) begin
      rtrk_t cur;
      cur = seeds[s];
      forever begin
        int ll;
        ll = cur.lay[cur.n - 1];
        if (ll == N_LAYERS - 1) begin
          m_edge++; expect_q.push_back(cur);
        end else begin
          ihit_t p;
          int nm;
          m_predict++;
          p.x = 2*cur.h[cur.n-1].x - cur.h[cur.n-2].x;
          p.y = 2*cur.h[cur.n-1].y - cur.h[cur.n-2].y;
          p.z = 2*cur.h[cur.n-1].z - cur.h[cur.n-2].z;
          nm = 0;
          foreach (ev[ll+1][i]) begin
            int dx, dy, dz;
            dx = ev[ll+1][i].x - p.x; dy = ev[ll+1][i].y - p.y; dz = ev[ll+1][i].z - p.z;
            if (dx*dx + dy*dy + dz*dz <= r2) begin
              rtrk_t e;
              e = cur;
              e.lay[e.n] = ll + 1; e.idx[e.n] = i; e.h[e.n] = ev[ll+1][i]; e.n++;
              if (nm > 0) m_branch++;
              nm++;
              if (st.size() == DEPTH) m_overflow++;
              else st.push_back(e);
            end
          end
          if (nm == 0) begin m_nomatch++; expect_q.push_back(cur); end
        end
        if (st.size() == 0) break;
        cur = st.pop_back();
      end
    end
  endfunction

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int got = 0;
  always @(posedge clk) trk_ready <= ($urandom % 3) != 0;
  always @(posedge clk) if (rst_n && trk_valid && trk_ready) begin
    rtrk_t e;
    got++;
    if (expect_q.size() == 0) chk(0, "unexpected track");
    else begin
      e = expect_q.pop_front();
      chk(int'(trk.n_hits) == e.n, $sformatf("track %0d length %0d exp %0d", got, trk.n_hits, e.n));
      for (int i = 0; i < e.n; i++) begin
        chk(int'(trk.id[i].layer) == e.lay[i] && int'(trk.id[i].idx) == e.idx[i],
            $sformatf("track %0d hit %0d id", got, i));
        chk(int'(trk.hit[i].x) == e.h[i].x && int'(trk.hit[i].y) == e.h[i].y &&
            int'(trk.hit[i].z) == e.h[i].z, $sformatf("track %0d hit %0d coords", got, i));
      end
    end
  end

  initial begin
    // tracks
    add_track(0.30, 0.20, 9);                    // clean, reaches the edge
    add_track(1.30, -0.40, 5);                   // ends at layer 5
    add_track(2.60, 0.10, 9);                    // x < 0, clean
    add_track(-0.70, 0.05, 9);                   // with decoys
    add_hit(3, '{x: on_line(-0.70, 0.05, 3).x, y: on_line(-0.70, 0.05, 3).y, z: on_line(-0.70, 0.05, 3).z + 4});
    add_hit(4, '{x: on_line(-0.70, 0.05, 4).x + 3, y: on_line(-0.70, 0.05, 4).y, z: on_line(-0.70, 0.05, 4).z});
    add_hit(6, '{x: on_line(-0.70, 0.05, 6).x, y: on_line(-0.70, 0.05, 6).y + 3, z: on_line(-0.70, 0.05, 6).z});
    add_hit(6, '{x: on_line(-0.70, 0.05, 6).x, y: on_line(-0.70, 0.05, 6).y - 3, z: on_line(-0.70, 0.05, 6).z});
    // seed with nothing beyond it
    begin
      rtrk_t s;
      s.n = 3;
      for (int l = 0; l < 3; l++) begin
        add_hit(l, '{x: -20 * (l + 1), y: -25 * (l + 1), z: 200});
        s.lay[l] = l; s.idx[l] = ev[l].size() - 1; s.h[l] = ev[l][ev[l].size() - 1];
      end
      seeds.push_back(s);
    end
    // noise
    for (int l = 3; l < N_LAYERS; l++)
      for (int k = 0; k < 6; k++) begin
        real a;
        a = real'($urandom % 6283) / 1000.0;
        add_hit(l, '{x: $rtoi(30.0*(l+1)*$cos(a)), y: $rtoi(30.0*(l+1)*$sin(a)),
                     z: int'($urandom % 400) - 200});
      end
    reference(100);
    $display("reference: %0d tracks, edge %0d nomatch %0d branch %0d overflow %0d",
             expect_q.size(), m_edge, m_nomatch, m_branch, m_overflow);
    for (int k = 0; k < SEED_HITS; k++) begin seed_hit[k] = '0; seed_id[k] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int l = 0; l < N_LAYERS; l++)
      foreach (ev[l][i]) begin
        wr_en = 1; wr_layer = LAYER_W'(l);
        wr_hit = '{x: fx_t'(ev[l][i].x), y: fx_t'(ev[l][i].y), z: fx_t'(ev[l][i].z)};
        @(negedge clk);
      end
    wr_en = 0;
    foreach (seeds[s]) begin
      for (int k = 0; k < SEED_HITS; k++) begin
        seed_hit[k] = '{x: fx_t'(seeds[s].h[k].x), y: fx_t'(seeds[s].h[k].y), z: fx_t'(seeds[s].h[k].z)};
        seed_id[k]  = '{layer: LAYER_W'(seeds[s].lay[k]), idx: HIT_IDX_W'(seeds[s].idx[k])};
      end
      seed_valid = 1;
      do @(posedge clk); while (!seed_ready);
      @(negedge clk);
      seed_valid = 0;
    end
    do @(negedge clk); while (busy);
    repeat (3) @(negedge clk);
    chk(expect_q.size() == 0, $sformatf("%0d expected tracks not emitted", expect_q.size()));
    chk(n_edge == 32'(m_edge), "edge count");
    chk(n_nomatch == 32'(m_nomatch), "no-match count");
    chk(n_branch == 32'(m_branch), "branch count");
    chk(n_overflow == 32'(m_overflow), "overflow count");
    chk(n_predict == 32'(m_predict), "prediction count");
    chk(m_branch > 0 && m_overflow > 0 && m_edge > 0 && m_nomatch > 0, "all stopping/branching cases hit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
