// tb_nn_tracker_top: end-to-end run of the tracker on synthetic events.
//
// Weights. The extrapolation network is loaded so that it computes the linear
// extrapolation 2*last - previous hit: for each coordinate two first-layer
// ReLU nodes carry +v and -v, two identity layers pass them on, and the
// output node takes their difference (tanh bends it by under 1 mm at the
// radii used). The fake network is loaded so that its score is
// sigmoid(2*16*x8 - 2 + 8*max(z10, 0)), where x8 is the rotated x of the 8th
// hit slot and z10 the z of the 10th: tracks with fewer than 8 hits score
// about 0.12 (fakes), full tracks about 0.9, and among overlapping full tracks
// the one with the larger last z wins.
//
// Geometry: 10 layers at radii 15, 30, ..., 150 mm; tracks are straight lines
// from the origin; noise hits sit far away in z.
// Event A (10 mm window): four true tracks (two with x < 0), a decoy 4 mm
// from the last hit of track 0 (lower score: it is replaced by the true
// track) and of track 2 (higher score: the true track is dropped as a
// duplicate), two seeds with nothing beyond them and a track that ends at
// layer 5 (all three cut as fakes). The output must be exactly tracks 0, 1, 3
// and the decoy variant of track 2.
// Event B (20 mm window, reduced sizes only): eight true tracks for a 6-entry
// overlap buffer, and a track with two decoys on each of its last two layers
// for a 3-deep work stack, so that both overflow. Every output must be a
// full true track (or a decoy variant), with no two alike.
// Each mechanism (branching, both stop rules, stack overflow, fake cut,
// duplicate drop, replacement, buffer overflow, both windows, tracks with
// x < 0) is counted and must have happened at least once.
module tb_nn_tracker_top;
  import trk_pkg::*;

  localparam bit FULL = 1'b0;   // 1: default sizes, event A only

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  win_e win = WIN_10MM;
  logic ext_cfg_we = 0, fk_cfg_we = 0;
  logic [11:0] ext_cfg_addr = 0, fk_cfg_addr = 0;
  fx_t ext_cfg_data = 0, fk_cfg_data = 0;
  logic event_clear = 0, hit_wr_en = 0, hit_overflow;
  logic [LAYER_W-1:0] hit_wr_layer = 0;
  hit_t hit_wr = '0;
  logic [HIT_IDX_W-1:0] hit_wr_idx;
  logic seed_valid = 0, seed_ready, event_end = 0;
  hit_t seed_hit [SEED_HITS];
  hit_id_t seed_id [SEED_HITS];
  logic out_valid, out_ready = 1, event_done;
  logic [NHITS_W-1:0] out_n;
  hit_id_t out_id [MAX_HITS];
  fx_t out_score;
  tracker_stats_t stats;

  nn_tracker_top #(.STACK_DEPTH(3), .KEEP_CAP(6)) dut (
    .clk, .rst_n, .win,
    .ext_cfg_we, .ext_cfg_addr, .ext_cfg_data, .fk_cfg_we, .fk_cfg_addr, .fk_cfg_data,
    .event_clear, .hit_wr_en, .hit_wr_layer, .hit_wr, .hit_wr_idx, .hit_overflow,
    .seed_valid, .seed_ready, .seed_hit, .seed_id, .event_end,
    .out_valid, .out_ready, .out_n, .out_id, .out_score, .event_done, .stats);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---- weights -------------------------------------------------------------
  int ext_w [2691];
  int fk_w [2209];

  task automatic load_weights();
    for (int i = 0; i < 2691; i++) ext_w[i] = 0;
    for (int i = 0; i < 2209; i++) fk_w[i] = 0;
    // extrapolator: W1 at 0 (32x14), b1 448, W2 480, b2 1504, W3 1536, b3 2560,
    // W4 2592 (3x32), b4 2688
    for (int c = 0; c < 3; c++) begin
      ext_w[(2*c) * 14 + 6 + c]     =  2048;
      ext_w[(2*c) * 14 + 3 + c]     = -1024;
      ext_w[(2*c + 1) * 14 + 6 + c] = -2048;
      ext_w[(2*c + 1) * 14 + 3 + c] =  1024;
    end
    for (int n = 0; n < 6; n++) begin
      ext_w[480  + n * 32 + n] = 1024;
      ext_w[1536 + n * 32 + n] = 1024;
    end
    for (int c = 0; c < 3; c++) begin
      ext_w[2592 + c * 32 + 2*c]     =  1024;
      ext_w[2592 + c * 32 + 2*c + 1] = -1024;
    end
    // fake NN: W1 0 (32x30), b1 960, s1 992, o1 1024, W2 1056, b2 2080,
    // s2 2112, o2 2144, W3 2176, b3 2208
    fk_w[0 * 30 + 21] = 1024;               // node 0 <- x of slot 7
    fk_w[1 * 30 + 29] = 1024;               // node 1 <- z of slot 9
    fk_w[992] = 1024; fk_w[993] = 1024;     // BN1 scale 1
    fk_w[1056 + 0 * 32 + 0] = 1024;
    fk_w[1056 + 1 * 32 + 1] = 1024;
    fk_w[2112] = 16384; fk_w[2113] = 1024;  // BN2 scale 16, 1
    fk_w[2176] = 2048; fk_w[2177] = 8192;   // output 2*n0 + 8*n1
    fk_w[2208] = -2048;                     // - 2
    for (int i = 0; i < 2691; i++) begin
      @(negedge clk);
      ext_cfg_we = 1; ext_cfg_addr = 12'(i); ext_cfg_data = fx_t'(ext_w[i]);
      if (i < 2209) begin fk_cfg_we = 1; fk_cfg_addr = 12'(i); fk_cfg_data = fx_t'(fk_w[i]); end
      else fk_cfg_we = 0;
    end
    @(negedge clk);
    ext_cfg_we = 0; fk_cfg_we = 0;
  endtask

  // ---- event building --------------------------------------------------------
  typedef struct { int x; int y; int z; } ihit_t;
  ihit_t ev [N_LAYERS][$];
  typedef struct { int id [3]; } seed_t;
  seed_t seeds [$];
  int truth [$][$];       // expected id lists (layer << 6 | idx)

  function automatic ihit_t on_line(input real phi, input real c, input int l);
    real r;
    r = 15.0 * real'(l + 1);
    return '{x: $rtoi(r * $cos(phi)), y: $rtoi(r * $sin(phi)), z: $rtoi(r * c)};
  endfunction

  function automatic int add_hit(input int l, input ihit_t h);
    ev[l].push_back(h);
    return (l << HIT_IDX_W) | (ev[l].size() - 1);
  endfunction

  // adds hits on layers 0..last, a seed, returns the id list
  function automatic void add_track(input real phi, input real c, input int last,
                                    output int ids [$]);
    seed_t s;
    ids = {};
    for (int l = 0; l <= last; l++) ids.push_back(add_hit(l, on_line(phi, c, l)));
    for (int k = 0; k < 3; k++) s.id[k] = ids[k];
    seeds.push_back(s);
  endfunction

  function automatic void clear_event();
    for (int l = 0; l < N_LAYERS; l++) ev[l] = {};
    seeds = {};
    truth = {};
  endfunction

  task automatic run_event(input win_e w);
    event_clear = 1;
    @(negedge clk);
    event_clear = 0;
    win = w;
    for (int l = 0; l < N_LAYERS; l++)
      foreach (ev[l][i]) begin
        hit_wr_en = 1; hit_wr_layer = LAYER_W'(l);
        hit_wr = '{x: fx_t'(ev[l][i].x), y: fx_t'(ev[l][i].y), z: fx_t'(ev[l][i].z)};
        #1 chk(int'(hit_wr_idx) == i, "hit slot");
        @(negedge clk);
      end
    hit_wr_en = 0;
    foreach (seeds[s]) begin
      for (int k = 0; k < 3; k++) begin
        automatic int l = seeds[s].id[k] >> HIT_IDX_W;
        automatic int i = seeds[s].id[k] & 63;
        seed_hit[k] = '{x: fx_t'(ev[l][i].x), y: fx_t'(ev[l][i].y), z: fx_t'(ev[l][i].z)};
        seed_id[k]  = hit_id_t'(seeds[s].id[k]);
      end
      seed_valid = 1;
      do @(posedge clk); while (!seed_ready);
      @(negedge clk);
      seed_valid = 0;
    end
    event_end = 1;
    @(negedge clk);
    event_end = 0;
  endtask

  int outs [$][$];
  int out_sc [$];
  bit done_seen = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      automatic int q [$];
      for (int i = 0; i < int'(out_n); i++) q.push_back(int'(out_id[i]));
      outs.push_back(q);
      out_sc.push_back(int'(out_score));
    end
    if (event_done) done_seen = 1;
  end

  function automatic bit same(input int a [$], input int b [$]);
    if (a.size() != b.size()) return 0;
    foreach (a[i]) if (a[i] != b[i]) return 0;
    return 1;
  endfunction

  task automatic wait_done();
    int t = 0;
    while (!done_seen && t < 200000) begin @(negedge clk); t++; end
    chk(done_seen, "event finished");
    done_seen = 0;
  endtask

  int n_neg_x = 0;

  task automatic show(input string tag);
    $display("%s: predictions %0d branches %0d edge %0d nomatch %0d stack_ovf %0d fakes %0d dup %0d replaced %0d keep_ovf %0d kept %0d",
             tag, stats.predictions, stats.branches, stats.stop_edge, stats.stop_nomatch,
             stats.stack_overflow, stats.fakes, stats.duplicates, stats.replaced,
             stats.kept_overflow, stats.kept);
  endtask

  initial begin
    automatic int ids [$];
    automatic int dec0, dec2;
    for (int k = 0; k < 3; k++) begin seed_hit[k] = '0; seed_id[k] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    load_weights();

    // ================= event A ==================================================
    clear_event();
    add_track(0.30, 0.30, 9, ids);  truth.push_back(ids);
    dec0 = add_hit(9, '{x: on_line(0.30, 0.30, 9).x, y: on_line(0.30, 0.30, 9).y,
                       z: on_line(0.30, 0.30, 9).z - 4});
    add_track(1.90, 0.10, 9, ids);  truth.push_back(ids);
    add_track(3.50, 0.40, 9, ids);
    dec2 = add_hit(9, '{x: on_line(3.50, 0.40, 9).x, y: on_line(3.50, 0.40, 9).y,
                       z: on_line(3.50, 0.40, 9).z + 4});
    ids[9] = dec2;                  truth.push_back(ids);   // the decoy wins
    add_track(5.00, -0.20, 9, ids); truth.push_back(ids);
    add_track(4.20, 0.00, 5, ids);                          // ends at layer 5
    begin                                                   // two dead seeds
      seed_t s;
      for (int k = 0; k < 3; k++) s.id[k] = add_hit(k, '{x: 10*(k+1), y: -12*(k+1), z: 40*(k+1)});
      seeds.push_back(s);
      for (int k = 0; k < 3; k++) s.id[k] = add_hit(k, '{x: -9*(k+1), y: 11*(k+1), z: -45*(k+1)});
      seeds.push_back(s);
    end
    for (int l = 0; l < N_LAYERS; l++)
      for (int k = 0; k < 4; k++) begin
        real a;
        a = real'($urandom % 6283) / 1000.0;
        void'(add_hit(l, '{x: $rtoi(15.0*(l+1)*$cos(a)), y: $rtoi(15.0*(l+1)*$sin(a)),
                           z: 300 + int'($urandom % 300)}));
      end
    n_neg_x += 2;   // tracks at phi 1.9 and 3.5 start with x < 0
    outs = {}; out_sc = {};
    run_event(WIN_10MM);
    wait_done();
    chk(outs.size() == truth.size(), $sformatf("event A: %0d tracks out, %0d expected",
                                              outs.size(), truth.size()));
    foreach (truth[t]) begin
      automatic bit found = 0;
      foreach (outs[o]) if (same(truth[t], outs[o])) found = 1;
      chk(found, $sformatf("event A: true track %0d missing", t));
    end
    foreach (out_sc[o]) chk(out_sc[o] > 512, "kept score above the cut");
    chk(!hit_overflow, "no hit overflow");
    show("event A");

    if (!FULL) begin
      // ================= event B ================================================
      automatic tracker_stats_t sa = stats;
      clear_event();
      for (int t = 0; t < 8; t++) begin
        add_track(0.1 + 0.785 * real'(t), 0.25, 9, ids);
        truth.push_back(ids);
      end
      for (int d = -1; d <= 1; d += 2) begin
        void'(add_hit(8, '{x: on_line(0.885, 0.25, 8).x, y: on_line(0.885, 0.25, 8).y,
                           z: on_line(0.885, 0.25, 8).z + 3*d}));
        void'(add_hit(9, '{x: on_line(0.885, 0.25, 9).x, y: on_line(0.885, 0.25, 9).y,
                           z: on_line(0.885, 0.25, 9).z + 3*d}));
      end
      n_neg_x += 4;
      outs = {}; out_sc = {};
      run_event(WIN_20MM);
      wait_done();
      chk(outs.size() == 6, $sformatf("event B: %0d tracks out, buffer holds 6", outs.size()));
      foreach (outs[o]) begin
        automatic bit found = 0;
        foreach (truth[t]) begin
          automatic bit m = (outs[o].size() == 10);
          for (int i = 0; i < 8 && m; i++) m = (outs[o][i] == truth[t][i]);
          if (m) found = 1;
        end
        chk(found, $sformatf("event B: output %0d is not a true track", o));
        for (int p = 0; p < o; p++) chk(!same(outs[o], outs[p]), "event B: repeated output");
      end
      chk(stats.stack_overflow > sa.stack_overflow, "event B: stack overflow happened");
      chk(stats.kept_overflow > sa.kept_overflow, "event B: buffer overflow happened");
      show("event B");
    end

    // ---- mechanisms --------------------------------------------------------
    chk(stats.branches > 0,     "branching");
    chk(stats.stop_edge > 0,    "stop at outermost layer");
    chk(stats.stop_nomatch > 0, "stop without a hit in the window");
    chk(stats.fakes > 0,        "fake cut");
    chk(stats.duplicates > 0,   "overlap: newcomer dropped");
    chk(stats.replaced > 0,     "overlap: kept track replaced");
    chk(n_neg_x > 0,            "tracks with x < 0 (pre-rotation)");
    if (!FULL) begin
      chk(stats.stack_overflow > 0, "stack overflow");
      chk(stats.kept_overflow > 0,  "buffer overflow");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
