// tb_hit_warrior: three events of random candidates built as variants of a
// pool of base tracks (0..4 hits swapped, some shortened), with random scores.
// A software model applies the rules (score cut at 0.5, overlap when at least
// 8 hits are shared, the higher score stays, ties keep the earlier track, a
// full buffer drops the newcomer); after each flush the set of tracks sent out
// must equal the model's, and every counter must agree. The buffer is cut to
// 8 entries so that it overflows; out_ready is randomly held low.
module tb_hit_warrior;
  import trk_pkg::*;

  localparam int CAP = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready, flush = 0, out_valid, out_ready = 0, flush_done;
  logic [NHITS_W-1:0] in_n = 0, out_n;
  hit_id_t in_id [MAX_HITS], out_id [MAX_HITS];
  fx_t in_score = 0, out_score;
  logic [31:0] n_fake, n_dup, n_replaced, n_overflow, n_kept;

  hit_warrior #(.CAP(CAP)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_n, .in_id, .in_score,
    .flush, .out_valid, .out_ready, .out_n, .out_id, .out_score, .flush_done,
    .n_fake, .n_dup, .n_replaced, .n_overflow, .n_kept);

  typedef struct { int n; int id[10]; int sc; } ctrk_t;
  ctrk_t kept [$];
  ctrk_t outs [$];
  int m_fake = 0, m_dup = 0, m_rep = 0, m_ovf = 0, m_kept = 0;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic int shared(input ctrk_t a, input ctrk_t b);
    int c = 0;
    for (int i = 0; i < a.n; i++)
      for (int j = 0; j < b.n; j++)
        if (a.id[i] == b.id[j]) c++;
    return c;
  endfunction

  function automatic void model(input ctrk_t t);
    int novl = 0;
    bit beaten = 0;
    if (t.sc <= 512) begin m_fake++; return; end
    foreach (kept[k])
      if (shared(kept[k], t) >= 8) begin
        novl++;
        if (kept[k].sc >= t.sc) beaten = 1;
      end
    if (beaten) begin m_dup++; return; end
    if (kept.size() - novl >= CAP) begin m_ovf++; return; end
    for (int k = kept.size() - 1; k >= 0; k--)
      if (shared(kept[k], t) >= 8) kept.delete(k);
    m_rep += novl;
    kept.push_back(t);
    m_kept++;
  endfunction

  function automatic bit same(input ctrk_t a, input ctrk_t b);
    if (a.n != b.n || a.sc != b.sc) return 0;
    for (int i = 0; i < a.n; i++) if (a.id[i] != b.id[i]) return 0;
    return 1;
  endfunction

  always @(posedge clk) out_ready <= ($urandom % 4) != 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    ctrk_t o;
    o.n = int'(out_n); o.sc = int'(out_score);
    for (int i = 0; i < 10; i++) o.id[i] = (i < o.n) ? int'(out_id[i]) : 0;
    outs.push_back(o);
  end

  initial begin
    ctrk_t base [12];
    for (int i = 0; i < MAX_HITS; i++) in_id[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int ev = 0; ev < 3; ev++) begin
      kept = {};
      outs = {};
      for (int b = 0; b < 12; b++) begin
        base[b].n = 10;
        for (int l = 0; l < 10; l++) base[b].id[l] = (l << HIT_IDX_W) | int'($urandom % 64);
      end
      for (int c = 0; c < 60; c++) begin
        automatic ctrk_t t = base[$urandom % ((ev == 0) ? 5 : 12)];
        automatic int swaps = int'($urandom % 5);
        for (int s = 0; s < swaps; s++) begin
          automatic int l = int'($urandom % 10);
          t.id[l] = (l << HIT_IDX_W) | int'($urandom % 64);
        end
        if ($urandom % 4 == 0) t.n = 7 + int'($urandom % 3);
        for (int i = t.n; i < 10; i++) t.id[i] = 0;
        t.sc = int'($urandom % 1025);
        if (c == 5) t.sc = 512;                          // exactly at the cut: a fake
        model(t);
        in_n = NHITS_W'(t.n);
        for (int i = 0; i < 10; i++) in_id[i] = hit_id_t'(t.id[i]);
        in_score = fx_t'(t.sc);
        in_valid = 1;
        do @(posedge clk); while (!in_ready);
        @(negedge clk);
        in_valid = 0;
        if ($urandom % 2) @(negedge clk);
      end
      flush = 1;
      @(negedge clk);
      flush = 0;
      do @(posedge clk); while (!flush_done);
      @(negedge clk);
      chk(outs.size() == kept.size(), $sformatf("event %0d: %0d tracks out, %0d expected",
                                                ev, outs.size(), kept.size()));
      foreach (kept[k]) begin
        automatic bit found = 0;
        foreach (outs[o]) if (!found && same(kept[k], outs[o])) begin
          found = 1; outs.delete(o);
        end
        chk(found, $sformatf("event %0d: kept track %0d missing", ev, k));
      end
      chk(n_fake == 32'(m_fake) && n_dup == 32'(m_dup) && n_replaced == 32'(m_rep) &&
          n_overflow == 32'(m_ovf) && n_kept == 32'(m_kept),
          $sformatf("counters %0d/%0d %0d/%0d %0d/%0d %0d/%0d %0d/%0d", n_fake, m_fake,
                    n_dup, m_dup, n_replaced, m_rep, n_overflow, m_ovf, n_kept, m_kept));
    end
    chk(m_fake > 0 && m_dup > 0 && m_rep > 0 && m_ovf > 0, "every rule exercised");
    $display("model: fake %0d dup %0d replaced %0d overflow %0d kept %0d",
             m_fake, m_dup, m_rep, m_ovf, m_kept);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
