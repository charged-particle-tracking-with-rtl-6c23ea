// tb_fake_nn: loads random weights (including batch-normalisation scales and
// offsets) through the configuration port, streams random zero-padded track
// vectors on consecutive clocks and compares the score with a layer-by-layer
// integer reference (sigmoid in floating point, +-2 LSB tolerance). Checks the
// latency: 6 clocks, within the 50 ns budget at a 5 ns clock.
module tb_fake_nn;
  import trk_pkg::*;
  import tb_nn_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic cfg_we = 0; logic [11:0] cfg_addr = 0; fx_t cfg_data = 0;
  logic in_valid = 0, out_valid;
  fx_t x [FK_IN]; fx_t score;

  fake_nn dut (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
               .in_valid, .x, .out_valid, .score);

  int w1[$], b1[$], s1[$], c1[$], w2[$], b2[$], s2[$], c2[$], w3[$], b3[$], dummy[$];
  int expq [$][$];
  int tq [$];

  function automatic int rnd(input int lo, input int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  task automatic load(input int v);
    @(negedge clk);
    cfg_we = 1; cfg_data = fx_t'(v);
    @(negedge clk);
    cfg_we = 0;
    cfg_addr = cfg_addr + 1;
  endtask

  task automatic fill(ref int q[$], input int n, input int lo, input int hi);
    for (int i = 0; i < n; i++) begin
      int v;
      v = rnd(lo, hi);
      q.push_back(v);
      load(v);
    end
  endtask

  initial begin
    for (int i = 0; i < FK_IN; i++) x[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    fill(w1, 32*30, -300, 300); fill(b1, 32, -200, 200);
    fill(s1, 32, -2000, 3000);  fill(c1, 32, -300, 300);
    fill(w2, 32*32, -250, 250); fill(b2, 32, -100, 200);
    fill(s2, 32, 500, 2500);    fill(c2, 32, -300, 300);
    fill(w3, 32, -600, 600);    fill(b3, 1, -300, 300);
    for (int i = 0; i < 32; i++) dummy.push_back(0);
    checks++;
    if (cfg_addr != 12'd2209) begin failures++; $display("FAIL: parameter count"); end
    @(negedge clk);
    for (int v = 0; v < 30; v++) begin
      automatic int xq[$], h1[$], h2[$], yo[$];
      automatic int nh = 3 + v % 8;   // 3..10 hits, rest zero padding
      for (int i = 0; i < FK_IN; i++) begin
        x[i] = (i < 3 * nh) ? fx_t'(rnd(-1000, 1000)) : '0;
        xq.push_back(int'(x[i]));
      end
      dense_ref(30, 32, xq, w1, b1, 1'b1, s1, c1, 1, h1);
      dense_ref(32, 32, h1, w2, b2, 1'b1, s2, c2, 1, h2);
      dense_ref(32, 1,  h2, w3, b3, 1'b0, dummy, dummy, 3, yo);
      expq.push_back(yo);
      tq.push_back(cyc);
      in_valid = 1;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (12) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL: %0d outputs missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    int e[$], t0;
    checks++;
    if (expq.size() == 0) begin
      failures++; $display("FAIL: unexpected output");
    end else begin
      e = expq.pop_front(); t0 = tq.pop_front();
      if (cyc - t0 != 6) begin failures++; $display("FAIL: latency %0d", cyc - t0); end
      checks++;
      if ((cyc - t0) * 5 > 50) begin failures++; $display("FAIL: over 50 ns"); end
      checks++;
      if (iabs(int'(score) - e[0]) > 2) begin
        failures++; $display("FAIL: score=%0d exp %0d", score, e[0]);
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
