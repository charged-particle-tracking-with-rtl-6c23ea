// tb_mlp_extrapolator: loads random weights through the configuration port,
// streams random feature vectors on consecutive clocks and compares the three
// outputs with a layer-by-layer integer reference (tanh in floating point,
// +-2 LSB tolerance). Also checks the latency: 8 clocks, within the 50 ns
// budget at a 5 ns clock (10 clocks).
module tb_mlp_extrapolator;
  import trk_pkg::*;
  import tb_nn_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic cfg_we = 0; logic [11:0] cfg_addr = 0; fx_t cfg_data = 0;
  logic in_valid = 0, out_valid;
  fx_t x [EX_IN]; fx_t y [EX_OUT];

  mlp_extrapolator dut (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
                        .in_valid, .x, .out_valid, .y);

  int w1[$], b1[$], w2[$], b2[$], w3[$], b3[$], w4[$], b4[$], dummy[$];
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
    for (int i = 0; i < EX_IN; i++) x[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    fill(w1, 32*14, -350, 350); fill(b1, 32, -200, 200);
    fill(w2, 32*32, -250, 250); fill(b2, 32, -100, 200);
    fill(w3, 32*32, -250, 250); fill(b3, 32, -100, 200);
    fill(w4, 3*32,  -250, 250); fill(b4, 3, -200, 200);
    for (int i = 0; i < 32; i++) dummy.push_back(0);
    checks++;
    if (cfg_addr != 12'd2691) begin failures++; $display("FAIL: parameter count"); end
    @(negedge clk);
    for (int v = 0; v < 30; v++) begin
      automatic int xq[$], h1[$], h2[$], h3[$], yo[$];
      for (int i = 0; i < EX_IN; i++) begin
        x[i] = (i < 9) ? fx_t'(rnd(-1000, 1000)) : ((i - 9 == v % 5) ? FX_ONE : '0);
        xq.push_back(int'(x[i]));
      end
      dense_ref(14, 32, xq, w1, b1, 1'b0, dummy, dummy, 1, h1);
      dense_ref(32, 32, h1, w2, b2, 1'b0, dummy, dummy, 1, h2);
      dense_ref(32, 32, h2, w3, b3, 1'b0, dummy, dummy, 1, h3);
      dense_ref(32, 3,  h3, w4, b4, 1'b0, dummy, dummy, 2, yo);
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
      if (cyc - t0 != 8) begin failures++; $display("FAIL: latency %0d", cyc - t0); end
      checks++;
      if ((cyc - t0) * 5 > 50) begin failures++; $display("FAIL: over 50 ns"); end
      for (int o = 0; o < 3; o++) begin
        checks++;
        if (iabs(int'(y[o]) - e[o]) > 2) begin
          failures++; $display("FAIL: y[%0d]=%0d exp %0d", o, y[o], e[o]);
        end
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
