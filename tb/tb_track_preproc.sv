// tb_track_preproc: random tracks of 3..10 hits with distinct radii, given in
// scrambled order and in all four quadrants. The reference rotates every hit
// by -atan2(y0, x0) of the first hit in floating point, sorts by radius and
// zero-pads; outputs must agree within 3 LSB (3 mm). Also checks that the
// first output hit lands on the +x axis only when it is also the innermost,
// that the track passes through unchanged, and the 27-clock latency.
module tb_track_preproc;
  import trk_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  track_t in_trk = '0, out_trk;
  fx_t out_x [FK_IN];

  track_preproc dut (.clk, .rst_n, .in_valid, .in_ready, .in_trk, .out_valid, .out_ready,
                     .out_x, .out_trk);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic int iabs(input int v);
    return (v < 0) ? -v : v;
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < 60; t++) begin
      automatic int n = 3 + t % 8;
      automatic real rad[10], ph[10], zz[10];
      automatic real ex[10], ey[10], ez[10];
      automatic int ord[10];
      automatic real a0;
      automatic int t0;
      automatic track_t tr = '0;
      // distinct radii 60..1000 mm, random angles, random order
      for (int i = 0; i < n; i++) begin
        rad[i] = 60.0 + 90.0 * real'(i) + real'($urandom % 40);
        ph[i]  = real'($urandom % 6283) / 1000.0 - 3.1415;
        zz[i]  = real'(int'($urandom % 1600) - 800);
        ord[i] = i;
      end
      for (int i = n - 1; i > 0; i--) begin
        automatic int j = int'($urandom % (i + 1));
        automatic int tmp = ord[i];
        ord[i] = ord[j]; ord[j] = tmp;
      end
      tr.n_hits = NHITS_W'(n);
      for (int i = 0; i < n; i++) begin
        automatic int k = ord[i];
        tr.hit[i].x = fx_t'($rtoi(rad[k] * $cos(ph[k])));
        tr.hit[i].y = fx_t'($rtoi(rad[k] * $sin(ph[k])));
        tr.hit[i].z = fx_t'($rtoi(zz[k]));
        tr.id[i]    = '{layer: LAYER_W'(k), idx: HIT_IDX_W'(t)};
      end
      // reference: rotate by the first listed hit, order by radius (k order)
      a0 = $atan2(real'(tr.hit[0].y), real'(tr.hit[0].x));
      for (int k = 0; k < n; k++) begin
        automatic real x = real'($rtoi(rad[k] * $cos(ph[k])));
        automatic real y = real'($rtoi(rad[k] * $sin(ph[k])));
        ex[k] = x * $cos(a0) + y * $sin(a0);
        ey[k] = y * $cos(a0) - x * $sin(a0);
        ez[k] = real'($rtoi(zz[k]));
      end
      in_trk = tr; in_valid = 1;
      do @(posedge clk); while (!in_ready);
      t0 = cyc;
      @(negedge clk);
      in_valid = 0;
      do @(posedge clk); while (!out_valid);
      chk(cyc - t0 == 27, $sformatf("latency %0d", cyc - t0));
      chk(out_trk == tr, "track passes through");
      for (int k = 0; k < 10; k++) begin
        if (k < n) begin
          chk(iabs(int'(out_x[3*k])     - $rtoi(ex[k])) <= 3 &&
              iabs(int'(out_x[3*k + 1]) - $rtoi(ey[k])) <= 3 &&
              int'(out_x[3*k + 2]) == $rtoi(ez[k]),
              $sformatf("t%0d hit %0d: (%0d,%0d,%0d) exp (%0.1f,%0.1f,%0.1f)", t, k,
                        out_x[3*k], out_x[3*k+1], out_x[3*k+2], ex[k], ey[k], ez[k]));
        end else begin
          chk(out_x[3*k] == '0 && out_x[3*k+1] == '0 && out_x[3*k+2] == '0, "padding");
        end
      end
      @(negedge clk);
    end
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
