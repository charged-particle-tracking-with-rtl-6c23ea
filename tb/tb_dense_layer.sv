// tb_dense_layer: checks dense_layer against the integer reference.
// Two instances: the default 14->32 ReLU layer, and a 6->3 layer with batch
// normalisation and sigmoid. Random vectors stream in on consecutive clocks;
// every output is compared with the reference, and the latency (2 clocks) and
// one-vector-per-clock throughput are checked.
module tb_dense_layer;
  import trk_pkg::*;
  import tb_nn_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NV = 40;

  // instance A: defaults
  fx_t xa [14]; fx_t wa [32][14]; fx_t ba [32]; fx_t sa [32]; fx_t ca [32]; fx_t ya [32];
  logic va_in = 0, va_out;
  dense_layer dut_a (.clk, .rst_n, .in_valid(va_in), .x(xa), .w(wa), .b(ba),
                     .bn_s(sa), .bn_b(ca), .out_valid(va_out), .y(ya));
  // instance B: batch norm + sigmoid
  fx_t xb [6]; fx_t wb [3][6]; fx_t bb [3]; fx_t sb [3]; fx_t cb [3]; fx_t yb [3];
  logic vb_out;
  dense_layer #(.N_IN(6), .N_OUT(3), .ACT(ACT_SIGMOID), .BN(1'b1)) dut_b (
    .clk, .rst_n, .in_valid(va_in), .x(xb), .w(wb), .b(bb),
    .bn_s(sb), .bn_b(cb), .out_valid(vb_out), .y(yb));

  int exp_a [$][$];
  int exp_b [$][$];
  int t_in [$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic int rnd(input int lo, input int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  initial begin
    int wq_a[$], bq_a[$], sq_a[$], cq_a[$];
    int wq_b[$], bq_b[$], sq_b[$], cq_b[$];
    for (int o = 0; o < 32; o++) begin
      for (int i = 0; i < 14; i++) begin wa[o][i] = fx_t'(rnd(-600, 600)); wq_a.push_back(int'(wa[o][i])); end
      ba[o] = fx_t'(rnd(-800, 800)); bq_a.push_back(int'(ba[o]));
      sa[o] = fx_t'(rnd(-3000, 3000)); ca[o] = fx_t'(rnd(-3000, 3000));  // ignored: BN = 0
      sq_a.push_back(0); cq_a.push_back(0);
    end
    for (int o = 0; o < 3; o++) begin
      for (int i = 0; i < 6; i++) begin wb[o][i] = fx_t'(rnd(-1500, 1500)); wq_b.push_back(int'(wb[o][i])); end
      bb[o] = fx_t'(rnd(-500, 500));   bq_b.push_back(int'(bb[o]));
      sb[o] = fx_t'(rnd(-3000, 3000)); sq_b.push_back(int'(sb[o]));
      cb[o] = fx_t'(rnd(-2000, 2000)); cq_b.push_back(int'(cb[o]));
    end
    for (int i = 0; i < 14; i++) xa[i] = '0;
    for (int i = 0; i < 6; i++) xb[i] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int v = 0; v < NV; v++) begin
      automatic int xq_a[$], xq_b[$], ya_r[$], yb_r[$];
      for (int i = 0; i < 14; i++) begin
        // include large values so that saturation is exercised
        xa[i] = fx_t'((v % 8 == 7) ? rnd(-30000, 30000) : rnd(-2500, 2500));
        xq_a.push_back(int'(xa[i]));
      end
      for (int i = 0; i < 6; i++) begin xb[i] = fx_t'(rnd(-3000, 3000)); xq_b.push_back(int'(xb[i])); end
      dense_ref(14, 32, xq_a, wq_a, bq_a, 1'b0, sq_a, cq_a, 1, ya_r);
      dense_ref(6, 3, xq_b, wq_b, bq_b, 1'b1, sq_b, cq_b, 3, yb_r);
      exp_a.push_back(ya_r);
      exp_b.push_back(yb_r);
      t_in.push_back(cyc);
      va_in = 1;
      @(negedge clk);
    end
    va_in = 0;
    repeat (6) @(posedge clk);
    checks++;
    if (exp_a.size() != 0) begin failures++; $display("FAIL: %0d outputs missing", exp_a.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && va_out) begin
    int ea[$], eb[$], t0;
    if (exp_a.size() == 0) begin
      failures++; checks++; $display("FAIL: unexpected output");
    end else begin
      ea = exp_a.pop_front(); eb = exp_b.pop_front(); t0 = t_in.pop_front();
      checks++;
      if (cyc - t0 != 2) begin failures++; $display("FAIL: latency %0d", cyc - t0); end
      for (int o = 0; o < 32; o++) begin
        checks++;
        if (int'(ya[o]) != ea[o]) begin
          failures++; $display("FAIL: A y[%0d]=%0d exp %0d", o, ya[o], ea[o]);
        end
      end
      checks++;
      if (vb_out !== 1'b1) failures++;
      for (int o = 0; o < 3; o++) begin
        checks++;
        if (iabs(int'(yb[o]) - eb[o]) > 2) begin
          failures++; $display("FAIL: B y[%0d]=%0d exp %0d", o, yb[o], eb[o]);
        end
      end
    end
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
