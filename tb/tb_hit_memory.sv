// tb_hit_memory: writes random hits to random layers, checks the slot number
// returned for each write, the per-layer counts, the one-clock read-back of
// every hit, the overflow flag when one layer receives more than 64 hits, and
// that clear empties the store.
module tb_hit_memory;
  import trk_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear = 0, wr_en = 0, rd_en = 0, overflow;
  logic [LAYER_W-1:0] wr_layer = 0, rd_layer = 0;
  logic [HIT_IDX_W-1:0] wr_idx, rd_idx = 0;
  hit_t wr_hit = '0, rd_hit;
  logic [HIT_IDX_W:0] count [N_LAYERS];

  hit_memory dut (.clk, .rst_n, .clear, .wr_en, .wr_layer, .wr_hit, .wr_idx, .overflow,
                  .rd_en, .rd_layer, .rd_idx, .rd_hit, .count);

  hit_t model [N_LAYERS][$];

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // random fill, no layer beyond 40 hits
    for (int k = 0; k < 200; k++) begin
      automatic int l = int'($urandom % N_LAYERS);
      automatic hit_t h;
      if (model[l].size() >= 40) continue;
      h.x = fx_t'($urandom); h.y = fx_t'($urandom); h.z = fx_t'($urandom);
      wr_en = 1; wr_layer = LAYER_W'(l); wr_hit = h;
      #1 chk(int'(wr_idx) == model[l].size(), "write slot");
      model[l].push_back(h);
      @(negedge clk);
    end
    wr_en = 0;
    for (int l = 0; l < N_LAYERS; l++) chk(int'(count[l]) == model[l].size(), "count");
    chk(!overflow, "no overflow yet");
    for (int l = 0; l < N_LAYERS; l++)
      for (int i = 0; i < model[l].size(); i++) begin
        rd_en = 1; rd_layer = LAYER_W'(l); rd_idx = HIT_IDX_W'(i);
        @(negedge clk);
        rd_en = 0;
        chk(rd_hit == model[l][i], $sformatf("read layer %0d slot %0d", l, i));
      end
    // overflow one layer
    for (int i = model[3].size(); i < 70; i++) begin
      wr_en = 1; wr_layer = 4'd3; wr_hit = '{x: fx_t'(i), y: 16'sd7, z: 16'sd9};
      @(negedge clk);
    end
    wr_en = 0;
    chk(int'(count[3]) == 64, "count saturates at 64");
    chk(overflow, "overflow flag");
    rd_en = 1; rd_layer = 4'd3; rd_idx = 6'd63;
    @(negedge clk);
    rd_en = 0;
    chk(rd_hit.x == 16'sd63, "last slot kept, later hits dropped");
    clear = 1;
    @(negedge clk);
    clear = 0;
    for (int l = 0; l < N_LAYERS; l++) chk(count[l] == '0, "clear");
    chk(!overflow, "clear resets overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
