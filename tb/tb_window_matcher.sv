// tb_window_matcher: exact edge cases for the three radii (a hit exactly on
// the sphere matches, one millimetre beyond does not), then random pairs
// compared with a floating-point distance.
module tb_window_matcher;
  import trk_pkg::*;

  int checks = 0, failures = 0;
  hit_t pred, hit;
  win_e win;
  logic [33:0] d2;
  logic match;

  window_matcher dut (.pred, .hit, .win, .d2, .match);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic edge_case(input win_e w, input int r, input int dx, input int dy, input int dz,
                           input bit exp);
    pred = '{x: 16'sd300, y: -16'sd200, z: 16'sd50};
    hit  = '{x: fx_t'(300 + dx), y: fx_t'(-200 + dy), z: fx_t'(50 + dz)};
    win  = w;
    #1 chk(match == exp, $sformatf("R=%0d d=(%0d,%0d,%0d)", r, dx, dy, dz));
  endtask

  initial begin
    edge_case(WIN_10MM, 10, 10, 0, 0, 1);
    edge_case(WIN_10MM, 10, 11, 0, 0, 0);
    edge_case(WIN_10MM, 10, 6, -8, 0, 1);
    edge_case(WIN_10MM, 10, 6, -8, 1, 0);
    edge_case(WIN_15MM, 15, 0, 0, -15, 1);
    edge_case(WIN_15MM, 15, 0, 0, -16, 0);
    edge_case(WIN_15MM, 15, 9, 12, 0, 1);
    edge_case(WIN_20MM, 20, 12, -16, 0, 1);
    edge_case(WIN_20MM, 20, 12, -16, 1, 0);
    edge_case(WIN_20MM, 20, 0, 21, 0, 0);
    for (int k = 0; k < 3000; k++) begin
      automatic int w = int'($urandom % 3);
      automatic real r = (w == 0) ? 10.0 : (w == 1) ? 15.0 : 20.0;
      automatic int dx = int'($urandom % 51) - 25;
      automatic int dy = int'($urandom % 51) - 25;
      automatic int dz = int'($urandom % 51) - 25;
      automatic int px = int'($urandom % 4001) - 2000;
      automatic real d;
      pred = '{x: fx_t'(px), y: fx_t'(-px / 2), z: fx_t'(px / 3)};
      hit  = '{x: fx_t'(px + dx), y: fx_t'(-px / 2 + dy), z: fx_t'(px / 3 + dz)};
      win  = win_e'(w);
      d = $sqrt(real'(dx*dx + dy*dy + dz*dz));
      #1 chk(match == (d <= r + 1e-9), $sformatf("random d=%f r=%f", d, r));
      chk(int'(d2) == dx*dx + dy*dy + dz*dz, "d2");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
