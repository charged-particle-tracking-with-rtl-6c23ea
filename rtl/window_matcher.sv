// window_matcher: is a hit within the search radius of the predicted hit?
//
// Computes the squared 3-D distance between the prediction and the hit in
// LSB units (1 LSB = 1 mm) and compares it with the square of the selected
// radius, 10, 15 or 20 mm: match = (dx^2 + dy^2 + dz^2 <= R^2). Working on
// squares avoids a square root. Combinational. The three radii follow the
// text; the spherical 3-D distance and the inclusive edge are this design's
// reading of "within a given radius of the predicted coordinate".
module window_matcher
  import trk_pkg::*;
(
  input  hit_t        pred,
  input  hit_t        hit,
  input  win_e        win,
  output logic [33:0] d2,
  output logic        match
);
  logic signed [FX_W:0] dx, dy, dz;

  always_comb begin
    dx = (FX_W+1)'(hit.x) - (FX_W+1)'(pred.x);
    dy = (FX_W+1)'(hit.y) - (FX_W+1)'(pred.y);
    dz = (FX_W+1)'(hit.z) - (FX_W+1)'(pred.z);
    d2 = 34'(dx * dx) + 34'(dy * dy) + 34'(dz * dz);
    match = d2 <= 34'(win_r2(win));
  end
endmodule
