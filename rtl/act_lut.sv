// act_lut: table-driven tanh or sigmoid for one fixed-point value.
//
// The input is clipped to the table range and looked up in a 4096-entry
// table that holds round(f(centre of bin) * 2^10); the table is computed at
// elaboration from $exp, so no data file is needed.
//   FUNC = ACT_TANH    : y = tanh(x)      range [-4, 4), step 2^-9
//   FUNC = ACT_SIGMOID : y = 1/(1+e^-x)   range [-8, 8), step 2^-8
// The error is at most about one output LSB (2^-10). With the coordinate
// format of this design (1 LSB = 1 mm) a coarser table would blur the
// predicted hit by more than the search window, which is why the table is
// this large. Lookup tables are how HLS-generated networks evaluate these
// functions; size and range here are this design's choice. Combinational.
module act_lut
  import trk_pkg::*;
#(
  parameter act_e FUNC = ACT_TANH
) (
  input  fx_t x,
  output fx_t y
);
  localparam int unsigned N     = 4096;
  localparam int unsigned SHIFT = (FUNC == ACT_SIGMOID) ? 2 : 1;
  localparam int          LIM   = (FUNC == ACT_SIGMOID) ? (8 << FX_F) : (4 << FX_F);

  typedef fx_t table_t [N];

  function automatic table_t make_table();
    table_t t;
    for (int i = 0; i < N; i++) begin
      real c, f;
      c = (real'(i) - real'(N/2) + 0.5) * real'(1 << SHIFT) / real'(1 << FX_F);
      if (FUNC == ACT_SIGMOID) f = 1.0 / (1.0 + $exp(-c));
      else                     f = (1.0 - $exp(-2.0 * c)) / (1.0 + $exp(-2.0 * c));
      t[i] = fx_t'($rtoi(f * real'(1 << FX_F) + ((f >= 0.0) ? 0.5 : -0.5)));
    end
    return t;
  endfunction

  localparam table_t TABLE = make_table();

  fx_t xc, xs;
  logic [11:0] idx;

  always_comb begin
    if (x >= fx_t'(LIM))       xc = fx_t'(LIM - 1);
    else if (x < fx_t'(-LIM))  xc = fx_t'(-LIM);
    else                       xc = x;
    xs  = xc >>> SHIFT;               // -2048 .. 2047
    idx = {~xs[11], xs[10:0]};        // + 2048
    y   = TABLE[idx];
  end
endmodule
