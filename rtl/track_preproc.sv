// track_preproc: prepares a candidate track for the fake-rejection network.
//
// Three steps, as the network's training requires:
//   1. rotate the whole track about the beam axis so that its first hit sits
//      at phi = 0;
//   2. scale the coordinates to O(1) -- already the case in the normalised
//      fixed-point format (1.0 = 1024 mm), so no logic is needed;
//   3. order the hits by their distance from the beam axis;
// then lay out (x, y, z) of the 10 hit slots, zero for the unused ones.
//
// How (this design's choice): the rotation is a CORDIC in vectoring mode run
// on the first hit; the same micro-rotation directions are applied to all the
// hits at once, so every hit is turned by the same angle without ever
// computing it. One micro-rotation per clock (ITER of them, after a 180-degree
// pre-rotation when x < 0), then one clock to remove the CORDIC gain
// (x 0.60725). The ordering is an odd-even transposition sort on rho^2 over
// MAX_HITS clocks; empty slots sort last. Internal values carry GUARD extra
// fraction bits.
// Interface: valid/ready in and out; one track at a time.
// Latency: ITER + MAX_HITS + 3 clocks from the clock edge that accepts the
// track to the edge that can take the result (27 with ITER = 14). With 14
// micro-rotations the residual angle is below 0.13 mrad (0.13 mm at 1 m).
module track_preproc
  import trk_pkg::*;
#(
  parameter int unsigned ITER  = 14,
  parameter int unsigned GUARD = 4
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  output logic   in_ready,
  input  track_t in_trk,
  output logic   out_valid,
  input  logic   out_ready,
  output fx_t    out_x [FK_IN],
  output track_t out_trk
);
  localparam int unsigned IW = FX_W + GUARD + 3;   // headroom for the CORDIC gain
  typedef logic signed [IW-1:0] iv_t;
  // 1/K = 0.6072529 in Q1.16
  localparam logic signed [17:0] KINV = 18'sd39797;

  typedef enum logic [2:0] {P_IDLE, P_PRE, P_ROT, P_GAIN, P_SORT, P_DONE} pstate_e;
  pstate_e state;

  iv_t  hx [MAX_HITS];
  iv_t  hy [MAX_HITS];
  fx_t  hz [MAX_HITS];
  logic hv [MAX_HITS];
  logic [4:0] step;

  // rho^2 keys for the sort; empty slots get the largest key
  logic [2*IW:0] key [MAX_HITS];
  always_comb begin
    for (int i = 0; i < MAX_HITS; i++)
      key[i] = hv[i] ? (2*IW+1)'(hx[i] * hx[i]) + (2*IW+1)'(hy[i] * hy[i]) : '1;
  end

  assign in_ready  = (state == P_IDLE);
  assign out_valid = (state == P_DONE);

  always_comb begin
    for (int i = 0; i < MAX_HITS; i++) begin
      out_x[3*i]     = hv[i] ? fx_t'(hx[i] >>> GUARD) : '0;
      out_x[3*i + 1] = hv[i] ? fx_t'(hy[i] >>> GUARD) : '0;
      out_x[3*i + 2] = hv[i] ? hz[i] : '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= P_IDLE;
      step    <= '0;
      out_trk <= '0;
      for (int i = 0; i < MAX_HITS; i++) begin
        hx[i] <= '0; hy[i] <= '0; hz[i] <= '0; hv[i] <= 1'b0;
      end
    end else begin
      case (state)
        P_IDLE: if (in_valid) begin
          out_trk <= in_trk;
          for (int i = 0; i < MAX_HITS; i++) begin
            hv[i] <= (NHITS_W'(i) < in_trk.n_hits);
            hx[i] <= iv_t'(in_trk.hit[i].x) <<< GUARD;
            hy[i] <= iv_t'(in_trk.hit[i].y) <<< GUARD;
            hz[i] <= in_trk.hit[i].z;
          end
          state <= P_PRE;
        end
        P_PRE: begin
          if (hx[0] < 0)
            for (int i = 0; i < MAX_HITS; i++) begin
              hx[i] <= -hx[i];
              hy[i] <= -hy[i];
            end
          step  <= '0;
          state <= P_ROT;
        end
        P_ROT: begin
          // drive y of the first hit to zero; turn every hit the same way
          for (int i = 0; i < MAX_HITS; i++) begin
            if (hy[0] < 0) begin
              hx[i] <= hx[i] - (hy[i] >>> step);
              hy[i] <= hy[i] + (hx[i] >>> step);
            end else begin
              hx[i] <= hx[i] + (hy[i] >>> step);
              hy[i] <= hy[i] - (hx[i] >>> step);
            end
          end
          step <= step + 1'b1;
          if (step == 5'(ITER - 1)) state <= P_GAIN;
        end
        P_GAIN: begin
          for (int i = 0; i < MAX_HITS; i++) begin
            hx[i] <= iv_t'((48'(hx[i]) * 48'(KINV)) >>> 16);
            hy[i] <= iv_t'((48'(hy[i]) * 48'(KINV)) >>> 16);
          end
          step  <= '0;
          state <= P_SORT;
        end
        P_SORT: begin
          for (int i = 0; i + 1 < MAX_HITS; i++) begin
            if (1'(i) == step[0] && key[i] > key[i+1]) begin
              hx[i] <= hx[i+1]; hx[i+1] <= hx[i];
              hy[i] <= hy[i+1]; hy[i+1] <= hy[i];
              hz[i] <= hz[i+1]; hz[i+1] <= hz[i];
              hv[i] <= hv[i+1]; hv[i+1] <= hv[i];
            end
          end
          step <= step + 1'b1;
          if (step == 5'(MAX_HITS - 1)) state <= P_DONE;
        end
        P_DONE: if (out_ready) state <= P_IDLE;
        default: state <= P_IDLE;
      endcase
    end
  end
endmodule
