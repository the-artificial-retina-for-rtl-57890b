// track_finder_array: the track-finding stage that follows the engines.
//
// Once per event every engine presents its response. The array first fans
// the NU*NV responses out to where they are used: each cell's
// centre-of-mass logic needs its own response and those of its eight
// neighbours, so every response has nine destinations spread over the grid.
// The fanout is a pipeline of FANOUT_LATENCY register stages carrying the
// whole response map, after which each cell's 3x3 neighbourhood is wired to
// its track_finder (cells outside the grid read zero). One track_finder per
// cell then tests for a local maximum over threshold and interpolates the
// track parameters.
//
// Timing: r_in_valid in cycle t (one strobe for the whole grid, the engines
// being in lock step) gives tracks_valid in cycle
// t + FANOUT_LATENCY + COM_LATENCY, with tracks[iv*NU + iu] the result of
// cell (iu, iv). The latencies, 10 and 11 cycles, are the paper's; that the
// fanout is a plain register pipeline, and zero outside the grid, are this
// design's choices.
module track_finder_array
  import retina_pkg::*;
#(
  parameter int NU             = 30,
  parameter int NV             = 30,
  parameter int U_ORIGIN       = 1500,
  parameter int V_ORIGIN       = 1500,
  parameter int THRESHOLD      = 1000,
  parameter int FANOUT_LATENCY = 10,
  parameter int COM_LATENCY    = 11
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               r_in_valid,
  input  resp_t              r_in [NU*NV],
  output logic               tracks_valid,
  output track_t [NU*NV-1:0] tracks
);

  localparam int N = NU * NV;

  if (FANOUT_LATENCY < 1) begin : g_bad_latency
    $error("track_finder_array: FANOUT_LATENCY must be at least 1");
  end

  // fanout pipeline
  resp_t fo_r [FANOUT_LATENCY][N];
  logic  fo_v [FANOUT_LATENCY];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < FANOUT_LATENCY; s++) begin
        fo_v[s] <= 1'b0;
        for (int c = 0; c < N; c++) fo_r[s][c] <= '0;
      end
    end else begin
      fo_v[0] <= r_in_valid;
      fo_r[0] <= r_in;
      for (int s = 1; s < FANOUT_LATENCY; s++) begin
        fo_v[s] <= fo_v[s-1];
        fo_r[s] <= fo_r[s-1];
      end
    end
  end

  logic [N-1:0] cell_valid;

  for (genvar iv = 0; iv < NV; iv++) begin : g_row
    for (genvar iu = 0; iu < NU; iu++) begin : g_col
      resp_t nb [9];
      for (genvar dv = -1; dv <= 1; dv++) begin : g_dv
        for (genvar du = -1; du <= 1; du++) begin : g_du
          if (iu + du >= 0 && iu + du < NU && iv + dv >= 0 && iv + dv < NV) begin : g_in
            assign nb[3*(dv+1) + (du+1)] = fo_r[FANOUT_LATENCY-1][(iv+dv)*NU + (iu+du)];
          end else begin : g_out
            assign nb[3*(dv+1) + (du+1)] = '0;
          end
        end
      end
      track_finder #(.THRESHOLD(THRESHOLD), .LATENCY(COM_LATENCY)) u_tf (
        .clk, .rst_n,
        .cu       (coord_t'(U_ORIGIN + iu * CELL_PITCH)),
        .cv       (coord_t'(V_ORIGIN + iv * CELL_PITCH)),
        .in_valid (fo_v[FANOUT_LATENCY-1]),
        .nb,
        .out_valid(cell_valid[iv*NU + iu]),
        .trk      (tracks[iv*NU + iu])
      );
    end
  end

  // every cell finishes in the same cycle
  assign tracks_valid = cell_valid[0];

  a_lock_step: assert property (@(posedge clk) disable iff (!rst_n)
    cell_valid == '0 || cell_valid == '1)
    else $error("track_finder_array: cells out of step");

endmodule
