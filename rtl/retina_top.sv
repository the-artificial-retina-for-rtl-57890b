// retina_top: one device of the artificial-retina track processor.
//
// Hits from the tracking layers enter on one lane per layer, one hit per
// lane per clock cycle, the last cycle of each event flagged by
// evt_last_in. The switching network delivers each hit to the engines of
// the cells it can excite; each engine, one per cell of an NU x NV tile of
// the (u,v) track-parameter grid, accumulates its excitation over the
// event; the track-finding stage fans the responses out to the
// centre-of-mass logic, which reports the local maxima over threshold with
// interpolated (u,v).
//
// Timing: if evt_last_in is high in cycle t, tracks_valid is high in cycle
// t + SWITCH_LATENCY + ENGINE_LATENCY + FANOUT_LATENCY + COM_LATENCY,
// 30 + 17 + 10 + 11 = 68 cycles with the defaults, 194 ns at the paper's
// 350 MHz, and tracks[iv*NU + iu].valid marks a track found at cell
// (iu, iv). A new event may start in the cycle after evt_last_in.
//
// Following the paper: 900 engines per device, the three stage latencies,
// the 10 input layers, the chain switching network -> engines -> track
// finding. This design's choices: the 30 x 30 shape of the tile, where it
// sits in the (u,v) plane (U_ORIGIN, V_ORIGIN), the threshold, and the
// hit and track formats.
module retina_top
  import retina_pkg::*;
#(
  parameter int NU             = 30,
  parameter int NV             = 30,
  parameter int U_ORIGIN       = 1500,
  parameter int V_ORIGIN       = 1500,
  parameter int THRESHOLD      = 1000,
  parameter int SWITCH_LATENCY = 30,
  parameter int ENGINE_LATENCY = 17,
  parameter int FANOUT_LATENCY = 10,
  parameter int COM_LATENCY    = 11
) (
  input  logic               clk,
  input  logic               rst_n,
  input  hit_bus_t           hits_in,
  input  logic               evt_last_in,
  output logic               tracks_valid,
  output track_t [NU*NV-1:0] tracks
);

  localparam int N = NU * NV;

  cell_feed_t [N-1:0] feed;
  logic [N-1:0]       r_valid;
  resp_t              r [N];

  switching_network #(
    .NU(NU), .NV(NV), .U_ORIGIN(U_ORIGIN), .V_ORIGIN(V_ORIGIN), .LATENCY(SWITCH_LATENCY)
  ) u_switch (
    .clk, .rst_n, .hits_in, .evt_last_in, .feed
  );

  for (genvar iv = 0; iv < NV; iv++) begin : g_row
    for (genvar iu = 0; iu < NU; iu++) begin : g_col
      coord_t rx [N_LAYERS];
      coord_t ry [N_LAYERS];
      for (genvar k = 0; k < N_LAYERS; k++) begin : g_rcpt
        assign rx[k] = coord_t'(receptor_of(U_ORIGIN + iu * CELL_PITCH, k));
        assign ry[k] = coord_t'(receptor_of(V_ORIGIN + iv * CELL_PITCH, k));
      end
      engine #(.LATENCY(ENGINE_LATENCY)) u_engine (
        .clk, .rst_n, .rx, .ry,
        .feed   (feed[iv*NU + iu]),
        .r_valid(r_valid[iv*NU + iu]),
        .r      (r[iv*NU + iu])
      );
    end
  end

  track_finder_array #(
    .NU(NU), .NV(NV), .U_ORIGIN(U_ORIGIN), .V_ORIGIN(V_ORIGIN), .THRESHOLD(THRESHOLD),
    .FANOUT_LATENCY(FANOUT_LATENCY), .COM_LATENCY(COM_LATENCY)
  ) u_find (
    .clk, .rst_n,
    .r_in_valid(r_valid[0]),
    .r_in      (r),
    .tracks_valid,
    .tracks
  );

  // the engines run in lock step: one strobe stands for all
  a_lock_step: assert property (@(posedge clk) disable iff (!rst_n)
    r_valid == '0 || r_valid == '1)
    else $error("retina_top: engines out of step");

endmodule
