// tb_track_finder_array: self-checking testbench of the fanout and
// track-finding stage on a 5 x 4 cell tile.
//
// On random cycles a response map is presented: low random noise with one
// to three planted clusters (a peak and a random fraction of it around),
// some on the tile's edge, where the neighbours beyond the edge count as
// zero. The testbench finds the local maxima over threshold of each map
// itself and computes their real-valued centres of mass. Checks, exactly
// 10 + 11 cycles after the input: the strobe, every cell's track flag, and
// u, v within 1/16 pitch plus one LSB.
module tb_track_finder_array;
  import retina_pkg::*;

  localparam int NU = 5, NV = 4, N = NU * NV, UO = 1500, VO = -600, THR = 1000;
  localparam int LAT = 10 + 11;

  logic           clk = 1'b0;
  logic           rst_n = 1'b0;
  logic           r_in_valid;
  resp_t          r_in [N];
  logic           tracks_valid;
  track_t [N-1:0] tracks;

  track_finder_array #(.NU(NU), .NV(NV), .U_ORIGIN(UO), .V_ORIGIN(VO), .THRESHOLD(THR),
                       .FANOUT_LATENCY(10), .COM_LATENCY(11)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_tracks = 0, n_edge = 0, n_maps = 0;

  logic  hist_v [64];
  resp_t hist_r [64][N];

  function automatic real rabs(real a);
    return a < 0.0 ? -a : a;
  endfunction

  function automatic int at(resp_t m [N], int iu, int iv);
    if (iu < 0 || iu >= NU || iv < 0 || iv >= NV) return 0;
    return int'(m[iv*NU + iu]);
  endfunction

  int t = 0;
  bit started = 0;

  always @(posedge clk) begin
    t++;
    if (started && t - LAT - 1 >= 0) begin
      int    s;
      logic  v;
      resp_t m [N];
      s = t - LAT - 1;
      v = hist_v[s % 64];
      m = hist_r[s % 64];
      checks++;
      if (tracks_valid != v) begin
        failures++;
        $display("FAIL t=%0d: tracks_valid %b, expected %b", t, tracks_valid, v);
      end
      if (v) begin
        for (int iv = 0; iv < NV; iv++) begin
          for (int iu = 0; iu < NU; iu++) begin
            bit  mx;
            int  c, idx;
            real sum, mu, mv, eu, ev;
            c  = at(m, iu, iv);
            mx = (c >= THR);
            idx = 0;
            sum = 0.0; mu = 0.0; mv = 0.0;
            for (int dv = -1; dv <= 1; dv++) begin
              for (int du = -1; du <= 1; du++) begin
                int w;
                w = at(m, iu + du, iv + dv);
                if (idx < 4 && !(c > w))  mx = 0;
                if (idx > 4 && !(c >= w)) mx = 0;
                sum += real'(w);
                mu  += real'(du * w);
                mv  += real'(dv * w);
                idx++;
              end
            end
            checks++;
            if (tracks[iv*NU + iu].valid != mx) begin
              failures++;
              $display("FAIL t=%0d cell (%0d,%0d): track flag %b, expected %b", t, iu, iv,
                       tracks[iv*NU + iu].valid, mx);
            end else if (mx) begin
              n_tracks++;
              if (iu == 0 || iv == 0 || iu == NU - 1 || iv == NV - 1) n_edge++;
              eu = real'(UO + iu * CELL_PITCH) + real'(CELL_PITCH) * mu / sum;
              ev = real'(VO + iv * CELL_PITCH) + real'(CELL_PITCH) * mv / sum;
              checks += 2;
              if (rabs(real'(tracks[iv*NU + iu].u) - eu) > real'(CELL_PITCH) / 16.0 + 1.0) begin
                failures++;
                $display("FAIL t=%0d cell (%0d,%0d): u %0d, expected %f", t, iu, iv, tracks[iv*NU + iu].u, eu);
              end
              if (rabs(real'(tracks[iv*NU + iu].v) - ev) > real'(CELL_PITCH) / 16.0 + 1.0) begin
                failures++;
                $display("FAIL t=%0d cell (%0d,%0d): v %0d, expected %f", t, iu, iv, tracks[iv*NU + iu].v, ev);
              end
            end
          end
        end
      end
    end
    if (started) begin
      logic  v;
      resp_t m [N];
      v = ($urandom_range(2) == 0);
      for (int c = 0; c < N; c++) m[c] = resp_t'($urandom_range(300));
      for (int p = 0; p <= int'($urandom_range(2)); p++) begin
        int pu, pv, pk;
        pu = int'($urandom_range(NU - 1));
        pv = int'($urandom_range(NV - 1));
        pk = 800 + int'($urandom_range(2000));
        for (int dv = -1; dv <= 1; dv++)
          for (int du = -1; du <= 1; du++)
            if (pu + du >= 0 && pu + du < NU && pv + dv >= 0 && pv + dv < NV)
              m[(pv+dv)*NU + pu + du] = resp_t'(pk * int'($urandom_range(90)) / 100);
        m[pv*NU + pu] = resp_t'(pk);
      end
      if (v) n_maps++;
      r_in_valid <= v;
      r_in       <= m;
      hist_v[t % 64] = v;
      hist_r[t % 64] = m;
    end
  end

  initial begin
    r_in_valid = 1'b0;
    for (int c = 0; c < N; c++) r_in[c] = '0;
    for (int i = 0; i < 64; i++) hist_v[i] = 1'b0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    started = 1;
    repeat (1500) @(posedge clk);
    checks++;
    if (n_tracks == 0 || n_edge == 0) begin
      failures++;
      $display("FAIL: a case never happened");
    end
    $display("maps=%0d tracks=%0d on the edge=%0d", n_maps, n_tracks, n_edge);
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
