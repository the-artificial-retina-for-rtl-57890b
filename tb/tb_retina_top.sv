// tb_retina_top: end-to-end testbench of the retina device on an 8 x 8
// cell tile.
//
// Each event holds one or two straight tracks from the origin, through
// random points (u,v) of the tile's interior at least four cells apart,
// with a hit on each of the 10 layers at (u,v) * z_k / z_vp plus up to
// +-15 LSB of noise; one random noise hit per layer; hits far off the tile;
// and sometimes a weak candidate with hits on only three layers, too few to
// pass the threshold. Events follow each other with or without idle
// cycles. Checks: the result strobe exactly 30 + 17 + 10 + 11 cycles after
// the event's last cycle; every true track found within one cell of the
// cell nearest to it, with u and v within half a pitch; no track found
// that is not within two cells of a true track; no track found at a weak
// candidate. The mechanisms exercised are counted, and one that never
// happens counts as a failure.
module tb_retina_top;
  import retina_pkg::*;

  localparam int NU = 8, NV = 8, N = NU * NV, UO = 1500, VO = -1200, THR = 1000;
  localparam int LAT = 30 + 17 + 10 + 11;
  localparam int N_EVENTS = 30;

  logic           clk = 1'b0;
  logic           rst_n = 1'b0;
  hit_bus_t       hits_in;
  logic           evt_last_in;
  logic           tracks_valid;
  track_t [N-1:0] tracks;

  retina_top #(.NU(NU), .NV(NV), .U_ORIGIN(UO), .V_ORIGIN(VO), .THRESHOLD(THR)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int t = 0;
  // mechanisms
  int n_found = 0, n_weak_rejected = 0, n_dropped = 0, n_multicell = 0, n_b2b = 0, n_xonly = 0;

  // expected events
  typedef struct {
    int due;
    int ntrk;
    int tu [3];
    int tv [3];
    int nweak;
    int wu, wv;
  } event_t;
  event_t evq [$];

  function automatic int rcpt(int c, int k);
    return int'($floor(real'(c) * real'(LAYER_Z_MM[k]) / real'(Z_VP_MM) + 0.5));
  endfunction

  function automatic int iabs(int a);
    return a < 0 ? -a : a;
  endfunction

  function automatic int near_cell(int p, int o);
    return int'($floor(real'(p - o) / real'(CELL_PITCH) + 0.5));
  endfunction

  // ---- result checker
  always @(posedge clk) begin
    t++;
    if (rst_n && tracks_valid) begin
      checks++;
      if (evq.size() == 0) begin
        failures++;
        $display("FAIL t=%0d: unexpected result", t);
      end else begin
        event_t e;
        bit     used [N];
        e = evq.pop_front();
        if (t != e.due) begin
          failures++;
          $display("FAIL t=%0d: result due at %0d", t, e.due);
        end
        for (int c = 0; c < N; c++) used[c] = 0;
        // every true track found
        for (int i = 0; i < e.ntrk; i++) begin
          int cu, cv, hit_c;
          cu = near_cell(e.tu[i], UO);
          cv = near_cell(e.tv[i], VO);
          hit_c = -1;
          for (int dv = -1; dv <= 1; dv++)
            for (int du = -1; du <= 1; du++) begin
              int c;
              c = (cv + dv) * NU + cu + du;
              if (tracks[c].valid && hit_c < 0) hit_c = c;
            end
          checks++;
          if (hit_c < 0) begin
            failures++;
            $display("FAIL t=%0d: track at (%0d,%0d) not found", t, e.tu[i], e.tv[i]);
          end else begin
            n_found++;
            used[hit_c] = 1;
            checks++;
            if (iabs(int'(tracks[hit_c].u) - e.tu[i]) > CELL_PITCH / 2 ||
                iabs(int'(tracks[hit_c].v) - e.tv[i]) > CELL_PITCH / 2) begin
              failures++;
              $display("FAIL t=%0d: track at (%0d,%0d) reconstructed at (%0d,%0d)", t,
                       e.tu[i], e.tv[i], tracks[hit_c].u, tracks[hit_c].v);
            end
          end
        end
        // nothing else
        for (int c = 0; c < N; c++) begin
          if (tracks[c].valid && !used[c]) begin
            bit ok;
            ok = 0;
            for (int i = 0; i < e.ntrk; i++)
              if (iabs(c % NU - near_cell(e.tu[i], UO)) <= 2 && iabs(c / NU - near_cell(e.tv[i], VO)) <= 2) ok = 1;
            checks++;
            if (!ok) begin
              failures++;
              $display("FAIL t=%0d: spurious track at cell (%0d,%0d), r=%0d", t, c % NU, c / NU, tracks[c].r);
            end
          end
        end
        if (e.nweak > 0) begin
          bit seen;
          seen = 0;
          for (int dv = -1; dv <= 1; dv++)
            for (int du = -1; du <= 1; du++)
              if (tracks[(near_cell(e.wv, VO) + dv) * NU + near_cell(e.wu, UO) + du].valid) seen = 1;
          checks++;
          if (seen) begin
            failures++;
            $display("FAIL t=%0d: weak candidate reported as a track", t);
          end else n_weak_rejected++;
        end
      end
    end
  end

  // ---- mechanism monitors inside the device
  always @(posedge clk) begin
    if (rst_n) begin
      for (int k = 0; k < N_LAYERS; k++) begin
        int cnt;
        if (hits_in[k].valid && !dut.u_switch.zc[k].h.valid) n_dropped++;
        cnt = 0;
        for (int c = 0; c < N; c++) if (dut.feed[c].hits[k].valid) cnt++;
        if (cnt > 1) n_multicell++;
        if (cnt > 0 && AXIAL_ONLY[k]) n_xonly++;
      end
    end
  end

  // ---- stimulus
  task automatic cycle_out(hit_bus_t h, logic last);
    hits_in     <= h;
    evt_last_in <= last;
    @(posedge clk);
  endtask

  task automatic run_event(bit add_weak);
    event_t   e;
    hit_bus_t h;
    int       ncyc;
    e.ntrk = 1 + int'($urandom_range(1));
    for (int i = 0; i < e.ntrk; i++) begin
      bit ok;
      do begin
        e.tu[i] = UO + CELL_PITCH + int'($urandom_range((NU - 3) * CELL_PITCH));
        e.tv[i] = VO + CELL_PITCH + int'($urandom_range((NV - 3) * CELL_PITCH));
        ok = 1;
        for (int j = 0; j < i; j++)
          if (iabs(e.tu[i] - e.tu[j]) < 4 * CELL_PITCH && iabs(e.tv[i] - e.tv[j]) < 4 * CELL_PITCH) ok = 0;
      end while (!ok);
    end
    e.nweak = 0;
    if (add_weak) begin
      bit ok;
      int tries;
      tries = 0;
      do begin
        e.wu = UO + CELL_PITCH + int'($urandom_range((NU - 3) * CELL_PITCH));
        e.wv = VO + CELL_PITCH + int'($urandom_range((NV - 3) * CELL_PITCH));
        ok = 1;
        for (int j = 0; j < e.ntrk; j++)
          if (iabs(e.wu - e.tu[j]) < 4 * CELL_PITCH && iabs(e.wv - e.tv[j]) < 4 * CELL_PITCH) ok = 0;
        tries++;
      end while (!ok && tries < 100);
      e.nweak = ok ? 1 : 0;
    end
    // one cycle per track, then the weak candidate, then noise
    ncyc = e.ntrk + e.nweak + 1;
    for (int c = 0; c < ncyc; c++) begin
      for (int k = 0; k < N_LAYERS; k++) begin
        int u, v;
        h[k].valid = 1'b1;
        if (c < e.ntrk) begin
          u = e.tu[c];
          v = e.tv[c];
        end else if (c < e.ntrk + e.nweak) begin
          u = e.wu;
          v = e.wv;
          h[k].valid = (k < 3);
        end else begin
          // noise: in the tile, or far outside it
          u = UO + int'($urandom_range(NU * CELL_PITCH));
          v = VO + int'($urandom_range(NV * CELL_PITCH));
          if ($urandom_range(1) == 0) u = u - 60 * CELL_PITCH;
        end
        h[k].x = coord_t'(rcpt(u, k) + int'($urandom_range(30)) - 15);
        h[k].y = coord_t'(rcpt(v, k) + int'($urandom_range(30)) - 15);
      end
      if (c == ncyc - 1) begin
        e.due = t + 1 + LAT;
        evq.push_back(e);
      end
      cycle_out(h, c == ncyc - 1);
    end
  endtask

  initial begin
    hits_in = '0;
    evt_last_in = 1'b0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int ev = 0; ev < N_EVENTS; ev++) begin
      int gap;
      run_event($urandom_range(1) == 1);
      gap = int'($urandom_range(2));
      if (gap == 0) n_b2b++;
      repeat (gap) cycle_out('0, 1'b0);
    end
    repeat (LAT + 5) cycle_out('0, 1'b0);
    checks++;
    if (evq.size() != 0) begin
      failures++;
      $display("FAIL: %0d results missing", evq.size());
    end
    $display("tracks found=%0d weak candidates rejected=%0d hits dropped off tile=%0d",
             n_found, n_weak_rejected, n_dropped);
    $display("hits fanned out to several cells=%0d x-only hits delivered=%0d back-to-back events=%0d",
             n_multicell, n_xonly, n_b2b);
    checks++;
    if (n_found == 0 || n_weak_rejected == 0 || n_dropped == 0 || n_multicell == 0 || n_xonly == 0 || n_b2b == 0) begin
      failures++;
      $display("FAIL: a mechanism never happened");
    end
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
