// tb_switching_network: self-checking testbench of the switching network on
// a 6 x 5 cell tile.
//
// Every cycle each of the 10 layer lanes carries, with probability 0.7, a
// hit on the straight line from the origin through a random point of the
// virtual plane around the tile (some far outside it), and the end-of-event
// flag is set at random. For every hit and every cell the testbench works
// out from the geometry, with its own arithmetic, whether the cell's
// receptor on that layer is within 3 sigma of the hit in x and y (y not on
// the x-only layers): such a cell must receive the hit. A cell may receive
// it only if the receptor is within 3 sigma plus the routing guard (an
// eighth of a pitch on the virtual plane) plus rounding. Checks, 30 cycles
// after the input: delivery to every cell that must get the hit, to no cell
// that may not, unchanged coordinates, and the end-of-event flag at every
// cell. It also counts hits dropped because they miss the tile entirely.
module tb_switching_network;
  import retina_pkg::*;

  localparam int NU = 6, NV = 5, UO = 1500, VO = -600, LAT = 30;
  localparam int CUT = CUT_NSIGMA * SIGMA;

  logic                   clk = 1'b0;
  logic                   rst_n = 1'b0;
  hit_bus_t               hits_in;
  logic                   evt_last_in;
  cell_feed_t [NU*NV-1:0] feed;

  switching_network #(.NU(NU), .NV(NV), .U_ORIGIN(UO), .V_ORIGIN(VO), .LATENCY(LAT)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_deliv = 0, n_missed_tile = 0, n_multi = 0;

  hit_bus_t hist_h [256];
  logic     hist_e [256];

  function automatic int rcpt(int c, int k);
    return int'($floor(real'(c) * real'(LAYER_Z_MM[k]) / real'(Z_VP_MM) + 0.5));
  endfunction

  function automatic int iabs(int a);
    return a < 0 ? -a : a;
  endfunction

  int t = 0;
  bit started = 0;

  always @(posedge clk) begin
    t++;
    // ---- check the cycle that left the network now
    if (started && t - LAT - 1 >= 0) begin
      hit_bus_t h;
      logic     e;
      h = hist_h[(t - LAT - 1) % 256];
      e = hist_e[(t - LAT - 1) % 256];
      for (int k = 0; k < N_LAYERS; k++) begin
        int ncells = 0;
        for (int iv = 0; iv < NV; iv++) begin
          for (int iu = 0; iu < NU; iu++) begin
            int  dx, dy, allow;
            bit  must, may, got;
            hit_t g;
            g  = feed[iv*NU + iu].hits[k];
            dx = iabs(int'(h[k].x) - rcpt(UO + iu * CELL_PITCH, k));
            dy = AXIAL_ONLY[k] ? 0 : iabs(int'(h[k].y) - rcpt(VO + iv * CELL_PITCH, k));
            allow = CUT + (CELL_PITCH / 8) * LAYER_Z_MM[k] / Z_VP_MM + 4;
            must = h[k].valid && dx <= CUT - 2 && dy <= CUT - 2;
            may  = h[k].valid && dx <= allow && dy <= allow;
            got  = g.valid;
            if (got) ncells++;
            if (must || got) begin
              checks++;
              if (must && !got) begin
                failures++;
                $display("FAIL t=%0d layer %0d cell (%0d,%0d): hit not delivered (dx=%0d dy=%0d)", t, k, iu, iv, dx, dy);
              end else if (got && !may) begin
                failures++;
                $display("FAIL t=%0d layer %0d cell (%0d,%0d): hit delivered too far (dx=%0d dy=%0d)", t, k, iu, iv, dx, dy);
              end else if (got && (g.x != h[k].x || g.y != h[k].y)) begin
                failures++;
                $display("FAIL t=%0d layer %0d cell (%0d,%0d): coordinates changed", t, k, iu, iv);
              end
            end
          end
        end
        if (h[k].valid && ncells == 0) n_missed_tile++;
        if (ncells > 0) n_deliv++;
        if (ncells > 1) n_multi++;
      end
      for (int c = 0; c < NU * NV; c++) begin
        checks++;
        if (feed[c].evt_last != e) begin
          failures++;
          $display("FAIL t=%0d cell %0d: end-of-event flag %b, expected %b", t, c, feed[c].evt_last, e);
        end
      end
    end
    // ---- drive the next cycle
    if (started) begin
      hit_bus_t h;
      logic     e;
      for (int k = 0; k < N_LAYERS; k++) begin
        int u, v;
        u = UO + int'($urandom_range((NU + 6) * CELL_PITCH)) - 3 * CELL_PITCH;
        v = VO + int'($urandom_range((NV + 6) * CELL_PITCH)) - 3 * CELL_PITCH;
        if ($urandom_range(9) == 0) u = u + 40 * CELL_PITCH;     // far off the tile
        h[k].valid = ($urandom_range(9) < 7);
        h[k].x = coord_t'(rcpt(u, k) + int'($urandom_range(40)) - 20);
        h[k].y = coord_t'(rcpt(v, k) + int'($urandom_range(40)) - 20);
      end
      e = ($urandom_range(4) == 0);
      hits_in     <= h;
      evt_last_in <= e;
      hist_h[t % 256] = h;
      hist_e[t % 256] = e;
    end
  end

  initial begin
    hits_in = '0;
    evt_last_in = 1'b0;
    for (int i = 0; i < 256; i++) begin
      hist_h[i] = '0;
      hist_e[i] = 1'b0;
    end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    started = 1;
    repeat (600) @(posedge clk);
    checks++;
    if (n_deliv == 0 || n_missed_tile == 0 || n_multi == 0) begin
      failures++;
      $display("FAIL: a case never happened: delivered=%0d off-tile=%0d multi-cell=%0d",
               n_deliv, n_missed_tile, n_multi);
    end
    $display("hits delivered=%0d to several cells=%0d dropped off tile=%0d", n_deliv, n_multi, n_missed_tile);
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
