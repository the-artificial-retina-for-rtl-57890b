// tb_track_finder: self-checking testbench of one cell's centre-of-mass
// logic.
//
// Random 3x3 neighbourhoods are presented, on random cycles: peaked
// clusters, flat plateaus (ties), clusters under the threshold and noise.
// For each the testbench decides by the rule itself whether the centre is
// a local maximum over threshold (strictly above the four earlier
// neighbours, not below the four later ones) and computes the centre of
// mass in real arithmetic. Checks, exactly 11 cycles after the input: the
// strobe, the track flag, the response, and u and v within 1/16 pitch
// (plus one LSB) of the real-valued centre of mass.
module tb_track_finder;
  import retina_pkg::*;

  localparam int IU = 2, IV = 3, UO = 1500, VO = -600, THR = 1000, LAT = 11;
  localparam int CU = UO + IU * CELL_PITCH, CV = VO + IV * CELL_PITCH;

  logic   clk = 1'b0;
  logic   rst_n = 1'b0;
  logic   in_valid;
  resp_t  nb [9];
  logic   out_valid;
  track_t trk;

  coord_t cu = coord_t'(CU);
  coord_t cv = coord_t'(CV);

  track_finder #(.THRESHOLD(THR), .LATENCY(LAT)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_max = 0, n_tie = 0, n_low = 0, n_notmax = 0;

  logic  hist_v [64];
  resp_t hist_nb [64][9];

  function automatic real rabs(real a);
    return a < 0.0 ? -a : a;
  endfunction

  int  t = 0;
  bit  started = 0;

  always @(posedge clk) begin
    t++;
    if (started && t - LAT - 1 >= 0) begin
      int    s;
      logic  v;
      resp_t n [9];
      s = t - LAT - 1;
      v = hist_v[s % 64];
      n = hist_nb[s % 64];
      checks++;
      if (out_valid != v) begin
        failures++;
        $display("FAIL t=%0d: out_valid %b, expected %b", t, out_valid, v);
      end
      if (v) begin
        bit  mx;
        real sum, mu, mv, eu, ev;
        mx = int'(n[4]) >= THR;
        for (int i = 0; i < 4; i++) if (!(n[4] > n[i])) mx = 0;
        for (int i = 5; i < 9; i++) if (!(n[4] >= n[i])) mx = 0;
        checks++;
        if (trk.valid != mx) begin
          failures++;
          $display("FAIL t=%0d: track flag %b, expected %b", t, trk.valid, mx);
        end
        if (mx) begin
          n_max++;
          sum = 0.0;
          for (int i = 0; i < 9; i++) sum += real'(n[i]);
          mu = real'(n[2]) + real'(n[5]) + real'(n[8]) - real'(n[0]) - real'(n[3]) - real'(n[6]);
          mv = real'(n[6]) + real'(n[7]) + real'(n[8]) - real'(n[0]) - real'(n[1]) - real'(n[2]);
          eu = real'(CU) + real'(CELL_PITCH) * mu / sum;
          ev = real'(CV) + real'(CELL_PITCH) * mv / sum;
          checks += 3;
          if (trk.r != n[4]) begin
            failures++;
            $display("FAIL t=%0d: r %0d, expected %0d", t, trk.r, n[4]);
          end
          if (rabs(real'(trk.u) - eu) > real'(CELL_PITCH) / 16.0 + 1.0) begin
            failures++;
            $display("FAIL t=%0d: u %0d, expected %f", t, trk.u, eu);
          end
          if (rabs(real'(trk.v) - ev) > real'(CELL_PITCH) / 16.0 + 1.0) begin
            failures++;
            $display("FAIL t=%0d: v %0d, expected %f", t, trk.v, ev);
          end
        end else if (int'(n[4]) < THR) n_low++;
        else n_notmax++;
      end
    end
    if (started) begin
      logic  v;
      resp_t n [9];
      int    kind, c;
      v = ($urandom_range(1) == 1);
      kind = int'($urandom_range(3));
      c = (kind == 2) ? int'($urandom_range(999)) : 1000 + int'($urandom_range(20000));
      for (int i = 0; i < 9; i++) begin
        case (kind)
          0, 2: n[i] = resp_t'($urandom_range(c));           // cluster around c
          1:    n[i] = resp_t'(c);                           // plateau
          default: n[i] = resp_t'($urandom_range(30000));    // noise
        endcase
      end
      if (kind != 3) n[4] = resp_t'(c);
      if (kind == 1) begin
        n_tie++;
        for (int i = 0; i < 9; i++) if ($urandom_range(1) == 1) n[i] = resp_t'($urandom_range(c));
      end
      in_valid <= v;
      nb       <= n;
      hist_v[t % 64]  = v;
      hist_nb[t % 64] = n;
    end
  end

  initial begin
    in_valid = 1'b0;
    for (int i = 0; i < 9; i++) nb[i] = '0;
    for (int i = 0; i < 64; i++) hist_v[i] = 1'b0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    started = 1;
    repeat (3000) @(posedge clk);
    checks++;
    if (n_max == 0 || n_tie == 0 || n_low == 0 || n_notmax == 0) begin
      failures++;
      $display("FAIL: a case never happened");
    end
    $display("tracks=%0d plateaus=%0d under threshold=%0d not a maximum=%0d", n_max, n_tie, n_low, n_notmax);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
