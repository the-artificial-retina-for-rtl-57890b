// tb_engine: self-checking testbench of one retina engine.
//
// Drives random events into an engine on cell (3,5): per cycle each layer
// lane carries a hit with probability one half, placed at a random offset of
// up to +-600 LSB from the cell's receptor on that layer, so that some hits
// fall beyond the weight table. The expected response is computed here
// from the Gaussian directly (receptor = cell centre * z_k / z_vp rounded,
// weight = round(255 * exp(-(s^2 >> 9) * 512 / (2 sigma^2)))), summed and
// saturated to 16 bits. Checks: the value of every event's response, and
// that it appears exactly 17 cycles after the event's last cycle.
// Back-to-back events, idle gaps and one saturating event are included.
module tb_engine;
  import retina_pkg::*;

  localparam int IU = 3, IV = 5, UO = 1500, VO = -2000, LAT = 17;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  cell_feed_t feed;
  logic       r_valid;
  resp_t      r;

  int checks = 0, failures = 0;
  int cycle = 0;
  int n_sat = 0, n_b2b = 0, n_far = 0;

  coord_t     rx [N_LAYERS];
  coord_t     ry [N_LAYERS];

  engine #(.LATENCY(LAT)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // expected results: value and due cycle
  int exp_val [$];
  int exp_cyc [$];

  function automatic int rcpt(int c, int k);
    return int'($floor(real'(c) * real'(LAYER_Z_MM[k]) / real'(Z_VP_MM) + 0.5));
  endfunction

  function automatic int weight(int dx, int dy);
    int s2, idx;
    if (dx < 0) dx = -dx;
    if (dy < 0) dy = -dy;
    if (dx >= 512 || dy >= 512) return 0;
    s2  = dx * dx + dy * dy;
    idx = s2 >> 9;
    if (idx >= 256) return 0;
    return int'($floor(255.0 * $exp(-real'(idx * 512) / (2.0 * 100.0 * 100.0)) + 0.5));
  endfunction

  task automatic drive_event(int ncyc, bit saturate);
    int acc = 0;
    int cu = UO + IU * CELL_PITCH, cv = VO + IV * CELL_PITCH;
    for (int c = 0; c < ncyc; c++) begin
      cell_feed_t f;
      f = '0;
      for (int k = 0; k < N_LAYERS; k++) begin
        int ox, oy;
        ox = saturate ? 0 : int'($urandom_range(1200)) - 600;
        oy = saturate ? 0 : int'($urandom_range(1200)) - 600;
        f.hits[k].valid = saturate ? 1'b1 : 1'($urandom_range(1));
        f.hits[k].x = coord_t'(rcpt(cu, k) + ox);
        f.hits[k].y = coord_t'(rcpt(cv, k) + oy);
        if (f.hits[k].valid) begin
          int w;
          w = weight(ox, AXIAL_ONLY[k] ? 0 : oy);
          if (w == 0) n_far++;
          acc += w;
        end
      end
      f.evt_last = (c == ncyc - 1);
      feed <= f;
      if (f.evt_last) begin
        exp_val.push_back(acc > 65535 ? 65535 : acc);
        exp_cyc.push_back(cycle + 1 + LAT);  // the feed is on the input in cycle + 1
        if (acc > 65535) n_sat++;
      end
      @(posedge clk);
    end
  endtask

  task automatic idle(int n);
    repeat (n) begin
      feed <= '0;
      @(posedge clk);
    end
  endtask

  // checker
  always @(posedge clk) begin
    if (rst_n && r_valid) begin
      checks++;
      if (exp_val.size() == 0) begin
        failures++;
        $display("FAIL: unexpected r_valid at cycle %0d", cycle);
      end else begin
        int v, c;
        v = exp_val.pop_front();
        c = exp_cyc.pop_front();
        if (int'(r) != v) begin
          failures++;
          $display("FAIL: response %0d, expected %0d", r, v);
        end
        checks++;
        if (cycle != c) begin
          failures++;
          $display("FAIL: response at cycle %0d, expected %0d", cycle, c);
        end
      end
    end
  end

  initial begin
    for (int k = 0; k < N_LAYERS; k++) begin
      rx[k] = coord_t'(rcpt(UO + IU * CELL_PITCH, k));
      ry[k] = coord_t'(rcpt(VO + IV * CELL_PITCH, k));
    end
    feed = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int e = 0; e < 200; e++) begin
      int gap;
      drive_event(1 + int'($urandom_range(4)), 1'b0);
      gap = int'($urandom_range(3));
      if (gap == 0) n_b2b++;
      idle(gap);
    end
    drive_event(30, 1'b1);           // 300 on-receptor hits: saturates
    drive_event(1, 1'b0);            // next event starts from zero
    idle(LAT + 5);
    checks++;
    if (exp_val.size() != 0) begin
      failures++;
      $display("FAIL: %0d responses missing", exp_val.size());
    end
    checks++;
    if (n_sat == 0 || n_b2b == 0 || n_far == 0) begin
      failures++;
      $display("FAIL: a case never happened: sat=%0d b2b=%0d far=%0d", n_sat, n_b2b, n_far);
    end
    $display("saturated events=%0d back-to-back=%0d hits beyond table=%0d", n_sat, n_b2b, n_far);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
