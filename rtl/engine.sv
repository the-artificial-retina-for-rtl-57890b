// engine: one cell of the retina, the processor of one point (u,v) of the
// track-parameter grid.
//
// Over an event it accumulates the cell's excitation
//     R = sum over the event's hits of exp(-s^2 / (2 sigma^2)),
// s being the distance, on the hit's layer, between the hit and the cell's
// receptor on that layer. The receptors are constants of the instance,
// driven on the rx/ry ports by the instantiating module (constants, the
// cell centre projected onto each layer; see receptor_of in retina_pkg). The weight is read from a table of 2**LUT_BITS entries indexed
// by s^2 >> S2_SHIFT; hits further than the table reaches weigh zero. All
// N_LAYERS lanes are processed in parallel every cycle.
//
// Pipeline (LATENCY cycles from feed to result):
//   1  |dx|, |dy| to the receptor (dy = 0 on x-only layers)
//   2  s^2 and table index
//   3  table read
//   4  sum over the lanes
//   5 .. LATENCY-1  delay registers
//   LATENCY  accumulate; on the event's last cycle load r and clear
// When feed.evt_last is high in cycle t, r_valid is high in cycle
// t + LATENCY with r holding the event's full response (saturated to
// R_W bits); r keeps its value until the next event ends.
//
// The response formula and the 17-cycle latency are the paper's; the stage
// split, the table, the widths and the saturation are this design's.
module engine
  import retina_pkg::*;
#(
  parameter int LATENCY  = 17
) (
  input  logic       clk,
  input  logic       rst_n,
  input  coord_t     rx [N_LAYERS],   // receptor x on each layer (constant)
  input  coord_t     ry [N_LAYERS],   // receptor y on each layer (constant)
  input  cell_feed_t feed,
  output logic       r_valid,
  output resp_t      r
);

  localparam int PAD     = LATENCY - 5;
  localparam int LUT_N   = 2 ** LUT_BITS;
  localparam int SUM_W   = W_W + $clog2(N_LAYERS + 1);

  if (PAD < 0) begin : g_bad_latency
    $error("engine: LATENCY must be at least 5");
  end

  typedef logic [W_W-1:0] weight_t;

  typedef weight_t lut_t [LUT_N];

  function automatic lut_t build_lut();
    lut_t t;
    for (int i = 0; i < LUT_N; i++) t[i] = weight_t'(weight_of(i));
    return t;
  endfunction

  localparam lut_t LUT = build_lut();

  // --- stage 1: distance components
  logic [N_LAYERS-1:0]  s1_valid;
  logic [D_W-1:0]       s1_dx [N_LAYERS];
  logic [D_W-1:0]       s1_dy [N_LAYERS];
  logic                 s1_evt;
  // --- stage 2: table index
  logic [N_LAYERS-1:0]  s2_en;
  logic [LUT_BITS-1:0]  s2_idx [N_LAYERS];
  logic                 s2_evt;
  // --- stage 3: weights
  weight_t              s3_w [N_LAYERS];
  logic                 s3_evt;
  // --- stage 4: lane sum
  logic [SUM_W-1:0]     s4_sum;
  logic                 s4_evt;
  // --- delay
  logic [SUM_W-1:0]     d_sum [PAD + 1];
  logic                 d_evt [PAD + 1];
  // --- accumulator
  resp_t                acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= '0;
      s1_evt   <= 1'b0;
      s2_en    <= '0;
      s2_evt   <= 1'b0;
      s3_evt   <= 1'b0;
      s4_sum   <= '0;
      s4_evt   <= 1'b0;
      for (int k = 0; k < N_LAYERS; k++) begin
        s1_dx[k]  <= '0;
        s1_dy[k]  <= '0;
        s2_idx[k] <= '0;
        s3_w[k]   <= '0;
      end
    end else begin
      // stage 1
      s1_evt <= feed.evt_last;
      for (int k = 0; k < N_LAYERS; k++) begin
        logic signed [COORD_W+1:0] dx, dy;
        logic [COORD_W+1:0]        ax, ay;
        dx = (COORD_W+2)'(feed.hits[k].x) - (COORD_W+2)'(rx[k]);
        dy = AXIAL_ONLY[k] ? '0 : (COORD_W+2)'(feed.hits[k].y) - (COORD_W+2)'(ry[k]);
        ax = dx[COORD_W+1] ? -dx : dx;
        ay = dy[COORD_W+1] ? -dy : dy;
        s1_valid[k] <= feed.hits[k].valid && (ax < (COORD_W+2)'(2 ** D_W)) && (ay < (COORD_W+2)'(2 ** D_W));
        s1_dx[k]    <= ax[D_W-1:0];
        s1_dy[k]    <= ay[D_W-1:0];
      end
      // stage 2
      s2_evt <= s1_evt;
      for (int k = 0; k < N_LAYERS; k++) begin
        logic [2*D_W:0] s2;
        s2 = (2*D_W+1)'(s1_dx[k]) * (2*D_W+1)'(s1_dx[k]) + (2*D_W+1)'(s1_dy[k]) * (2*D_W+1)'(s1_dy[k]);
        s2_en[k]  <= s1_valid[k] && ((s2 >> S2_SHIFT) < (2*D_W+1)'(LUT_N));
        s2_idx[k] <= LUT_BITS'(s2 >> S2_SHIFT);
      end
      // stage 3
      s3_evt <= s2_evt;
      for (int k = 0; k < N_LAYERS; k++) begin
        s3_w[k] <= s2_en[k] ? LUT[s2_idx[k]] : '0;
      end
      // stage 4
      s4_evt <= s3_evt;
      begin
        logic [SUM_W-1:0] sum;
        sum = '0;
        for (int k = 0; k < N_LAYERS; k++) sum += SUM_W'(s3_w[k]);
        s4_sum <= sum;
      end
    end
  end

  // delay line: d_*[0] is stage 4's output
  assign d_sum[0] = s4_sum;
  assign d_evt[0] = s4_evt;
  for (genvar i = 1; i <= PAD; i++) begin : g_delay
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        d_sum[i] <= '0;
        d_evt[i] <= 1'b0;
      end else begin
        d_sum[i] <= d_sum[i-1];
        d_evt[i] <= d_evt[i-1];
      end
    end
  end

  // accumulate, saturating
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc     <= '0;
      r       <= '0;
      r_valid <= 1'b0;
    end else begin
      logic [R_W:0] nxt;
      nxt = (R_W+1)'(acc) + (R_W+1)'(d_sum[PAD]);
      if (nxt[R_W]) nxt = {1'b0, {R_W{1'b1}}};
      r_valid <= d_evt[PAD];
      if (d_evt[PAD]) begin
        r   <= nxt[R_W-1:0];
        acc <= '0;
      end else begin
        acc <= nxt[R_W-1:0];
      end
    end
  end

endmodule
