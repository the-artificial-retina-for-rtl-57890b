// track_finder: the centre-of-mass logic of one cell.
//
// It receives, once per event, the response of its cell and of the eight
// cells around it, nb[3*(dv+1) + (du+1)] for du, dv in {-1, 0, 1} (nb[4] is
// the cell itself; cells outside the grid read zero). The cell holds a track
// when its response is at least THRESHOLD and is a local maximum: greater
// than the four neighbours that come before it in row-major order and not
// smaller than the four after it, so that a plateau of equal responses
// yields one track. The track's parameters are the centre of mass of the
// 3x3 neighbourhood:
//     u = cu + pitch * (sum of right column - sum of left column) / sum of all
// and likewise for v, the quotient taken with FRAC fraction bits by a
// pipelined restoring divider (one quotient bit per stage).
//
// Pipeline (LATENCY cycles from in_valid to out_valid):
//   1  input registers
//   2  maximum test, sums, moments
//   3 .. FRAC+3  division, one bit per stage
//   FRAC+4  scaling to virtual-plane units
//   then delay registers up to LATENCY
// trk is valid only in the cycle out_valid is high; trk.valid says whether
// the cell holds a track in that event.
//
// The paper gives the rule (local maxima over a threshold, averaging over
// nearby cells) and the 11-cycle latency; the neighbourhood size, the tie
// rule, the threshold's value and the divider are this design's choices.
module track_finder
  import retina_pkg::*;
#(
  parameter int THRESHOLD = 1000,
  parameter int LATENCY   = 11
) (
  input  logic   clk,
  input  logic   rst_n,
  input  coord_t cu,         // u of the cell centre (constant)
  input  coord_t cv,         // v of the cell centre (constant)
  input  logic   in_valid,
  input  resp_t  nb [9],
  output logic   out_valid,
  output track_t trk
);

  localparam int SUMW  = R_W + 4;               // sum of nine responses
  localparam int REMW  = SUMW + FRAC;           // divider working width
  localparam int NDIV  = FRAC + 1;              // quotient bits
  localparam int PAD   = LATENCY - (NDIV + 3);

  if (PAD < 0) begin : g_bad_latency
    $error("track_finder: LATENCY too small");
  end

  typedef struct packed {
    logic            valid;     // event strobe
    logic            is_max;
    resp_t           r;
    logic [SUMW-1:0] den;
    logic [REMW-1:0] rem_u;
    logic [REMW-1:0] rem_v;
    logic [NDIV-1:0] q_u;
    logic [NDIV-1:0] q_v;
    logic            neg_u;
    logic            neg_v;
  } div_t;

  // stage 1
  logic  s1_valid;
  resp_t s1_nb [9];
  // stages 2 .. NDIV+2: divider pipeline, dv[0] is stage 2
  div_t  dv [NDIV + 1];
  // scaled result and delay line
  logic   sc_valid [PAD + 1];
  track_t sc_trk   [PAD + 1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      for (int i = 0; i < 9; i++) s1_nb[i] <= '0;
    end else begin
      s1_valid <= in_valid;
      s1_nb    <= nb;
    end
  end

  // stage 2: local maximum and moments
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dv[0] <= '0;
    end else begin
      logic                   mx;
      logic [SUMW-1:0]        sum, left, right, up, down;
      logic signed [SUMW:0]   mu, mv;
      logic [SUMW:0]          au, av;
      mx = (int'(s1_nb[4]) >= THRESHOLD);
      for (int i = 0; i < 4; i++) mx = mx && (s1_nb[4] >  s1_nb[i]);
      for (int i = 5; i < 9; i++) mx = mx && (s1_nb[4] >= s1_nb[i]);
      sum = '0;
      for (int i = 0; i < 9; i++) sum += SUMW'(s1_nb[i]);
      left  = SUMW'(s1_nb[0]) + SUMW'(s1_nb[3]) + SUMW'(s1_nb[6]);
      right = SUMW'(s1_nb[2]) + SUMW'(s1_nb[5]) + SUMW'(s1_nb[8]);
      down  = SUMW'(s1_nb[0]) + SUMW'(s1_nb[1]) + SUMW'(s1_nb[2]);
      up    = SUMW'(s1_nb[6]) + SUMW'(s1_nb[7]) + SUMW'(s1_nb[8]);
      mu = $signed({1'b0, right}) - $signed({1'b0, left});
      mv = $signed({1'b0, up})    - $signed({1'b0, down});
      dv[0].valid  <= s1_valid;
      dv[0].is_max <= mx;
      dv[0].r      <= s1_nb[4];
      dv[0].den    <= sum;
      dv[0].neg_u  <= mu[SUMW];
      dv[0].neg_v  <= mv[SUMW];
      au = mu[SUMW] ? -mu : mu;
      av = mv[SUMW] ? -mv : mv;
      dv[0].rem_u  <= REMW'(au) << FRAC;
      dv[0].rem_v  <= REMW'(av) << FRAC;
      dv[0].q_u    <= '0;
      dv[0].q_v    <= '0;
    end
  end

  // division: stage i decides quotient bit NDIV-1-i
  for (genvar i = 0; i < NDIV; i++) begin : g_div
    localparam int B = NDIV - 1 - i;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        dv[i+1] <= '0;
      end else begin
        logic [REMW-1:0] d;
        dv[i+1] <= dv[i];
        d = REMW'(dv[i].den) << B;
        if (dv[i].den != '0 && dv[i].rem_u >= d) begin
          dv[i+1].rem_u  <= dv[i].rem_u - d;
          dv[i+1].q_u[B] <= 1'b1;
        end
        if (dv[i].den != '0 && dv[i].rem_v >= d) begin
          dv[i+1].rem_v  <= dv[i].rem_v - d;
          dv[i+1].q_v[B] <= 1'b1;
        end
      end
    end
  end

  // scaling: offset = q * pitch / 2**FRAC
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sc_valid[0] <= 1'b0;
      sc_trk[0]   <= '0;
    end else begin
      logic signed [COORD_W+1:0] ou, ov;
      ou = (COORD_W+2)'((int'(dv[NDIV].q_u) * CELL_PITCH) >>> FRAC);
      ov = (COORD_W+2)'((int'(dv[NDIV].q_v) * CELL_PITCH) >>> FRAC);
      sc_valid[0]     <= dv[NDIV].valid;
      sc_trk[0].valid <= dv[NDIV].valid && dv[NDIV].is_max;
      sc_trk[0].r     <= dv[NDIV].r;
      sc_trk[0].u     <= coord_t'((COORD_W+2)'(cu) + (dv[NDIV].neg_u ? -ou : ou));
      sc_trk[0].v     <= coord_t'((COORD_W+2)'(cv) + (dv[NDIV].neg_v ? -ov : ov));
    end
  end

  for (genvar i = 1; i <= PAD; i++) begin : g_delay
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        sc_valid[i] <= 1'b0;
        sc_trk[i]   <= '0;
      end else begin
        sc_valid[i] <= sc_valid[i-1];
        sc_trk[i]   <= sc_trk[i-1];
      end
    end
  end

  assign out_valid = sc_valid[PAD];
  assign trk       = sc_trk[PAD];

endmodule
