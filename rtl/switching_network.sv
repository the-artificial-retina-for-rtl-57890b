// switching_network: delivers every hit, in parallel, to all and only the
// engines (cells) for which the hit can contribute a significant weight.
//
// There is one input lane per detector layer; each lane accepts one hit per
// clock cycle. evt_last_in marks the last cycle of an event's hits and is
// carried, aligned with them, to every engine. The first register stage
// computes each hit's zip-code (hit_zipcode), the rectangle of cells whose
// receptor can lie within CUT_NSIGMA * sigma of it. A delay line then brings
// the total to LATENCY cycles, and a binary tree of filtering nodes
// (switch_node) fans the hits out to the NU*NV cells, each node passing a
// hit on only towards cells inside its zip-code.
//
// The tree is a heap: node i has children 2i and 2i+1, the root is node 1.
// The first clog2(NV) levels halve the range of rows, the next clog2(NU)
// halve the range of columns, so that the leaves, at level
// clog2(NV) + clog2(NU), are single cells and every cell is the same number
// of registers from the root. Nodes whose rectangle lies wholly outside an
// NU x NV grid that is not a power of two on a side are not built.
//
// Timing: a hit presented at the input in cycle t appears on feed[] of each
// of its cells in cycle t + LATENCY. The paper gives the 30-cycle latency and
// the routing rule ("all and only those cells"); the zip-code arithmetic,
// the tree and the one-hit-per-layer-per-cycle input rate are this design's
// choices. feed[] is indexed row-major, cell (iu, iv) at iv*NU + iu.
module switching_network
  import retina_pkg::*;
#(
  parameter int NU       = 30,
  parameter int NV       = 30,
  parameter int U_ORIGIN = 1500,
  parameter int V_ORIGIN = 1500,
  parameter int LATENCY  = 30
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  hit_bus_t               hits_in,
  input  logic                   evt_last_in,
  output cell_feed_t [NU*NV-1:0] feed
);

  localparam int LR   = clog2_min1(NV);       // row-splitting levels
  localparam int LC   = clog2_min1(NU);       // column-splitting levels
  localparam int L    = LR + LC;              // level of the leaves
  localparam int MAXN = L + 1;                // registers in the tree
  localparam int PAD  = LATENCY - 1 - MAXN;   // delay-line registers

  // rectangle of heap node j of level d: {r_lo, r_hi, c_lo, c_hi}
  function automatic int node_r_lo(int d, int j);
    return (d <= LR) ? (j << (LR - d)) : (j >> (d - LR));
  endfunction
  function automatic int node_r_hi(int d, int j);
    return (d <= LR) ? (((j + 1) << (LR - d)) - 1) : (j >> (d - LR));
  endfunction
  function automatic int node_c_lo(int d, int j);
    return (d <= LR) ? 0 : ((j & ((1 << (d - LR)) - 1)) << (L - d));
  endfunction
  function automatic int node_c_hi(int d, int j);
    return (d <= LR) ? ((1 << LC) - 1) : ((((j & ((1 << (d - LR)) - 1)) + 1) << (L - d)) - 1);
  endfunction

  if (PAD < 0) begin : g_bad_latency
    $error("switching_network: LATENCY too small for the grid");
  end

  // zip-code stage
  routed_hit_t [N_LAYERS-1:0] zc;
  for (genvar k = 0; k < N_LAYERS; k++) begin : g_zip
    hit_zipcode #(.K(k), .NU(NU), .NV(NV), .U_ORIGIN(U_ORIGIN), .V_ORIGIN(V_ORIGIN))
      u_zip (.hit(hits_in[k]), .rhit(zc[k]));
  end

  switch_word_t pipe [PAD + 1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i <= PAD; i++) pipe[i] <= '0;
    end else begin
      pipe[0].lanes    <= zc;
      pipe[0].evt_last <= evt_last_in;
      for (int i = 1; i <= PAD; i++) pipe[i] <= pipe[i-1];
    end
  end

  // distribution tree
  switch_word_t node_q [2 ** (L + 1)];

  for (genvar d = 0; d <= L; d++) begin : g_level
    for (genvar j = 0; j < 2 ** d; j++) begin : g_node
      localparam int RL = node_r_lo(d, j);
      localparam int CL = node_c_lo(d, j);
      localparam int RH = (node_r_hi(d, j) < NV) ? node_r_hi(d, j) : NV - 1;
      localparam int CH = (node_c_hi(d, j) < NU) ? node_c_hi(d, j) : NU - 1;
      if (RL < NV && CL < NU) begin : g_built
        switch_node u_node (
          .clk, .rst_n,
          .r_lo(idx_t'(RL)), .r_hi(idx_t'(RH)), .c_lo(idx_t'(CL)), .c_hi(idx_t'(CH)),
          .in  ((d == 0) ? pipe[PAD] : node_q[(2 ** d + j) / 2]),
          .out (node_q[2 ** d + j])
        );
        if (d == L) begin : g_leaf
          always_comb begin
            feed[RL*NU + CL].evt_last = node_q[2 ** d + j].evt_last;
            for (int l = 0; l < N_LAYERS; l++) feed[RL*NU + CL].hits[l] = node_q[2 ** d + j].lanes[l].h;
          end
        end
      end
    end
  end

endmodule
