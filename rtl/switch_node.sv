// switch_node: one node of the switching network's distribution tree.
//
// Each clock cycle it registers the word arriving from its parent and, lane
// by lane, keeps a hit only if the hit's zip-code rectangle overlaps the
// rectangle of cells the node serves (rows r_lo..r_hi in v, columns
// c_lo..c_hi in u); the end-of-event flag always passes. The rectangle comes
// in on ports that the network ties to constants, so that all nodes share
// one module. One cycle of latency. The filtering rule (a hit goes to all
// and only the cells inside its zip-code) follows the paper; the node
// itself is this design's.
module switch_node
  import retina_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  idx_t         r_lo,
  input  idx_t         r_hi,
  input  idx_t         c_lo,
  input  idx_t         c_hi,
  input  switch_word_t in,
  output switch_word_t out
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out <= '0;
    end else begin
      out.evt_last <= in.evt_last;
      for (int l = 0; l < N_LAYERS; l++) begin
        out.lanes[l]         <= in.lanes[l];
        out.lanes[l].h.valid <= in.lanes[l].h.valid
                                && (in.lanes[l].z.u_hi >= c_lo) && (in.lanes[l].z.u_lo <= c_hi)
                                && (in.lanes[l].z.v_hi >= r_lo) && (in.lanes[l].z.v_lo <= r_hi);
      end
    end
  end

endmodule
