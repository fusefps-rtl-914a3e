// farthest_point_selector: finds the next sampling point.
//
// During one sampling iteration every bucket reports its farthest point and
// that point's distance, either directly from the bucket buffer (buckets that
// needed no processing) or from the processing response (one or two child
// buckets). The selector keeps the candidate with the largest distance; after
// the last report `best_pt` is the next sampling point (the argmax step of
// bucket-based FPS). Two candidate ports take both children of a split in one
// clock; port 0 wins ties against port 1, and an earlier candidate wins ties
// against a later one.
//
// Interface: clear (one clock) empties the selector; cand_valid[i] with
// cand_pt[i]/cand_dist[i] offers a candidate; best_* are registered.
module farthest_point_selector
  import fusefps_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic   [1:0]     cand_valid,
  input  point_t [1:0]     cand_pt,
  input  dist_t  [1:0]     cand_dist,
  output logic             best_valid,
  output point_t           best_pt,
  output dist_t            best_dist
);
  logic   nv;
  point_t np;
  dist_t  nd;

  always_comb begin
    nv = best_valid; np = best_pt; nd = best_dist;
    for (int i = 0; i < 2; i++)
      if (cand_valid[i] && (!nv || cand_dist[i] > nd)) begin
        nv = 1'b1; np = cand_pt[i]; nd = cand_dist[i];
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      best_valid <= 1'b0; best_pt <= '0; best_dist <= '0;
    end else if (clear) begin
      best_valid <= 1'b0; best_pt <= '0; best_dist <= '0;
    end else begin
      best_valid <= nv; best_pt <= np; best_dist <= nd;
    end
  end
endmodule
