// kdtree_constructor: routes processed points to the two child buckets and
// keeps the children's statistics.
//
// For every point leaving the distance engine the constructor compares the
// coordinate on the split dimension with the split value: a point below it
// goes to the left child, any other point to the right child (when
// split_en is low every point goes to the left child, which then describes
// the unsplit bucket). Up to LANES points arrive per clock; the points of
// each side are packed towards lane 0 in their original order and handed to
// that side's align FIFO with a count. For each side the constructor also
// performs updateBucket: point count, coordinate sums, bounding box and the
// point with the largest distance (first one wins on equal distance).
//
// Interface: `clear` (one clock, before the first row) empties both
// statistics; split_en/split_dim/split_value are held for the whole bucket.
// l_cnt/l_pts and r_cnt/r_pts are registered, one clock after in_valid.
// left/right statistics are registered and final one clock after the last
// row. The compare "coord < splitValue" follows the design's algorithm.
module kdtree_constructor
  import fusefps_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    split_en,
  input  logic [1:0]              split_dim,
  input  coord_t                  split_value,
  input  logic                    in_valid,
  input  row_t                    in_row,
  input  logic [LANES-1:0]        in_mask,
  output logic [$clog2(LANES+1)-1:0] l_cnt,
  output lane_pts_t               l_pts,
  output logic [$clog2(LANES+1)-1:0] r_cnt,
  output lane_pts_t               r_pts,
  output stats_t                  left,
  output stats_t                  right
);
  localparam int CW = $clog2(LANES+1);

  logic [CW-1:0] nl, nr;
  lane_pts_t     pl, pr;
  stats_t        sl, sr;
  logic          go_left;

  always_comb begin
    nl = '0; nr = '0; pl = '0; pr = '0;
    sl = left; sr = right;
    go_left = 1'b0;
    for (int l = 0; l < LANES; l++) begin
      if (in_valid && in_mask[l]) begin
        go_left = !split_en || ($signed(in_row[l].p[split_dim]) < $signed(split_value));
        if (go_left) begin
          pl[nl] = in_row[l];
          nl     = nl + 1'b1;
          sl     = stats_add(sl, in_row[l]);
        end else begin
          pr[nr] = in_row[l];
          nr     = nr + 1'b1;
          sr     = stats_add(sr, in_row[l]);
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l_cnt <= '0; r_cnt <= '0; l_pts <= '0; r_pts <= '0;
      left  <= stats_empty();
      right <= stats_empty();
    end else if (clear) begin
      l_cnt <= '0; r_cnt <= '0;
      left  <= stats_empty();
      right <= stats_empty();
    end else begin
      l_cnt <= nl; r_cnt <= nr; l_pts <= pl; r_pts <= pr;
      left  <= sl;
      right <= sr;
    end
  end
endmodule
