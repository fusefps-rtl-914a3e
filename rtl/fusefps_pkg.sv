// fusefps_pkg: types, sizes and arithmetic helpers shared by the FuseFPS
// accelerator.
//
// A point is three signed fixed-point coordinates (x, y, z). Each point in
// memory carries its current squared distance to the nearest sampled point
// ("dmin"), so a point record is {x, y, z, dmin}. Points move through the
// datapath in rows of LANES points, the width of one point-buffer read.
// A bucket (one leaf of the KD-tree) is described by bucket_t, which follows
// the bucket structure of the design (bounding box, point pointer and count,
// farthest point and its distance, a buffer of pending reference points,
// coordinate sums and height). The design uses integers where the original
// structure uses floats; this is a choice of this implementation.
package fusefps_pkg;

  // ---- sizes ------------------------------------------------------------
  parameter int COORD_W  = 16;              // signed coordinate width
  parameter int DIST_W   = 2*COORD_W + 4;   // exact squared 3-D distance
  parameter int SUM_W    = COORD_W + 24;    // coordinate sum of up to 2^23 points
  parameter int CNT_W    = 32;              // pointSize (int32 in the bucket)
  parameter int PTR_W    = 32;              // pointPtr  (int32 in the bucket)
  parameter int HEIGHT_W = 8;               // height    (int8  in the bucket)
  parameter int LANES    = 4;               // points per point-buffer row
  parameter int REFS     = 4;               // reference buffer entries = DUs per array
  parameter int NREF_W   = $clog2(REFS + 1);
  parameter int BUCKETS  = 512;             // bucket buffer entries
  parameter int BID_W    = $clog2(BUCKETS);

  typedef logic signed [COORD_W-1:0] coord_t;
  typedef logic        [DIST_W-1:0]  dist_t;
  typedef logic signed [SUM_W-1:0]   sum_t;
  typedef logic        [CNT_W-1:0]   cnt_t;
  typedef logic        [PTR_W-1:0]   ptr_t;
  typedef logic        [HEIGHT_W-1:0] height_t;
  typedef logic        [BID_W-1:0]   bid_t;

  typedef coord_t [2:0] point_t;              // [0]=x [1]=y [2]=z

  typedef struct packed {
    point_t p;
    dist_t  dmin;     // squared distance to the nearest sampled point
  } pdist_t;

  typedef pdist_t [LANES-1:0] row_t;          // one point-buffer / memory row
  typedef pdist_t [LANES-1:0] lane_pts_t;     // compacted points with a count

  // Running description of the points routed to one child bucket.
  typedef struct packed {
    coord_t [2:0] lo;        // bound[i].down
    coord_t [2:0] hi;        // bound[i].up
    sum_t   [2:0] sum;       // coordSum
    cnt_t         size;      // pointSize
    point_t       far_pt;    // farPoint
    dist_t        far_dist;  // farPointDist
  } stats_t;

  typedef struct packed {
    coord_t [2:0]      lo;
    coord_t [2:0]      hi;
    ptr_t              ptr;        // first memory row of the bucket
    cnt_t              size;
    point_t            far_pt;
    dist_t             far_dist;
    point_t [REFS-1:0] refs;       // referenceBuffer
    logic [NREF_W-1:0] nref;       // valid entries of refs
    sum_t   [2:0]      sum;
    height_t           height;
    logic              stats_valid; // bound/sum/farPoint known (0 only for the root before its first pass)
  } bucket_t;

  // Bucket processing request (bucket manager -> datapath).
  typedef struct packed {
    bid_t              id;
    point_t [REFS-1:0] refs;
    logic [NREF_W-1:0] nref;
    ptr_t              ptr;
    cnt_t              size;
    logic              split_en;
    logic [1:0]        split_dim;
    coord_t            split_value;
  } req_t;

  // Bucket processing response (datapath -> bucket manager).
  typedef struct packed {
    bid_t   id;
    logic   split;
    ptr_t   left_ptr;
    ptr_t   right_ptr;
    stats_t left;
    stats_t right;
  } resp_t;

  // Exact squared Euclidean distance.
  function automatic dist_t sqdist(point_t a, point_t b);
    logic signed [COORD_W:0] d;
    logic signed [DIST_W-1:0] w;
    dist_t acc;
    acc = '0;
    for (int i = 0; i < 3; i++) begin
      d   = (COORD_W+1)'($signed(a[i])) - (COORD_W+1)'($signed(b[i]));
      w   = DIST_W'(d);
      acc = acc + dist_t'(w * w);
    end
    return acc;
  endfunction

  // Squared distance from point s to the axis-aligned box [lo, hi]
  // (zero when s is inside the box).
  function automatic dist_t boxdist(point_t s, coord_t [2:0] lo, coord_t [2:0] hi);
    logic signed [COORD_W:0] d;
    logic signed [DIST_W-1:0] w;
    dist_t acc;
    acc = '0;
    for (int i = 0; i < 3; i++) begin
      if ($signed(s[i]) < $signed(lo[i]))
        d = (COORD_W+1)'($signed(lo[i])) - (COORD_W+1)'($signed(s[i]));
      else if ($signed(s[i]) > $signed(hi[i]))
        d = (COORD_W+1)'($signed(s[i])) - (COORD_W+1)'($signed(hi[i]));
      else
        d = '0;
      w   = DIST_W'(d);
      acc = acc + dist_t'(w * w);
    end
    return acc;
  endfunction

  // Statistics of an empty bucket.
  function automatic stats_t stats_empty();
    stats_t s;
    for (int i = 0; i < 3; i++) begin
      s.lo[i]  = coord_t'({1'b0, {(COORD_W-1){1'b1}}});   // +max
      s.hi[i]  = coord_t'({1'b1, {(COORD_W-1){1'b0}}});   // -max
      s.sum[i] = '0;
    end
    s.size     = '0;
    s.far_pt   = '0;
    s.far_dist = '0;
    return s;
  endfunction

  // updateBucket(p, b): add one point to a child's statistics.
  function automatic stats_t stats_add(stats_t s, pdist_t q);
    stats_t r;
    r = s;
    for (int i = 0; i < 3; i++) begin
      r.sum[i] = s.sum[i] + sum_t'($signed(q.p[i]));
      if ($signed(q.p[i]) < $signed(s.lo[i])) r.lo[i] = q.p[i];
      if ($signed(q.p[i]) > $signed(s.hi[i])) r.hi[i] = q.p[i];
    end
    r.size = s.size + 1'b1;
    if (q.dmin > s.far_dist || s.size == '0) begin
      r.far_pt   = q.p;
      r.far_dist = q.dmin;
    end
    return r;
  endfunction

endpackage
