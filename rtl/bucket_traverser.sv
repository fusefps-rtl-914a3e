// bucket_traverser: walks the bucket buffer once per sampling iteration and
// decides, for every bucket, what the newest sampling point s means for it.
//
// For each live bucket b (entries 0..nb-1) it applies the pruning rules of
// bucket-based FPS, in this order:
//   * implicit:  the squared distance from s to b's bounding box is at least
//                b.farPointDist, so s cannot lower any distance in b. Nothing
//                changes; b's farthest point is reported to the selector.
//   * merged:    s may lower some distances, but not that of b's farthest
//                point (|s - farPoint|^2 >= farPointDist), so farPoint stays
//                exact. s is appended to b's reference buffer and processed
//                later; farPoint is reported to the selector.
//   * processed: otherwise, or when the reference buffer would become full,
//                or when b's statistics are not yet known (the root bucket
//                before its first pass). A request with all pending
//                references plus s goes to the request FIFO, and the
//                traverser waits until the bucket manager has written back
//                the response (proc_done).
// A processed bucket is also split (sampling-driven KD-tree construction)
// when its height is below max_height, it has at least two points, its
// bounding box is not a single point and the bucket buffer has a free entry.
// The split dimension is the widest side of the bounding box (lowest index on
// a tie); the split value is the arithmetic mean coordSum[dim] / pointSize,
// computed by the sequential divider and rounded up.
//
// The three outcomes and the split rule follow the design's algorithm and
// its pruning example; the exact pruning tests (box distance for "implicit",
// farthest-point distance for "merged") are this implementation's reading
// of them. Processing one bucket at a time (waiting for proc_done) is also
// this implementation's choice.
//
// Timing: two clocks per implicit or merged bucket (read, decide).
module bucket_traverser
  import fusefps_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  point_t               s,
  input  logic [BID_W:0]       nb,
  input  height_t              max_height,
  input  logic                 alloc_full,
  // bucket buffer
  output logic                 bb_re,
  output bid_t                 bb_raddr,
  input  bucket_t              bb_rdata,
  output logic                 bb_we,
  output bid_t                 bb_waddr,
  output bucket_t              bb_wdata,
  // request FIFO
  output logic                 req_push,
  output req_t                 req,
  input  logic                 req_full,
  input  logic                 proc_done,
  // farthest point selector
  output logic                 cand_valid,
  output point_t               cand_pt,
  output dist_t                cand_dist,
  output logic                 done,
  output logic                 ev_implicit,
  output logic                 ev_merged,
  output logic                 ev_process
);
  typedef enum logic [2:0] { T_IDLE, T_RD, T_DEC, T_DIV, T_PUSH, T_WAIT, T_FIN } tstate_e;
  tstate_e st;
  logic [BID_W:0] idx, nb_q;
  point_t s_q;

  bucket_t b;
  dist_t   bd, fd;
  logic    implicit, merged, split;
  logic [1:0] dim;
  logic signed [COORD_W:0] rng [3];
  logic signed [COORD_W:0] rmax;
  point_t [REFS-1:0] refs_new;

  always_comb begin
    b  = bb_rdata;
    bd = boxdist(s_q, b.lo, b.hi);
    fd = sqdist(s_q, b.far_pt);
    implicit = b.stats_valid && (bd >= b.far_dist);
    merged   = b.stats_valid && !implicit && (fd >= b.far_dist)
               && (int'(b.nref) + 1 < REFS);
    for (int i = 0; i < 3; i++)
      rng[i] = (COORD_W+1)'($signed(b.hi[i])) - (COORD_W+1)'($signed(b.lo[i]));
    dim  = 2'd0;
    rmax = rng[0];
    for (int i = 1; i < 3; i++)
      if (rng[i] > rmax) begin dim = 2'(i); rmax = rng[i]; end
    split = b.stats_valid && (b.height < max_height) && (rmax > 0)
            && (b.size >= cnt_t'(2)) && !alloc_full;
    refs_new = b.refs;
    for (int j = 0; j < REFS; j++)
      if (j == int'(b.nref)) refs_new[j] = s_q;
  end

  // divider for the split value
  logic div_start, div_done, div_busy;
  sum_t div_q;
  seq_divider #(.NW(SUM_W), .DW(CNT_W)) u_div (
    .clk, .rst_n, .start(div_start), .num(b.sum[dim]), .den(b.size),
    .busy(div_busy), .done(div_done), .quot(div_q)
  );

  assign bb_re    = (st == T_RD);
  assign bb_raddr = bid_t'(idx);
  assign req_push = (st == T_PUSH) && !req_full;
  assign done     = (st == T_FIN);

  always_comb begin
    bb_we = 1'b0; bb_waddr = bid_t'(idx); bb_wdata = b;
    cand_valid = 1'b0; cand_pt = b.far_pt; cand_dist = b.far_dist;
    div_start = 1'b0;
    ev_implicit = 1'b0; ev_merged = 1'b0; ev_process = 1'b0;
    if (st == T_DEC) begin
      if (implicit) begin
        cand_valid  = 1'b1;
        ev_implicit = 1'b1;
      end else if (merged) begin
        cand_valid    = 1'b1;
        bb_we         = 1'b1;
        bb_wdata.refs = refs_new;
        bb_wdata.nref = b.nref + 1'b1;
        ev_merged     = 1'b1;
      end else begin
        ev_process = 1'b1;
        div_start  = split;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE; idx <= '0; nb_q <= '0; s_q <= '0; req <= '0;
    end else begin
      case (st)
        T_IDLE: if (start) begin
          idx <= '0; nb_q <= nb; s_q <= s;
          st  <= (nb == '0) ? T_FIN : T_RD;
        end
        T_RD: st <= T_DEC;
        T_DEC: begin
          if (implicit || merged) begin
            idx <= idx + 1'b1;
            st  <= (idx + 1'b1 == nb_q) ? T_FIN : T_RD;
          end else begin
            req.id          <= bid_t'(idx);
            req.refs        <= refs_new;
            req.nref        <= b.nref + 1'b1;
            req.ptr         <= b.ptr;
            req.size        <= b.size;
            req.split_en    <= split;
            req.split_dim   <= dim;
            req.split_value <= '0;
            st <= split ? T_DIV : T_PUSH;
          end
        end
        T_DIV: if (div_done) begin
          req.split_value <= coord_t'(div_q);
          st <= T_PUSH;
        end
        T_PUSH: if (!req_full) st <= T_WAIT;
        T_WAIT: if (proc_done) begin
          idx <= idx + 1'b1;
          st  <= (idx + 1'b1 == nb_q) ? T_FIN : T_RD;
        end
        T_FIN: st <= T_IDLE;
        default: st <= T_IDLE;
      endcase
    end
  end
endmodule
