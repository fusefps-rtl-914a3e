// tb_dma: the DMA driving the real point-side datapath (point buffer with
// small banks so that buckets span several chunks, distance engine,
// KD-tree constructor, align FIFOs) against a behavioural memory with
// random grant stalls and read latency.
//
// The testbench issues a series of requests, split and unsplit, on the
// root bucket and then on children it has created, and checks for each:
//   * the response: ids, split flag, left/right pointers, and both
//     children's count, coordinate sums, bounds and farthest point;
//   * memory: the left child's points (in their original order, with
//     distances reduced by the request's references) in place of the
//     parent's rows, the right child's in the fresh region at the free-row
//     pointer, which then advances by the right child's row count.
// Expected values are computed from a snapshot of memory taken before the
// request.
module tb_dma;
  import fusefps_pkg::*;
  localparam int BR = 4;
  localparam int NPTS = 70;
  localparam int MEMROWS = 2048;
  localparam int CW = $clog2(LANES+1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic init; ptr_t free_base;
  logic req_valid, req_pop, resp_valid, resp_full;
  req_t req; resp_t resp;
  logic rd_req, rd_gnt, rd_valid, wr_req, wr_gnt;
  ptr_t rd_addr, wr_addr; row_t rd_data, wr_data;
  logic [1:0] pb_re, pb_we;
  logic [1:0][$clog2(BR)-1:0] pb_raddr, pb_waddr;
  row_t [1:0] pb_rdata, pb_wdata;
  logic de_valid, de_last, do_valid, do_last;
  row_t de_row, do_row;
  logic [LANES-1:0] de_mask, do_mask;
  point_t [REFS-1:0] cur_refs; logic [NREF_W-1:0] cur_nref;
  logic kc_clear, kc_split_en; logic [1:0] kc_split_dim; coord_t kc_split_value;
  stats_t kc_left, kc_right;
  logic [CW-1:0] l_cnt, r_cnt; lane_pts_t l_pts, r_pts;
  logic afl_valid, afr_valid, af_flush, busy;
  row_t afl_row, afr_row;

  dma #(.BANK_ROWS(BR)) u_dut (.*);
  point_buffer #(.BANK_ROWS(BR)) u_pb (.clk, .re(pb_re), .raddr(pb_raddr), .rdata(pb_rdata),
                                       .we(pb_we), .waddr(pb_waddr), .wdata(pb_wdata));
  distance_engine u_de (.clk, .rst_n, .refs(cur_refs), .nref(cur_nref),
    .in_valid(de_valid), .in_row(de_row), .in_mask(de_mask), .in_last(de_last),
    .out_valid(do_valid), .out_row(do_row), .out_mask(do_mask), .out_last(do_last));
  kdtree_constructor u_kc (.clk, .rst_n, .clear(kc_clear), .split_en(kc_split_en),
    .split_dim(kc_split_dim), .split_value(kc_split_value), .in_valid(do_valid),
    .in_row(do_row), .in_mask(do_mask), .l_cnt, .l_pts, .r_cnt, .r_pts,
    .left(kc_left), .right(kc_right));
  align_fifo u_afl (.clk, .rst_n, .push_cnt(l_cnt), .push_pts(l_pts), .flush(af_flush),
    .wr_valid(afl_valid), .wr_row(afl_row), .wr_cnt(), .level());
  align_fifo u_afr (.clk, .rst_n, .push_cnt(r_cnt), .push_pts(r_pts), .flush(af_flush),
    .wr_valid(afr_valid), .wr_row(afr_row), .wr_cnt(), .level());

  // ---- memory ----
  row_t mem [MEMROWS];
  ptr_t rdq [$];
  int n_stall = 0;
  always @(posedge clk) begin
    rd_gnt <= ($urandom_range(2) != 0);
    wr_gnt <= ($urandom_range(2) != 0);
    rd_valid <= 1'b0;
    if (rdq.size() > 0 && $urandom_range(1)) begin
      rd_valid <= 1'b1; rd_data <= mem[rdq.pop_front()];
    end
    if (rd_req && rd_gnt) rdq.push_back(rd_addr);
    if (wr_req && wr_gnt) mem[wr_addr] <= wr_data;
    if ((rd_req && !rd_gnt) || (wr_req && !wr_gnt)) n_stall++;
  end

  int checks = 0, failures = 0;
  ptr_t bptr [$]; int bsize [$];
  ptr_t fp;
  int cur_t = 0;

  function automatic longint d2(point_t a, point_t b);
    longint s = 0;
    for (int i = 0; i < 3; i++) s += (longint'(a[i]) - longint'(b[i])) ** 2;
    return s;
  endfunction

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (request %0d)", what, cur_t); end
  endtask

  task automatic chk_stats(stats_t s, pdist_t pts [$], string side);
    longint sum [3], lo [3], hi [3], fd;
    point_t fpnt;
    for (int i = 0; i < 3; i++) begin sum[i] = 0; lo[i] = 32767; hi[i] = -32768; end
    fd = 0; fpnt = '0;
    foreach (pts[k]) begin
      for (int i = 0; i < 3; i++) begin
        sum[i] += longint'(pts[k].p[i]);
        if (longint'(pts[k].p[i]) < lo[i]) lo[i] = longint'(pts[k].p[i]);
        if (longint'(pts[k].p[i]) > hi[i]) hi[i] = longint'(pts[k].p[i]);
      end
      if (k == 0 || longint'(pts[k].dmin) > fd) begin fd = longint'(pts[k].dmin); fpnt = pts[k].p; end
    end
    chk(int'(s.size) == pts.size(), {side, " size"});
    if (pts.size() > 0) begin
      chk(longint'(s.far_dist) == fd && s.far_pt == fpnt, {side, " farthest point"});
      for (int i = 0; i < 3; i++)
        chk(longint'(s.sum[i]) == sum[i] && longint'(s.lo[i]) == lo[i] && longint'(s.hi[i]) == hi[i],
            {side, " sum/bound"});
    end
  endtask

  initial begin
    init = 0; free_base = '0; req_valid = 0; req = '0; resp_full = 0;
    for (int r = 0; r < MEMROWS; r++) mem[r] = '0;
    for (int i = 0; i < NPTS; i++) begin
      for (int k = 0; k < 3; k++) mem[i / LANES][i % LANES].p[k] = coord_t'($signed($urandom_range(200)) - 100);
      mem[i / LANES][i % LANES].dmin = '1;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    fp = ptr_t'((NPTS + LANES - 1) / LANES);
    @(negedge clk); init = 1; free_base = fp;
    @(negedge clk); init = 0;
    bptr.push_back('0); bsize.push_back(NPTS);
    for (int t = 0; t < 24; t++) begin
      int bi;
      pdist_t par [$], el [$], er [$];
      bit do_split;
      par = {}; el = {}; er = {};
      bi = $urandom_range(bptr.size() - 1);
      cur_t = t;
      do_split = (t % 3 != 0) && bsize[bi] >= 2;
      req = '0;
      req.id = bid_t'(t);
      req.ptr = bptr[bi]; req.size = cnt_t'(bsize[bi]);
      req.nref = NREF_W'($urandom_range(REFS - 1) + 1);
      for (int j = 0; j < REFS; j++)
        for (int k = 0; k < 3; k++) req.refs[j][k] = coord_t'($signed($urandom_range(200)) - 100);
      req.split_en = do_split;
      req.split_dim = 2'($urandom_range(2));
      // snapshot and expected result
      for (int i = 0; i < bsize[bi]; i++) par.push_back(mem[bptr[bi] + ptr_t'(i / LANES)][i % LANES]);
      req.split_value = par[$urandom_range(par.size() - 1)].p[req.split_dim];
      foreach (par[i]) begin
        pdist_t q;
        q = par[i];
        for (int j = 0; j < int'(req.nref); j++)
          if (d2(q.p, req.refs[j]) < longint'(q.dmin)) q.dmin = dist_t'(d2(q.p, req.refs[j]));
        if (!do_split || q.p[req.split_dim] < req.split_value) el.push_back(q); else er.push_back(q);
      end
      @(negedge clk); req_valid = 1;
      #1;
      while (!req_pop) begin @(negedge clk); #1; end
      @(posedge clk); #1; req_valid = 0;
      resp_full = 1;
      repeat ($urandom_range(3)) @(negedge clk);
      resp_full = 0;
      while (!resp_valid) @(negedge clk);
      chk(resp.id == bid_t'(t), "id");
      chk(resp.split == (do_split && el.size() > 0 && er.size() > 0), "split flag");
      chk(resp.left_ptr == bptr[bi] && resp.right_ptr == fp, "pointers");
      chk_stats(resp.left, el, "left");
      chk_stats(resp.right, er, "right");
      @(negedge clk);
      foreach (el[i]) begin
        chk(mem[bptr[bi] + ptr_t'(i / LANES)][i % LANES] == el[i], "left child in memory");
      end
      foreach (er[i]) chk(mem[fp + ptr_t'(i / LANES)][i % LANES] == er[i], "right child in memory");
      if (resp.split) begin
        bsize[bi] = el.size();
        bptr.push_back(fp); bsize.push_back(er.size());
        fp = fp + ptr_t'((er.size() + LANES - 1) / LANES);
      end
      chk(u_dut.free_ptr == fp, "free-row pointer");
    end
    chk(n_stall > 0, "memory stalls happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
