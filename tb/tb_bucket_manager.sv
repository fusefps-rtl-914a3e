// tb_bucket_manager: the bucket manager (bucket buffer, allocator,
// traverser, selector) against a behavioural model of the point-side
// datapath written in this testbench: on each request it reads the bucket's
// points from a model memory, applies the references, partitions the points
// on the split value (left in place, right at a free-row pointer), and
// answers with both children's statistics after a random delay.
// Result-buffer back-pressure and request-FIFO stalls are random.
// Every sampling point is checked against brute-force farthest point
// sampling (the first is the seed; each later one must have the largest
// distance to the points sampled before it). The split count must equal
// the number of internal nodes of a full tree of the given height.
module tb_bucket_manager;
  import fusefps_pkg::*;
  localparam int NPTS = 300, NSAMP = 80, HEIGHT = 3, MEMROWS = 1024;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, req_push, req_full, resp_empty, resp_pop;
  logic res_push, res_full, dp_init;
  logic ev_implicit, ev_merged, ev_process, ev_split;
  point_t seed, res_pt;
  req_t req; resp_t resp;
  ptr_t free_base;

  bucket_manager u_dut (.clk, .rst_n, .start, .num_points(cnt_t'(NPTS)), .num_samples(cnt_t'(NSAMP)),
    .max_height(height_t'(HEIGHT)), .seed, .busy, .done, .req_push, .req, .req_full,
    .resp_empty, .resp, .resp_pop, .res_push, .res_pt, .res_full, .dp_init, .free_base,
    .ev_implicit, .ev_merged, .ev_process, .ev_split);

  int checks = 0, failures = 0;
  pdist_t mem [MEMROWS * LANES];
  point_t pts [NPTS];
  longint refd [NPTS];
  ptr_t fp;
  req_t reqq [$];
  resp_t respq [$];
  int nsamples = 0, n_imp = 0, n_mrg = 0, n_proc = 0, n_split = 0;

  function automatic longint d2(point_t a, point_t b);
    longint r = 0;
    for (int i = 0; i < 3; i++) r += (longint'(a[i]) - longint'(b[i])) ** 2;
    return r;
  endfunction

  function automatic stats_t mk_stats(pdist_t v [$]);
    stats_t st;
    st = stats_empty();
    foreach (v[k]) st = stats_add(st, v[k]);
    return st;
  endfunction

  // behavioural datapath
  initial begin
    resp_t r;
    req_t q;
    pdist_t par [$], el [$], er [$];
    forever begin
      @(negedge clk);
      if (reqq.size() > 0) begin
        q = reqq.pop_front();
        par = {}; el = {}; er = {};
        for (int i = 0; i < int'(q.size); i++) par.push_back(mem[int'(q.ptr) * LANES + i]);
        foreach (par[i]) begin
          pdist_t x;
          x = par[i];
          for (int j = 0; j < int'(q.nref); j++)
            if (d2(x.p, q.refs[j]) < longint'(x.dmin)) x.dmin = dist_t'(d2(x.p, q.refs[j]));
          if (!q.split_en || x.p[q.split_dim] < q.split_value) el.push_back(x); else er.push_back(x);
        end
        foreach (el[i]) mem[int'(q.ptr) * LANES + i] = el[i];
        r.id = q.id;
        r.split = q.split_en && el.size() > 0 && er.size() > 0;
        r.left_ptr = q.ptr;
        r.right_ptr = fp;
        if (r.split) begin
          foreach (er[i]) mem[int'(fp) * LANES + i] = er[i];
          fp = fp + ptr_t'((er.size() + LANES - 1) / LANES);
        end
        r.left = mk_stats(el);
        r.right = mk_stats(er);
        repeat ($urandom_range(20)) @(negedge clk);
        respq.push_back(r);
      end
    end
  end

  always @(posedge clk) begin
    req_full <= ($urandom_range(3) == 0);
    res_full <= ($urandom_range(3) == 0);
    if (dp_init) fp = free_base;
    if (req_push && !req_full) reqq.push_back(req);
    if (resp_pop) void'(respq.pop_front());
    if (ev_implicit) n_imp++;
    if (ev_merged) n_mrg++;
    if (ev_process) n_proc++;
    if (ev_split) n_split++;
    if (res_push && !res_full) begin
      longint best = -1;
      int hit = -1;
      foreach (refd[j]) if (refd[j] > best) best = refd[j];
      foreach (pts[j]) if (pts[j] == res_pt && refd[j] == best) hit = j;
      checks++;
      if (nsamples == 0 ? (res_pt != seed) : (hit < 0)) begin
        failures++; $display("FAIL sample %0d not a farthest point", nsamples);
      end
      foreach (pts[j]) if (d2(pts[j], res_pt) < refd[j]) refd[j] = d2(pts[j], res_pt);
      nsamples++;
    end
  end
  // present the oldest response; refreshed between clock edges
  always @(negedge clk) begin
    #1;
    resp_empty = (respq.size() == 0);
    resp = (respq.size() == 0) ? '0 : respq[0];
  end

  initial begin
    start = 0;
    for (int i = 0; i < NPTS; i++) begin
      for (int k = 0; k < 3; k++) pts[i][k] = coord_t'($signed($urandom_range(1000)) - 500);
      refd[i] = 64'h7fff_ffff_ffff_ffff;
      mem[i].p = pts[i];
      mem[i].dmin = '1;
    end
    seed = pts[$urandom_range(NPTS - 1)];
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    repeat (3) @(negedge clk);
    checks++;
    if (nsamples != NSAMP) begin failures++; $display("FAIL %0d samples", nsamples); end
    checks++;
    if (n_split != (1 << HEIGHT) - 1) begin failures++; $display("FAIL %0d splits", n_split); end
    checks++;
    if (n_imp == 0 || n_mrg == 0 || n_proc == 0) begin failures++; $display("FAIL outcome missing"); end
    checks++;
    if (busy) begin failures++; $display("FAIL still busy"); end
    $display("implicit=%0d merged=%0d processed=%0d split=%0d", n_imp, n_mrg, n_proc, n_split);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
