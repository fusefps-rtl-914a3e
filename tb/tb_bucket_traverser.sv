// tb_bucket_traverser: the traverser with a real bucket buffer, preloaded
// with random buckets (boxes, farthest points, pending references, heights,
// some with unknown statistics). For each run a random sampling point is
// applied and, for every bucket in order, the testbench's own model decides
// implicit / merged / processed and checks:
//   * implicit and merged buckets: the candidate sent to the selector;
//     merged buckets: the reference appended in the bucket buffer;
//   * processed buckets: the request (id, pointer, size, all references,
//     split enable, widest dimension, ceil(coordSum/pointSize)), after which
//     the testbench answers with proc_done after a random delay;
// and finally the done pulse and that every bucket was visited once.
module tb_bucket_traverser;
  import fusefps_pkg::*;
  localparam int NB = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, alloc_full, bb_re, bb_we, req_push, req_full, proc_done;
  logic cand_valid, done, ev_implicit, ev_merged, ev_process;
  point_t s, cand_pt;
  dist_t cand_dist;
  logic [BID_W:0] nb;
  height_t max_height;
  bid_t bb_raddr, bb_waddr;
  bucket_t bb_rdata, bb_wdata;
  req_t req;

  bucket_traverser u_dut (.*);
  bucket_buffer u_bb (.clk, .re(bb_re), .raddr(bb_raddr), .rdata(bb_rdata),
                      .we(bb_we), .waddr(bb_waddr), .wdata(bb_wdata));

  int checks = 0, failures = 0;
  int n_imp = 0, n_mrg = 0, n_proc = 0, n_split = 0;
  bucket_t bk [NB];

  function automatic longint d2(point_t a, point_t b);
    longint r = 0;
    for (int i = 0; i < 3; i++) r += (longint'(a[i]) - longint'(b[i])) ** 2;
    return r;
  endfunction
  function automatic longint bd2(point_t a, bucket_t b);
    longint r = 0, d;
    for (int i = 0; i < 3; i++) begin
      d = 0;
      if (a[i] < b.lo[i]) d = longint'(b.lo[i]) - longint'(a[i]);
      if (a[i] > b.hi[i]) d = longint'(a[i]) - longint'(b.hi[i]);
      r += d * d;
    end
    return r;
  endfunction

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // expected actions, in bucket order
  typedef struct { int kind; int id; } act_t;   // 0 implicit, 1 merged, 2 process
  act_t exp_q [$];

  always @(posedge clk) if (rst_n) begin
    if (cand_valid) begin
      act_t a;
      chk(exp_q.size() > 0 && exp_q[0].kind != 2, "candidate expected");
      if (exp_q.size() > 0) begin
        a = exp_q.pop_front();
        chk(cand_pt == bk[a.id].far_pt && cand_dist == bk[a.id].far_dist, "candidate value");
        chk(ev_implicit == (a.kind == 0) && ev_merged == (a.kind == 1), "implicit/merged event");
        if (a.kind == 1) begin
          chk(bb_we && bb_waddr == bid_t'(a.id) && int'(bb_wdata.nref) == int'(bk[a.id].nref) + 1
              && bb_wdata.refs[bk[a.id].nref] == s, "merged write-back");
        end
      end
    end
  end

  initial begin
    start = 0; alloc_full = 0; req_full = 0; proc_done = 0; s = '0; nb = '0; max_height = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 30; run++) begin
      // random buckets
      for (int b = 0; b < NB; b++) begin
        bucket_t e;
        logic [$bits(bucket_t)-1:0] v;
        for (int i = 0; i < $bits(bucket_t); i += 32) v[i +: 32] = $urandom;
        e = bucket_t'(v);
        for (int i = 0; i < 3; i++) begin
          e.lo[i] = coord_t'($signed($urandom_range(2000)) - 1000);
          e.hi[i] = e.lo[i] + coord_t'((b % 7 == 0) ? 0 : $urandom_range(300));
          e.far_pt[i] = e.lo[i] + coord_t'($urandom_range(int'(e.hi[i] - e.lo[i])));
          e.sum[i] = sum_t'($signed($urandom_range(200000)) - 100000);
        end
        e.far_dist = dist_t'($urandom_range(600000));
        e.nref = NREF_W'($urandom_range(REFS - 1));
        e.size = cnt_t'($urandom_range(50) + 1);
        e.height = height_t'($urandom_range(8));
        e.stats_valid = ($urandom_range(9) != 0);
        bk[b] = e;
        u_bb.mem[b] = e;
      end
      for (int i = 0; i < 3; i++) s[i] = coord_t'($signed($urandom_range(2000)) - 1000);
      max_height = height_t'($urandom_range(8));
      alloc_full = (run % 5 == 4);
      exp_q = {};
      @(negedge clk);
      nb = (BID_W+1)'(NB); start = 1;
      @(negedge clk); start = 0;
      for (int b = 0; b < NB; b++) begin
        bucket_t e;
        bit imp, mrg;
        e = bk[b];
        imp = e.stats_valid && bd2(s, e) >= longint'(e.far_dist);
        mrg = e.stats_valid && !imp && d2(s, e.far_pt) >= longint'(e.far_dist) && int'(e.nref) + 1 < REFS;
        if (imp) begin exp_q.push_back('{0, b}); n_imp++; end
        else if (mrg) begin exp_q.push_back('{1, b}); n_mrg++; end
        else begin
          longint rng [3], rmax, q;
          int dim;
          bit spl;
          exp_q.push_back('{2, b});
          // wait until the traverser reaches this bucket and pushes
          while (!(req_push)) @(negedge clk);
          n_proc++;
          chk(exp_q.size() == 1 && exp_q[0].id == b, "buckets handled in order");
          void'(exp_q.pop_front());
          dim = 0; rmax = -1;
          for (int i = 0; i < 3; i++) begin
            rng[i] = longint'(e.hi[i]) - longint'(e.lo[i]);
            if (rng[i] > rmax) begin rmax = rng[i]; dim = i; end
          end
          spl = e.stats_valid && e.height < max_height && rmax > 0 && e.size >= 2 && !alloc_full;
          if (spl) n_split++;
          chk(req.id == bid_t'(b) && req.ptr == e.ptr && req.size == e.size, "request bucket");
          chk(int'(req.nref) == int'(e.nref) + 1 && req.refs[e.nref] == s, "request references");
          for (int j = 0; j < int'(e.nref); j++) chk(req.refs[j] == e.refs[j], "pending reference");
          chk(req.split_en == spl, "split enable");
          if (spl) begin
            q = longint'(e.sum[dim]) / longint'(e.size);
            if (longint'(e.sum[dim]) % longint'(e.size) != 0 && e.sum[dim] > 0) q++;
            chk(int'(req.split_dim) == dim && longint'(req.split_value) == q, "split dimension and value");
          end
          @(negedge clk);
          repeat ($urandom_range(4)) @(negedge clk);
          proc_done = 1;
          @(negedge clk); proc_done = 0;
        end
      end
      while (!done) @(negedge clk);
      chk(exp_q.size() == 0, "all buckets visited");
      @(negedge clk);
    end
    chk(n_imp > 0 && n_mrg > 0 && n_proc > 0 && n_split > 0, "all outcomes occurred");
    $display("implicit=%0d merged=%0d processed=%0d split=%0d", n_imp, n_mrg, n_proc, n_split);
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
