// tb_fusefps_workloads: the accelerator, at its default sizes, on point clouds
// of the sizes it was evaluated on: Small (4 000 points, KD-tree height
// threshold 6), Medium (16 000 points, height 7) and Large (120 000 points,
// height 9), each sampled at 25 %.
//
// The real scans are not available, so each cloud is synthetic: points are
// drawn around a handful of random cluster centres (objects) over a flat
// spread (floor / background), in 16-bit integer coordinates. The jobs run
// one after the other on the same instance, with a fresh start each time.
//
// Checking is the same as in the end-to-end test, made cheaper so the big
// clouds simulate in reasonable time:
//   * every sample is a cloud point, and its distance to the samples before
//     it equals the largest such distance (kept by an incremental
//     brute-force model);
//   * the number of samples; that the tree has one leaf more than it has
//     splits, at most 2^H - 1 splits and no leaf deeper than H (a sparse
//     region that no sample comes near is never split further);
//   * at the end, every leaf's points in memory are cloud points, each used
//     once, inside the leaf's bounding box, and no stored distance is below
//     the true one.
// The Large job samples only LARGE_SAMPLES points (not 30 000), because the
// reference model costs N operations per sample; that is enough to build
// the height-9 tree and move the whole cloud through the datapath once per
// level.
//
// Memory: behavioural, 3-clock read latency, random grant stalls, sized for
// the largest job (N/4 + H*N/8 + 2^H rows).
module tb_fusefps_workloads;
  import fusefps_pkg::*;

  localparam int MEMROWS       = 1 << 18;
  localparam int LARGE_SAMPLES = 3000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  logic busy, done, sample_valid, sample_ready;
  point_t sample_pt, seed;
  logic mem_rd_req, mem_rd_gnt, mem_rd_valid, mem_wr_req, mem_wr_gnt;
  ptr_t mem_rd_addr, mem_wr_addr;
  row_t mem_rd_data, mem_wr_data;
  logic ev_implicit, ev_merged, ev_process, ev_split;
  cnt_t    num_points, num_samples;
  height_t max_height;

  fusefps_top u_dut (
    .clk, .rst_n, .start, .num_points, .num_samples, .max_height, .seed,
    .busy, .done, .sample_valid, .sample_pt, .sample_ready,
    .mem_rd_req, .mem_rd_addr, .mem_rd_gnt, .mem_rd_valid, .mem_rd_data,
    .mem_wr_req, .mem_wr_addr, .mem_wr_data, .mem_wr_gnt,
    .ev_implicit, .ev_merged, .ev_process, .ev_split
  );

  // ---- behavioural off-chip memory ----------------------------------------
  row_t mem [MEMROWS];
  ptr_t rdq [$];
  int   lat [$];
  int   n_mem_stall = 0;
  always_ff @(posedge clk) begin
    mem_rd_gnt <= ($urandom_range(7) != 0);
    mem_wr_gnt <= ($urandom_range(7) != 0);
  end
  always @(posedge clk) begin
    mem_rd_valid <= 1'b0;
    if (lat.size() > 0 && lat[0] <= 0) begin
      mem_rd_valid <= 1'b1;
      mem_rd_data  <= mem[rdq[0]];
      void'(rdq.pop_front());
      void'(lat.pop_front());
    end
    foreach (lat[i]) lat[i]--;
    if (mem_rd_req && mem_rd_gnt) begin
      rdq.push_back(mem_rd_addr);
      lat.push_back(2);
    end
    if ((mem_rd_req && !mem_rd_gnt) || (mem_wr_req && !mem_wr_gnt)) n_mem_stall++;
    if (mem_wr_req && mem_wr_gnt) mem[mem_wr_addr] <= mem_wr_data;
  end

  // ---- reference model -----------------------------------------------------
  point_t pts [];
  longint refd [];
  longint best_d;                 // max of refd, kept up to date
  int checks = 0, failures = 0;
  int nsamples = 0, npts = 0;
  int n_imp = 0, n_mrg = 0, n_proc = 0, n_split = 0;
  longint cycles = 0;

  function automatic longint d2(point_t a, point_t b);
    longint s = 0;
    for (int i = 0; i < 3; i++) s += (longint'(a[i]) - longint'(b[i])) ** 2;
    return s;
  endfunction

  always @(posedge clk) begin
    if (ev_implicit) n_imp++;
    if (ev_merged)   n_mrg++;
    if (ev_process)  n_proc++;
    if (ev_split)    n_split++;
    if (busy) cycles++;
  end

  // consume and check sampling points: one pass over the cloud per sample
  always @(posedge clk) begin
    sample_ready <= ($urandom_range(4) != 0);
    if (sample_valid && sample_ready && rst_n) begin
      bit hit;
      longint nb;
      hit = 0;
      nb  = -1;
      checks++;
      for (int j = 0; j < npts; j++) begin
        longint d;
        if (pts[j] == sample_pt && refd[j] == best_d) hit = 1;
        d = d2(pts[j], sample_pt);
        if (d < refd[j]) refd[j] = d;
        if (refd[j] > nb) nb = refd[j];
      end
      if (nsamples == 0 ? (sample_pt != seed) : !hit) begin
        failures++;
        $display("FAIL sample %0d (%0d,%0d,%0d) is not a farthest point", nsamples,
                 $signed(sample_pt[0]), $signed(sample_pt[1]), $signed(sample_pt[2]));
      end
      best_d = nb;
      nsamples++;
    end
  end

  // ---- one job ----------------------------------------------------------------
  task automatic run_job(string name, int n, int ns, int h);
    int     ncl;
    point_t ctr [8];
    int     spread [8];
    int     idx [bit [3*COORD_W-1:0]];
    int unsigned seen [bit [3*COORD_W-1:0]];
    int unsigned total, nbk;
    int     imp0, mrg0, proc0, split0;
    longint cyc0;

    npts = n;
    pts  = new[n];
    refd = new[n];
    ncl  = 4 + int'($urandom_range(4));
    for (int c = 0; c < ncl; c++) begin
      for (int k = 0; k < 3; k++) ctr[c][k] = coord_t'($signed($urandom_range(40000)) - 20000);
      spread[c] = 200 + int'($urandom_range(3000));
    end
    for (int i = 0; i < n; i++) begin
      if ($urandom_range(3) == 0) begin
        // background: wide and flat
        pts[i][0] = coord_t'($signed($urandom_range(60000)) - 30000);
        pts[i][1] = coord_t'($signed($urandom_range(60000)) - 30000);
        pts[i][2] = coord_t'($signed($urandom_range(400)) - 200);
      end else begin
        int c;
        c = int'($urandom_range(ncl - 1));
        for (int k = 0; k < 3; k++)
          pts[i][k] = coord_t'(int'($signed(ctr[c][k])) + int'($urandom_range(2 * spread[c])) - spread[c]);
      end
      refd[i] = 64'h7fff_ffff_ffff_ffff;
      idx[pts[i]] = i;
      if (seen.exists(pts[i])) seen[pts[i]]++; else seen[pts[i]] = 1;
    end
    best_d = 64'h7fff_ffff_ffff_ffff;
    for (int r = 0; r < (n + LANES - 1) / LANES; r++) mem[r] = '0;
    for (int i = 0; i < n; i++) begin
      mem[i / LANES][i % LANES].p    = pts[i];
      mem[i / LANES][i % LANES].dmin = '1;
    end
    nsamples = 0;
    imp0 = n_imp; mrg0 = n_mrg; proc0 = n_proc; split0 = n_split; cyc0 = cycles;

    @(posedge clk);
    num_points  <= cnt_t'(n);
    num_samples <= cnt_t'(ns);
    max_height  <= height_t'(h);
    seed        <= pts[0];
    start       <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    wait (done);
    wait (nsamples == ns);
    repeat (10) @(posedge clk);

    checks++;
    if (sample_valid) begin failures++; $display("FAIL %s: extra sample", name); end
    // a leaf is split only when a sample forces it to be processed, so a
    // sparse corner of the cloud may stay shallower than h: the tree has at
    // most 2^h - 1 splits and one leaf more than it has splits
    checks++;
    if (n_split - split0 > (1 << h) - 1 || int'(u_dut.u_mgr.u_alloc.count) != n_split - split0 + 1) begin
      failures++;
      $display("FAIL %s: %0d splits for %0d leaves, height %0d", name, n_split - split0,
               u_dut.u_mgr.u_alloc.count, h);
    end

    // the finished KD-tree
    total = 0;
    nbk   = int'(u_dut.u_mgr.u_alloc.count);
    for (int b = 0; b < nbk; b++) begin
      bucket_t bk;
      bk = u_dut.u_mgr.u_bb.mem[b];
      total += bk.size;
      for (int k = 0; k < int'(bk.size); k++) begin
        pdist_t q;
        bit     inbox;
        q = mem[int'(bk.ptr) + k / LANES][k % LANES];
        checks++;
        if (!seen.exists(q.p) || seen[q.p] == 0) begin
          failures++;
          $display("FAIL %s: leaf %0d holds a point that is not a remaining cloud point", name, b);
        end else begin
          seen[q.p]--;
          checks++;
          if (longint'(q.dmin) < refd[idx[q.p]]) begin
            failures++;
            $display("FAIL %s: leaf %0d point distance below the true one", name, b);
          end
        end
        inbox = 1;
        for (int i = 0; i < 3; i++)
          if ($signed(q.p[i]) < $signed(bk.lo[i]) || $signed(q.p[i]) > $signed(bk.hi[i])) inbox = 0;
        checks++;
        if (bk.height > height_t'(h)) begin failures++; $display("FAIL %s: leaf %0d too deep", name, b); end
        checks++;
        if (!inbox) begin failures++; $display("FAIL %s: leaf %0d point outside its box", name, b); end
      end
    end
    checks++;
    if (total != n) begin failures++; $display("FAIL %s: leaves hold %0d points of %0d", name, total, n); end
    $display("%s: N=%0d samples=%0d H=%0d leaves=%0d implicit=%0d merged=%0d processed=%0d split=%0d cycles=%0d",
             name, n, ns, h, nbk, n_imp - imp0, n_mrg - mrg0, n_proc - proc0, n_split - split0, cycles - cyc0);
  endtask

  initial begin
    num_points = '0; num_samples = '0; max_height = '0; seed = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_job("Small",  4000,   1000,          6);
    run_job("Medium", 16000,  4000,          7);
    run_job("Large",  120000, LARGE_SAMPLES, 9);
    checks++;
    if (n_imp == 0 || n_mrg == 0 || n_proc == 0 || n_mem_stall == 0) begin
      failures++; $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
