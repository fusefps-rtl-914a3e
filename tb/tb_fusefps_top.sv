// tb_fusefps_top: end-to-end test of the accelerator at its default sizes.
//
// A random cloud of NPTS points is placed in a behavioural off-chip memory
// (random grant stalls, 3-clock read latency). The accelerator samples
// NSAMP points with KD-tree height threshold HEIGHT. The testbench keeps
// its own brute-force farthest point sampling state: for every sampling
// point it checks that the point belongs to the cloud and that its distance
// to the points sampled before it is the largest such distance (any point
// achieving the maximum is accepted, so ties need not match). It also
// checks the number of samples and that every mechanism happened: implicit,
// merged, processed and split buckets, processing without a split (height
// threshold reached), buckets larger than the point buffer (chunked),
// memory stalls and result back-pressure. At the end it reads the finished
// KD-tree out of the bucket buffer and checks each leaf's points in memory
// against the cloud, the leaf's bounding box and the reference distances.
module tb_fusefps_top;
  import fusefps_pkg::*;

  localparam int NPTS   = 1200;
  localparam int NSAMP  = 300;
  localparam int HEIGHT = 4;
  localparam int MEMROWS = 4096;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  logic busy, done, sample_valid, sample_ready;
  point_t sample_pt, seed;
  logic mem_rd_req, mem_rd_gnt, mem_rd_valid, mem_wr_req, mem_wr_gnt;
  ptr_t mem_rd_addr, mem_wr_addr;
  row_t mem_rd_data, mem_wr_data;
  logic ev_implicit, ev_merged, ev_process, ev_split;

  fusefps_top u_dut (
    .clk, .rst_n, .start, .num_points(cnt_t'(NPTS)), .num_samples(cnt_t'(NSAMP)),
    .max_height(height_t'(HEIGHT)), .seed, .busy, .done,
    .sample_valid, .sample_pt, .sample_ready,
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
    mem_rd_gnt <= ($urandom_range(3) != 0);
    mem_wr_gnt <= ($urandom_range(3) != 0);
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
  point_t pts [NPTS];
  longint refd [NPTS];
  int checks = 0, failures = 0;
  int nsamples = 0, n_backpressure = 0;
  int n_imp = 0, n_mrg = 0, n_proc = 0, n_split = 0, n_nosplit = 0, n_chunked = 0;
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
    if (u_dut.req_pop && !u_dut.req_out.split_en && nsamples > 1) n_nosplit++;
    if (u_dut.req_pop && u_dut.req_out.size > cnt_t'(LANES * 128)) n_chunked++;
    if (sample_valid && !sample_ready) n_backpressure++;
    if (busy) cycles++;
  end

  // consume and check sampling points
  always @(posedge clk) begin
    sample_ready <= ($urandom_range(4) != 0);
    if (sample_valid && sample_ready && rst_n) begin
      longint best = -1;
      int hit = -1;
      foreach (refd[j]) if (refd[j] > best) best = refd[j];
      foreach (pts[j]) if (pts[j] == sample_pt && refd[j] == best) hit = j;
      checks++;
      if (nsamples == 0) begin
        if (sample_pt != seed) begin
          failures++; $display("FAIL first sample is not the seed");
        end
      end else if (hit < 0) begin
        failures++;
        $display("FAIL sample %0d (%0d,%0d,%0d) is not a farthest point (max dist %0d)",
                 nsamples, sample_pt[0], sample_pt[1], sample_pt[2], best);
      end
      foreach (pts[j]) if (d2(pts[j], sample_pt) < refd[j]) refd[j] = d2(pts[j], sample_pt);
      nsamples++;
    end
  end

  initial begin
    for (int i = 0; i < NPTS; i++) begin
      for (int k = 0; k < 3; k++) pts[i][k] = coord_t'($signed($urandom_range(4000)) - 2000);
      refd[i] = 64'h7fff_ffff_ffff_ffff;
    end
    for (int r = 0; r < MEMROWS; r++) mem[r] = '0;
    for (int i = 0; i < NPTS; i++) begin
      mem[i / LANES][i % LANES].p    = pts[i];
      mem[i / LANES][i % LANES].dmin = '1;
    end
    seed = pts[0];
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    wait (done);
    wait (nsamples == NSAMP);
    repeat (10) @(posedge clk);
    checks++;
    if (nsamples != NSAMP) begin failures++; $display("FAIL %0d samples", nsamples); end
    checks++;
    if (sample_valid) begin failures++; $display("FAIL extra sample"); end
    // every mechanism must have happened
    checks += 8;
    if (n_imp == 0)          begin failures++; $display("FAIL no implicit bucket"); end
    if (n_mrg == 0)          begin failures++; $display("FAIL no merged bucket"); end
    if (n_proc == 0)         begin failures++; $display("FAIL no processed bucket"); end
    if (n_split == 0)        begin failures++; $display("FAIL no split"); end
    if (n_nosplit == 0)      begin failures++; $display("FAIL no unsplit processing"); end
    if (n_chunked == 0)      begin failures++; $display("FAIL no chunked bucket"); end
    if (n_mem_stall == 0)    begin failures++; $display("FAIL no memory stall"); end
    if (n_backpressure == 0) begin failures++; $display("FAIL no result back-pressure"); end
    checks++;
    if (n_split != (1 << HEIGHT) - 1) begin
      failures++; $display("FAIL %0d splits, a full tree of height %0d has %0d", n_split, HEIGHT, (1 << HEIGHT) - 1);
    end
    // the finished KD-tree: every leaf's points lie inside its bounding box,
    // the leaves hold every cloud point exactly once, and no stored distance
    // is below the true distance to the sampled set
    begin
      int unsigned seen [bit [3*COORD_W-1:0]];
      int unsigned total;
      int unsigned nbk;
      total = 0;
      nbk = int'(u_dut.u_mgr.u_alloc.count);
      for (int i = 0; i < NPTS; i++) begin
        if (seen.exists(pts[i])) seen[pts[i]]++; else seen[pts[i]] = 1;
      end
      for (int b = 0; b < nbk; b++) begin
        bucket_t bk;
        bk = u_dut.u_mgr.u_bb.mem[b];
        total += bk.size;
        for (int k = 0; k < int'(bk.size); k++) begin
          pdist_t q;
          int j;
          q = mem[int'(bk.ptr) + k / LANES][k % LANES];
          checks++;
          if (!seen.exists(q.p) || seen[q.p] == 0) begin
            failures++;
            $display("FAIL bucket %0d holds (%0d,%0d,%0d), not a remaining cloud point", b,
                     $signed(q.p[0]), $signed(q.p[1]), $signed(q.p[2]));
          end else seen[q.p]--;
          checks++;
          for (int i = 0; i < 3; i++)
            if ($signed(q.p[i]) < $signed(bk.lo[i]) || $signed(q.p[i]) > $signed(bk.hi[i])) begin
              failures++;
              $display("FAIL bucket %0d point outside its bounding box", b);
              break;
            end
          j = -1;
          foreach (pts[m]) if (pts[m] == q.p) j = m;
          checks++;
          if (j >= 0 && longint'(q.dmin) < refd[j]) begin
            failures++;
            $display("FAIL bucket %0d point distance %0d below true %0d", b, q.dmin, refd[j]);
          end
        end
      end
      checks++;
      if (total != NPTS) begin failures++; $display("FAIL leaves hold %0d points, cloud has %0d", total, NPTS); end
    end
    $display("implicit=%0d merged=%0d processed=%0d split=%0d unsplit=%0d chunked=%0d mem_stalls=%0d backpressure=%0d cycles=%0d",
             n_imp, n_mrg, n_proc, n_split, n_nosplit, n_chunked, n_mem_stall, n_backpressure, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
