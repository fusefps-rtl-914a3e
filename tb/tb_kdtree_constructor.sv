// tb_kdtree_constructor: random rows with random masks, split dimensions and
// split values (and unsplit runs). Checks, against a model written here, the
// packed left/right points and counts one clock after each row, and the
// final statistics of both children (count, sums, bounds, farthest point).
// Includes the split of the bucket-splitting example: x split at 30.
module tb_kdtree_constructor;
  import fusefps_pkg::*;
  localparam int CW = $clog2(LANES+1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, split_en, in_valid;
  logic [1:0] split_dim;
  coord_t split_value;
  row_t in_row;
  logic [LANES-1:0] in_mask;
  logic [CW-1:0] l_cnt, r_cnt;
  lane_pts_t l_pts, r_pts;
  stats_t left, right;
  int checks = 0, failures = 0;

  kdtree_constructor u_dut (.*);

  // model
  longint m_n [2], m_sum [2][3], m_lo [2][3], m_hi [2][3], m_fd [2];
  point_t m_fp [2];
  pdist_t el [$], er [$];

  task automatic m_clear();
    for (int s = 0; s < 2; s++) begin
      m_n[s] = 0; m_fd[s] = 0; m_fp[s] = '0;
      for (int i = 0; i < 3; i++) begin m_sum[s][i] = 0; m_lo[s][i] = 32767; m_hi[s][i] = -32768; end
    end
  endtask

  task automatic m_add(int s, pdist_t q);
    for (int i = 0; i < 3; i++) begin
      m_sum[s][i] += longint'(q.p[i]);
      if (longint'(q.p[i]) < m_lo[s][i]) m_lo[s][i] = longint'(q.p[i]);
      if (longint'(q.p[i]) > m_hi[s][i]) m_hi[s][i] = longint'(q.p[i]);
    end
    if (m_n[s] == 0 || longint'(q.dmin) > m_fd[s]) begin m_fd[s] = longint'(q.dmin); m_fp[s] = q.p; end
    m_n[s]++;
  endtask

  task automatic check_stats(int s, stats_t st);
    checks++;
    if (longint'(st.size) != m_n[s] || longint'(st.far_dist) != m_fd[s] || (m_n[s] > 0 && st.far_pt != m_fp[s]))
      begin failures++; $display("FAIL side %0d size %0d/%0d fd %0d/%0d", s, st.size, m_n[s], st.far_dist, m_fd[s]); end
    for (int i = 0; i < 3; i++) begin
      checks++;
      if (longint'(st.sum[i]) != m_sum[s][i] || longint'(st.lo[i]) != m_lo[s][i] || longint'(st.hi[i]) != m_hi[s][i])
        begin failures++; $display("FAIL side %0d dim %0d sum/bound", s, i); end
    end
  endtask

  task automatic drive_row(row_t row, logic [LANES-1:0] mask);
    @(negedge clk);
    in_valid = 1; in_row = row; in_mask = mask;
    el = {}; er = {};
    for (int l = 0; l < LANES; l++) if (mask[l]) begin
      if (!split_en || row[l].p[split_dim] < split_value) begin el.push_back(row[l]); m_add(0, row[l]); end
      else begin er.push_back(row[l]); m_add(1, row[l]); end
    end
    @(posedge clk); #1;
    in_valid = 0;
    checks++;
    if (int'(l_cnt) != el.size() || int'(r_cnt) != er.size()) begin
      failures++; $display("FAIL counts %0d %0d exp %0d %0d", l_cnt, r_cnt, el.size(), er.size());
    end else begin
      foreach (el[i]) if (l_pts[i] != el[i]) begin failures++; $display("FAIL left lane %0d", i); end
      foreach (er[i]) if (r_pts[i] != er[i]) begin failures++; $display("FAIL right lane %0d", i); end
    end
  endtask

  initial begin
    row_t row;
    clear = 0; split_en = 0; split_dim = 0; split_value = 0; in_valid = 0; in_row = '0; in_mask = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // the bucket-splitting example: x split at 30
    @(negedge clk); clear = 1; split_en = 1; split_dim = 0; split_value = 30; m_clear();
    @(negedge clk); clear = 0;
    row[0].p = {-16'sd2, 16'sd23, 16'sd47};  row[1].p = {-16'sd3, 16'sd12, 16'sd19};
    row[2].p = {-16'sd4, 16'sd10, -16'sd10}; row[3].p = {16'sd12, -16'sd17, 16'sd32};
    for (int l = 0; l < LANES; l++) row[l].dmin = dist_t'(100 + l);
    drive_row(row, '1);
    @(posedge clk); #1;
    checks++;
    if (left.size != 2 || right.size != 2 || left.far_pt != row[2].p || right.far_pt != row[3].p) begin
      failures++; $display("FAIL split example");
    end
    for (int run = 0; run < 60; run++) begin
      @(negedge clk);
      clear = 1; split_en = (run % 4 != 0); split_dim = 2'($urandom_range(2));
      split_value = coord_t'($signed($urandom_range(200)) - 100);
      m_clear();
      @(negedge clk); clear = 0;
      for (int r = 0; r < 20; r++) begin
        for (int l = 0; l < LANES; l++) begin
          for (int i = 0; i < 3; i++) row[l].p[i] = coord_t'($signed($urandom_range(300)) - 150);
          row[l].dmin = dist_t'($urandom_range(50));
        end
        drive_row(row, LANES'($urandom));
      end
      @(posedge clk); #1;
      check_stats(0, left);
      check_stats(1, right);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
