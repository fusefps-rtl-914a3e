// tb_farthest_point_selector: random candidate streams on both ports with
// many equal distances; after each stream the selector must hold the first
// candidate (port 0 before port 1 within a clock) of largest distance.
module tb_farthest_point_selector;
  import fusefps_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, best_valid;
  logic [1:0] cand_valid;
  point_t [1:0] cand_pt;
  dist_t [1:0] cand_dist;
  point_t best_pt;
  dist_t best_dist;
  int checks = 0, failures = 0;

  farthest_point_selector u_dut (.*);

  initial begin
    longint md;
    point_t mp;
    logic mv;
    clear = 0; cand_valid = 0; cand_pt = '0; cand_dist = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 200; run++) begin
      @(negedge clk); clear = 1; cand_valid = 0;
      mv = 0; md = -1; mp = '0;
      @(negedge clk); clear = 0;
      for (int t = 0; t < 20; t++) begin
        for (int i = 0; i < 2; i++) begin
          cand_valid[i] = $urandom_range(1);
          cand_dist[i]  = dist_t'($urandom_range(run % 2 ? 5 : 100000));
          for (int k = 0; k < 3; k++) cand_pt[i][k] = coord_t'($urandom);
          if (cand_valid[i] && longint'(cand_dist[i]) > md) begin mv = 1; md = longint'(cand_dist[i]); mp = cand_pt[i]; end
        end
        @(negedge clk);
      end
      cand_valid = 0;
      @(negedge clk);
      checks++;
      if (best_valid != mv || (mv && (best_pt != mp || longint'(best_dist) != md))) begin
        failures++; $display("FAIL run %0d best %0d exp %0d", run, best_dist, md);
      end
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
