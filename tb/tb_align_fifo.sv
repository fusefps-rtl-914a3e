// tb_align_fifo: pushes random numbers of points (0..LANES) per clock, each
// point tagged with a sequence number, then flushes. Checks that the rows
// come out full, in order, one clock after completion, that nothing is lost
// or duplicated, and that the flushed partial row carries the right count.
module tb_align_fifo;
  import fusefps_pkg::*;
  localparam int CW = $clog2(LANES+1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [CW-1:0] push_cnt, wr_cnt;
  lane_pts_t push_pts;
  logic flush, wr_valid;
  row_t wr_row;
  logic [$clog2(LANES)-1:0] level;
  int checks = 0, failures = 0;
  int sent = 0, recv = 0;

  align_fifo u_dut (.*);

  always @(posedge clk) if (rst_n && wr_valid) begin
    for (int i = 0; i < int'(wr_cnt); i++) begin
      checks++;
      if (int'(wr_row[i].dmin) != recv) begin failures++; $display("FAIL got %0d exp %0d", wr_row[i].dmin, recv); end
      recv++;
    end
  end

  initial begin
    push_cnt = 0; push_pts = '0; flush = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 50; run++) begin
      for (int t = 0; t < 40; t++) begin
        @(negedge clk);
        push_cnt = CW'($urandom_range(LANES));
        push_pts = '0;
        for (int i = 0; i < int'(push_cnt); i++) begin
          push_pts[i].dmin = dist_t'(sent);
          push_pts[i].p    = {3{coord_t'(sent)}};
          sent++;
        end
      end
      @(negedge clk); push_cnt = 0;
      checks++;
      @(negedge clk); flush = 1;
      @(negedge clk); flush = 0;
      @(negedge clk);
      checks++;
      if (recv != sent || level != 0) begin failures++; $display("FAIL run %0d sent %0d recv %0d", run, sent, recv); end
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
