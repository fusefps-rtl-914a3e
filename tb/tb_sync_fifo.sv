// tb_sync_fifo: random pushes and pops (never into a full or out of an empty
// FIFO) against a queue model; checks data order, full, empty and count.
module tb_sync_fifo;
  localparam int D = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en, rd_en, full, empty;
  logic [31:0] wr_data, rd_data;
  logic [$clog2(D+1)-1:0] count;
  logic [31:0] q [$];
  int checks = 0, failures = 0;

  sync_fifo #(.T(logic [31:0]), .DEPTH(D)) u_dut (.*);

  initial begin
    wr_en = 0; rd_en = 0; wr_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      checks++;
      if (int'(count) != q.size() || full != (q.size() == D) || empty != (q.size() == 0))
        begin failures++; $display("FAIL flags t=%0d count %0d model %0d", t, count, q.size()); end
      if (!empty) begin
        checks++;
        if (rd_data != q[0]) begin failures++; $display("FAIL data %h exp %h", rd_data, q[0]); end
      end
      wr_en = !full && ($urandom_range(2) != 0) && (t < 4900);
      rd_en = !empty && ($urandom_range(t % 200 < 100 ? 1 : 3) == 0);
      wr_data = $urandom;
      @(posedge clk); #1;
      if (rd_en) void'(q.pop_front());
      if (wr_en) q.push_back(wr_data);
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
