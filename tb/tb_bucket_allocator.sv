// tb_bucket_allocator: after init the root holds entry 0; every alloc must
// return the next unused entry until the buffer is full; init restarts.
module tb_bucket_allocator;
  localparam int D = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic init, alloc, full;
  logic [$clog2(D)-1:0] id;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;

  bucket_allocator #(.DEPTH(D)) u_dut (.*);

  initial begin
    init = 0; alloc = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      @(negedge clk); init = 1;
      @(negedge clk); init = 0;
      checks++;
      if (count != 1 || full) begin failures++; $display("FAIL after init count %0d", count); end
      for (int k = 1; k < D; k++) begin
        repeat ($urandom_range(2)) @(negedge clk);
        checks++;
        if (int'(id) != k || full) begin failures++; $display("FAIL alloc %0d got id %0d", k, id); end
        alloc = 1;
        @(negedge clk); alloc = 0;
      end
      checks++;
      if (!full || int'(count) != D) begin failures++; $display("FAIL not full, count %0d", count); end
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
