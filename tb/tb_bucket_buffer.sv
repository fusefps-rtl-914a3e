// tb_bucket_buffer: writes random bucket records to random entries and reads
// them back against a model (one-clock read latency).
module tb_bucket_buffer;
  import fusefps_pkg::*;
  localparam int D = 32;
  logic clk = 0;
  always #5 clk = ~clk;
  logic re, we;
  logic [$clog2(D)-1:0] raddr, waddr;
  bucket_t rdata, wdata, exp_d;
  bucket_t model [D];
  logic    known [D];
  int checks = 0, failures = 0;

  bucket_buffer #(.DEPTH(D)) u_dut (.*);

  function automatic bucket_t rnd();
    bucket_t b;
    logic [$bits(bucket_t)-1:0] v;
    for (int i = 0; i < $bits(bucket_t); i += 32) v[i +: 32] = $urandom;
    b = bucket_t'(v);
    return b;
  endfunction

  initial begin
    logic rd;
    re = 0; we = 0; raddr = 0; waddr = 0; wdata = '0;
    foreach (known[i]) known[i] = 0;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      we = $urandom_range(1); re = $urandom_range(1);
      waddr = 5'($urandom); raddr = 5'($urandom);
      wdata = rnd();
      rd = re && known[raddr];
      exp_d = model[raddr];
      @(posedge clk); #1;
      if (we) begin model[waddr] = wdata; known[waddr] = 1; end
      if (rd) begin
        checks++;
        if (rdata != exp_d) begin failures++; $display("FAIL t=%0d", t); end
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
