// tb_point_buffer: random reads and writes on both banks against a model;
// read data must be the row's content one clock after the read, with a
// same-clock write to the row not yet visible.
module tb_point_buffer;
  import fusefps_pkg::*;
  localparam int R = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [1:0] re, we;
  logic [1:0][$clog2(R)-1:0] raddr, waddr;
  row_t [1:0] rdata, wdata;
  row_t model [2][R];
  row_t exp_d [2];
  logic exp_v [2];
  int checks = 0, failures = 0;

  point_buffer #(.BANK_ROWS(R)) u_dut (.*);

  initial begin
    re = 0; we = 0; raddr = '0; waddr = '0; wdata = '0;
    // initialise both banks
    for (int r = 0; r < R; r++) begin
      @(negedge clk);
      we = 2'b11; waddr[0] = 4'(r); waddr[1] = 4'(r);
      for (int b = 0; b < 2; b++) begin
        for (int l = 0; l < LANES; l++) wdata[b][l] = pdist_t'({$urandom, $urandom, $urandom});
        model[b][r] = wdata[b];
      end
    end
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      for (int b = 0; b < 2; b++) begin
        re[b] = $urandom_range(1); we[b] = $urandom_range(1);
        raddr[b] = 4'($urandom); waddr[b] = 4'($urandom);
        for (int l = 0; l < LANES; l++) wdata[b][l] = pdist_t'({$urandom, $urandom, $urandom});
        exp_v[b] = re[b];
        exp_d[b] = model[b][raddr[b]];
      end
      @(posedge clk); #1;
      for (int b = 0; b < 2; b++) begin
        if (we[b]) model[b][waddr[b]] = wdata[b];
        if (exp_v[b]) begin
          checks++;
          if (rdata[b] != exp_d[b]) begin failures++; $display("FAIL bank %0d t %0d", b, t); end
        end
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
