// tb_distance_unit: random points and references through one distance unit;
// the output must be min(old distance, squared distance) one clock later,
// or the old distance when the reference is disabled.
module tb_distance_unit;
  import fusefps_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, ref_en, out_valid;
  pdist_t in_pt, out_pt;
  point_t ref_pt;
  int checks = 0, failures = 0;

  distance_unit u_dut (.*);

  function automatic longint d2(point_t a, point_t b);
    longint s = 0;
    for (int i = 0; i < 3; i++) s += (longint'(a[i]) - longint'(b[i])) ** 2;
    return s;
  endfunction

  initial begin
    longint exp_d;
    pdist_t exp_p;
    logic   exp_v;
    in_valid = 0; in_pt = '0; ref_pt = '0; ref_en = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      in_valid = $urandom_range(1);
      ref_en   = ($urandom_range(3) != 0);
      for (int i = 0; i < 3; i++) begin
        in_pt.p[i] = coord_t'($urandom);
        ref_pt[i]  = coord_t'($urandom);
      end
      // extreme coordinates now and then
      if (t % 97 == 0) begin in_pt.p = {3{16'sh7fff}}; ref_pt = {3{16'sh8000}}; end
      in_pt.dmin = (t % 3 == 0) ? '1 : dist_t'({$urandom, $urandom});
      exp_d = d2(in_pt.p, ref_pt);
      exp_p.p = in_pt.p;
      exp_p.dmin = (ref_en && exp_d < longint'(in_pt.dmin)) ? dist_t'(exp_d) : in_pt.dmin;
      exp_v = in_valid;
      @(posedge clk); #1;
      checks++;
      if (out_valid !== exp_v || (exp_v && out_pt !== exp_p)) begin
        failures++;
        if (failures < 5) $display("FAIL t=%0d got %h exp %h", t, out_pt.dmin, exp_p.dmin);
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
