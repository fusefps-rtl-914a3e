// tb_distance_engine: streams random rows with random lane masks through the
// engine, one per clock, with 0..REFS enabled references per run. Each
// output row must appear exactly REFS clocks after its input, with every
// valid point's distance equal to the minimum over its old distance and the
// enabled references (computed here independently).
module tb_distance_engine;
  import fusefps_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  point_t [REFS-1:0] refs;
  logic [NREF_W-1:0] nref;
  logic in_valid, in_last, out_valid, out_last;
  row_t in_row, out_row;
  logic [LANES-1:0] in_mask, out_mask;
  int checks = 0, failures = 0;

  distance_engine u_dut (.*);

  function automatic longint d2(point_t a, point_t b);
    longint s = 0;
    for (int i = 0; i < 3; i++) s += (longint'(a[i]) - longint'(b[i])) ** 2;
    return s;
  endfunction

  typedef struct { int t; row_t row; logic [LANES-1:0] mask; logic last; } exp_t;
  exp_t q [$];
  int cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;

  // compare outputs
  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin failures++; $display("FAIL unexpected output"); end
      else begin
        e = q.pop_front();
        if (cyc - e.t != REFS) begin failures++; $display("FAIL latency %0d", cyc - e.t); end
        if (out_mask != e.mask || out_last != e.last) begin failures++; $display("FAIL mask/last"); end
        for (int l = 0; l < LANES; l++)
          if (e.mask[l] && out_row[l] != e.row[l]) begin
            failures++; $display("FAIL lane %0d dist %0d exp %0d", l, out_row[l].dmin, e.row[l].dmin);
          end
      end
    end else if (out_mask != '0) begin
      failures++; $display("FAIL mask without valid");
    end
  end

  initial begin
    in_valid = 0; in_last = 0; in_row = '0; in_mask = '0; refs = '0; nref = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 40; run++) begin
      @(negedge clk);
      nref = NREF_W'(run % (REFS + 1));
      for (int j = 0; j < REFS; j++)
        for (int i = 0; i < 3; i++) refs[j][i] = coord_t'($signed($urandom_range(2000)) - 1000);
      for (int r = 0; r < 30; r++) begin
        exp_t e;
        in_valid = ($urandom_range(3) != 0);
        in_mask  = LANES'($urandom);
        in_last  = (r == 29);
        for (int l = 0; l < LANES; l++) begin
          for (int i = 0; i < 3; i++) in_row[l].p[i] = coord_t'($signed($urandom_range(2000)) - 1000);
          in_row[l].dmin = ($urandom_range(1) != 0) ? '1 : dist_t'($urandom_range(3000000));
        end
        if (in_valid) begin
          e.t = cyc; e.mask = in_mask; e.last = in_last; e.row = in_row;
          for (int l = 0; l < LANES; l++)
            for (int j = 0; j < int'(nref); j++)
              if (d2(in_row[l].p, refs[j]) < longint'(e.row[l].dmin)) e.row[l].dmin = dist_t'(d2(in_row[l].p, refs[j]));
          q.push_back(e);
        end
        @(negedge clk);
      end
      in_valid = 0;
      repeat (REFS + 2) @(negedge clk);
    end
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d rows lost", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
