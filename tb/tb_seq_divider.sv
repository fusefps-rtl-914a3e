// tb_seq_divider: random signed dividends and unsigned divisors (plus edge
// cases); the quotient must be the ceiling of the exact quotient and must
// arrive NW+1 clocks after start.
module tb_seq_divider;
  localparam int NW = 40, DW = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done;
  logic signed [NW-1:0] num, quot;
  logic [DW-1:0] den;
  int checks = 0, failures = 0;

  seq_divider #(.NW(NW), .DW(DW)) u_dut (.*);

  function automatic longint ceil_div(longint a, longint b);
    longint q = a / b;            // truncates toward zero
    if (a % b != 0 && a > 0) q++;
    return q;
  endfunction

  initial begin
    longint a, b;
    int lat;
    start = 0; num = 0; den = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      case (t % 6)
        0: begin a = longint'($signed($urandom)) * 37; b = $urandom_range(100000) + 1; end
        1: begin a = -longint'($urandom_range(1000)); b = $urandom_range(7) + 1; end
        2: begin a = longint'($urandom_range(1000)); b = $urandom_range(7) + 1; end
        3: begin a = 0; b = $urandom_range(9) + 1; end
        4: begin a = longint'($signed($urandom)) * 64; b = 1; end
        default: begin a = longint'($signed($urandom_range(60000)) - 30000) * 3000; b = 3000; end
      endcase
      @(negedge clk);
      num = NW'(a); den = DW'(b); start = 1;
      @(negedge clk);
      start = 0; lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (longint'(quot) != ceil_div(a, b) || lat != NW + 1) begin
        failures++; $display("FAIL %0d/%0d got %0d exp %0d lat %0d", a, b, quot, ceil_div(a, b), lat);
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
