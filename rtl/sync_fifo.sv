// sync_fifo: synchronous first-in first-out queue of elements of type T.
//
// Used for the bucket processing request FIFO, the bucket processing
// response FIFO and the result buffer. Storage is an array (an SRAM for the
// result buffer). Show-ahead: rd_data is the oldest element whenever
// !empty, and rd_en pops it.
//
// Interface: wr_en when !full pushes wr_data; rd_en when !empty pops.
// Pushing into a full or popping an empty FIFO is a protocol error, checked
// by assertions. count is the number of elements held.
module sync_fifo #(
  parameter type T     = logic [31:0],
  parameter int  DEPTH = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_en,
  input  T                           wr_data,
  output logic                       full,
  input  logic                       rd_en,
  output T                           rd_data,
  output logic                       empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  T mem [DEPTH];
  logic [AW-1:0] wp, rp;

  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign empty   = (count == '0);
  assign rd_data = mem[rp];

  always_ff @(posedge clk) if (wr_en && !full) mem[wp] <= wr_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (wr_en && !full) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (rd_en && !empty) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (($clog2(DEPTH+1))'(wr_en && !full))
                     - (($clog2(DEPTH+1))'(rd_en && !empty));
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty));
endmodule
