// point_buffer: the on-chip point buffer, two SRAM banks of BANK_ROWS rows.
//
// Each bank has one read port and one write port, as in the design. A row
// holds LANES point records, so one read delivers the LANES points the
// distance engine consumes per clock. While a bucket is split, bank 0 holds
// the parent's points and receives the left child in place, and bank 1
// receives the right child.
//
// Interface per bank b: re[b]/raddr[b] -> rdata[b] one clock later
// (synchronous read, registered output); we[b]/waddr[b]/wdata[b] write at the
// clock edge. A read and a write of the same row in the same clock return the
// old data. The banks are written as arrays and map to SRAM macros.
// Default size: 2 banks x 128 rows x 4 points = 1024 points, the capacity the
// design gives for its point buffer.
module point_buffer
  import fusefps_pkg::*;
#(
  parameter int BANK_ROWS = 128
) (
  input  logic                         clk,
  input  logic [1:0]                   re,
  input  logic [1:0][$clog2(BANK_ROWS)-1:0] raddr,
  output row_t [1:0]                   rdata,
  input  logic [1:0]                   we,
  input  logic [1:0][$clog2(BANK_ROWS)-1:0] waddr,
  input  row_t [1:0]                   wdata
);
  row_t bank0 [BANK_ROWS];
  row_t bank1 [BANK_ROWS];

  always_ff @(posedge clk) begin
    if (re[0]) rdata[0] <= bank0[raddr[0]];
    if (re[1]) rdata[1] <= bank1[raddr[1]];
    if (we[0]) bank0[waddr[0]] <= wdata[0];
    if (we[1]) bank1[waddr[1]] <= wdata[1];
  end
endmodule
