// bucket_buffer: the bucket buffer SRAM of the bucket manager.
//
// Holds one bucket_t record (bounding box, point pointer and count, farthest
// point and its distance, pending reference points, coordinate sums, height)
// for each of up to DEPTH KD-tree leaves. The design gives 512 bucket
// instances, the default. Written as an array; maps to an SRAM macro.
//
// Interface: re/raddr -> rdata one clock later (registered); we/waddr/wdata
// write at the clock edge; a same-row read and write return the old record.
module bucket_buffer
  import fusefps_pkg::*;
#(
  parameter int DEPTH = BUCKETS
) (
  input  logic                     clk,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output bucket_t                  rdata,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  bucket_t                  wdata
);
  bucket_t mem [DEPTH];
  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
    if (we) mem[waddr] <= wdata;
  end
endmodule
