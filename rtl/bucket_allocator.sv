// bucket_allocator: hands out bucket-buffer entries for new KD-tree leaves.
//
// A split replaces its parent by the left child in the parent's entry and
// needs one new entry for the right child; leaves are never freed while a
// point cloud is sampled. The allocator therefore keeps the number of used
// entries: entries 0..count-1 are live, `alloc` returns entry `count` and
// advances it, and `init` restarts with one entry (the root bucket).
// The design names a bucket allocator but not its insides; this bump
// allocator is the simplest thing that does the job.
//
// Interface: alloc (only when !full) -> id valid in the same clock, count
// updates at the clock edge.
module bucket_allocator #(
  parameter int DEPTH = 512
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       init,
  input  logic                       alloc,
  output logic [$clog2(DEPTH)-1:0]   id,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic                       full
);
  assign id   = $clog2(DEPTH)'(count);
  assign full = (count == ($clog2(DEPTH+1))'(DEPTH));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              count <= '0;
    else if (init)           count <= ($clog2(DEPTH+1))'(1);
    else if (alloc && !full) count <= count + 1'b1;
  end

  a_no_alloc_when_full: assert property (@(posedge clk) disable iff (!rst_n) !(alloc && full && !init));
endmodule
