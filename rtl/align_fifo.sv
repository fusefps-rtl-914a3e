// align_fifo: packs a stream of 0..LANES points per clock into full rows.
//
// The KD-tree constructor sends each child a variable number of points per
// clock; the point buffer is written a whole row (LANES points) at a time.
// The align FIFO appends incoming points behind the ones it holds and emits
// a row whenever LANES points are present. At the end of a bucket `flush`
// emits the remaining 1..LANES-1 points as a partial row (the unused lanes
// are zero; wr_cnt tells how many are valid).
//
// Interface: push_cnt/push_pts (points packed towards lane 0) are accepted
// every clock. wr_valid/wr_row/wr_cnt are registered: a row appears the clock
// after the point that completed it. flush must be given only when no points
// are pushed in the same clock. Capacity 2*LANES-1 points never overflows
// because at most one row leaves per clock and at most one row enters.
module align_fifo
  import fusefps_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [$clog2(LANES+1)-1:0]  push_cnt,
  input  lane_pts_t                   push_pts,
  input  logic                        flush,
  output logic                        wr_valid,
  output row_t                        wr_row,
  output logic [$clog2(LANES+1)-1:0]  wr_cnt,
  output logic [$clog2(LANES)-1:0]    level     // points held
);
  localparam int CW = $clog2(LANES+1);
  localparam int LW = $clog2(LANES);

  pdist_t [LANES-1:0]   hold;
  pdist_t [2*LANES-1:0] all;
  int unsigned          tot;

  always_comb begin
    all = '0;
    for (int i = 0; i < LANES; i++) all[i] = hold[i];
    for (int i = 0; i < LANES; i++)
      if (i < int'(push_cnt)) all[int'(level) + i] = push_pts[i];
    tot = int'(level) + int'(push_cnt);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold <= '0; level <= '0;
      wr_valid <= 1'b0; wr_row <= '0; wr_cnt <= '0;
    end else begin
      wr_valid <= 1'b0;
      if (tot >= LANES) begin
        wr_valid <= 1'b1;
        wr_cnt   <= CW'(LANES);
        for (int i = 0; i < LANES; i++) wr_row[i] <= all[i];
        for (int i = 0; i < LANES; i++) hold[i]   <= all[i + LANES];
        level <= LW'(tot - LANES);
      end else if (flush && tot > 0) begin
        wr_valid <= 1'b1;
        wr_cnt   <= CW'(tot);
        for (int i = 0; i < LANES; i++) wr_row[i] <= (i < int'(tot)) ? all[i] : '0;
        hold  <= '0;
        level <= '0;
      end else begin
        for (int i = 0; i < LANES; i++) hold[i] <= all[i];
        level <= LW'(tot);
      end
    end
  end
endmodule
