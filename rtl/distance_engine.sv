// distance_engine: LANES parallel 1-D systolic arrays of REFS distance units.
//
// Each clock the engine takes one point-buffer row (LANES points, with a
// lane mask) and sends each point down its own DU array; the i-th DU of every
// array applies reference point i. After REFS clocks the row leaves with
// every point's distance reduced to min(old distance, distance to each
// enabled reference). The design reads 4 points per clock into 4 DU arrays,
// and its overview draws 4 DUs per array; both are the defaults here
// (LANES and REFS in fusefps_pkg).
//
// Interface: in_valid/in_row/in_mask/in_last, out_* the same fields REFS
// clocks later. refs/nref (references 0..nref-1 enabled) must be held stable
// while a bucket streams through. No back-pressure: the consumer
// (KD-tree constructor) always accepts.
module distance_engine
  import fusefps_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  point_t [REFS-1:0]       refs,
  input  logic [NREF_W-1:0]       nref,
  input  logic                    in_valid,
  input  row_t                    in_row,
  input  logic [LANES-1:0]        in_mask,
  input  logic                    in_last,
  output logic                    out_valid,
  output row_t                    out_row,
  output logic [LANES-1:0]        out_mask,
  output logic                    out_last
);
  logic [REFS:0]   v   [LANES];
  pdist_t          pt  [LANES][REFS+1];
  logic [REFS-1:0] ref_en;

  always_comb
    for (int j = 0; j < REFS; j++) ref_en[j] = (j < int'(nref));

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    assign v[l][0]  = in_valid & in_mask[l];
    assign pt[l][0] = in_row[l];
    for (genvar j = 0; j < REFS; j++) begin : g_du
      distance_unit u_du (
        .clk, .rst_n,
        .in_valid (v[l][j]),   .in_pt (pt[l][j]),
        .ref_pt   (refs[j]),   .ref_en(ref_en[j]),
        .out_valid(v[l][j+1]), .out_pt(pt[l][j+1])
      );
    end
    assign out_row[l]  = pt[l][REFS];
    assign out_mask[l] = v[l][REFS];
  end

  // Row valid and last flag travel beside the arrays.
  logic [REFS-1:0] vrow, lrow;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vrow <= '0;
      lrow <= '0;
    end else begin
      vrow <= {vrow[REFS-2:0], in_valid};
      lrow <= {lrow[REFS-2:0], in_valid & in_last};
    end
  end
  assign out_valid = vrow[REFS-1];
  assign out_last  = lrow[REFS-1];
endmodule
