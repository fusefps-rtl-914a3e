// distance_unit: one distance unit (DU) of the distance engine.
//
// A DU computes f(p, q) = min(|p - q|^2, p.dmin) for a bucket point p and a
// reference point q, as in the design's distance engine. DUs are chained
// into a 1-D systolic array: each DU registers the point together with its
// updated distance and hands it to the next DU, which applies the next
// reference point. A DU whose reference is not enabled (fewer pending
// references than DUs) passes the point through unchanged.
//
// Interface: in_valid/in_pt enter, out_valid/out_pt leave one clock later
// (latency 1, one point per clock, no back-pressure). ref_pt/ref_en are held
// constant by the controller for the whole bucket. The squared Euclidean
// distance on integer coordinates is this implementation's choice; the
// design works on floats.
module distance_unit
  import fusefps_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  pdist_t in_pt,
  input  point_t ref_pt,
  input  logic   ref_en,
  output logic   out_valid,
  output pdist_t out_pt
);
  dist_t d;
  always_comb d = sqdist(in_pt.p, ref_pt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_pt    <= '0;
    end else begin
      out_valid   <= in_valid;
      out_pt.p    <= in_pt.p;
      out_pt.dmin <= (ref_en && d < in_pt.dmin) ? d : in_pt.dmin;
    end
  end
endmodule
