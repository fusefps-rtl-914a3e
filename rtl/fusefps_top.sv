// fusefps_top: the FuseFPS accelerator, bucket-based farthest point sampling
// with the KD-tree built during sampling.
//
// Blocks and connections (as in the design's overview):
//   bucket_manager   (bucket buffer, allocator, traverser, farthest point
//                     selector) issues bucket processing requests
//   request FIFO  -> dma, which loads bucket rows from off-chip memory into
//                     point buffer bank 0 and streams them, LANES points per
//                     clock, through
//   distance_engine (LANES arrays of REFS distance units) ->
//   kdtree_constructor, which sends each point to align FIFO L or R and keeps
//                     both children's statistics ->
//   align FIFOs   -> point buffer bank 0 (left child) / bank 1 (right child)
//                     -> dma -> off-chip memory
//   dma           -> response FIFO -> bucket_manager
//   bucket_manager -> result buffer -> sampling points out.
//
// Off-chip memory is outside the design: the point cloud sits there as rows
// of LANES records {x, y, z, dmin}, starting at row 0, with dmin set to the
// all-ones value by the host. Memory rows from ceil(num_points/LANES) upward
// are used for right children, so the memory must hold a few times the
// cloud (see the README).
//
// Interface: start (one clock, when !busy) with num_points, num_samples,
// max_height (KD-tree height threshold) and seed (first sampling point).
// Sampling points leave on sample_valid/sample_pt/sample_ready in order,
// the seed first; done pulses once the last one is in the result buffer.
// ev_* pulse once per implicit / merged / processed / split bucket.
module fusefps_top
  import fusefps_pkg::*;
#(
  parameter int BANK_ROWS   = 128,  // rows per point-buffer bank (4 points each)
  parameter int RESULT_DEPTH = 64,  // result buffer entries
  parameter int REQ_DEPTH   = 2,    // request FIFO entries
  parameter int RESP_DEPTH  = 2     // response FIFO entries
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start,
  input  cnt_t    num_points,
  input  cnt_t    num_samples,
  input  height_t max_height,
  input  point_t  seed,
  output logic    busy,
  output logic    done,
  // sampling points
  output logic    sample_valid,
  output point_t  sample_pt,
  input  logic    sample_ready,
  // off-chip memory
  output logic    mem_rd_req,
  output ptr_t    mem_rd_addr,
  input  logic    mem_rd_gnt,
  input  logic    mem_rd_valid,
  input  row_t    mem_rd_data,
  output logic    mem_wr_req,
  output ptr_t    mem_wr_addr,
  output row_t    mem_wr_data,
  input  logic    mem_wr_gnt,
  // events
  output logic    ev_implicit,
  output logic    ev_merged,
  output logic    ev_process,
  output logic    ev_split
);
  localparam int RAW = $clog2(BANK_ROWS);
  localparam int CW  = $clog2(LANES+1);

  // ---- bucket manager and FIFOs --------------------------------------------
  logic   req_push, req_full, req_empty, req_pop;
  req_t   req_in, req_out;
  logic   resp_push, resp_full, resp_empty, resp_pop;
  resp_t  resp_in, resp_out;
  logic   res_push, res_full, res_empty;
  point_t res_pt;
  logic   dp_init, mgr_busy, dma_busy;
  ptr_t   free_base;

  bucket_manager u_mgr (
    .clk, .rst_n, .start, .num_points, .num_samples, .max_height, .seed,
    .busy(mgr_busy), .done,
    .req_push, .req(req_in), .req_full,
    .resp_empty, .resp(resp_out), .resp_pop,
    .res_push, .res_pt, .res_full,
    .dp_init, .free_base,
    .ev_implicit, .ev_merged, .ev_process, .ev_split
  );

  sync_fifo #(.T(req_t), .DEPTH(REQ_DEPTH)) u_req_fifo (
    .clk, .rst_n, .wr_en(req_push), .wr_data(req_in), .full(req_full),
    .rd_en(req_pop), .rd_data(req_out), .empty(req_empty), .count()
  );
  sync_fifo #(.T(resp_t), .DEPTH(RESP_DEPTH)) u_resp_fifo (
    .clk, .rst_n, .wr_en(resp_push), .wr_data(resp_in), .full(resp_full),
    .rd_en(resp_pop), .rd_data(resp_out), .empty(resp_empty), .count()
  );
  sync_fifo #(.T(point_t), .DEPTH(RESULT_DEPTH)) u_result (
    .clk, .rst_n, .wr_en(res_push), .wr_data(res_pt), .full(res_full),
    .rd_en(sample_valid && sample_ready), .rd_data(sample_pt), .empty(res_empty), .count()
  );
  assign sample_valid = !res_empty;
  assign busy = mgr_busy | dma_busy;

  // ---- datapath ------------------------------------------------------------
  logic [1:0]           pb_re, pb_we;
  logic [1:0][RAW-1:0]  pb_raddr, pb_waddr;
  row_t [1:0]           pb_rdata, pb_wdata;
  logic                 de_in_valid, de_in_last, de_out_valid, de_out_last;
  row_t                 de_in_row, de_out_row;
  logic [LANES-1:0]     de_in_mask, de_out_mask;
  point_t [REFS-1:0]    cur_refs;
  logic [NREF_W-1:0]    cur_nref;
  logic                 kc_clear, kc_split_en;
  logic [1:0]           kc_split_dim;
  coord_t               kc_split_value;
  stats_t               kc_left, kc_right;
  logic [CW-1:0]        l_cnt, r_cnt;
  lane_pts_t            l_pts, r_pts;
  logic                 afl_valid, afr_valid, af_flush;
  row_t                 afl_row, afr_row;

  dma #(.BANK_ROWS(BANK_ROWS)) u_dma (
    .clk, .rst_n, .init(dp_init), .free_base,
    .req_valid(!req_empty), .req(req_out), .req_pop,
    .resp_valid(resp_push), .resp(resp_in), .resp_full,
    .rd_req(mem_rd_req), .rd_addr(mem_rd_addr), .rd_gnt(mem_rd_gnt),
    .rd_valid(mem_rd_valid), .rd_data(mem_rd_data),
    .wr_req(mem_wr_req), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data), .wr_gnt(mem_wr_gnt),
    .pb_re, .pb_raddr, .pb_rdata, .pb_we, .pb_waddr, .pb_wdata,
    .de_valid(de_in_valid), .de_row(de_in_row), .de_mask(de_in_mask), .de_last(de_in_last),
    .cur_refs, .cur_nref,
    .kc_clear, .kc_split_en, .kc_split_dim, .kc_split_value, .kc_left, .kc_right,
    .afl_valid, .afl_row, .afr_valid, .afr_row, .af_flush, .busy(dma_busy)
  );

  point_buffer #(.BANK_ROWS(BANK_ROWS)) u_pb (
    .clk, .re(pb_re), .raddr(pb_raddr), .rdata(pb_rdata),
    .we(pb_we), .waddr(pb_waddr), .wdata(pb_wdata)
  );

  distance_engine u_de (
    .clk, .rst_n, .refs(cur_refs), .nref(cur_nref),
    .in_valid(de_in_valid), .in_row(de_in_row), .in_mask(de_in_mask), .in_last(de_in_last),
    .out_valid(de_out_valid), .out_row(de_out_row), .out_mask(de_out_mask), .out_last(de_out_last)
  );

  kdtree_constructor u_kc (
    .clk, .rst_n, .clear(kc_clear), .split_en(kc_split_en), .split_dim(kc_split_dim),
    .split_value(kc_split_value),
    .in_valid(de_out_valid), .in_row(de_out_row), .in_mask(de_out_mask),
    .l_cnt, .l_pts, .r_cnt, .r_pts, .left(kc_left), .right(kc_right)
  );

  align_fifo u_afl (
    .clk, .rst_n, .push_cnt(l_cnt), .push_pts(l_pts), .flush(af_flush),
    .wr_valid(afl_valid), .wr_row(afl_row), .wr_cnt(), .level()
  );
  align_fifo u_afr (
    .clk, .rst_n, .push_cnt(r_cnt), .push_pts(r_pts), .flush(af_flush),
    .wr_valid(afr_valid), .wr_row(afr_row), .wr_cnt(), .level()
  );

  // de_out_last marks the end of a chunk's stream; the DMA times the drain
  // itself, so the flag is only checked here.
  a_last_valid: assert property (@(posedge clk) disable iff (!rst_n) de_out_last |-> de_out_valid);
endmodule
