// bucket_manager: the controller of the accelerator.
//
// It owns the bucket buffer, the bucket allocator, the bucket traverser and
// the farthest point selector, and runs the sampling loop:
//   1. INIT   write the root bucket (the whole cloud, statistics unknown) into
//             entry 0, restart the allocator and the DMA's free-row pointer;
//             the first sampling point is the seed point given by the host.
//   2. EMIT   write the current sampling point to the result buffer; stop
//             after num_samples points.
//   3. TRAV   clear the selector and let the traverser visit every bucket
//             that was live at the start of the iteration with the current
//             sampling point. Buckets it sends for processing come back
//             through the response FIFO: the manager writes the left child
//             (or the updated bucket) into the parent's entry, allocates an
//             entry for the right child, clears their reference buffers and
//             reports both children's farthest points to the selector.
//   4. when the traverser is done, the selector's best point becomes the
//      next sampling point; back to 2.
// Children created in an iteration are not visited again in it: their
// distances already include the iteration's sampling point.
//
// Interface: start (when idle) with num_points, num_samples (>= 1),
// max_height (the KD-tree height threshold) and seed. busy stays high until
// the last sample is in the result buffer, then done pulses. ev_* pulse once
// per implicit, merged, processed and split bucket.
module bucket_manager
  import fusefps_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  cnt_t       num_points,
  input  cnt_t       num_samples,
  input  height_t    max_height,
  input  point_t     seed,
  output logic       busy,
  output logic       done,
  // request FIFO (write side)
  output logic       req_push,
  output req_t       req,
  input  logic       req_full,
  // response FIFO (read side)
  input  logic       resp_empty,
  input  resp_t      resp,
  output logic       resp_pop,
  // result buffer (write side)
  output logic       res_push,
  output point_t     res_pt,
  input  logic       res_full,
  // datapath initialisation
  output logic       dp_init,
  output ptr_t       free_base,
  // events
  output logic       ev_implicit,
  output logic       ev_merged,
  output logic       ev_process,
  output logic       ev_split
);
  typedef enum logic [2:0] { M_IDLE, M_INIT, M_EMIT, M_TSTART, M_TWAIT, M_DONE } mstate_e;
  mstate_e st;
  point_t  s;
  cnt_t    cnt, nsamp;

  // ---- sub-blocks ---------------------------------------------------------
  logic    bb_re, t_we, m_we, bb_we;
  bid_t    bb_raddr, t_waddr, m_waddr, bb_waddr;
  bucket_t bb_rdata, t_wdata, m_wdata, bb_wdata;

  bucket_buffer #(.DEPTH(BUCKETS)) u_bb (
    .clk, .re(bb_re), .raddr(bb_raddr), .rdata(bb_rdata),
    .we(bb_we), .waddr(bb_waddr), .wdata(bb_wdata)
  );
  assign bb_we    = m_we | t_we;
  assign bb_waddr = m_we ? m_waddr : t_waddr;
  assign bb_wdata = m_we ? m_wdata : t_wdata;

  logic a_init, a_alloc, a_full;
  bid_t a_id;
  logic [BID_W:0] a_count;
  bucket_allocator #(.DEPTH(BUCKETS)) u_alloc (
    .clk, .rst_n, .init(a_init), .alloc(a_alloc), .id(a_id), .count(a_count), .full(a_full)
  );

  logic t_start, t_done, t_cand, proc_done;
  point_t t_cand_pt;
  dist_t  t_cand_dist;
  bucket_traverser u_trav (
    .clk, .rst_n, .start(t_start), .s(s), .nb(a_count), .max_height(max_height),
    .alloc_full(a_full),
    .bb_re(bb_re), .bb_raddr(bb_raddr), .bb_rdata(bb_rdata),
    .bb_we(t_we), .bb_waddr(t_waddr), .bb_wdata(t_wdata),
    .req_push(req_push), .req(req), .req_full(req_full), .proc_done(proc_done),
    .cand_valid(t_cand), .cand_pt(t_cand_pt), .cand_dist(t_cand_dist),
    .done(t_done), .ev_implicit(ev_implicit), .ev_merged(ev_merged), .ev_process(ev_process)
  );

  logic         sel_clear, best_valid;
  logic [1:0]   sel_v;
  point_t [1:0] sel_p;
  dist_t  [1:0] sel_d;
  point_t       best_pt;
  dist_t        best_dist;
  farthest_point_selector u_sel (
    .clk, .rst_n, .clear(sel_clear), .cand_valid(sel_v), .cand_pt(sel_p), .cand_dist(sel_d),
    .best_valid(best_valid), .best_pt(best_pt), .best_dist(best_dist)
  );

  // ---- response write-back -------------------------------------------------
  function automatic bucket_t child(stats_t c, ptr_t p, height_t h);
    bucket_t e;
    e.lo = c.lo; e.hi = c.hi; e.sum = c.sum; e.size = c.size;
    e.far_pt = c.far_pt; e.far_dist = c.far_dist;
    e.ptr = p; e.height = h; e.refs = '0; e.nref = '0; e.stats_valid = 1'b1;
    return e;
  endfunction

  logic    rs2, rs2_split;
  bid_t    rs2_id;
  bucket_t rs2_entry;
  height_t par_height;
  bucket_t root;

  always_comb begin
    root = '0;
    root.size = num_points;
    for (int i = 0; i < 3; i++) begin
      root.lo[i] = '0; root.hi[i] = '0;
    end
  end

  // Height of the parent: still in the bucket buffer's read register,
  // because the traverser does not read again while it waits.
  assign par_height = bb_rdata.height;

  always_comb begin
    m_we = 1'b0; m_waddr = '0; m_wdata = '0;
    sel_v = '0; sel_p = '0; sel_d = '0;
    a_alloc = 1'b0; resp_pop = 1'b0;
    ev_split = 1'b0;
    if (st == M_INIT) begin
      m_we = 1'b1; m_waddr = '0; m_wdata = root;
    end else if (st == M_TWAIT && !rs2 && !resp_empty) begin
      resp_pop = 1'b1;
      m_we     = 1'b1;
      m_waddr  = resp.id;
      m_wdata  = child(resp.left, resp.left_ptr,
                       resp.split ? par_height + 1'b1 : par_height);
      sel_v[0] = 1'b1; sel_p[0] = resp.left.far_pt;  sel_d[0] = resp.left.far_dist;
      if (resp.split) begin
        sel_v[1] = 1'b1; sel_p[1] = resp.right.far_pt; sel_d[1] = resp.right.far_dist;
        a_alloc  = 1'b1;
        ev_split = 1'b1;
      end
    end else if (st == M_TWAIT && rs2 && rs2_split) begin
      m_we = 1'b1; m_waddr = rs2_id; m_wdata = rs2_entry;
    end else if (t_cand) begin
      sel_v[0] = 1'b1; sel_p[0] = t_cand_pt; sel_d[0] = t_cand_dist;
    end
  end
  assign proc_done = (st == M_TWAIT) && rs2;

  assign a_init    = (st == M_INIT);
  assign dp_init   = (st == M_INIT);
  assign free_base = (ptr_t'(num_points) + ptr_t'(LANES-1)) / ptr_t'(LANES);
  assign t_start   = (st == M_TSTART);
  assign sel_clear = (st == M_TSTART);
  assign res_push  = (st == M_EMIT) && !res_full;
  assign res_pt    = s;
  assign busy      = (st != M_IDLE);
  assign done      = (st == M_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= M_IDLE; s <= '0; cnt <= '0; nsamp <= '0;
      rs2 <= 1'b0; rs2_split <= 1'b0; rs2_id <= '0; rs2_entry <= '0;
    end else begin
      rs2 <= 1'b0;
      case (st)
        M_IDLE: if (start) begin
          s <= seed; cnt <= '0; nsamp <= num_samples;
          st <= M_INIT;
        end
        M_INIT: st <= M_EMIT;
        M_EMIT: if (!res_full) begin
          cnt <= cnt + 1'b1;
          st  <= (cnt + 1'b1 >= nsamp) ? M_DONE : M_TSTART;
        end
        M_TSTART: st <= M_TWAIT;
        M_TWAIT: begin
          if (!rs2 && !resp_empty) begin
            rs2       <= 1'b1;
            rs2_split <= resp.split;
            rs2_id    <= a_id;
            rs2_entry <= child(resp.right, resp.right_ptr, par_height + 1'b1);
          end
          if (t_done) begin
            s  <= best_pt;
            st <= M_EMIT;
          end
        end
        M_DONE: st <= M_IDLE;
        default: st <= M_IDLE;
      endcase
    end
  end

  a_one_writer: assert property (@(posedge clk) disable iff (!rst_n) !(m_we && t_we));
  a_best_known: assert property (@(posedge clk) disable iff (!rst_n) t_done |-> best_valid);
endmodule
