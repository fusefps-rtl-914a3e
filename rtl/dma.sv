// dma: moves bucket points between off-chip memory and the point buffer and
// sequences one bucket-processing request through the datapath.
//
// A request names a bucket (first memory row, point count), the pending
// reference points and the split decision. The bucket is handled in chunks
// of at most BANK_ROWS rows, because the point buffer is smaller than a
// large bucket:
//   LOAD   read the chunk's rows from memory into bank 0;
//   PROC   the point reader streams bank 0 through the distance engine and
//          KD-tree constructor, one row per clock; the align FIFOs return
//          full rows, written by the left-child point writer into bank 0
//          (in place, behind the reader) and by the right-child writer into
//          bank 1;
//   FLUSH  (last chunk only) the align FIFOs emit their partial rows;
//   STORE  the left rows are written back to memory in place of the
//          parent's rows, the right rows to a fresh region taken from a
//          free-row pointer. The next bank row is read while the current
//          one is written, so a granted write moves one row per clock.
// After the last chunk it returns a response with both children's
// statistics. An unsplit bucket goes entirely to the "left" side, i.e. its
// points, with updated distances, are rewritten in place.
//
// The two banks, the reader and the two child writers follow the design's
// bucket-splitting example; chunking, the memory layout of the children and
// the free-row pointer are this implementation's own, since the design does
// not describe how the DMA places data in memory.
//
// Memory port: rd_req/rd_addr held until rd_gnt; rd_valid/rd_data return in
// request order, any latency. wr_req/wr_addr/wr_data held until wr_gnt.
// One memory word is one row of LANES point records.
module dma
  import fusefps_pkg::*;
#(
  parameter int BANK_ROWS = 128
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // set the free-row pointer (first memory row after the point cloud)
  input  logic                 init,
  input  ptr_t                 free_base,
  // request / response
  input  logic                 req_valid,
  input  req_t                 req,
  output logic                 req_pop,
  output logic                 resp_valid,
  output resp_t                resp,
  input  logic                 resp_full,
  // off-chip memory
  output logic                 rd_req,
  output ptr_t                 rd_addr,
  input  logic                 rd_gnt,
  input  logic                 rd_valid,
  input  row_t                 rd_data,
  output logic                 wr_req,
  output ptr_t                 wr_addr,
  output row_t                 wr_data,
  input  logic                 wr_gnt,
  // point buffer
  output logic [1:0]                        pb_re,
  output logic [1:0][$clog2(BANK_ROWS)-1:0] pb_raddr,
  input  row_t [1:0]                        pb_rdata,
  output logic [1:0]                        pb_we,
  output logic [1:0][$clog2(BANK_ROWS)-1:0] pb_waddr,
  output row_t [1:0]                        pb_wdata,
  // distance engine input and per-bucket constants
  output logic                 de_valid,
  output row_t                 de_row,
  output logic [LANES-1:0]     de_mask,
  output logic                 de_last,
  output point_t [REFS-1:0]    cur_refs,
  output logic [NREF_W-1:0]    cur_nref,
  // KD-tree constructor control and result
  output logic                 kc_clear,
  output logic                 kc_split_en,
  output logic [1:0]           kc_split_dim,
  output coord_t               kc_split_value,
  input  stats_t               kc_left,
  input  stats_t               kc_right,
  // align FIFOs
  input  logic                 afl_valid,
  input  row_t                 afl_row,
  input  logic                 afr_valid,
  input  row_t                 afr_row,
  output logic                 af_flush,
  output logic                 busy
);
  localparam int RAW = $clog2(BANK_ROWS);
  localparam int RCW = $clog2(BANK_ROWS+1);
  localparam int LAT = REFS + 4;   // last bank read -> last align-FIFO write

  typedef enum logic [3:0] {
    S_IDLE, S_LOAD, S_PROC, S_DRAIN, S_FLUSH, S_FLUSH_W,
    S_ST_RD, S_ST_WR, S_RESP
  } state_e;

  state_e   st;
  req_t     r;
  ptr_t     free_ptr, right_base;
  ptr_t     rows_total, chunk_base, lrows, rrows;
  logic [RCW-1:0] n, iss, got, rptr, lw, rw, si;
  logic     st_bank;          // 0: storing left rows, 1: right rows
  logic [3:0] cnt;
  logic     rd_q;
  logic [LANES-1:0] mask_q;
  logic     last_q;

  ptr_t chunk_left;
  logic [RCW-1:0] st_lim;     // rows to store from the current bank
  always_comb begin
    chunk_left = rows_total - chunk_base;
    st_lim     = st_bank ? rw : lw;
  end

  assign busy           = (st != S_IDLE);
  assign cur_refs       = r.refs;
  assign cur_nref       = r.nref;
  assign kc_split_en    = r.split_en;
  assign kc_split_dim   = r.split_dim;
  assign kc_split_value = r.split_value;

  // Point reader -> distance engine (bank read has one clock latency).
  assign de_valid = rd_q;
  assign de_row   = pb_rdata[0];
  assign de_mask  = mask_q;
  assign de_last  = last_q;

  // Memory read requests during LOAD.
  assign rd_req  = (st == S_LOAD) && (iss < n);
  assign rd_addr = r.ptr + chunk_base + ptr_t'(iss);

  // Memory writes during STORE.
  assign wr_req  = (st == S_ST_WR);
  assign wr_addr = st_bank ? (right_base + rrows + ptr_t'(si)) : (r.ptr + lrows + ptr_t'(si));
  assign wr_data = pb_rdata[st_bank];

  always_comb begin
    pb_re    = '0;
    pb_raddr = '0;
    pb_we    = '0;
    pb_waddr = '0;
    pb_wdata = '0;
    if (st == S_PROC) begin
      pb_re[0]    = 1'b1;
      pb_raddr[0] = RAW'(rptr);
    end
    if (st == S_ST_RD) begin
      pb_re[st_bank]    = 1'b1;
      pb_raddr[st_bank] = RAW'(si);
    end
    // while a row is being written, read the next one so that a granted
    // write is followed by the next write in the very next clock
    if (st == S_ST_WR && wr_gnt && (si + 1'b1 != st_lim)) begin
      pb_re[st_bank]    = 1'b1;
      pb_raddr[st_bank] = RAW'(si + 1'b1);
    end
    if (st == S_LOAD) begin
      pb_we[0]    = rd_valid;
      pb_waddr[0] = RAW'(got);
      pb_wdata[0] = rd_data;
    end else begin
      // left-child and right-child point writers
      pb_we[0]    = afl_valid;
      pb_waddr[0] = RAW'(lw);
      pb_wdata[0] = afl_row;
      pb_we[1]    = afr_valid;
      pb_waddr[1] = RAW'(rw);
      pb_wdata[1] = afr_row;
    end
  end

  assign req_pop    = (st == S_IDLE) && req_valid;
  assign kc_clear   = req_pop;
  assign af_flush   = (st == S_FLUSH);
  assign resp_valid = (st == S_RESP) && !resp_full;
  always_comb begin
    resp.id        = r.id;
    resp.split     = r.split_en && (kc_right.size != '0) && (kc_left.size != '0);
    resp.left_ptr  = r.ptr;
    resp.right_ptr = right_base;
    resp.left      = kc_left;
    resp.right     = kc_right;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; r <= '0; free_ptr <= '0; right_base <= '0;
      rows_total <= '0; chunk_base <= '0; lrows <= '0; rrows <= '0;
      n <= '0; iss <= '0; got <= '0; rptr <= '0; lw <= '0; rw <= '0; si <= '0;
      st_bank <= 1'b0; cnt <= '0; rd_q <= 1'b0; mask_q <= '0; last_q <= 1'b0;
    end else begin
      rd_q   <= 1'b0;
      last_q <= 1'b0;
      if (init) free_ptr <= free_base;
      // child point writers advance with every row the align FIFOs emit
      if (st != S_LOAD) begin
        if (afl_valid) lw <= lw + 1'b1;
        if (afr_valid) rw <= rw + 1'b1;
      end
      case (st)
        S_IDLE: if (req_valid) begin
          r          <= req;
          rows_total <= (ptr_t'(req.size) + ptr_t'(LANES-1)) / ptr_t'(LANES);
          chunk_base <= '0;
          lrows      <= '0;
          rrows      <= '0;
          right_base <= free_ptr;
          iss <= '0; got <= '0;
          st  <= S_LOAD;
          n   <= '0;
        end
        S_LOAD: begin
          if (n == '0) n <= (chunk_left > ptr_t'(BANK_ROWS)) ? RCW'(BANK_ROWS) : RCW'(chunk_left);
          if (rd_req && rd_gnt) iss <= iss + 1'b1;
          if (rd_valid) got <= got + 1'b1;
          if (n != '0 && got == n) begin
            st <= S_PROC; rptr <= '0; lw <= '0; rw <= '0;
          end
        end
        S_PROC: begin
          rd_q <= 1'b1;
          for (int l = 0; l < LANES; l++)
            mask_q[l] <= ((chunk_base + ptr_t'(rptr)) * ptr_t'(LANES) + ptr_t'(l)) < ptr_t'(r.size);
          last_q <= (chunk_base + ptr_t'(rptr) + 1 == rows_total);
          rptr <= rptr + 1'b1;
          if (rptr + 1'b1 == n) begin
            st  <= S_DRAIN;
            cnt <= 4'(LAT);
          end
        end
        S_DRAIN: begin
          cnt <= cnt - 1'b1;
          if (cnt == 0)
            st <= (chunk_base + ptr_t'(n) >= rows_total) ? S_FLUSH : S_ST_RD;
          if (cnt == 0) begin st_bank <= 1'b0; si <= '0; end
        end
        S_FLUSH:   begin st <= S_FLUSH_W; cnt <= 4'd2; end
        S_FLUSH_W: begin
          cnt <= cnt - 1'b1;
          if (cnt == 0) st <= S_ST_RD;
        end
        S_ST_RD: begin
          if (si == st_lim) begin
            if (!st_bank) begin
              st_bank <= 1'b1; si <= '0;
            end else begin
              lrows      <= lrows + ptr_t'(lw);
              rrows      <= rrows + ptr_t'(rw);
              chunk_base <= chunk_base + ptr_t'(n);
              iss <= '0; got <= '0; n <= '0;
              st_bank <= 1'b0;
              st <= (chunk_base + ptr_t'(n) >= rows_total) ? S_RESP : S_LOAD;
            end
          end else begin
            st <= S_ST_WR;
          end
        end
        S_ST_WR: if (wr_gnt) begin
          si <= si + 1'b1;
          if (si + 1'b1 == st_lim) st <= S_ST_RD;
        end
        S_RESP: if (!resp_full) begin
          if (resp.split) free_ptr <= free_ptr + rrows;
          st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  a_rd_stable: assert property (@(posedge clk) disable iff (!rst_n)
                 rd_req && !rd_gnt |=> rd_req && $stable(rd_addr));
  a_wr_stable: assert property (@(posedge clk) disable iff (!rst_n)
                 wr_req && !wr_gnt |=> wr_req && $stable(wr_addr) && $stable(wr_data));
endmodule
