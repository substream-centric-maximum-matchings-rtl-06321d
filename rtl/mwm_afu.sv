// mwm_afu: the accelerator functional unit that computes, in one pass over a
// weighted graph, the L maximal matchings C_0..C_{L-1} of the substreams
// E_i = { e : w(e) >= (1+eps)^i }. The host merges them greedily (highest i
// first) into a (4+eps)-approximate maximum weighted matching.
//
// Part 1 - edge reordering. pointer_requester/pointer_receiver read the row
// index (pointer_data) and spread the row pointers over four queues;
// edge_requester picks rows to fetch so the merger's K starting queues stay
// balanced; edge_receiver unwraps graph_data chunks into the starting queues;
// merger merges the K rows of each epoch into (epoch, v, u) order.
// Part 2 - matching. mb_requester/mb_receiver fetch each distinct chunk of
// v-matching bits once per epoch; edge_processor runs the 8-stage pipeline
// against the double-buffered u-bit store (ubits_dbuf); bram_mb_requester and
// bram_mb_receiver prefetch the next epoch's u-bits; mb_writer and
// edge_writer write bits and matched edges back; ack_receiver counts write
// acknowledgements; state_controller sequences the epochs. requester and
// writer arbitrate the read and write ports.
//
// Interface: all addresses are 58-bit addresses of 512-bit chunks.
// ptr_base: pointer_data; graph_base: graph_data (pointer chunk IDs are
// relative to it); mb_base: matching-bit array, ceil(n/(512/L)) chunks, zeroed
// by the host; out_base/out_stride: stream i starts at out_base + i*out_stride.
// Raise start for one cycle; done rises when all results are in memory.
// Memory side: rd_req_* (valid/ready, address, tag) and rd_rsp_* (valid,
// data, tag; no back-pressure, same-tag responses in request order);
// wr_req_* (valid/ready, address, data, tag) and wr_ack_* (valid, tag).
// Reset before each run. The block structure follows the paper's module
// diagram; field layouts, tags and queue depths are this design's.
module mwm_afu
  import mwm_pkg::*;
#(
  parameter int          K       = 32,
  parameter int          L       = 64,
  parameter int unsigned EPS_Q16 = 6554
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  addr_t       ptr_base,
  input  addr_t       graph_base,
  input  addr_t       mb_base,
  input  addr_t       out_base,
  input  addr_t       out_stride,
  input  logic [31:0] num_vertices,
  input  logic [31:0] num_edges,
  output logic        done,
  output logic        count_error,
  // read port
  output logic        rd_req_valid,
  output addr_t       rd_req_addr,
  output tag_t        rd_req_tag,
  input  logic        rd_req_ready,
  input  logic        rd_rsp_valid,
  input  chunk_t      rd_rsp_data,
  input  tag_t        rd_rsp_tag,
  // write port
  output logic        wr_req_valid,
  output addr_t       wr_req_addr,
  output chunk_t      wr_req_data,
  output tag_t        wr_req_tag,
  input  logic        wr_req_ready,
  input  logic        wr_ack_valid,
  input  tag_t        wr_ack_tag,
  // event counters
  output logic [31:0] stat_edges,
  output logic [31:0] stat_matched,
  output logic [31:0] stat_forward,
  output logic [31:0] stat_vcur,
  output logic [31:0] stat_vnext,
  output logic [31:0] stat_mode1,
  output logic [31:0] stat_mode2,
  output logic [31:0] stat_dropped,
  output logic [31:0] stat_mb_reqs,
  output logic [31:0] stat_mb_shared,
  output logic [31:0] stat_epochs
);
  localparam int SQ_DEPTH = 32;
  localparam int WQ_DEPTH = 16;

  // ---------------- requester ports ----------------
  logic [3:0] rq_valid, rq_ready;
  addr_t      rq_addr [4];
  requester #(.QDEPTH(4)) u_requester (
    .clk, .rst_n, .in_valid(rq_valid), .in_addr(rq_addr), .in_ready(rq_ready),
    .rd_req_valid, .rd_req_addr, .rd_req_tag, .rd_req_ready);

  // ---------------- Part 1 ----------------
  logic ptr_consumed, all_rows, all_ptr_req;
  pointer_requester #(.CREDITS(4)) u_ptr_req (
    .clk, .rst_n, .start, .ptr_base, .num_vertices,
    .req_valid(rq_valid[3]), .req_addr(rq_addr[3]), .req_ready(rq_ready[3]),
    .chunk_consumed(ptr_consumed), .all_requested(all_ptr_req));

  logic [3:0] pq_valid, pq_pop;
  uptr_t      pq_data [4];
  pointer_receiver #(.K(K), .CREDITS(4), .QDEPTH(8)) u_ptr_rcv (
    .clk, .rst_n, .start, .num_vertices,
    .rsp_valid(rd_rsp_valid), .rsp_data(rd_rsp_data), .rsp_tag(rd_rsp_tag),
    .chunk_consumed(ptr_consumed), .q_valid(pq_valid), .q_data(pq_data), .q_pop(pq_pop),
    .all_rows);

  logic [15:0]  sq_count [K];
  logic [K-1:0] sq_push, sq_full;
  edge_t        sq_edge;
  logic         info_valid, info_ready, edge_consumed;
  logic [1:0]   info_kind;
  logic [31:0]  info_u;
  logic [2:0]   info_first;
  logic [3:0]   info_num;
  edge_requester #(.K(K), .SQ_DEPTH(SQ_DEPTH), .CHUNK_CREDITS(8)) u_edge_req (
    .clk, .rst_n, .start, .graph_base,
    .q_valid(pq_valid), .q_data(pq_data), .q_pop(pq_pop), .all_rows,
    .sq_count, .sq_insert(sq_push),
    .req_valid(rq_valid[2]), .req_addr(rq_addr[2]), .req_ready(rq_ready[2]),
    .chunk_consumed(edge_consumed),
    .info_valid, .info_kind, .info_u, .info_first, .info_num, .info_ready,
    .n_mode1(stat_mode1), .n_mode2(stat_mode2));

  edge_receiver #(.K(K), .INFO_DEPTH(16), .CHUNK_CREDITS(8)) u_edge_rcv (
    .clk, .rst_n, .info_valid, .info_kind, .info_u, .info_first, .info_num, .info_ready,
    .rsp_valid(rd_rsp_valid), .rsp_data(rd_rsp_data), .rsp_tag(rd_rsp_tag),
    .chunk_consumed(edge_consumed), .sq_push, .sq_edge, .sq_full);

  logic  mg_valid, mg_ready;
  edge_t mg_edge;
  merger #(.K(K), .SQ_DEPTH(SQ_DEPTH), .INNER_DEPTH(4)) u_merger (
    .clk, .rst_n, .sq_push, .sq_edge, .sq_full, .sq_count,
    .out_valid(mg_valid), .out_edge(mg_edge), .out_ready(mg_ready), .n_dropped(stat_dropped));

  // ---------------- Part 2 ----------------
  logic [31:0] epoch, num_epochs, pf_epoch;
  logic        run, epoch_start, pf_start, swap, epoch_end, pend_empty;
  logic        ep_idle, ep_flush, ep_flushed, mb_done, ew_flush, ew_flushed, all_done;
  logic [$clog2(K+1)-1:0] pf_loaded;

  logic  pend_valid, pend_new, pend_pop, mb_consumed;
  edge_t pend_edge;
  mb_requester #(.K(K), .L(L), .BITQ_DEPTH(8), .PEND_DEPTH(16)) u_mb_req (
    .clk, .rst_n, .mb_base, .epoch, .run, .epoch_start,
    .in_valid(mg_valid), .in_edge(mg_edge), .in_ready(mg_ready),
    .req_valid(rq_valid[0]), .req_addr(rq_addr[0]), .req_ready(rq_ready[0]),
    .chunk_consumed(mb_consumed), .pend_valid, .pend_edge, .pend_new, .pend_pop,
    .pend_empty, .epoch_end, .n_chunk_reqs(stat_mb_reqs), .n_shared(stat_mb_shared));

  logic   bq_valid, bq_pop;
  chunk_t bq_data;
  logic [31:0] mb_rcv_cnt;
  mb_receiver #(.BITQ_DEPTH(8)) u_mb_rcv (
    .clk, .rst_n, .rsp_valid(rd_rsp_valid), .rsp_data(rd_rsp_data), .rsp_tag(rd_rsp_tag),
    .bq_valid, .bq_data, .bq_pop, .consumed(mb_consumed), .n_received(mb_rcv_cnt));

  logic bram_consumed, pf_busy;
  bram_mb_requester #(.K(K), .L(L), .CREDITS(2)) u_bram_req (
    .clk, .rst_n, .start(pf_start), .epoch(pf_epoch), .num_epochs, .mb_base,
    .req_valid(rq_valid[1]), .req_addr(rq_addr[1]), .req_ready(rq_ready[1]),
    .chunk_consumed(bram_consumed), .busy(pf_busy));

  logic                 ld_valid;
  logic [$clog2(K)-1:0] ld_idx;
  logic [L-1:0]         ld_bits;
  bram_mb_receiver #(.K(K), .L(L), .CREDITS(2)) u_bram_rcv (
    .clk, .rst_n, .start(pf_start),
    .rsp_valid(rd_rsp_valid), .rsp_data(rd_rsp_data), .rsp_tag(rd_rsp_tag),
    .chunk_consumed(bram_consumed), .ld_valid, .ld_idx, .ld_bits, .n_loaded(pf_loaded));

  logic        mw_room, ew_room, ep_out_valid, ep_mb_valid;
  oedge_t      ep_out_edge;
  logic [31:0] ep_mb_chunk;
  chunk_t      ep_mb_data;
  edge_processor #(.K(K), .L(L), .EPS_Q16(EPS_Q16)) u_edge_proc (
    .clk, .rst_n, .epoch, .in_room(mw_room && ew_room),
    .pend_valid, .pend_edge, .pend_new, .pend_pop,
    .bq_valid, .bq_data, .bq_pop,
    .ld_valid, .ld_idx, .ld_bits, .swap,
    .flush(ep_flush), .flushed(ep_flushed), .idle(ep_idle),
    .out_valid(ep_out_valid), .out_edge(ep_out_edge),
    .mb_wr_valid(ep_mb_valid), .mb_wr_chunk(ep_mb_chunk), .mb_wr_data(ep_mb_data),
    .n_edges(stat_edges), .n_matched(stat_matched), .n_forward(stat_forward),
    .n_vcur(stat_vcur), .n_vnext(stat_vnext));

  logic [1:0]  wq_valid;
  addr_t       wq_addr [2];
  chunk_t      wq_data [2];
  logic [$clog2(WQ_DEPTH+1)-1:0] wq_count [2];
  logic [31:0] mb_issued, ed_issued, mb_acked, ed_acked, ed_out;
  mb_writer #(.QDEPTH(WQ_DEPTH), .SLACK(12)) u_mb_wr (
    .clk, .rst_n, .mb_base, .in_valid(ep_mb_valid), .in_chunk(ep_mb_chunk), .in_data(ep_mb_data),
    .wq_valid(wq_valid[0]), .wq_addr(wq_addr[0]), .wq_data(wq_data[0]), .wq_count(wq_count[0]),
    .room(mw_room), .issued(mb_issued));

  edge_writer #(.L(L), .QDEPTH(WQ_DEPTH), .SLACK(12)) u_edge_wr (
    .clk, .rst_n, .start, .p_out(out_base), .o(out_stride),
    .in_valid(ep_out_valid), .in_edge(ep_out_edge), .flush(ew_flush), .flushed(ew_flushed),
    .wq_valid(wq_valid[1]), .wq_addr(wq_addr[1]), .wq_data(wq_data[1]), .wq_count(wq_count[1]),
    .room(ew_room), .issued(ed_issued), .n_edges_out(ed_out));

  writer #(.QDEPTH(WQ_DEPTH)) u_writer (
    .clk, .rst_n, .in_valid(wq_valid), .in_addr(wq_addr), .in_data(wq_data), .in_count(wq_count),
    .wr_req_valid, .wr_req_addr, .wr_req_data, .wr_req_tag, .wr_req_ready);

  ack_receiver u_ack (
    .clk, .rst_n, .ack_valid(wr_ack_valid), .ack_tag(wr_ack_tag),
    .mb_issued, .ed_issued, .mb_done, .all_done, .mb_acked, .ed_acked);

  state_controller #(.K(K)) u_state (
    .clk, .rst_n, .start, .num_vertices, .epoch, .num_epochs, .run, .epoch_start,
    .pf_start, .pf_epoch, .pf_loaded, .swap, .epoch_end, .pend_empty, .ep_idle,
    .ep_flush, .ep_flushed, .mb_done, .ew_flush, .ew_flushed, .all_done, .done,
    .n_epochs_done(stat_epochs));

  // every edge of the input must have passed the edge processor
  assign count_error = done && (stat_edges != num_edges);
endmodule
