// edge_requester: decides which row's edges to fetch next so that the K
// starting queues of the merger never overflow and stay evenly filled.
//
// Pointers arrive in queues Q0..Q3 (see pointer_receiver). They are moved,
// one per cycle with round-robin over the four queues, into the pointer array
// BP: K entries, entry q holding up to two pointers of rows u with u mod K = q.
// Only the first pointer of an entry is in use; the second belongs to a later
// epoch and moves up when the first row is fully requested.
//
// One chunk request is issued per cycle at most, chosen in two modes:
//   mode 1 - the pointer just taken from Q_i landed in an empty BP entry and
//            its starting queue has room: its first chunk is requested now;
//   mode 2 - otherwise the entry whose starting queue has the fewest edges,
//            counting edges already requested but not yet inserted
//            (in-flight), is served.
// Outstanding chunk reads are limited to CHUNK_CREDITS, the size of the
// receiver's chunk buffer, so read data never needs back-pressure.
// "Room" means occupancy + in-flight + edges of the chunk <= SQ_DEPTH.
// A request fetches one graph_data chunk (8 edges); the notice sent alongside
// to the edge receiver (info_*) says which row, the first valid slot and how
// many slots are valid. A row with no edges produces an EMPTY notice (the
// receiver inserts an artificial edge) and no memory read. After the last
// row, one END notice makes the receiver close every starting queue.
// The two modes and the in-flight prediction follow the paper; BP as a
// register array, one request per cycle and the END notice are this design's.
module edge_requester
  import mwm_pkg::*;
#(
  parameter int K        = 32,
  parameter int SQ_DEPTH = 32,
  parameter int CHUNK_CREDITS = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  addr_t       graph_base,
  // pointer queues
  input  logic [3:0]  q_valid,
  input  uptr_t       q_data [4],
  output logic [3:0]  q_pop,
  input  logic        all_rows,
  // starting queues of the merger
  input  logic [15:0] sq_count [K],
  input  logic [K-1:0] sq_insert,
  // chunk requests
  output logic        req_valid,
  output addr_t       req_addr,
  input  logic        req_ready,
  input  logic        chunk_consumed,   // edge receiver finished one chunk
  // notices to the edge receiver
  output logic        info_valid,
  output logic [1:0]  info_kind,    // 0 data, 1 empty row, 2 end of stream
  output logic [31:0] info_u,
  output logic [2:0]  info_first,
  output logic [3:0]  info_num,
  input  logic        info_ready,
  // statistics
  output logic [31:0] n_mode1,
  output logic [31:0] n_mode2
);
  localparam int QW = $clog2(K);

  typedef struct packed {
    logic [31:0] u;
    logic [31:0] chunk;
    logic [31:0] offset;
    logic [31:0] remain;
  } slot_t;

  slot_t       bp0 [K];
  slot_t       bp1 [K];
  logic [K-1:0] v0, v1;
  logic [15:0] inflight [K];
  logic [1:0]  rr;
  logic        active, end_sent;
  logic [$clog2(CHUNK_CREDITS+1)-1:0] credits;

  function automatic slot_t to_slot(uptr_t x);
    slot_t s;
    s.u = x.u; s.chunk = x.p.chunk; s.offset = x.p.offset; s.remain = x.p.count;
    return s;
  endfunction

  function automatic logic [3:0] chunk_edges(slot_t s);
    logic [31:0] space;
    space = 32'(EDGES_PER_CHUNK) - {29'd0, s.offset[2:0]};
    if (s.remain == 0) return 4'd1;                 // empty row: one artificial edge
    return (s.remain < space) ? s.remain[3:0] : space[3:0];
  endfunction

  function automatic logic [15:0] pred(int q);
    return sq_count[q] + inflight[q];
  endfunction

  // ---------------- intake (round robin over the four queues) -------------
  logic          in_go;
  logic [QW-1:0] in_q;
  slot_t         in_slot;
  logic [1:0]    in_src;
  always_comb begin
    in_go = 1'b0; in_q = '0; in_slot = '0; in_src = rr;
    for (int k = 0; k < 4; k++) begin
      automatic logic [1:0] i = 2'(rr + 2'(k));
      automatic logic [QW-1:0] q = QW'(q_data[i].u);
      if (!in_go && active && q_valid[i] && !(v0[q] && v1[q])) begin
        in_go = 1'b1; in_q = q; in_slot = to_slot(q_data[i]); in_src = i;
      end
    end
  end

  // ---------------- request selection --------------------------------------
  logic          m1, m2, sel_go, end_go;
  logic [QW-1:0] sel_q;
  slot_t         sel_slot;
  logic [3:0]    sel_n;
  always_comb begin
    logic [15:0] best;
    m1 = 1'b0; m2 = 1'b0; sel_q = '0; sel_slot = '0; best = '1;
    // mode 1
    if (in_go && !v0[in_q] &&
        (pred(int'(in_q)) + 16'(chunk_edges(in_slot)) <= 16'(SQ_DEPTH))) begin
      m1 = 1'b1; sel_q = in_q; sel_slot = in_slot;
    end else begin
      // mode 2: least loaded starting queue with a pointer and room
      for (int q = 0; q < K; q++) begin
        if (v0[q] && !(in_go && in_q == QW'(q)) &&
            (pred(q) + 16'(chunk_edges(bp0[q])) <= 16'(SQ_DEPTH)) && pred(q) < best) begin
          best = pred(q); m2 = 1'b1; sel_q = QW'(q); sel_slot = bp0[q];
        end
      end
    end
    sel_n = chunk_edges(sel_slot);
  end

  logic sel_empty_row;
  assign sel_empty_row = (sel_slot.remain == 0);
  assign end_go = active && !end_sent && all_rows && (q_valid == 4'b0) && (v0 == '0) && !in_go;

  always_comb begin
    req_valid  = (m1 || m2) && !sel_empty_row && info_ready && (credits != 0);
    req_addr   = graph_base + addr_t'(sel_slot.chunk);
    info_valid = ((m1 || m2) && (sel_empty_row || (req_ready && credits != 0))) || end_go;
    info_kind  = end_go ? 2'd2 : (sel_empty_row ? 2'd1 : 2'd0);
    info_u     = sel_slot.u;
    info_first = sel_slot.offset[2:0];
    info_num   = sel_n;
  end
  assign sel_go = (m1 || m2) && info_ready && (sel_empty_row || (req_ready && credits != 0));

  always_comb begin
    q_pop = '0;
    if (in_go) q_pop[in_src] = 1'b1;
  end

  // ---------------- state update -------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v0 <= '0; v1 <= '0; rr <= '0; active <= 1'b0; end_sent <= 1'b0;
      credits <= ($clog2(CHUNK_CREDITS+1))'(CHUNK_CREDITS);
      n_mode1 <= '0; n_mode2 <= '0;
      for (int q = 0; q < K; q++) inflight[q] <= '0;
    end else if (start) begin
      v0 <= '0; v1 <= '0; rr <= '0; active <= 1'b1; end_sent <= 1'b0;
      credits <= ($clog2(CHUNK_CREDITS+1))'(CHUNK_CREDITS);
      n_mode1 <= '0; n_mode2 <= '0;
      for (int q = 0; q < K; q++) inflight[q] <= '0;
    end else begin
      rr <= rr + 1'b1;
      credits <= credits - $bits(credits)'(sel_go && !sel_empty_row)
                         + $bits(credits)'(chunk_consumed);
      // in-flight bookkeeping
      for (int q = 0; q < K; q++) begin
        automatic logic [15:0] add = '0;
        if (sel_go && sel_q == QW'(q)) add = 16'(sel_n);
        if (end_go && info_ready) add = add + 16'd1;
        inflight[q] <= inflight[q] + add - (sq_insert[q] ? 16'd1 : 16'd0);
      end
      if (end_go && info_ready) end_sent <= 1'b1;
      // intake
      if (in_go) begin
        if (!v0[in_q]) begin
          v0[in_q]  <= 1'b1;
          bp0[in_q] <= in_slot;
        end else begin
          v1[in_q]  <= 1'b1;
          bp1[in_q] <= in_slot;
        end
      end
      // request progress (mode 1 targets in_q, mode 2 never does)
      if (sel_go) begin
        automatic slot_t s = sel_slot;
        if (m1) n_mode1 <= n_mode1 + 1; else n_mode2 <= n_mode2 + 1;
        if (s.remain <= 32'(sel_n)) begin
          // row finished: promote the second pointer
          if (m1) begin
            v0[sel_q] <= 1'b0;
          end else begin
            v0[sel_q]  <= v1[sel_q];
            bp0[sel_q] <= bp1[sel_q];
            v1[sel_q]  <= 1'b0;
          end
        end else begin
          s.remain = s.remain - 32'(sel_n);
          s.chunk  = s.chunk + 1;
          s.offset = '0;
          bp0[sel_q] <= s;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n && !start) begin
      for (int q = 0; q < K; q++)
        assert (pred(q) <= 16'(SQ_DEPTH) + 16'd1) else $error("edge_requester: starting queue %0d over-committed", q);
    end
  end
endmodule
