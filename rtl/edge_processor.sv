// edge_processor: computes the L maximal matchings C_0..C_{L-1} at once, one
// edge per cycle, in an 8-stage pipeline. For edge (u, v, w) and substream i:
//   te[i] = (w >= (1+eps)^i)                     edge belongs to substream E_i
//   m[i]  = te[i] & !MB[u][i] & !MB[v][i]        edge joins matching C_i
//   MB[u] |= m;  MB[v] |= m
// and the edge is written once, to the stream of the highest i with m[i] set.
//
// Stages:
//   1 take an edge from the Pending-Queue (and a chunk from the Bit-Queue if
//     the edge brings a new one); locate v's slot in the chunk and the array
//     addresses u mod K and v mod K; classify v as running epoch / next epoch
//     / other
//   2 present the addresses to the u-bit array (ubits_dbuf)
//   3 wait for the array
//   4 register the array data; compute te[] against the L constant thresholds
//   5 pick the up-to-date bits of u and v and compute m[]: array data older
//     than three cycles is patched from the results held in stages 6-8; bits
//     of a v outside the running epoch come from the working chunk register,
//     which stage 5 updates in place; a new chunk replaces it and the old one
//     is sent for write-back
//   6 write u's (and v's, if in the running epoch) bits to the array; a v of
//     the next epoch is also written to the next buffer; next-epoch bits
//     arriving from memory are written here too
//   7 find the highest set index of m[]
//   8 send the matched edge (u, v, w, i) to the edge writer
// flush (after the epoch's last edge has left) writes back the working chunk
// and then the whole current buffer, K/(512/L) chunks, so later epochs find
// these vertices' bits in memory; flushed pulses when done.
// New edges enter only when both writers have room for everything in flight
// (in_room), so the pipeline never stalls.
// Stages, thresholds and double-buffer updates follow the paper; the
// forwarding window, the working chunk and the flush are this design's.
module edge_processor
  import mwm_pkg::*;
#(
  parameter int          K       = 32,
  parameter int          L       = 64,
  parameter int unsigned EPS_Q16 = 6554
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] epoch,
  input  logic        in_room,
  // Pending-Queue
  input  logic        pend_valid,
  input  edge_t       pend_edge,
  input  logic        pend_new,
  output logic        pend_pop,
  // Bit-Queue
  input  logic        bq_valid,
  input  chunk_t      bq_data,
  output logic        bq_pop,
  // next-epoch bits from the BRAM matching bits receiver
  input  logic        ld_valid,
  input  logic [$clog2(K)-1:0] ld_idx,
  input  logic [L-1:0] ld_bits,
  input  logic        swap,
  // epoch end
  input  logic        flush,
  output logic        flushed,
  output logic        idle,
  // outputs
  output logic        out_valid,
  output oedge_t      out_edge,
  output logic        mb_wr_valid,
  output logic [31:0] mb_wr_chunk,
  output chunk_t      mb_wr_data,
  // statistics
  output logic [31:0] n_edges,
  output logic [31:0] n_matched,
  output logic [31:0] n_forward,
  output logic [31:0] n_vcur,
  output logic [31:0] n_vnext
);
  localparam int VPC   = CHUNK_W / L;
  localparam int AW    = $clog2(K);
  localparam int LOG2K = $clog2(K);
  localparam int SW    = (VPC > 1) ? $clog2(VPC) : 1;

  // substream thresholds (1+eps)^i, Q16
  logic [63:0] thr [L];
  for (genvar i = 0; i < L; i++) begin : g_thr
    localparam logic [63:0] T = threshold_q16(i, EPS_Q16);
    assign thr[i] = T;
  end

  typedef struct packed {
    logic          vld;
    edge_t         e;
    logic          nw;
    logic [31:0]   chunk;
    logic [SW-1:0] slot;
    logic [AW-1:0] ua;
    logic [AW-1:0] va;
    logic          vcur;
    logic          vnext;
  } ctl_t;

  ctl_t   s2, s3, s4, s5;
  chunk_t c2, c3, c4, c5;                // chunk riding with a "new chunk" edge
  logic [L-1:0] te5, ub5, vb5;           // stage-5 inputs
  // stage 6..8 records
  ctl_t   s6, s7, s8;
  logic   s8matched;      // the edge in stage 8 joined a matching
  logic [L-1:0] nu6, nv6, m6, nu7, nv7, nu8, nv8, m7;
  logic [31:0] idx8;

  // ---------------- stage 1 ------------------------------------------------
  logic fire1, flushing;
  ctl_t n2;
  assign fire1    = pend_valid && (!pend_new || bq_valid) && in_room && !flushing && !flush;
  assign pend_pop = fire1;
  assign bq_pop   = fire1 && pend_new;
  always_comb begin
    n2       = '0;
    n2.vld   = fire1;
    n2.e     = pend_edge;
    n2.nw    = pend_new;
    n2.chunk = pend_edge.v / VPC;
    n2.slot  = SW'(pend_edge.v % VPC);
    n2.ua    = AW'(pend_edge.u);
    n2.va    = AW'(pend_edge.v);
    n2.vcur  = (pend_edge.v >> LOG2K) == epoch;
    n2.vnext = (pend_edge.v >> LOG2K) == epoch + 1;
  end

  // ---------------- array -----------------------------------------------------
  logic [AW-1:0] rd_addr [2];
  logic [L-1:0]  rd_data [2];
  logic [1:0]    wr_en;
  logic [AW-1:0] wr_addr [2];
  logic [L-1:0]  wr_data [2];
  logic [AW-1:0] fl_chunk;
  logic [511:0]  fl_data;
  logic [K-1:0]  valid_arr;

  assign rd_addr[0] = s2.ua;   // stage 2 issues the reads
  assign rd_addr[1] = s2.va;
  assign wr_en      = {s6.vld && s6.vcur, s6.vld};
  assign wr_addr[0] = s6.ua;
  assign wr_addr[1] = s6.va;
  assign wr_data[0] = nu6;
  assign wr_data[1] = nv6;

  ubits_dbuf #(.K(K), .L(L)) u_bram (
    .clk, .rst_n, .rd_addr, .rd_data, .wr_en, .wr_addr, .wr_data,
    .nx_wr_en(s6.vld && s6.vnext), .nx_wr_addr(s6.va), .nx_wr_data(nv6),
    .ld_en(ld_valid), .ld_addr(ld_idx), .ld_data(ld_bits),
    .swap, .fl_chunk, .fl_data, .valid(valid_arr));

  // ---------------- stage 5 logic ----------------------------------------------
  chunk_t wchunk;            // working chunk of v bits
  logic   wvalid;
  logic [31:0] wchunk_id;
  logic [L-1:0] ub, vb, m, nu, nv;
  logic   fwd_hit;
  chunk_t src_chunk, upd_chunk;

  function automatic logic [L-1:0] patch(logic [AW-1:0] a, logic [L-1:0] d, output logic hit);
    logic [L-1:0] r;
    r = d; hit = 1'b0;
    // oldest first, so the newest match wins
    if (s8.vld && s8.ua == a) begin r = nu8; hit = 1'b1; end
    if (s8.vld && s8.vcur && s8.va == a) begin r = nv8; hit = 1'b1; end
    if (s7.vld && s7.ua == a) begin r = nu7; hit = 1'b1; end
    if (s7.vld && s7.vcur && s7.va == a) begin r = nv7; hit = 1'b1; end
    if (s6.vld && s6.ua == a) begin r = nu6; hit = 1'b1; end
    if (s6.vld && s6.vcur && s6.va == a) begin r = nv6; hit = 1'b1; end
    return r;
  endfunction

  always_comb begin
    logic h1, h2;
    ub = patch(s5.ua, ub5, h1);
    src_chunk = s5.nw ? c5 : wchunk;
    if (s5.vcur) vb = patch(s5.va, vb5, h2);
    else begin
      vb = src_chunk[int'(s5.slot)*L +: L];
      h2 = 1'b0;
    end
    fwd_hit = s5.vld && (h1 || h2);
    m  = te5 & ~ub & ~vb;
    nu = ub | m;
    nv = vb | m;
    if (s5.ua == s5.va && s5.vcur) nu = nv;   // self-loop: one vertex
    upd_chunk = src_chunk;
    upd_chunk[int'(s5.slot)*L +: L] = nv;
  end

  // ---------------- flush sequencer -------------------------------------------
  logic        fl_work;    // working chunk still to write
  logic [AW:0] fl_cnt;
  localparam int NFL = K / VPC;
  logic pipe_busy;
  assign pipe_busy = s2.vld || s3.vld || s4.vld || s5.vld || s6.vld || s7.vld || s8.vld;
  assign idle = !pipe_busy;
  assign fl_chunk = AW'(fl_cnt);

  // ---------------- pipeline registers ------------------------------------------
  logic [L-1:0] te4;
  always_comb begin
    for (int i = 0; i < L; i++) te4[i] = ({s4.e.w, 16'd0} >= thr[i][47:0]) && (thr[i][48] == 1'b0);
  end

  logic [31:0] hi_idx;
  always_comb begin
    hi_idx = '0;
    for (int i = 0; i < L; i++) if (m7[i]) hi_idx = 32'(i);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2 <= '0; s3 <= '0; s4 <= '0; s5 <= '0; s6 <= '0; s7 <= '0; s8 <= '0;
      wvalid <= 1'b0; flushing <= 1'b0; fl_work <= 1'b0; fl_cnt <= '0; flushed <= 1'b0;
      n_edges <= '0; n_matched <= '0; n_forward <= '0; n_vcur <= '0; n_vnext <= '0;
      out_valid <= 1'b0; mb_wr_valid <= 1'b0;
    end else begin
      // stages 1 -> 5
      s2 <= n2;  if (fire1 && pend_new) c2 <= bq_data;
      s3 <= s2;  c3 <= c2;
      s4 <= s3;  c4 <= c3;
      // stage 4: the array data arrives and is registered with the edge
      s5 <= s4;  c5 <= c4; ub5 <= rd_data[0]; vb5 <= rd_data[1]; te5 <= te4;
      // stage 5 -> 6
      s6 <= s5; nu6 <= nu; nv6 <= nv; m6 <= m;
      mb_wr_valid <= 1'b0;
      flushed <= 1'b0;
      if (s5.vld) begin
        if (!s5.vcur) begin
          if (s5.nw && wvalid) begin
            mb_wr_valid <= 1'b1; mb_wr_chunk <= wchunk_id; mb_wr_data <= wchunk;
          end
          wchunk <= upd_chunk; wchunk_id <= s5.chunk; wvalid <= 1'b1;
        end else if (s5.nw) begin
          // v of the running epoch: the array is authoritative; the chunk is
          // still taken over (and later written back) so that its other
          // vertices stay in the working register
          if (wvalid) begin
            mb_wr_valid <= 1'b1; mb_wr_chunk <= wchunk_id; mb_wr_data <= wchunk;
          end
          wchunk <= c5; wchunk_id <= s5.chunk; wvalid <= 1'b1;
        end
        n_edges <= n_edges + 1;
        if (fwd_hit) n_forward <= n_forward + 1;
        if (s5.vcur) n_vcur <= n_vcur + 1;
        if (s5.vnext) n_vnext <= n_vnext + 1;
      end
      // stage 6 -> 7 -> 8
      s7 <= s6; nu7 <= nu6; nv7 <= nv6; m7 <= m6;
      s8 <= s7; nu8 <= nu7; nv8 <= nv7; idx8 <= hi_idx;
      out_valid <= 1'b0;
      if (s8.vld && s8matched) begin
        out_valid <= 1'b1;
        out_edge  <= '{idx: idx8, w: s8.e.w, v: s8.e.v, u: s8.e.u};
        n_matched <= n_matched + 1;
      end
      // flush
      if (flush && !flushing && !pipe_busy) begin
        flushing <= 1'b1; fl_work <= wvalid; fl_cnt <= '0;
      end else if (flushing) begin
        if (fl_work) begin
          mb_wr_valid <= 1'b1; mb_wr_chunk <= wchunk_id; mb_wr_data <= wchunk;
          fl_work <= 1'b0; wvalid <= 1'b0;
        end else if (fl_cnt < (AW+1)'(NFL)) begin
          mb_wr_valid <= 1'b1;
          mb_wr_chunk <= epoch * NFL + 32'(fl_cnt);
          mb_wr_data  <= fl_data;
          fl_cnt <= fl_cnt + 1'b1;
        end else begin
          flushing <= 1'b0; flushed <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s8matched <= 1'b0;
    else s8matched <= |m7;
  end

  always_ff @(posedge clk) begin
    if (rst_n) assert (!(fire1 && pend_new && !bq_valid)) else $error("edge_processor: chunk missing");
  end
endmodule
