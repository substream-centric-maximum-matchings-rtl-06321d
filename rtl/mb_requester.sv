// mb_requester: the matching bits requester. It reads the ordered edge stream
// from the merger and, for the edges of the current epoch only, fetches the
// v-matching bits: the L bits of vertex v live in chunk mb_base + v/(512/L),
// slot v mod (512/L). Inside an epoch the edges are sorted by v, so a chunk is
// read once, when the chunk number changes, and then shared by every following
// edge that falls in it. Each edge goes into the Pending-Queue together with a
// flag telling the edge processor whether a new chunk comes with it.
// It works only while run is high (the state controller raises it once the
// previous epoch's bit writes are acknowledged) and raises epoch_end when the
// head of the stream belongs to a later epoch or is the end marker.
// Outstanding reads plus chunks waiting in the Bit-Queue are limited to
// BITQ_DEPTH credits; the edge processor returns one per chunk it takes.
// Behaviour follows the paper; the credit scheme is this design's.
module mb_requester
  import mwm_pkg::*;
#(
  parameter int K          = 32,
  parameter int L          = 64,
  parameter int BITQ_DEPTH = 8,
  parameter int PEND_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  addr_t       mb_base,
  input  logic [31:0] epoch,
  input  logic        run,
  input  logic        epoch_start,     // pulse: forget the last chunk
  input  logic        in_valid,
  input  edge_t       in_edge,
  output logic        in_ready,
  output logic        req_valid,
  output addr_t       req_addr,
  input  logic        req_ready,
  input  logic        chunk_consumed,
  output logic        pend_valid,
  output edge_t       pend_edge,
  output logic        pend_new,
  input  logic        pend_pop,
  output logic        pend_empty,
  output logic        epoch_end,
  output logic [31:0] n_chunk_reqs,
  output logic [31:0] n_shared
);
  localparam int VPC   = CHUNK_W / L;
  localparam int LOG2K = $clog2(K);

  logic [31:0] last_chunk, chunk;
  logic        have_last, is_new, cur, go;
  logic [$clog2(BITQ_DEPTH+1)-1:0] credits;
  logic        pf_full, pf_empty;
  logic [$clog2(PEND_DEPTH+1)-1:0] pf_cnt;
  logic [96:0] pf_d;

  assign chunk     = in_edge.v / VPC;
  assign is_new    = !have_last || (chunk != last_chunk);
  assign cur       = !is_end(in_edge) && ((in_edge.u >> LOG2K) == epoch);
  assign epoch_end = in_valid && !cur;
  assign go        = run && in_valid && cur && !pf_full &&
                     (!is_new || (req_ready && credits != 0));
  assign in_ready  = go;
  assign req_valid = run && in_valid && cur && !pf_full && is_new && (credits != 0);
  assign req_addr  = mb_base + addr_t'(chunk);

  sync_fifo #(.WIDTH(97), .DEPTH(PEND_DEPTH)) u_pending (
    .clk, .rst_n, .push(go), .din({is_new, in_edge}), .pop(pend_pop),
    .dout(pf_d), .empty(pf_empty), .full(pf_full), .count(pf_cnt));
  assign pend_valid = !pf_empty;
  assign pend_empty = pf_empty;
  assign pend_new   = pf_d[96];
  assign pend_edge  = edge_t'(pf_d[95:0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_last <= 1'b0; last_chunk <= '0;
      credits <= ($clog2(BITQ_DEPTH+1))'(BITQ_DEPTH);
      n_chunk_reqs <= '0; n_shared <= '0;
    end else begin
      if (epoch_start) have_last <= 1'b0;
      else if (go) begin have_last <= 1'b1; last_chunk <= chunk; end
      credits <= credits - $bits(credits)'(go && is_new) + $bits(credits)'(chunk_consumed);
      if (go && is_new) n_chunk_reqs <= n_chunk_reqs + 1;
      if (go && !is_new) n_shared <= n_shared + 1;
    end
  end
endmodule
