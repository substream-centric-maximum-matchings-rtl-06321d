// edge_writer: collects the matched edges into L output streams. Stream i
// (matching C_i) starts at chunk address p_out + i*o. Each 128-bit edge is
// placed in stream i's staging chunk; when the fourth edge arrives the full
// chunk is written to p_out + i*o + j (j counts the stream's chunks) through
// the writer's second queue. On flush every stream writes its last staging
// chunk, with the unused slots set to zero, even if it holds no edge, so each
// stream in memory ends with an all-zero record (weights are never zero);
// flushed pulses when all L chunks have been queued.
// One edge per cycle in; the edge processor only admits edges while room is
// high, so the queue never overflows. Four edges per chunk follow the paper;
// the terminating zero record and chunk-unit addresses are this design's.
module edge_writer
  import mwm_pkg::*;
#(
  parameter int L      = 64,
  parameter int QDEPTH = 16,
  parameter int SLACK  = 12
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  addr_t       p_out,
  input  addr_t       o,
  input  logic        in_valid,
  input  oedge_t      in_edge,
  input  logic        flush,
  output logic        flushed,
  output logic        wq_valid,
  output addr_t       wq_addr,
  output chunk_t      wq_data,
  input  logic [$clog2(QDEPTH+1)-1:0] wq_count,
  output logic        room,
  output logic [31:0] issued,
  output logic [31:0] n_edges_out
);
  localparam int IW = (L > 1) ? $clog2(L) : 1;

  chunk_t      stage [L];
  logic [1:0]  cnt   [L];
  logic [31:0] nch   [L];
  logic        flushing;
  logic [IW:0] fi;
  logic [IW-1:0] ii;

  assign ii   = IW'(in_edge.idx);
  assign room = (int'(wq_count) + SLACK <= QDEPTH);

  function automatic chunk_t masked(chunk_t c, logic [1:0] n);
    chunk_t r = '0;
    for (int k = 0; k < OEDGES_PER_CHUNK; k++)
      if (k < int'(n)) r[k*128 +: 128] = c[k*128 +: 128];
    return r;
  endfunction

  always_comb begin
    wq_valid = 1'b0; wq_addr = '0; wq_data = '0;
    if (in_valid && cnt[ii] == 2'd3) begin
      wq_valid = 1'b1;
      wq_addr  = p_out + addr_t'(ii) * o + addr_t'(nch[ii]);
      wq_data  = stage[ii];
      wq_data[3*128 +: 128] = in_edge;
    end else if (flushing && fi < (IW+1)'(L) && int'(wq_count) < QDEPTH) begin
      wq_valid = 1'b1;
      wq_addr  = p_out + addr_t'(fi[IW-1:0]) * o + addr_t'(nch[fi[IW-1:0]]);
      wq_data  = masked(stage[fi[IW-1:0]], cnt[fi[IW-1:0]]);
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) stage[ii][int'(cnt[ii])*128 +: 128] <= in_edge;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      flushing <= 1'b0; fi <= '0; flushed <= 1'b0; issued <= '0; n_edges_out <= '0;
      for (int i = 0; i < L; i++) begin cnt[i] <= '0; nch[i] <= '0; end
    end else if (start) begin
      flushing <= 1'b0; fi <= '0; flushed <= 1'b0; issued <= '0; n_edges_out <= '0;
      for (int i = 0; i < L; i++) begin cnt[i] <= '0; nch[i] <= '0; end
    end else begin
      flushed <= 1'b0;
      if (wq_valid) issued <= issued + 1;
      if (in_valid) begin
        n_edges_out <= n_edges_out + 1;
        cnt[ii] <= cnt[ii] + 1'b1;
        if (cnt[ii] == 2'd3) nch[ii] <= nch[ii] + 1;
      end else if (flushing && wq_valid) begin
        fi <= fi + 1'b1;
      end
      if (flush && !flushing) begin flushing <= 1'b1; fi <= '0; end
      else if (flushing && fi == (IW+1)'(L)) begin flushing <= 1'b0; flushed <= 1'b1; end
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n) assert (!(flushing && in_valid)) else $error("edge_writer: edge during flush");
  end
endmodule
