// mwm_pkg: widths, record layouts, request tags and the substream threshold
// function shared by every block of the substream-centric matching accelerator.
//
// Memory is reached in 512-bit chunks with 58-bit chunk addresses and 8-bit
// tags, as on the host interface the design was built for. The input graph is
// a CSR variant: pointer_data holds one 96-bit entry per row (chunk, offset,
// count), five to a chunk; graph_data holds 64-bit (column, weight) entries,
// eight to a chunk. Matched edges leave as 128-bit (u, v, w, i) records, four
// to a chunk. Field order inside each record and the tag values are choices of
// this design. The threshold of substream i is (1+eps)^i, kept in Q16 fixed
// point and computed at elaboration by repeated multiplication.
package mwm_pkg;

  localparam int CHUNK_W = 512;
  localparam int ADDR_W  = 58;
  localparam int TAG_W   = 8;

  typedef logic [CHUNK_W-1:0] chunk_t;
  typedef logic [ADDR_W-1:0]  addr_t;
  typedef logic [TAG_W-1:0]   tag_t;

  // Fixed tags, one per requesting or writing module.
  localparam tag_t TAG_PTR   = 8'd1;
  localparam tag_t TAG_EDGE  = 8'd2;
  localparam tag_t TAG_MB    = 8'd3;
  localparam tag_t TAG_BRAM  = 8'd4;
  localparam tag_t TAG_MBWR  = 8'd5;
  localparam tag_t TAG_EDWR  = 8'd6;

  // One pointer_data entry (96 bits): chunk in [31:0], offset [63:32], count [95:64].
  typedef struct packed {
    logic [31:0] count;
    logic [31:0] offset;
    logic [31:0] chunk;
  } ptr_t;
  localparam int PTRS_PER_CHUNK = 5;

  // Pointer labelled with its row, 128 bits, as held in the pointer queues Q0..Q3.
  typedef struct packed {
    logic [31:0] u;
    ptr_t        p;
  } uptr_t;

  // One graph_data entry (64 bits): column in [31:0], weight in [63:32].
  typedef struct packed {
    logic [31:0] w;
    logic [31:0] col;
  } gentry_t;
  localparam int EDGES_PER_CHUNK = 8;

  // Edge inside the merger, 96 bits.
  typedef struct packed {
    logic [31:0] w;
    logic [31:0] v;
    logic [31:0] u;
  } edge_t;

  // Matched edge as written to memory, 128 bits.
  typedef struct packed {
    logic [31:0] idx;
    logic [31:0] w;
    logic [31:0] v;
    logic [31:0] u;
  } oedge_t;
  localparam int OEDGES_PER_CHUNK = 4;

  // Markers carried in-band through the merger (real weights are >= 1).
  localparam logic [31:0] END_U = 32'hFFFF_FFFF;

  function automatic logic is_end(edge_t e);
    return e.u == END_U;
  endfunction

  function automatic logic is_artificial(edge_t e);
    return (e.w == 32'd0) && (e.u != END_U);
  endfunction

  // Sort key of the lexicographic order: epoch first, then v, then u.
  function automatic logic [95:0] lex_key(edge_t e, int unsigned log2k);
    return {e.u >> log2k, e.v, e.u};
  endfunction

  // (1+eps)^i in Q16, eps given in Q16; saturates at 2^48 (above any 32-bit weight).
  function automatic logic [63:0] threshold_q16(int unsigned i, int unsigned eps_q16);
    logic [63:0] t;
    t = 64'd65536;
    for (int unsigned j = 0; j < i; j++) begin
      if (t >= 64'h0001_0000_0000_0000) t = 64'h0001_0000_0000_0000;
      else t = (t * (64'd65536 + 64'(eps_q16))) >> 16;
    end
    if (t >= 64'h0001_0000_0000_0000) t = 64'h0001_0000_0000_0000;
    return t;
  endfunction

endpackage
