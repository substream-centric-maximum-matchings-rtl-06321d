// pointer_receiver: accepts pointer_data chunks (read data whose tag is
// TAG_PTR), unwraps the five 96-bit row pointers of each chunk one per cycle,
// labels each with its row number u (rows arrive in order from row 0) and
// pushes {u, pointer} (128 bits) into one of four queues Q0..Q3:
// pointer p(u) goes to Q_i with i = (u mod K) / (K/4), as the paper specifies.
// Entries past row n-1 in the last chunk are padding and are dropped.
// Chunks wait in a small FIFO of CREDITS entries; when a chunk is finished a
// credit goes back to the pointer requester (chunk_consumed). A full target
// queue stalls the unwrapping. all_rows rises once n rows have been queued.
module pointer_receiver
  import mwm_pkg::*;
#(
  parameter int K       = 32,
  parameter int CREDITS = 4,
  parameter int QDEPTH  = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] num_vertices,
  input  logic        rsp_valid,
  input  chunk_t      rsp_data,
  input  tag_t        rsp_tag,
  output logic        chunk_consumed,
  output logic [3:0]  q_valid,
  output uptr_t       q_data [4],
  input  logic [3:0]  q_pop,
  output logic        all_rows
);
  localparam int LOG2K = $clog2(K);
  localparam int GRP   = K / 4;

  chunk_t cf_dout;
  logic   cf_empty, cf_full, cf_pop;
  logic [$clog2(CREDITS+1)-1:0] cf_count;

  sync_fifo #(.WIDTH(CHUNK_W), .DEPTH(CREDITS)) u_chunks (
    .clk, .rst_n, .push(rsp_valid && rsp_tag == TAG_PTR), .din(rsp_data),
    .pop(cf_pop), .dout(cf_dout), .empty(cf_empty), .full(cf_full), .count(cf_count));

  logic [2:0]  slot;
  logic [31:0] u;
  logic        active;
  ptr_t        cur;
  logic [1:0]  qsel;
  logic [3:0]  qfull, qempty, qpush;

  assign cur  = ptr_t'(cf_dout[slot*96 +: 96]);
  assign qsel = 2'(((u & 32'(K-1)) / GRP));

  logic do_push, drop;
  always_comb begin
    do_push = active && !cf_empty && (u < num_vertices) && !qfull[qsel];
    drop    = active && !cf_empty && (u >= num_vertices);
    cf_pop  = drop || (do_push && (slot == 3'(PTRS_PER_CHUNK-1) || u + 1 == num_vertices));
    qpush   = '0;
    if (do_push) qpush[qsel] = 1'b1;
  end
  assign chunk_consumed = cf_pop;
  assign all_rows = active && (u >= num_vertices);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot <= '0; u <= '0; active <= 1'b0;
    end else if (start) begin
      slot <= '0; u <= '0; active <= 1'b1;
    end else begin
      if (cf_pop) slot <= '0;
      else if (do_push) slot <= slot + 1'b1;
      if (do_push) u <= u + 1;
    end
  end

  for (genvar i = 0; i < 4; i++) begin : g_q
    logic [$clog2(QDEPTH+1)-1:0] cnt;
    logic [127:0] dq;
    sync_fifo #(.WIDTH(128), .DEPTH(QDEPTH)) u_q (
      .clk, .rst_n, .push(qpush[i]), .din({u, cur}), .pop(q_pop[i]),
      .dout(dq), .empty(qempty[i]), .full(qfull[i]), .count(cnt));
    assign q_data[i]  = uptr_t'(dq);
    assign q_valid[i] = !qempty[i];
  end

  // LOG2K documents that K must be a power of two (and a multiple of 4).
  initial assert (K == (1 << LOG2K) && K >= 4) else $fatal(1, "K must be a power of two >= 4");
endmodule
