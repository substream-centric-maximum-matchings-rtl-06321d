// edge_receiver: turns fetched graph_data chunks into single edges and puts
// each edge (u, v, w) into merger starting queue u mod K.
// For every request the edge requester sends a notice (info_*), in request
// order; read data with tag TAG_EDGE arrives in the same order and waits in a
// chunk buffer of CHUNK_CREDITS entries. For a DATA notice the receiver
// unwraps info_num edges starting at slot info_first, one edge per cycle, and
// returns a credit when the chunk is done. An EMPTY notice (row without edges)
// inserts one artificial edge (u, 0, weight 0) so the merging elements are not
// left waiting on an empty row; the merger drops it at its output. The END
// notice inserts an end marker (u = all ones) into every starting queue, one
// queue per cycle. Insertion stalls while the target queue is full; the
// requester's prediction keeps that rare. sq_push is one-hot.
// Unwrapping and artificial edges follow the paper; encodings and the end
// marker are this design's.
module edge_receiver
  import mwm_pkg::*;
#(
  parameter int K             = 32,
  parameter int INFO_DEPTH    = 16,
  parameter int CHUNK_CREDITS = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        info_valid,
  input  logic [1:0]  info_kind,
  input  logic [31:0] info_u,
  input  logic [2:0]  info_first,
  input  logic [3:0]  info_num,
  output logic        info_ready,
  input  logic        rsp_valid,
  input  chunk_t      rsp_data,
  input  tag_t        rsp_tag,
  output logic        chunk_consumed,
  output logic [K-1:0] sq_push,
  output edge_t       sq_edge,
  input  logic [K-1:0] sq_full
);
  localparam int QW = $clog2(K);

  typedef struct packed {
    logic [1:0]  kind;
    logic [31:0] u;
    logic [2:0]  first;
    logic [3:0]  num;
  } info_t;

  info_t  ih;
  logic   if_empty, if_full, if_pop;
  logic [$clog2(INFO_DEPTH+1)-1:0] if_cnt;
  sync_fifo #(.WIDTH($bits(info_t)), .DEPTH(INFO_DEPTH)) u_info (
    .clk, .rst_n, .push(info_valid && !if_full),
    .din({info_kind, info_u, info_first, info_num}), .pop(if_pop),
    .dout(ih), .empty(if_empty), .full(if_full), .count(if_cnt));
  assign info_ready = !if_full;

  chunk_t cd;
  logic   cf_empty, cf_full, cf_pop;
  logic [$clog2(CHUNK_CREDITS+1)-1:0] cf_cnt;
  sync_fifo #(.WIDTH(CHUNK_W), .DEPTH(CHUNK_CREDITS)) u_chunks (
    .clk, .rst_n, .push(rsp_valid && rsp_tag == TAG_EDGE), .din(rsp_data),
    .pop(cf_pop), .dout(cd), .empty(cf_empty), .full(cf_full), .count(cf_cnt));

  logic [3:0]    j;      // edges of the current notice already inserted
  logic [QW:0]   eq;     // END: next queue to close
  gentry_t       ge;
  logic [QW-1:0] tq;
  logic          go;

  assign ge = gentry_t'(cd[(3'(ih.first + 3'(j)))*64 +: 64]);

  always_comb begin
    sq_edge = '0; tq = QW'(ih.u); go = 1'b0; if_pop = 1'b0; cf_pop = 1'b0;
    case (ih.kind)
      2'd0: begin
        sq_edge = '{w: ge.w, v: ge.col, u: ih.u};
        go = !if_empty && !cf_empty && !sq_full[tq];
        if (go && j + 1 == ih.num) begin if_pop = 1'b1; cf_pop = 1'b1; end
      end
      2'd1: begin
        sq_edge = '{w: 32'd0, v: 32'd0, u: ih.u};
        go = !if_empty && !sq_full[tq];
        if_pop = go;
      end
      default: begin
        tq = eq[QW-1:0];
        sq_edge = '{w: 32'd0, v: 32'd0, u: END_U};
        go = !if_empty && !sq_full[tq];
        if_pop = go && (eq == (QW+1)'(K-1));
      end
    endcase
    sq_push = '0;
    if (go) sq_push[tq] = 1'b1;
  end
  assign chunk_consumed = cf_pop;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      j <= '0; eq <= '0;
    end else begin
      if (if_pop) begin j <= '0; eq <= '0; end
      else if (go && ih.kind == 2'd0) j <= j + 1'b1;
      else if (go && ih.kind == 2'd2) eq <= eq + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n) assert (!(rsp_valid && rsp_tag == TAG_EDGE && cf_full))
      else $error("edge_receiver: chunk buffer overflow");
  end
endmodule
