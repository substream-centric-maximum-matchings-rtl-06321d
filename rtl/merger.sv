// merger: the merging network that puts the edges of K rows into the
// lexicographic order (epoch, v, u). It is a binary tree of K-1 merge_elements;
// the K/2 leaf elements own the K starting queues, where the edge receiver puts
// edges of row u into queue u mod K. Because each row is sorted by column and
// the rows of one starting queue arrive in increasing u, every starting queue
// is already sorted, and the tree merges them. Nodes are numbered as a heap
// (root 1, children 2n and 2n+1); starting queue s belongs to leaf K/2 + s/2,
// input s mod 2.
// At the root, artificial edges (rows without edges) are dropped and the rest,
// including one end marker, go into an output queue read with
// out_valid/out_ready. sq_count tells the edge requester how full each
// starting queue is. The tree shape and the filtering follow the paper; inner
// queue depths are this design's.
module merger
  import mwm_pkg::*;
#(
  parameter int K          = 32,
  parameter int SQ_DEPTH   = 32,
  parameter int INNER_DEPTH = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [K-1:0] sq_push,
  input  edge_t        sq_edge,
  output logic [K-1:0] sq_full,
  output logic [15:0]  sq_count [K],
  output logic         out_valid,
  output edge_t        out_edge,
  input  logic         out_ready,
  output logic [31:0]  n_dropped
);
  logic        ov [K];
  edge_t       oe [K];
  logic        orr [K];
  logic [1:0]  ifull [K];
  logic [15:0] icnt [K][2];
  logic [1:0]  ipush [K];
  edge_t       iedge [K][2];

  for (genvar n = 1; n < K; n++) begin : g_node
    if (n >= K/2) begin : g_leaf
      assign ipush[n]    = sq_push[2*(n-K/2) +: 2];
      assign iedge[n][0] = sq_edge;
      assign iedge[n][1] = sq_edge;
      assign sq_full[2*(n-K/2)]    = ifull[n][0];
      assign sq_full[2*(n-K/2)+1]  = ifull[n][1];
      assign sq_count[2*(n-K/2)]   = icnt[n][0];
      assign sq_count[2*(n-K/2)+1] = icnt[n][1];
    end else begin : g_inner
      assign ipush[n]    = {ov[2*n+1] && orr[2*n+1], ov[2*n] && orr[2*n]};
      assign iedge[n][0] = oe[2*n];
      assign iedge[n][1] = oe[2*n+1];
    end
    if (n > 1) begin : g_up
      assign orr[n] = !ifull[n/2][n%2];
    end
    merge_element #(.K(K), .DEPTH((n >= K/2) ? SQ_DEPTH : INNER_DEPTH)) u_el (
      .clk, .rst_n, .in_push(ipush[n]), .in_edge(iedge[n]), .in_full(ifull[n]),
      .in_count(icnt[n]), .out_valid(ov[n]), .out_edge(oe[n]), .out_ready(orr[n]));
  end
  assign ov[0] = 1'b0;
  assign oe[0] = '0;
  assign orr[0] = 1'b0;
  assign ifull[0] = '0;
  assign icnt[0][0] = '0;
  assign icnt[0][1] = '0;
  assign ipush[0] = '0;
  assign iedge[0][0] = '0;
  assign iedge[0][1] = '0;

  // root: drop artificial edges, queue the rest
  logic of_full, of_empty;
  logic [2:0] of_cnt;
  logic [95:0] of_d;
  logic keep;
  assign keep   = !is_artificial(oe[1]);
  assign orr[1] = !keep || !of_full;
  sync_fifo #(.WIDTH(96), .DEPTH(4)) u_out (
    .clk, .rst_n, .push(ov[1] && keep && !of_full), .din(oe[1]), .pop(out_valid && out_ready),
    .dout(of_d), .empty(of_empty), .full(of_full), .count(of_cnt));
  assign out_valid = !of_empty;
  assign out_edge  = edge_t'(of_d);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) n_dropped <= '0;
    else if (ov[1] && !keep) n_dropped <= n_dropped + 1;
  end
endmodule
