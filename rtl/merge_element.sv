// merge_element: one node of the merging network. It owns two input queues
// and one output port. When both queues hold an edge it emits the smaller one
// in lexicographic order (epoch = u / K, then v, then u; the weight is not
// compared), so two sorted input streams leave as one sorted stream. An end
// marker (u = all ones) sorts after everything; when both heads are end
// markers, one marker is emitted and both are consumed. Ties go to input 0.
// Output handshake: out_valid / out_ready, one edge per cycle.
// Two queues per element and 96-bit edges follow the paper.
module merge_element
  import mwm_pkg::*;
#(
  parameter int K     = 32,
  parameter int DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [1:0]  in_push,
  input  edge_t       in_edge [2],
  output logic [1:0]  in_full,
  output logic [15:0] in_count [2],
  output logic        out_valid,
  output edge_t       out_edge,
  input  logic        out_ready
);
  localparam int LOG2K = $clog2(K);
  edge_t h [2];
  logic [1:0] emp, pop;
  for (genvar i = 0; i < 2; i++) begin : g_q
    logic [$clog2(DEPTH+1)-1:0] c;
    logic [95:0] d;
    sync_fifo #(.WIDTH(96), .DEPTH(DEPTH)) u_q (
      .clk, .rst_n, .push(in_push[i]), .din(in_edge[i]), .pop(pop[i]),
      .dout(d), .empty(emp[i]), .full(in_full[i]), .count(c));
    assign h[i] = edge_t'(d);
    assign in_count[i] = 16'(c);
  end

  logic both_end, take1;
  always_comb begin
    both_end  = is_end(h[0]) && is_end(h[1]);
    take1     = lex_key(h[1], LOG2K) < lex_key(h[0], LOG2K);
    out_valid = (emp == 2'b00);
    out_edge  = take1 ? h[1] : h[0];
    pop       = '0;
    if (out_valid && out_ready) begin
      if (both_end) pop = 2'b11;
      else if (take1) pop = 2'b10;
      else pop = 2'b01;
    end
  end
endmodule
