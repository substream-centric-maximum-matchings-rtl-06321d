// merger_tb: fills the K starting queues of the merging tree (K = 8 here)
// the way the edge receiver does: queue j gets the rows u = j (mod K) in
// increasing order, each row's edges sorted by v, an artificial edge
// (w = 0) for some empty rows, and one end marker per queue at the end;
// pushes are random and respect sq_full, the output is popped at random.
// Checks that the output is every real edge in the lexicographic order
// (u/K, v, u) with artificial edges removed, followed by one end marker, the
// dropped-edge count, and that sq_count follows the pushes into each queue.
module merger_tb;
  import mwm_pkg::*;
  localparam int K = 8, SQ = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [K-1:0] sq_push, sq_full;
  edge_t sq_edge, out_edge;
  logic [15:0] sq_count [K];
  logic out_valid, out_ready;
  logic [31:0] n_dropped;
  merger #(.K(K), .SQ_DEPTH(SQ), .INNER_DEPTH(4)) dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  edge_t src [K][$];
  longint exp_keys [$];
  edge_t exp_map [longint];
  initial run();
  task automatic run();
    int nart = 0, got = 0, cyc = 0, pushed [K];
    bit ended = 0;
    sq_push = '0; sq_edge = '0; out_ready = 0;
    // rows 0..95, degree 0..6, random v (no repeated v within a row)
    for (int u = 0; u < 96; u++) begin
      int deg = $urandom_range(0, 6);
      int v = 0;
      if (deg == 0) begin
        src[u % K].push_back('{w: 32'd0, v: 32'd0, u: 32'(u)});
        nart++;
      end
      for (int k = 0; k < deg; k++) begin
        edge_t e;
        v += $urandom_range(1, 40);
        e = '{w: 32'($urandom_range(1, 1000)), v: 32'(v), u: 32'(u)};
        src[u % K].push_back(e);
        exp_keys.push_back((longint'(u / K) << 40) | (longint'(v) << 20) | longint'(u));
        exp_map[(longint'(u / K) << 40) | (longint'(v) << 20) | longint'(u)] = e;
      end
    end
    for (int j = 0; j < K; j++) src[j].push_back('{w: 32'd0, v: 32'd0, u: END_U});
    exp_keys.sort();
    foreach (pushed[j]) pushed[j] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (!ended && cyc < 100000) begin
      int j;
      @(negedge clk);
      sq_push = '0;
      j = $urandom_range(0, K - 1);
      if (src[j].size() != 0 && !sq_full[j] && $urandom_range(0, 99) < 80) begin
        sq_push[j] = 1; sq_edge = src[j][0];
      end
      out_ready = ($urandom_range(0, 99) < 60);
      #1;
      if (out_valid && out_ready) begin
        if (got < exp_keys.size()) begin
          check(out_edge === exp_map[exp_keys[got]], $sformatf("output %0d: (%0d,%0d)", got, out_edge.u, out_edge.v));
          got++;
        end else begin
          check(is_end(out_edge), "end marker after the last edge");
          ended = 1;
        end
      end
      @(posedge clk);
      if (sq_push[j]) begin void'(src[j].pop_front()); pushed[j]++; end
      cyc++;
    end
    check(ended && got === exp_keys.size(), $sformatf("%0d of %0d edges and end marker", got, exp_keys.size()));
    check(n_dropped === 32'(nart), $sformatf("dropped %0d, expected %0d", n_dropped, nart));
    @(negedge clk);
    out_ready = 1;
    repeat (4) @(posedge clk);
    #1;
    check(!out_valid, "nothing after the end marker");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
