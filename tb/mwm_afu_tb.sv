// mwm_afu_tb: end-to-end test of the accelerator at its default parameters
// (K = 32, L = 64, eps = 0.1). It builds a random undirected weighted graph
// in the accelerator's CSR layout in a model of host memory, runs the
// accelerator, and compares against a reference model written here:
//   * edges are visited in the lexicographic order (u/K, v, u);
//   * for each edge, substream i accepts it if w >= (1+eps)^i and both
//     endpoints are free in matching i; the edge is recorded in the stream of
//     the highest accepting i;
// Checks: every output stream (order and content), the matching bits of every
// vertex left in memory, the processed-edge count, and that the host-side
// greedy merge of the streams is a valid matching. It also counts how often
// each mechanism fired (mode-1 and mode-2 fetches, dropped artificial edges
// of empty rows, forwarding between pipeline stages, v in the running epoch,
// v in the next epoch, shared bit chunks, epochs) and fails if any never did.
module mwm_afu_tb;
  import mwm_pkg::*;
  localparam int K = 32;
  localparam int L = 64;
  localparam int N = 1000;         // vertices
  localparam int E_UND = 6000;     // undirected edges
  localparam int WMAX = 407;       // about (1.1)^63 + 1
  localparam addr_t PTR_BASE = 58'h1000, GRAPH_BASE = 58'h2000, MB_BASE = 58'h8000;
  localparam addr_t OUT_BASE = 58'h10000, OUT_STRIDE = 58'h400;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  logic done, count_error;
  logic rd_req_valid, rd_req_ready, rd_rsp_valid, wr_req_valid, wr_req_ready, wr_ack_valid;
  addr_t rd_req_addr, wr_req_addr;
  tag_t rd_req_tag, rd_rsp_tag, wr_req_tag, wr_ack_tag;
  chunk_t rd_rsp_data, wr_req_data;
  logic [31:0] s_edges, s_matched, s_forward, s_vcur, s_vnext, s_mode1, s_mode2, s_dropped,
               s_mbreq, s_shared, s_epochs;

  mwm_afu dut (
    .clk, .rst_n, .start, .ptr_base(PTR_BASE), .graph_base(GRAPH_BASE), .mb_base(MB_BASE),
    .out_base(OUT_BASE), .out_stride(OUT_STRIDE), .num_vertices(32'(N)), .num_edges(32'(2*E_UND)),
    .done, .count_error,
    .rd_req_valid, .rd_req_addr, .rd_req_tag, .rd_req_ready, .rd_rsp_valid, .rd_rsp_data, .rd_rsp_tag,
    .wr_req_valid, .wr_req_addr, .wr_req_data, .wr_req_tag, .wr_req_ready, .wr_ack_valid, .wr_ack_tag,
    .stat_edges(s_edges), .stat_matched(s_matched), .stat_forward(s_forward), .stat_vcur(s_vcur),
    .stat_vnext(s_vnext), .stat_mode1(s_mode1), .stat_mode2(s_mode2), .stat_dropped(s_dropped),
    .stat_mb_reqs(s_mbreq), .stat_mb_shared(s_shared), .stat_epochs(s_epochs));

  centaur_model mem (
    .clk, .rst_n, .rd_req_valid, .rd_req_addr, .rd_req_tag, .rd_req_ready, .rd_rsp_valid,
    .rd_rsp_data, .rd_rsp_tag, .wr_req_valid, .wr_req_addr, .wr_req_data, .wr_req_tag,
    .wr_req_ready, .wr_ack_valid, .wr_ack_tag);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // graph
  int unsigned adjw [int][int];        // adjw[u][v] = weight
  longint keys [$];
  logic [L-1:0] ref_mb [N];
  logic [63:0]  thr [L];
  oedge_t ref_c [L][$];
  int cycles = 0;

  initial begin : watchdog
    #(10 * 3_000_000);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cycles++;

  initial run_test();

  task automatic run_test();
    int idx;
    // ---- thresholds: (1.1)^i in Q16, by repeated multiplication
    begin
      longint t = 65536;
      for (int i = 0; i < L; i++) begin
        thr[i] = t;
        t = (t * (65536 + 6554)) >>> 16;
      end
    end
    // ---- random graph: vertex 5 has a high degree; 7, 40, 41, 99 have no edges
    for (int k = 0; k < E_UND; k++) begin
      int u, v;
      do begin
        u = (k < 300) ? 5 : int'($urandom_range(0, N-1));   // vertex 5 is a hub
        if ($urandom_range(0, 1)) v = u + int'($urandom_range(0, 80)) - 40;
        else v = $urandom_range(0, N-1);
      end while (v < 0 || v >= N || u == v || (adjw.exists(u) && adjw[u].exists(v)) ||
                 u == 7 || v == 7 || u == 40 || v == 40 || u == 41 || v == 41 || u == 99 || v == 99);
      begin
        int unsigned w = $urandom_range(1, WMAX);
        adjw[u][v] = w;
        adjw[v][u] = w;
      end
    end
    // ---- CSR layout in memory
    idx = 0;
    begin
      chunk_t gch [int];
      chunk_t pch [int];
      for (int u = 0; u < N; u++) begin
        int deg = adjw.exists(u) ? adjw[u].num() : 0;
        ptr_t p;
        p.chunk = 32'(idx / 8); p.offset = 32'(idx % 8); p.count = 32'(deg);
        if (!pch.exists(u / 5)) pch[u / 5] = '0;
        pch[u / 5][(u % 5) * 96 +: 96] = p;
        if (deg > 0) foreach (adjw[u][vv]) begin
          int v = vv;
          if (!gch.exists(idx / 8)) gch[idx / 8] = '0;
          gch[idx / 8][(idx % 8) * 64 +: 64] = {32'(adjw[u][v]), 32'(v)};
          keys.push_back((longint'(u / K) << 48) | (longint'(v) << 24) | longint'(u));
          idx++;
        end
      end
      foreach (pch[c]) mem.poke(PTR_BASE + addr_t'(c), pch[c]);
      foreach (gch[c]) mem.poke(GRAPH_BASE + addr_t'(c), gch[c]);
    end
    // ---- reference model in lexicographic order
    $display("graph: %0d directed edges, %0d rows", keys.size(), adjw.num());
    keys.sort();
    foreach (ref_mb[x]) ref_mb[x] = '0;
    foreach (keys[k]) begin
      int u = int'(keys[k] & 24'hFFFFFF);
      int v = int'((keys[k] >> 24) & 24'hFFFFFF);
      int unsigned w = adjw[u][v];
      logic [L-1:0] te, m;
      for (int i = 0; i < L; i++) te[i] = ((longint'(w) << 16) >= thr[i]);
      m = te & ~ref_mb[u] & ~ref_mb[v];
      ref_mb[u] |= m;
      ref_mb[v] |= m;
      if (m != 0) begin
        int hi = 0;
        for (int i = 0; i < L; i++) if (m[i]) hi = i;
        ref_c[hi].push_back('{idx: 32'(hi), w: 32'(w), v: 32'(v), u: 32'(u)});
      end
    end

    // ---- run
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    start = 1;
    @(posedge clk);
    start = 0;
    wait (done);
    repeat (5) @(posedge clk);
    $display("run took %0d cycles for %0d edges", cycles, 2 * E_UND);

    // ---- output streams
    for (int i = 0; i < L; i++) begin
      int j = 0;
      bit fin = 0;
      while (!fin) begin
        chunk_t c = mem.peek(OUT_BASE + addr_t'(i) * OUT_STRIDE + addr_t'(j / 4));
        oedge_t e = oedge_t'(c[(j % 4) * 128 +: 128]);
        if (e == '0) fin = 1;
        else begin
          check(j < ref_c[i].size() && e === ref_c[i][j],
                $sformatf("stream %0d record %0d: got (%0d,%0d,%0d,%0d)", i, j, e.u, e.v, e.w, e.idx));
          j++;
        end
        if (j > 4 * 1024) fin = 1;
      end
      check(j === ref_c[i].size(), $sformatf("stream %0d length %0d, expected %0d", i, j, ref_c[i].size()));
    end
    // ---- matching bits left in memory
    for (int x = 0; x < N; x++) begin
      chunk_t c = mem.peek(MB_BASE + addr_t'(x / 8));
      check(c[(x % 8) * L +: L] === ref_mb[x], $sformatf("matching bits of vertex %0d", x));
    end
    check(s_edges === 32'(2 * E_UND), "edge count");
    check(!count_error, "count_error flag");
    // ---- host-side greedy merge of the streams (as the CPU would)
    begin
      bit used [N];
      longint total = 0;
      int size = 0;
      bit ok = 1;
      foreach (used[x]) used[x] = 0;
      for (int i = L - 1; i >= 0; i--)
        foreach (ref_c[i][k]) begin
          oedge_t e = ref_c[i][k];
          if (!used[e.u] && !used[e.v]) begin
            used[e.u] = 1; used[e.v] = 1; total += e.w; size++;
            if (!adjw[e.u].exists(e.v)) ok = 0;
          end
        end
      check(ok && size > 0, "greedy merge gives a matching of graph edges");
      $display("final matching: %0d edges, weight %0d", size, total);
    end
    // ---- mechanisms
    $display("mode1=%0d mode2=%0d dropped=%0d forward=%0d vcur=%0d vnext=%0d shared=%0d chunkreqs=%0d epochs=%0d matched=%0d",
             s_mode1, s_mode2, s_dropped, s_forward, s_vcur, s_vnext, s_shared, s_mbreq, s_epochs, s_matched);
    check(s_mode1 > 0, "mode 1 fetch never happened");
    check(s_mode2 > 0, "mode 2 fetch never happened");
    check(s_dropped === 32'(N - adjw.num()) && s_dropped >= 4, "artificial edges of the empty rows dropped");
    check(s_forward > 0, "pipeline forwarding never happened");
    check(s_vcur > 0, "v in running epoch never happened");
    check(s_vnext > 0, "v in next epoch never happened");
    check(s_shared > 0, "bit chunk sharing never happened");
    check(s_epochs === 32'((N + K - 1) / K), "epoch count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
