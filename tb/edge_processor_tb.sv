// edge_processor_tb: runs the edge processor (with its u-bit store) through
// four epochs of random edges, K = 32 rows per epoch, L = 64 substreams. The
// TB plays every neighbour: it keeps the matching bits of all vertices in a
// memory model, answers each "new chunk" edge with the chunk as memory holds
// it, loads the next epoch's u bits from memory at random times during the
// running epoch (so some loads are stale and must be overridden), applies
// the processor's write-backs to memory, and sequences flush and swap.
// in_room is dropped at random. Every edge offered while in_room is high
// must be taken in that cycle (one edge per clock). A reference model applies the matching rule
// edge by edge in the same order. Checks: each matched edge and its
// substream index in order, the edge count, the matching bits of every
// vertex in memory at the end, and that forwarding between pipeline stages,
// v in the running epoch and v in the next epoch all happened.
module edge_processor_tb;
  import mwm_pkg::*;
  localparam int K = 32, L = 64, VPC = 512 / L, NE = 4, N = 200;
  localparam int LAT = 8;   // cycles from taking an edge to its matched-edge output
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [31:0] epoch, mb_wr_chunk, n_edges, n_matched, n_forward, n_vcur, n_vnext;
  logic in_room, pend_valid, pend_new, pend_pop, bq_valid, bq_pop, ld_valid, swap, flush, flushed, idle;
  logic out_valid, mb_wr_valid;
  edge_t pend_edge;
  chunk_t bq_data, mb_wr_data;
  logic [$clog2(K)-1:0] ld_idx;
  logic [L-1:0] ld_bits;
  oedge_t out_edge;
  edge_processor #(.K(K), .L(L), .EPS_Q16(6554)) dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic [L-1:0] mbm [N];      // memory model
  logic [L-1:0] rmb [N];      // reference
  logic [63:0]  thr [L];
  oedge_t expq [$];
  longint expt [$];
  longint now = 0;
  int nout = 0;
  always @(posedge clk) now <= now + 1;   // edges so far, as seen before this edge

  // memory side: write-backs
  always @(posedge clk) if (rst_n && mb_wr_valid)
    for (int s = 0; s < VPC; s++)
      if (int'(mb_wr_chunk) * VPC + s < N) mbm[int'(mb_wr_chunk) * VPC + s] = mb_wr_data[s*L +: L];
  // matched edges
  always @(posedge clk) if (rst_n && out_valid) begin
    check(expq.size() != 0 && out_edge === expq[0],
          $sformatf("matched edge %0d: (%0d,%0d,w=%0d,i=%0d)", nout, out_edge.u, out_edge.v, out_edge.w, out_edge.idx));
    if (expq.size() != 0) begin
      // an edge offered in cycle c is seen at the output in cycle c + 8: one cycle per stage
      check(now - expt[0] === 64'(LAT), $sformatf("latency %0d cycles", now - expt[0]));
      void'(expq.pop_front()); void'(expt.pop_front());
    end
    nout++;
  end

  function automatic chunk_t chunk_of(int c);
    chunk_t r = '0;
    for (int s = 0; s < VPC; s++) if (c * VPC + s < N) r[s*L +: L] = mbm[c * VPC + s];
    return r;
  endfunction

  initial run();
  task automatic run();
    int total = 0;
    begin
      longint t = 65536;
      for (int i = 0; i < L; i++) begin thr[i] = t; t = (t * (65536 + 6554)) >>> 16; end
    end
    foreach (mbm[x]) begin mbm[x] = '0; rmb[x] = '0; end
    epoch = '0; in_room = 1; pend_valid = 0; pend_edge = '0; pend_new = 0; bq_valid = 0; bq_data = '0;
    ld_valid = 0; ld_idx = '0; ld_bits = '0; swap = 0; flush = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // epoch 0 bits
    for (int i = 0; i < K; i++) begin
      @(negedge clk); ld_valid = 1; ld_idx = 5'(i); ld_bits = mbm[i];
    end
    @(negedge clk); ld_valid = 0; swap = 1;
    @(negedge clk); swap = 0;
    for (int e = 0; e < NE; e++) begin
      longint keys [$];
      int nld = 0, k = 0, prevc = -1, cyc = 0;
      bit seen [longint];
      epoch = 32'(e);
      for (int j = 0; j < 250; j++) begin
        int u = e * K + $urandom_range(0, K - 1);
        int v = ($urandom_range(0, 2) == 0) ? int'($urandom_range(0, N - 1))
                                             : (e * K + int'($urandom_range(0, 2 * K - 1)));
        longint key = (longint'(v) << 20) | longint'(u);
        if (v != u && v < N && !seen.exists(key)) begin seen[key] = 1; keys.push_back(key); end
      end
      keys.sort();
      while ((k < keys.size() || nld < K) && cyc < 100000) begin
        cyc++;
        @(negedge clk);
        // next epoch's bits, read from memory now, at random times
        ld_valid = (nld < K) && ($urandom_range(0, 3) == 0);
        if (ld_valid) begin
          ld_idx = 5'(nld);
          ld_bits = ((e + 1) * K + nld < N) ? mbm[(e + 1) * K + nld] : '0;
        end
        in_room = ($urandom_range(0, 9) != 0);
        pend_valid = (k < keys.size()) && ($urandom_range(0, 4) != 0);
        if (pend_valid) begin
          int u = int'(keys[k] & 20'hFFFFF), v = int'(keys[k] >> 20);
          pend_edge = '{w: 32'($urandom_range(1, 407)), v: 32'(v), u: 32'(u)};
          pend_new = (v / VPC != prevc);
        end
        bq_valid = pend_valid && pend_new;
        bq_data = pend_valid ? chunk_of(int'(pend_edge.v) / VPC) : '0;
        #1;
        check(!bq_pop || pend_pop, "Bit-Queue popped without an edge");
        // throughput: an offered edge is taken in the same cycle whenever the writers have room
        if (pend_valid && in_room) check(pend_pop === 1'b1, "one edge per cycle");
        if (pend_pop) begin
          int u = int'(pend_edge.u), v = int'(pend_edge.v), hi = -1;
          logic [L-1:0] te, m;
          check(bq_pop === pend_new, "Bit-Queue pop with new chunk");
          for (int i = 0; i < L; i++) te[i] = ((longint'(pend_edge.w) << 16) >= thr[i]);
          m = te & ~rmb[u] & ~rmb[v];
          rmb[u] |= m; rmb[v] |= m;
          for (int i = 0; i < L; i++) if (m[i]) hi = i;
          if (hi >= 0) begin
            expq.push_back('{idx: 32'(hi), w: pend_edge.w, v: pend_edge.v, u: pend_edge.u});
            expt.push_back(now);
          end
          prevc = v / VPC;
          k++; total++;
        end
        if (ld_valid) nld++;
      end
      @(negedge clk);
      pend_valid = 0; bq_valid = 0; ld_valid = 0;
      while (!idle) @(negedge clk);
      flush = 1;
      @(negedge clk);
      flush = 0;
      cyc = 0;
      while (!flushed && cyc < 1000) begin @(negedge clk); cyc++; end
      check(flushed, "flushed");
      @(negedge clk);
      swap = 1;
      @(negedge clk);
      swap = 0;
    end
    repeat (5) @(negedge clk);
    check(expq.size() === 0, "every matched edge came out");
    check(n_edges === 32'(total), "edge count");
    for (int x = 0; x < N; x++) check(mbm[x] === rmb[x], $sformatf("matching bits of vertex %0d in memory", x));
    check(n_forward > 0, "forwarding happened");
    check(n_vcur > 0 && n_vnext > 0, "v in running and in next epoch happened");
    $display("edges %0d matched %0d forward %0d vcur %0d vnext %0d", n_edges, n_matched, n_forward, n_vcur, n_vnext);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
