// edge_receiver_tb: sends the edge receiver a random sequence of notices
// (data chunk of row u with first slot and count, empty row, and finally
// END) and, in the same order, the graph_data chunks of the data notices
// (mixed with read data of other tags, at most CHUNK_CREDITS ahead of the
// returned credits). Starting queues report full at random. Checks, for
// every starting queue, the sequence of inserted edges: (u, v, w) of the
// valid slots in order, an artificial edge (w = 0) for an empty row, and a
// final end marker in each of the K queues; also one credit per chunk and
// that nothing is pushed into a full queue.
module edge_receiver_tb;
  import mwm_pkg::*;
  localparam int K = 32, CC = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic info_valid, info_ready, rsp_valid, chunk_consumed;
  logic [1:0] info_kind;
  logic [31:0] info_u;
  logic [2:0] info_first;
  logic [3:0] info_num;
  chunk_t rsp_data;
  tag_t rsp_tag;
  logic [K-1:0] sq_push, sq_full;
  edge_t sq_edge;
  edge_receiver #(.K(K), .INFO_DEPTH(16), .CHUNK_CREDITS(CC)) dut (.*);
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
  edge_t exp [K][$];
  int nexp = 0;
  initial run();
  task automatic run();
    int nn = 300, ni = 0, nc = 0, outst = 0, got = 0, cyc = 0, ncons = 0, nchunks = 0;
    logic [1:0] kinds [$];
    int us [$], firsts [$], nums [$];
    chunk_t chunks [$];
    // notices and the chunks that go with them
    for (int k = 0; k < nn; k++) begin
      int u = $urandom_range(0, 1000);
      if ($urandom_range(0, 4) == 0) begin
        kinds.push_back(2'd1); us.push_back(u); firsts.push_back(0); nums.push_back(0);
        exp[u % K].push_back('{w: 32'd0, v: 32'd0, u: 32'(u)});
      end else begin
        int f = $urandom_range(0, 7), n = $urandom_range(1, 8 - f);
        chunk_t c;
        for (int s = 0; s < 8; s++) c[s*64 +: 64] = {32'($urandom_range(1, 5000)), $urandom};
        kinds.push_back(2'd0); us.push_back(u); firsts.push_back(f); nums.push_back(n);
        chunks.push_back(c);
        for (int s = f; s < f + n; s++) begin
          gentry_t g = gentry_t'(c[s*64 +: 64]);
          exp[u % K].push_back('{w: g.w, v: g.col, u: 32'(u)});
        end
      end
    end
    kinds.push_back(2'd2); us.push_back(0); firsts.push_back(0); nums.push_back(0);
    for (int q = 0; q < K; q++) exp[q].push_back('{w: 32'd0, v: 32'd0, u: END_U});
    foreach (exp[q]) nexp += exp[q].size();
    info_valid = 0; info_kind = '0; info_u = '0; info_first = '0; info_num = '0;
    rsp_valid = 0; rsp_data = '0; rsp_tag = '0; sq_full = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (got < nexp && cyc < 50000) begin
      bit ai, cons;
      cyc++;
      @(negedge clk);
      info_valid = (ni < kinds.size()) && ($urandom_range(0, 1) == 1);
      if (info_valid) begin
        info_kind = kinds[ni]; info_u = 32'(us[ni]); info_first = 3'(firsts[ni]); info_num = 4'(nums[ni]);
      end
      rsp_valid = 0; rsp_tag = TAG_PTR;
      if (nc < chunks.size() && outst < CC && $urandom_range(0, 2) == 0) begin
        rsp_valid = 1; rsp_tag = TAG_EDGE; rsp_data = chunks[nc];
      end else if ($urandom_range(0, 3) == 0) begin
        rsp_valid = 1; rsp_data = {16{$urandom}};
      end
      for (int q = 0; q < K; q++) sq_full[q] = ($urandom_range(0, 3) == 0);
      #1;
      check((sq_push & sq_full) === '0, "push into a full queue");
      check($countones(sq_push) <= 1, "one insert per cycle");
      for (int q = 0; q < K; q++) if (sq_push[q]) begin
        check(exp[q].size() != 0 && sq_edge === exp[q][0],
              $sformatf("queue %0d: got (%0d,%0d,%0d)", q, sq_edge.u, sq_edge.v, sq_edge.w));
        if (exp[q].size() != 0) void'(exp[q].pop_front());
        got++;
      end
      ai = info_valid && info_ready;
      cons = chunk_consumed;
      @(posedge clk);
      if (ai) ni++;
      if (rsp_valid && rsp_tag == TAG_EDGE) begin nc++; outst++; nchunks++; end
      if (cons) begin outst--; ncons++; end
    end
    check(got === nexp, $sformatf("%0d of %0d inserts", got, nexp));
    check(ncons === chunks.size(), "one credit per chunk");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
