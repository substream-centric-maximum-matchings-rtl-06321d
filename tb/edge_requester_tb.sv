// edge_requester_tb: gives the edge requester the row pointers of a random
// CSR graph (200 rows, degrees 0..20, some empty, a few long rows) through
// the four pointer queues, released gradually. The TB models the edge
// receiver and the merger's starting queues: each accepted notice is turned
// into insertions into starting queue u mod K (one edge per cycle, in notice
// order) that raise the queue occupancy, the queues drain at random, and a
// chunk credit returns when a chunk's edges are inserted. Checks: every row's
// chunks are requested in order at graph_base + chunk with the right first
// slot and count, an empty row gives one EMPTY notice and no read, rows of
// the same starting queue are served in row order, no starting queue ever
// exceeds its depth, at most CHUNK_CREDITS chunks are outstanding, the END
// notice comes once after everything, and both modes were used.
module edge_requester_tb;
  import mwm_pkg::*;
  localparam int K = 32, SQ = 32, CC = 8, N = 200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, all_rows, req_valid, req_ready, chunk_consumed, info_valid, info_ready;
  addr_t graph_base, req_addr;
  logic [3:0] q_valid, q_pop;
  uptr_t q_data [4];
  logic [15:0] sq_count [K];
  logic [K-1:0] sq_insert;
  logic [1:0] info_kind;
  logic [31:0] info_u, n_mode1, n_mode2;
  logic [2:0] info_first;
  logic [3:0] info_num;
  edge_requester #(.K(K), .SQ_DEPTH(SQ), .CHUNK_CREDITS(CC)) dut (.*);
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
  ptr_t  ptrs [N];
  int    deg [N];
  int    done_edges [N];     // edges of row u already announced
  int    next_row [K];       // next row expected in each starting queue
  uptr_t pq [4][$];
  int    occ [K];
  int    ins_q [$], ins_n [$], ins_chunk [$];
  int    released = 0, outst = 0;
  bit    end_seen = 0;

  assign all_rows = (released == N);
  for (genvar i = 0; i < 4; i++) begin : g_q
    assign q_valid[i] = (pq[i].size() != 0);
    assign q_data[i]  = (pq[i].size() != 0) ? pq[i][0] : '0;
  end
  always_comb for (int q = 0; q < K; q++) sq_count[q] = 16'(occ[q]);

  initial run();
  task automatic run();
    int idx = 0, cyc = 0;
    for (int u = 0; u < N; u++) begin
      deg[u] = (u % 37 == 3) ? 60 : ($urandom_range(0, 5) == 0) ? 0 : int'($urandom_range(1, 20));
      ptrs[u] = '{count: 32'(deg[u]), offset: 32'(idx % 8), chunk: 32'(idx / 8)};
      idx += deg[u];
      done_edges[u] = 0;
    end
    foreach (next_row[q]) next_row[q] = q;
    foreach (occ[q]) occ[q] = 0;
    start = 0; req_ready = 0; chunk_consumed = 0; info_ready = 0; sq_insert = '0; graph_base = 58'h2_0000;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!end_seen && cyc < 100000) begin
      bit acc_info, acc_req;
      logic [3:0] popped;
      int iq = -1;
      cyc++;
      // release rows into the pointer queues (the pointer receiver's order)
      if (released < N && pq[(released % K) / (K / 4)].size() < 8 && $urandom_range(0, 1) == 1) begin
        pq[(released % K) / (K / 4)].push_back('{u: 32'(released), p: ptrs[released]});
        released++;
      end
      req_ready = ($urandom_range(0, 99) < 70);
      info_ready = ($urandom_range(0, 99) < 90);
      // receiver model: insert one edge per cycle into its starting queue
      sq_insert = '0; chunk_consumed = 0;
      if (ins_q.size() != 0 && occ[ins_q[0]] < SQ + 1) begin
        iq = ins_q[0];
        sq_insert[iq] = 1;
        ins_n[0]--;
        if (ins_n[0] == 0) begin
          chunk_consumed = (ins_chunk[0] != 0);
          void'(ins_q.pop_front()); void'(ins_n.pop_front()); void'(ins_chunk.pop_front());
        end
      end
      #1;
      check(outst <= CC, "chunk credit limit");
      acc_info = info_valid && info_ready;
      acc_req = req_valid && req_ready;
      popped = q_pop;
      if (acc_info) begin
        int u = int'(info_u);
        case (info_kind)
          2'd0: begin
            int ei = int'(ptrs[u].offset) + int'(ptrs[u].chunk) * 8 + done_edges[u];
            int n = 8 - ei % 8;
            if (n > deg[u] - done_edges[u]) n = deg[u] - done_edges[u];
            check(acc_req && req_addr === graph_base + addr_t'(ei / 8), $sformatf("row %0d: chunk read", u));
            check(int'(info_first) === ei % 8 && int'(info_num) === n, $sformatf("row %0d: first %0d num %0d", u, info_first, info_num));
            check(next_row[u % K] === u, $sformatf("row %0d served before row %0d of its queue", u, next_row[u % K]));
            done_edges[u] += int'(info_num);
            if (done_edges[u] >= deg[u]) next_row[u % K] += K;
            ins_q.push_back(u % K); ins_n.push_back(int'(info_num)); ins_chunk.push_back(1);
          end
          2'd1: begin
            check(deg[u] === 0 && !acc_req, $sformatf("row %0d: empty notice", u));
            check(next_row[u % K] === u, "empty row order");
            next_row[u % K] += K;
            ins_q.push_back(u % K); ins_n.push_back(1); ins_chunk.push_back(0);
          end
          default: begin
            end_seen = 1;
            for (int q = 0; q < K; q++) check(next_row[q] >= N, "END before every row was served");
          end
        endcase
      end else check(!acc_req, "read without a notice");
      for (int q = 0; q < K; q++) check(occ[q] <= SQ, $sformatf("starting queue %0d over its depth", q));
      @(posedge clk);
      #2;   // model updates after the block has sampled this cycle
      for (int i = 0; i < 4; i++) if (popped[i]) void'(pq[i].pop_front());
      if (iq >= 0) occ[iq]++;
      for (int q = 0; q < K; q++) if (occ[q] > 0 && $urandom_range(0, 9) < 3 && !(iq == q)) occ[q]--;
      if (acc_req) outst++;
      if (chunk_consumed) outst--;
      @(negedge clk);
    end
    check(end_seen, "END notice");
    check(n_mode1 > 0 && n_mode2 > 0, "both modes used");
    $display("mode1 %0d mode2 %0d", n_mode1, n_mode2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
