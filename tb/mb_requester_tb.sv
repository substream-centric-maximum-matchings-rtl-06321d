// mb_requester_tb: presents an ordered edge stream covering four epochs
// (sorted by u/K, then v) and the end marker. The TB acts as the state
// controller (epoch, run, epoch_start), the read port (random ready) and the
// edge processor (pops the Pending-Queue at random and returns one credit per
// new chunk). Checks: the Pending-Queue holds each epoch's edges in order;
// the "new chunk" flag is set exactly when v/(512/L) differs from the
// previous edge of the epoch (always for the first); a read of
// mb_base + v/(512/L) is issued for each new chunk and for no other edge; at
// most BITQ_DEPTH chunks are outstanding; epoch_end only when the head edge
// belongs to a later epoch; nothing moves while run is low.
module mb_requester_tb;
  import mwm_pkg::*;
  localparam int K = 32, L = 64, VPC = 512 / L, BQ = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  addr_t mb_base, req_addr;
  logic [31:0] epoch, n_chunk_reqs, n_shared;
  logic run, epoch_start, in_valid, in_ready, req_valid, req_ready, chunk_consumed;
  logic pend_valid, pend_new, pend_pop, pend_empty, epoch_end;
  edge_t in_edge, pend_edge;
  mb_requester #(.K(K), .L(L), .BITQ_DEPTH(BQ), .PEND_DEPTH(16)) dut (.*);
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
  edge_t stream [$];
  edge_t expq [$];
  bit    expnew [$];
  addr_t expreq [$];
  initial run_test();
  task automatic run_test();
    int outst = 0, cyc = 0, nreq = 0, nsh = 0, e = 0, pos = 0;
    longint keys [$];
    mb_base = 58'h8000; epoch = '0; run = 0; epoch_start = 0; in_valid = 0; in_edge = '0;
    req_ready = 0; chunk_consumed = 0; pend_pop = 0;
    for (int k = 0; k < 400; k++) begin
      int u = $urandom_range(0, 4 * K - 1), v = $urandom_range(0, 300);
      keys.push_back((longint'(u / K) << 40) | (longint'(v) << 20) | longint'(u));
    end
    keys.sort();
    foreach (keys[k]) stream.push_back('{w: 32'd5, v: 32'((keys[k] >> 20) & 20'hFFFFF), u: 32'(keys[k] & 20'hFFFFF)});
    stream.push_back('{w: 32'd0, v: 32'd0, u: END_U});
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); epoch_start = 1; @(negedge clk); epoch_start = 0;
    while (e < 4 && cyc < 50000) begin
      bit acc, racc, pop, cons;
      cyc++;
      run = ($urandom_range(0, 9) != 0);
      in_valid = (pos < stream.size());
      in_edge = in_valid ? stream[pos] : '0;
      req_ready = ($urandom_range(0, 99) < 70);
      pend_pop = pend_valid && ($urandom_range(0, 99) < 50);
      chunk_consumed = pend_pop && pend_new;
      #1;
      check(outst <= BQ, "credit limit");
      check(epoch_end === (in_valid && (is_end(in_edge) || int'(in_edge.u) / K != e)), "epoch_end");
      if (!run) check(!in_ready && !req_valid, "moves while run is low");
      acc = in_valid && in_ready; racc = req_valid && req_ready;
      if (acc) begin
        bit nw = first_of_epoch || (in_edge.v / VPC != stream[pos - 1].v / VPC);
        check(racc === nw, "chunk read issued exactly for a new chunk");
        if (nw) check(req_addr === mb_base + addr_t'(in_edge.v / VPC), "chunk address");
        expq.push_back(in_edge); expnew.push_back(nw);
        if (nw) nreq++; else nsh++;
      end
      if (pend_pop) begin
        check(expq.size() != 0 && pend_edge === expq[0] && pend_new === expnew[0], "Pending-Queue order / flag");
        void'(expq.pop_front()); void'(expnew.pop_front());
      end
      cons = chunk_consumed;
      @(negedge clk);
      if (acc) begin pos++; first_of_epoch = 0; end
      if (racc) outst++;
      if (cons) outst--;
      // next epoch once the current one is drained
      if (epoch_end && pend_empty && expq.size() == 0) begin
        e++; epoch = 32'(e); epoch_start = 1; first_of_epoch = 1;
        run = 0; in_valid = 0; pend_pop = 0; chunk_consumed = 0; req_ready = 0;
        @(negedge clk); epoch_start = 0;
      end
    end
    check(e === 4 && pos === stream.size() - 1, "all four epochs passed");
    check(n_chunk_reqs === 32'(nreq) && n_shared === 32'(nsh) && nsh > 0, "counters");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
  bit first_of_epoch = 1;
endmodule
