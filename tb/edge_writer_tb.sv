// edge_writer_tb: sends random matched edges (random stream index) to the
// edge writer, with gaps, and stores every write it issues in a memory model
// (the writer queue is modelled with a random occupancy that drains). After
// the flush, each of the L streams is read back from p_out + i*o: it must
// hold exactly the edges sent to stream i, in order, followed by an all-zero
// record. Also checks the issued-write and edge counters and flushed.
module edge_writer_tb;
  import mwm_pkg::*;
  localparam int L = 64, QD = 16, SL = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, in_valid, flush, flushed, wq_valid, room;
  addr_t p_out, o, wq_addr;
  oedge_t in_edge;
  chunk_t wq_data;
  logic [$clog2(QD+1)-1:0] wq_count;
  logic [31:0] issued, n_edges_out;
  edge_writer #(.L(L), .QDEPTH(QD), .SLACK(SL)) dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  chunk_t mem [addr_t];
  oedge_t sent [L][$];
  int nwr = 0, occ = 0;
  always @(posedge clk) if (rst_n) begin
    if (wq_valid) begin mem[wq_addr] = wq_data; nwr++; end
    occ = occ + (wq_valid ? 1 : 0) - ((occ > 0 && $urandom_range(0, 1) == 1) ? 1 : 0);
  end
  assign wq_count = ($clog2(QD+1))'(occ > QD ? QD : occ);

  initial run();
  task automatic run();
    int nsent = 0, cyc = 0;
    start = 0; in_valid = 0; in_edge = '0; flush = 0; p_out = 58'h10_0000; o = 58'h100;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      in_valid = room && ($urandom_range(0, 99) < 70);
      in_edge.idx = (k % 5 == 0) ? 32'd7 : 32'($urandom_range(0, L - 2));   // stream 63 stays empty
      in_edge.u = $urandom; in_edge.v = $urandom; in_edge.w = $urandom_range(1, 1 << 20);
      @(posedge clk);
      if (in_valid) begin sent[in_edge.idx].push_back(in_edge); nsent++; end
    end
    @(negedge clk);
    in_valid = 0; flush = 1;
    @(negedge clk);
    flush = 0;
    while (!flushed && cyc < 5000) begin @(negedge clk); cyc++; end
    check(flushed, "flushed");
    for (int i = 0; i < L; i++) begin
      int j = 0;
      while (1) begin
        addr_t a = p_out + addr_t'(i) * o + addr_t'(j / 4);
        oedge_t e = mem.exists(a) ? oedge_t'(mem[a][(j % 4) * 128 +: 128]) : oedge_t'({4{32'hDEAD_BEEF}});
        if (j === sent[i].size()) begin check(e === '0, $sformatf("stream %0d not terminated", i)); break; end
        check(e === sent[i][j], $sformatf("stream %0d record %0d", i, j));
        j++;
      end
    end
    check(int'(n_edges_out) === nsent && int'(issued) === nwr, "counters");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
