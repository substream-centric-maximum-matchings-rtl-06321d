// pointer_receiver_tb: feeds the pointer receiver the pointer_data chunks of
// a graph with n rows (five 96-bit pointers per chunk, random contents),
// mixed with read data of other tags, at most CREDITS chunks ahead of the
// credits it returns. The four queues are popped at random. Checks that queue
// i receives exactly the rows u with (u mod K)/(K/4) = i, in increasing
// order, each labelled with u and carrying its pointer; that padding entries
// of the last chunk are dropped; and that all_rows rises at the end.
module pointer_receiver_tb;
  import mwm_pkg::*;
  localparam int K = 32, CR = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, rsp_valid, chunk_consumed, all_rows;
  logic [31:0] num_vertices;
  chunk_t rsp_data;
  tag_t rsp_tag;
  logic [3:0] q_valid, q_pop;
  uptr_t q_data [4];
  pointer_receiver #(.K(K), .CREDITS(CR), .QDEPTH(8)) dut (.*);
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
  initial run();
  task automatic run();
    int sizes [3] = '{7, 300, 161};
    start = 0; rsp_valid = 0; rsp_data = '0; rsp_tag = '0; q_pop = '0; num_vertices = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (sizes[t]) begin
      int n = sizes[t], nch = (sizes[t] + 4) / 5, sent = 0, outst = 0, cyc = 0, got = 0;
      int nextu [4];
      ptr_t ptrs [$];
      for (int u = 0; u < nch * 5; u++) ptrs.push_back({$urandom, $urandom, $urandom});
      foreach (nextu[i]) begin
        nextu[i] = -1;
        for (int u = n - 1; u >= 0; u--) if ((u % K) / (K / 4) == i) nextu[i] = u;
      end
      @(negedge clk);
      num_vertices = 32'(n); start = 1;
      @(negedge clk);
      start = 0;
      while (got < n && cyc < 20000) begin
        bit cons;
        rsp_valid = 0; rsp_tag = TAG_MB;
        if (sent < nch && outst < CR && $urandom_range(0, 1) == 1) begin
          rsp_valid = 1; rsp_tag = TAG_PTR;
          for (int s = 0; s < 5; s++) rsp_data[s*96 +: 96] = ptrs[sent * 5 + s];
        end else if ($urandom_range(0, 2) == 0) begin
          rsp_valid = 1; rsp_data = {16{$urandom}};
        end
        for (int i = 0; i < 4; i++) q_pop[i] = q_valid[i] && ($urandom_range(0, 99) < 30);
        #1;
        for (int i = 0; i < 4; i++) if (q_pop[i]) begin
          check(nextu[i] >= 0 && q_data[i].u === 32'(nextu[i]) && q_data[i].p === ptrs[nextu[i]],
                $sformatf("queue %0d: row %0d, expected %0d", i, q_data[i].u, nextu[i]));
          got++;
          do nextu[i] += 1; while (nextu[i] < n && (nextu[i] % K) / (K / 4) != i);
          if (nextu[i] >= n) nextu[i] = -1;
        end
        cons = chunk_consumed;
        @(negedge clk);
        cyc++;
        if (rsp_valid && rsp_tag == TAG_PTR) begin sent++; outst++; end
        if (cons) outst--;
      end
      rsp_valid = 0; q_pop = '0;
      check(got === n, $sformatf("n=%0d: %0d rows", n, got));
      check(outst === 0 && sent === nch, "every chunk credited");
      #1;
      check(all_rows && q_valid === '0, "all_rows and queues empty");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
