// bram_mb_requester_tb: asks the prefetcher for the matching bits of several
// epochs and checks that it reads exactly the K*L/512 chunks of that epoch,
// in order (mb_base + epoch*K*L/512 + j), never has more than CREDITS chunks
// outstanding, reads nothing for an epoch past the last one, and drops busy
// when done.
module bram_mb_requester_tb;
  import mwm_pkg::*;
  localparam int K = 32, L = 64, CR = 2, NCH = K * L / 512;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, req_valid, req_ready, chunk_consumed, busy;
  logic [31:0] epoch, num_epochs;
  addr_t mb_base, req_addr;
  bram_mb_requester #(.K(K), .L(L), .CREDITS(CR)) dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial run();
  task automatic run();
    int outst = 0;
    start = 0; req_ready = 0; chunk_consumed = 0; epoch = '0; num_epochs = 32'd6; mb_base = 58'h4000;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < 8; e++) begin
      int got = 0, cyc = 0, want = (e < 6) ? NCH : 0;
      @(negedge clk);
      epoch = 32'(e); start = 1;
      #1;
      chunk_consumed = (outst > 0);
      @(negedge clk);
      if (chunk_consumed) outst--;
      start = 0;
      while ((busy || outst > 0) && cyc < 1000) begin
        bit acc, cons;
        req_ready = ($urandom_range(0, 99) < 70);
        chunk_consumed = (outst > 0) && ($urandom_range(0, 99) < 40);
        #1;
        check(outst <= CR, "credit limit");
        if (req_valid) check(req_addr === mb_base + addr_t'(e * NCH + got), "address");
        acc = req_valid && req_ready; cons = chunk_consumed;
        @(negedge clk);
        cyc++;
        if (acc) begin got++; outst++; end
        if (cons) outst--;
      end
      chunk_consumed = 0;
      check(got === want, $sformatf("epoch %0d: %0d chunks read", e, got));
      check(!busy && !req_valid, "idle after the epoch");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
