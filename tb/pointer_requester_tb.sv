// pointer_requester_tb: starts the pointer requester for several graph sizes
// with a random-ready request port and returns credits (chunk_consumed) at
// random times for chunks that were requested. Checks that the requests are
// ptr_base, ptr_base+1, ... ceil(n/5) of them, that no more than CREDITS are
// ever outstanding, and all_requested at the end.
module pointer_requester_tb;
  import mwm_pkg::*;
  localparam int CR = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, req_valid, req_ready, chunk_consumed, all_requested;
  addr_t ptr_base, req_addr;
  logic [31:0] num_vertices;
  pointer_requester #(.CREDITS(CR)) dut (.*);
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
    int sizes [5] = '{1, 5, 6, 333, 1000};
    start = 0; req_ready = 0; chunk_consumed = 0; ptr_base = '0; num_vertices = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (sizes[t]) begin
      int n = sizes[t], got = 0, outst = 0, cyc = 0;
      @(negedge clk);
      ptr_base = {$urandom, $urandom}; num_vertices = 32'(n); start = 1;
      @(negedge clk);
      start = 0;
      while ((got < (n + 4) / 5 || outst > 0) && cyc < 20000) begin
        bit acc, cons;
        req_ready = ($urandom_range(0, 99) < 70);
        chunk_consumed = (outst > 0) && ($urandom_range(0, 99) < 40);
        #1;
        check(outst <= CR, "credit limit");
        if (req_valid) check(req_addr === ptr_base + addr_t'(got), $sformatf("request address %0d", got));
        check(!req_valid || got < (n + 4) / 5, "too many requests");
        acc = req_valid && req_ready; cons = chunk_consumed;
        @(negedge clk);
        cyc++;
        if (acc) begin got++; outst++; end
        if (cons) outst--;
      end
      check(got === (n + 4) / 5, $sformatf("n=%0d: %0d requests", n, got));
      check(all_requested && !req_valid, "all_requested");
      chunk_consumed = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
