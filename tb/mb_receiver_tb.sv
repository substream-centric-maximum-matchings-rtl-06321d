// mb_receiver_tb: returns read data with random tags; only chunks tagged as
// matching-bit reads may enter the Bit-Queue. The edge processor side pops at
// random. Checks the order and content of the chunks that come out, that
// nothing else comes out, the consumed credit pulse and the received count.
module mb_receiver_tb;
  import mwm_pkg::*;
  localparam int BQ = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic rsp_valid, bq_valid, bq_pop, consumed;
  chunk_t rsp_data, bq_data;
  tag_t rsp_tag;
  logic [31:0] n_received;
  mb_receiver #(.BITQ_DEPTH(BQ)) dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  chunk_t q [$];
  initial run();
  task automatic run();
    int nrec = 0, npop = 0;
    rsp_valid = 0; rsp_data = '0; rsp_tag = '0; bq_pop = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      bit push;
      @(negedge clk);
      rsp_valid = ($urandom_range(0, 1) == 1) && cyc < 3500;
      rsp_tag = ($urandom_range(0, 2) == 0) ? TAG_EDGE : TAG_MB;
      for (int w = 0; w < 16; w++) rsp_data[w*32 +: 32] = $urandom;
      push = rsp_valid && rsp_tag == TAG_MB;
      if (push && q.size() >= BQ) begin rsp_valid = 0; push = 0; end   // credits keep it from overflowing
      bq_pop = bq_valid && ($urandom_range(0, 99) < 45);
      #1;
      check(bq_valid === (q.size() != 0), "Bit-Queue valid");
      if (bq_valid && q.size() != 0) check(bq_data === q[0], "Bit-Queue head");
      check(consumed === bq_pop, "consumed pulse");
      check(n_received === 32'(nrec), "received count");
      @(posedge clk);
      if (bq_pop) begin void'(q.pop_front()); npop++; end
      if (push) begin q.push_back(rsp_data); nrec++; end
    end
    check(npop > 500, "enough chunks passed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
