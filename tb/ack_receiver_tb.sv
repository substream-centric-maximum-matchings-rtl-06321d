// ack_receiver_tb: issues random numbers of matching-bit and edge writes (the
// issued counters) and returns their acknowledgements in random order and at
// random times, mixed with acknowledgements carrying other tags. Checks the
// two acknowledgement counters against its own counts, and that mb_done and
// all_done are high exactly when every issued write of that kind (of both
// kinds) has been acknowledged.
module ack_receiver_tb;
  import mwm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ack_valid, mb_done, all_done;
  tag_t ack_tag;
  logic [31:0] mb_issued, ed_issued, mb_acked, ed_acked;
  ack_receiver dut (.*);
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
  initial run();
  task automatic run();
    int mbi = 0, edi = 0, mba = 0, eda = 0, seen_done = 0;
    ack_valid = 0; ack_tag = '0; mb_issued = '0; ed_issued = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 6000; cyc++) begin
      @(negedge clk);
      if (cyc < 5000 && $urandom_range(0, 3) == 0) mbi++;
      if (cyc < 5000 && $urandom_range(0, 3) == 0) edi++;
      mb_issued = 32'(mbi); ed_issued = 32'(edi);
      ack_valid = 0; ack_tag = TAG_PTR;
      case ($urandom_range(0, 4))
        0, 1: if (mba < mbi) begin ack_valid = 1; ack_tag = TAG_MBWR; end
        2, 3: if (eda < edi) begin ack_valid = 1; ack_tag = TAG_EDWR; end
        default: ack_valid = ($urandom_range(0, 1) == 1);   // a tag that is not a write
      endcase
      #1;
      check(mb_acked === 32'(mba) && ed_acked === 32'(eda), "acknowledgement counters");
      check(mb_done === (mba === mbi), "mb_done");
      check(all_done === (mba === mbi && eda === edi), "all_done");
      if (all_done) seen_done++;
      @(posedge clk);
      if (ack_valid && ack_tag == TAG_MBWR) mba++;
      if (ack_valid && ack_tag == TAG_EDWR) eda++;
    end
    check(seen_done > 0 && mba === mbi && eda === edi, "all writes acknowledged at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
