// mb_writer_tb: sends random matching-bit chunks (chunk number and data) to
// the matching bits writer and checks the write presented to the writer
// queue: address = base + chunk number, data unchanged, valid only with a
// chunk. Also checks the room signal against the queue occupancy (room while
// at least SLACK entries are free) and the issued-write counter.
module mb_writer_tb;
  import mwm_pkg::*;
  localparam int QD = 16, SL = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  addr_t mb_base, wq_addr;
  logic in_valid, wq_valid, room;
  logic [31:0] in_chunk, issued;
  chunk_t in_data, wq_data;
  logic [$clog2(QD+1)-1:0] wq_count;
  mb_writer #(.QDEPTH(QD), .SLACK(SL)) dut (.*);
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
    int n = 0;
    in_valid = 0; in_chunk = '0; in_data = '0; wq_count = '0; mb_base = 58'h123_4567_89AB;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 1) == 1);
      in_chunk = $urandom_range(0, 100000);
      for (int w = 0; w < 16; w++) in_data[w*32 +: 32] = $urandom;
      wq_count = ($clog2(QD+1))'($urandom_range(0, in_valid ? QD - 1 : QD));
      if (cyc % 500 == 0) mb_base = {$urandom, $urandom};
      #1;
      check(wq_valid === in_valid, "valid");
      if (in_valid) check(wq_addr === mb_base + addr_t'(in_chunk) && wq_data === in_data, "address/data");
      check(room === (int'(wq_count) <= QD - SL), "room");
      check(issued === 32'(n), "issued counter");
      @(posedge clk);
      if (in_valid) n++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
