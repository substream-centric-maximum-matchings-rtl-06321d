// requester_tb: drives the four request queues of the requester with random
// addresses and random back-pressure from the memory side, and checks every
// issued request against a model of four FIFOs: the address, the tag that
// identifies the source (matching bits, BRAM load, edge, pointer), the fixed
// priority (the lowest-numbered non-empty queue is issued), in_ready = queue
// not full, and that an idle output means all queues are empty.
module requester_tb;
  import mwm_pkg::*;
  localparam int QD = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [3:0] in_valid, in_ready;
  addr_t in_addr [4];
  logic rd_req_valid, rd_req_ready;
  addr_t rd_req_addr;
  tag_t rd_req_tag;
  requester #(.QDEPTH(QD)) dut (.*);

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

  addr_t q [4][$];
  localparam tag_t TAGS [4] = '{TAG_MB, TAG_BRAM, TAG_EDGE, TAG_PTR};
  initial run();
  task automatic run();
    int issued = 0;
    in_valid = '0; rd_req_ready = 0;
    foreach (in_addr[i]) in_addr[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      logic [3:0] acc;
      bit out;
      int first;
      @(negedge clk);
      for (int i = 0; i < 4; i++) begin
        in_valid[i] = ($urandom_range(0, 99) < (cyc < 4000 ? 30 : 0));
        in_addr[i] = {$urandom, $urandom};
      end
      rd_req_ready = ($urandom_range(0, 99) < 60);
      #1;
      first = -1;
      for (int i = 3; i >= 0; i--) if (q[i].size() != 0) first = i;
      for (int i = 0; i < 4; i++) check(in_ready[i] === (q[i].size() < QD), "in_ready");
      if (first < 0) check(!rd_req_valid, "request issued with all queues empty");
      else begin
        check(rd_req_valid, "no request although a queue holds one");
        check(rd_req_tag === TAGS[first], $sformatf("priority: tag %0d, expected %0d", rd_req_tag, TAGS[first]));
        check(rd_req_addr === q[first][0], "address");
      end
      acc = in_valid & in_ready;
      out = rd_req_valid && rd_req_ready;
      @(posedge clk);
      if (out && first >= 0) begin void'(q[first].pop_front()); issued++; end
      for (int i = 0; i < 4; i++) if (acc[i]) q[i].push_back(in_addr[i]);
    end
    check(issued > 1000, "enough requests issued");
    for (int i = 0; i < 4; i++) check(q[i].size() === 0, "queues drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
