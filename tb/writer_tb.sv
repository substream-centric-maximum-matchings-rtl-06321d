// writer_tb: pushes random writes into the writer's two queues (matching bits
// on port 0, output edges on port 1) without exceeding their depth, stalls
// the memory side at random, and checks each issued write (address, data,
// tag) against a model of the two FIFOs, the priority of port 0 over port 1,
// and the occupancy counts in_count.
module writer_tb;
  import mwm_pkg::*;
  localparam int QD = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [1:0] in_valid;
  addr_t in_addr [2];
  chunk_t in_data [2];
  logic [$clog2(QD+1)-1:0] in_count [2];
  logic wr_req_valid, wr_req_ready;
  addr_t wr_req_addr;
  chunk_t wr_req_data;
  tag_t wr_req_tag;
  writer #(.QDEPTH(QD)) dut (.*);

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

  addr_t qa [2][$];
  chunk_t qd [2][$];
  initial run();
  task automatic run();
    int issued = 0;
    in_valid = '0; wr_req_ready = 0;
    for (int i = 0; i < 2; i++) begin in_addr[i] = '0; in_data[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      logic [1:0] acc;
      bit out;
      int first;
      @(negedge clk);
      for (int i = 0; i < 2; i++) begin
        in_valid[i] = ($urandom_range(0, 99) < (cyc < 4000 ? 35 : 0)) && (qa[i].size() < QD - 1);
        in_addr[i] = {$urandom, $urandom};
        for (int w = 0; w < 16; w++) in_data[i][w*32 +: 32] = $urandom;
      end
      wr_req_ready = ($urandom_range(0, 99) < 60);
      #1;
      first = (qa[0].size() != 0) ? 0 : (qa[1].size() != 0) ? 1 : -1;
      for (int i = 0; i < 2; i++) check(int'(in_count[i]) === qa[i].size(), "in_count");
      if (first < 0) check(!wr_req_valid, "write issued with both queues empty");
      else begin
        check(wr_req_valid, "no write although a queue holds one");
        check(wr_req_tag === (first === 0 ? TAG_MBWR : TAG_EDWR), "priority / tag");
        check(wr_req_addr === qa[first][0] && wr_req_data === qd[first][0], "address and data");
      end
      acc = in_valid;
      out = wr_req_valid && wr_req_ready;
      @(posedge clk);
      if (out && first >= 0) begin void'(qa[first].pop_front()); void'(qd[first].pop_front()); issued++; end
      for (int i = 0; i < 2; i++) if (acc[i]) begin qa[i].push_back(in_addr[i]); qd[i].push_back(in_data[i]); end
    end
    check(issued > 1000, "enough writes issued");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
