// bram_mb_receiver_tb: returns the K*L/512 chunks of an epoch's matching bits
// (mixed with read data carrying other tags) and checks that the receiver
// hands them to the u-bit buffer one entry per cycle, in order: entry index
// 0..K-1 with the L bits of that vertex, returning one credit per chunk. A
// second epoch follows a start pulse.
module bram_mb_receiver_tb;
  import mwm_pkg::*;
  localparam int K = 32, L = 64, CR = 2, VPC = 512 / L, NCH = K / VPC;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, rsp_valid, chunk_consumed, ld_valid;
  chunk_t rsp_data;
  tag_t rsp_tag;
  logic [$clog2(K)-1:0] ld_idx;
  logic [L-1:0] ld_bits;
  logic [$clog2(K+1)-1:0] n_loaded;
  bram_mb_receiver #(.K(K), .L(L), .CREDITS(CR)) dut (.*);
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
    start = 0; rsp_valid = 0; rsp_data = '0; rsp_tag = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int ep = 0; ep < 3; ep++) begin
      logic [L-1:0] bits [K];
      int sent = 0, outst = 0, got = 0, cyc = 0;
      foreach (bits[i]) bits[i] = {$urandom, $urandom};
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      while (got < K && cyc < 2000) begin
        bit cons;
        rsp_valid = 0; rsp_tag = TAG_EDGE;
        if (sent < NCH && outst < CR && $urandom_range(0, 1) == 1) begin
          rsp_valid = 1; rsp_tag = TAG_BRAM;
          for (int s = 0; s < VPC; s++) rsp_data[s*L +: L] = bits[sent * VPC + s];
        end else if ($urandom_range(0, 1) == 1) begin
          rsp_valid = 1; rsp_data = {16{$urandom}};
        end
        #1;
        if (ld_valid) begin
          check(int'(ld_idx) === got && ld_bits === bits[got], $sformatf("entry %0d", got));
          got++;
        end
        check(chunk_consumed === (ld_valid && got % VPC === 0), "credit pulse");
        cons = chunk_consumed;
        @(negedge clk);
        cyc++;
        if (rsp_valid && rsp_tag == TAG_BRAM) begin sent++; outst++; end
        if (cons) outst--;
      end
      rsp_valid = 0;
      check(got === K && int'(n_loaded) === K, "whole epoch loaded");
      @(negedge clk);
      check(!ld_valid, "nothing extra");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
