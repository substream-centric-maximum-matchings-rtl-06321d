// state_controller_tb: surrounds the state controller with a model of the
// blocks it sequences: the prefetcher loads K entries some cycles after each
// pf_start, the stream reaches the end of an epoch a random time after run
// rises, the edge processor answers ep_flush after a delay, the matching-bit
// writes are acknowledged later, and so on. For two graph sizes it checks the
// epoch sequence 0..E-1, that each epoch's bits were prefetched (pf_epoch =
// epoch, all K loaded) before the swap that starts it, that the next epoch's
// prefetch starts with each epoch, that run only ends after epoch_end with an
// empty Pending-Queue and idle pipeline, that an epoch is only left after its
// writes are acknowledged, the final edge-writer flush, done and the epoch
// count.
module state_controller_tb;
  import mwm_pkg::*;
  localparam int K = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, run, epoch_start, pf_start, swap, epoch_end, pend_empty, ep_idle, ep_flush, ep_flushed;
  logic mb_done, ew_flush, ew_flushed, all_done, done;
  logic [31:0] num_vertices, epoch, num_epochs, pf_epoch, n_epochs_done;
  logic [$clog2(K+1)-1:0] pf_loaded;
  state_controller #(.K(K)) dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // environment model
  int load_cnt = 0, run_cnt = 0, fl_cnt = 0, ack_cnt = 0, ew_cnt = 0, dr_cnt = 0;
  int loaded_epoch = -1, buf_epoch = -1, nswap = 0, next_epoch = 0, nflush_ew = 0;
  bit in_run_seen = 0;
  always @(posedge clk) begin
    if (!rst_n) begin
      pf_loaded <= '0;
    end else begin
      // prefetcher: K entries after pf_start, one per cycle after a delay
      if (pf_start) begin pf_loaded <= '0; load_cnt <= -int'($urandom_range(3, 20)); end
      else begin
        load_cnt <= load_cnt + 1;
        if (load_cnt >= 0 && int'(pf_loaded) < K && pf_epoch < num_epochs) pf_loaded <= pf_loaded + 1'b1;
      end
      run_cnt <= run ? run_cnt + 1 : 0;
      fl_cnt  <= ep_flush ? int'($urandom_range(1, 6)) : (fl_cnt > 0 ? fl_cnt - 1 : 0);
      ack_cnt <= ep_flush ? int'($urandom_range(2, 15)) : (ack_cnt > 0 ? ack_cnt - 1 : 0);
      ew_cnt  <= ew_flush ? int'($urandom_range(1, 8)) : (ew_cnt > 0 ? ew_cnt - 1 : 0);
      dr_cnt  <= ew_flush ? int'($urandom_range(5, 30)) : (dr_cnt > 0 ? dr_cnt - 1 : 0);
    end
  end
  assign epoch_end  = run && run_cnt > 40;
  assign pend_empty = run && run_cnt > 45;
  assign ep_idle    = run && run_cnt > 48;
  assign ep_flushed = (fl_cnt == 1);
  assign mb_done    = (ack_cnt == 0) && !ep_flush;
  assign ew_flushed = (ew_cnt == 1);
  assign all_done   = (dr_cnt == 0) && !ew_flush;

  // monitor
  bit cond_q = 0;
  always @(posedge clk) cond_q <= epoch_end && pend_empty && ep_idle;
  always @(posedge clk) if (rst_n) begin
    if (swap) begin
      check(pf_epoch === 32'(next_epoch) && int'(pf_loaded) === K, "swap before the next epoch's bits were loaded");
      check(mb_done, "swap before the writes were acknowledged");
      nswap++;
      next_epoch++;
    end
    if (epoch_start) check(epoch === 32'(next_epoch - 1), $sformatf("epoch %0d started, expected %0d", epoch, next_epoch - 1));
    if (pf_start && next_epoch > 0) check(pf_epoch === epoch + 1, "prefetch of the next epoch");
    if (ep_flush) check(cond_q, "flush before the epoch's edges were done");
    if (ew_flush) begin check(epoch + 1 === num_epochs && mb_done, "edge writer flushed early"); nflush_ew++; end
    if (done && !start) check(all_done && nflush_ew === 1, "done before all writes acknowledged");
  end

  initial main();
  task automatic main();
    int sizes [2] = '{100, 33};
    start = 0; num_vertices = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (sizes[t]) begin
      int cyc = 0;
      @(negedge clk);
      num_vertices = 32'(sizes[t]); start = 1;
      next_epoch = 0; nswap = 0; nflush_ew = 0;
      @(negedge clk);
      start = 0;
      while (!done && cyc < 50000) begin @(negedge clk); cyc++; end
      check(done, "done");
      check(num_epochs === 32'((sizes[t] + K - 1) / K), "number of epochs");
      check(nswap === int'(num_epochs) && n_epochs_done === num_epochs, $sformatf("%0d epochs run", nswap));
      repeat (5) @(negedge clk);
      check(done && !run, "stays done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
