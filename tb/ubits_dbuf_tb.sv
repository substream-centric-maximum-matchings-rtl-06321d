// ubits_dbuf_tb: random reads, writes, next-buffer updates, loads and swaps
// on the double-buffered u-bit store, checked against a model of the two
// buffers and the valid array: reads return the current buffer two cycles
// after the address (as it is after the address was registered), writes port 1 wins over port 0, a load is ignored for an
// entry already updated through nx_wr since the last swap, and the flush
// port returns 512/L consecutive entries of the current buffer.
module ubits_dbuf_tb;
  import mwm_pkg::*;
  localparam int K = 32, L = 64, VPC = 512 / L, AW = $clog2(K);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [AW-1:0] rd_addr [2], wr_addr [2], nx_wr_addr, ld_addr, fl_chunk;
  logic [L-1:0] rd_data [2], wr_data [2], nx_wr_data, ld_data;
  logic [1:0] wr_en;
  logic nx_wr_en, ld_en, swap;
  logic [511:0] fl_data;
  logic [K-1:0] valid;
  ubits_dbuf #(.K(K), .L(L)) dut (.*);
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
  logic [L-1:0] m [2][K];
  bit vld [K];
  int cur = 0;
  initial run();
  task automatic run();
    logic [L-1:0] exp1 [2], exp2 [2];
    bit have1 = 0, have2 = 0;
    rd_addr = '{default: '0}; wr_addr = '{default: '0}; wr_data = '{default: '0}; wr_en = '0;
    nx_wr_en = 0; nx_wr_addr = '0; nx_wr_data = '0; ld_en = 0; ld_addr = '0; ld_data = '0; swap = 0; fl_chunk = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // initialise both buffers: load all entries, swap, load again, swap
    for (int b = 0; b < 2; b++) begin
      for (int i = 0; i < K; i++) begin
        @(negedge clk);
        ld_en = 1; ld_addr = AW'(i); ld_data = {$urandom, $urandom};
        m[1 - cur][i] = ld_data;
      end
      @(negedge clk); ld_en = 0; swap = 1; cur = 1 - cur;
      @(negedge clk); swap = 0;
      foreach (vld[i]) vld[i] = 0;
    end
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      for (int p = 0; p < 2; p++) begin
        rd_addr[p] = AW'($urandom_range(0, K - 1));
        wr_en[p] = ($urandom_range(0, 2) == 0);
        wr_addr[p] = AW'($urandom_range(0, K - 1));
        wr_data[p] = {$urandom, $urandom};
      end
      nx_wr_en = ($urandom_range(0, 3) == 0); nx_wr_addr = AW'($urandom_range(0, K - 1)); nx_wr_data = {$urandom, $urandom};
      ld_en = ($urandom_range(0, 1) == 0); ld_addr = AW'($urandom_range(0, K - 1)); ld_data = {$urandom, $urandom};
      swap = ($urandom_range(0, 99) == 0);
      fl_chunk = AW'($urandom_range(0, K / VPC - 1));
      #1;
      // combinational flush port and delayed reads
      for (int s = 0; s < VPC; s++)
        check(fl_data[s*L +: L] === m[cur][int'(fl_chunk) * VPC + s], "flush data");
      for (int p = 0; p < 2; p++) if (have2) check(rd_data[p] === exp2[p], "read data");
      for (int i = 0; i < K; i++) check(valid[i] === vld[i], "valid array");
      @(posedge clk);
      // model update (reads of this cycle's registered address use the old contents)
      begin
        int nb = 1 - cur;
        if (ld_en && !vld[ld_addr] && !(nx_wr_en && nx_wr_addr == ld_addr)) m[nb][ld_addr] = ld_data;
        if (nx_wr_en) m[nb][nx_wr_addr] = nx_wr_data;
        if (wr_en[0]) m[cur][wr_addr[0]] = wr_data[0];
        if (wr_en[1]) m[cur][wr_addr[1]] = wr_data[1];
        if (swap) begin cur = nb; foreach (vld[i]) vld[i] = 0; end
        else if (nx_wr_en) vld[nx_wr_addr] = 1;
      end
      // a read returns the buffer as it is after the address is registered
      have2 = have1; exp2 = exp1;
      for (int p = 0; p < 2; p++) exp1[p] = m[cur][rd_addr[p]];
      have1 = 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
