// ubits_dbuf: the double-buffered on-chip store of u-matching bits and its
// valid array. Buffer `cur` holds the L matching bits of the K rows of the
// running epoch; the other buffer is being filled with the next epoch's bits.
//   * two read ports on the current buffer, two-cycle latency: the address is
//     registered, the array is read in the next cycle into an output register
//     (this models the BRAM read the edge processor waits for);
//   * two write ports on the current buffer (u bits, and v bits when v also
//     belongs to the running epoch); port 1 wins on equal addresses;
//   * nx_wr: the edge processor updates a next-epoch vertex; this sets the
//     entry's valid bit;
//   * ld: the next epoch's bits arriving from memory; skipped when the valid
//     bit is set, so stale memory data never overwrites a newer update;
//   * swap: exchange the buffers and clear the valid array;
//   * fl_chunk/fl_data: combinational read of 512/L consecutive entries of the
//     current buffer, used to write the epoch's bits back to memory.
// The double buffering and the valid array follow the paper; the port set and
// the register-array form are this design's.
module ubits_dbuf #(
  parameter int K = 32,
  parameter int L = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [$clog2(K)-1:0] rd_addr [2],
  output logic [L-1:0]         rd_data [2],
  input  logic [1:0]           wr_en,
  input  logic [$clog2(K)-1:0] wr_addr [2],
  input  logic [L-1:0]         wr_data [2],
  input  logic                 nx_wr_en,
  input  logic [$clog2(K)-1:0] nx_wr_addr,
  input  logic [L-1:0]         nx_wr_data,
  input  logic                 ld_en,
  input  logic [$clog2(K)-1:0] ld_addr,
  input  logic [L-1:0]         ld_data,
  input  logic                 swap,
  input  logic [$clog2(K)-1:0] fl_chunk,
  output logic [511:0]         fl_data,
  output logic [K-1:0]         valid
);
  localparam int VPC = 512 / L;
  localparam int AW  = $clog2(K);

  logic [L-1:0]  mem [2][K];
  logic          cur;
  logic [AW-1:0] ra [2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur <= 1'b0; valid <= '0;
    end else begin
      if (swap) begin cur <= !cur; valid <= '0; end
      else if (nx_wr_en) valid[nx_wr_addr] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    ra <= rd_addr;
    rd_data[0] <= mem[cur][ra[0]];
    rd_data[1] <= mem[cur][ra[1]];
    if (wr_en[0]) mem[cur][wr_addr[0]] <= wr_data[0];
    if (wr_en[1]) mem[cur][wr_addr[1]] <= wr_data[1];
    if (ld_en && !valid[ld_addr] && !(nx_wr_en && nx_wr_addr == ld_addr))
      mem[!cur][ld_addr] <= ld_data;
    if (nx_wr_en) mem[!cur][nx_wr_addr] <= nx_wr_data;
  end

  always_comb begin
    for (int s = 0; s < VPC; s++)
      fl_data[s*L +: L] = mem[cur][AW'(int'(fl_chunk) * VPC + s)];
  end
endmodule
