// bram_mb_receiver: accepts the next epoch's matching-bit chunks (tag
// TAG_BRAM) and unwraps each into 512/L entries of L bits, one entry per
// cycle, numbered 0..K-1 in arrival order (entry x is vertex e*K + x). The
// edge processor writes them into the next buffer unless the valid array says
// a newer value is already there. loaded rises when all K entries of the
// current prefetch have been delivered (or immediately when the prefetch is
// past the last epoch). Unwrapping follows the paper; the one-entry-per-cycle
// rate is this design's.
module bram_mb_receiver
  import mwm_pkg::*;
#(
  parameter int K       = 32,
  parameter int L       = 64,
  parameter int CREDITS = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        rsp_valid,
  input  chunk_t      rsp_data,
  input  tag_t        rsp_tag,
  output logic        chunk_consumed,
  output logic        ld_valid,
  output logic [$clog2(K)-1:0] ld_idx,
  output logic [L-1:0] ld_bits,
  output logic [$clog2(K+1)-1:0] n_loaded
);
  localparam int VPC = CHUNK_W / L;
  localparam int SW  = (VPC > 1) ? $clog2(VPC) : 1;

  chunk_t cd;
  logic   cf_empty, cf_full;
  logic [$clog2(CREDITS+1)-1:0] cnt;
  logic [SW-1:0] s;

  sync_fifo #(.WIDTH(CHUNK_W), .DEPTH(CREDITS)) u_chunks (
    .clk, .rst_n, .push(rsp_valid && rsp_tag == TAG_BRAM), .din(rsp_data),
    .pop(chunk_consumed), .dout(cd), .empty(cf_empty), .full(cf_full), .count(cnt));

  assign ld_valid       = !cf_empty;
  assign ld_bits        = cd[int'(s)*L +: L];
  assign ld_idx         = ($clog2(K))'(n_loaded);
  assign chunk_consumed = ld_valid && (int'(s) == VPC - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s <= '0; n_loaded <= '0;
    end else if (start) begin
      s <= '0; n_loaded <= '0;
    end else if (ld_valid) begin
      s <= (int'(s) == VPC - 1) ? '0 : s + 1'b1;
      n_loaded <= n_loaded + 1'b1;
    end
  end
endmodule
