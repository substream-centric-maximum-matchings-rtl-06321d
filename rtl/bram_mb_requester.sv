// bram_mb_requester: prefetches the matching bits of the next epoch's K rows.
// On a start pulse for epoch e it requests the K/(512/L) chunks
// mb_base + e*K/(512/L) + j, j = 0.. in order, one per accepted request. If e
// is past the last epoch nothing is requested. At most CREDITS chunks are
// outstanding or waiting in the receiver; the receiver returns a credit per
// chunk it has unwrapped. What is fetched follows the paper; the credit
// scheme is this design's.
module bram_mb_requester
  import mwm_pkg::*;
#(
  parameter int K       = 32,
  parameter int L       = 64,
  parameter int CREDITS = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] epoch,
  input  logic [31:0] num_epochs,
  input  addr_t       mb_base,
  output logic        req_valid,
  output addr_t       req_addr,
  input  logic        req_ready,
  input  logic        chunk_consumed,
  output logic        busy
);
  localparam int VPC = CHUNK_W / L;
  localparam int NCH = K / VPC;

  logic [31:0] e, j;
  logic        active;
  logic [$clog2(CREDITS+1)-1:0] credits;

  assign req_valid = active && (credits != 0);
  assign req_addr  = mb_base + addr_t'(e) * addr_t'(NCH) + addr_t'(j);
  assign busy      = active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; e <= '0; j <= '0;
      credits <= ($clog2(CREDITS+1))'(CREDITS);
    end else begin
      credits <= credits - $bits(credits)'(req_valid && req_ready)
                         + $bits(credits)'(chunk_consumed);
      if (start) begin
        active <= (epoch < num_epochs); e <= epoch; j <= '0;
      end else if (req_valid && req_ready) begin
        j <= j + 1;
        if (j == 32'(NCH - 1)) active <= 1'b0;
      end
    end
  end
endmodule
