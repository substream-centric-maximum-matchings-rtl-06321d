// pointer_requester: fetches pointer_data, the per-row index of the input
// graph, as a sequence of 512-bit chunks starting at ptr_base. Each chunk holds
// five 96-bit row pointers, so ceil(n/5) chunks are requested, in order.
// A credit counter (CREDITS) bounds the chunks that are in flight or waiting
// in the pointer receiver, so returning read data never has to be held off;
// the receiver returns a credit (chunk_consumed) whenever it finishes a chunk.
// Request handshake: req_valid/req_ready, address stable while waiting.
// What it fetches follows the paper; the credit scheme is this design's own.
module pointer_requester
  import mwm_pkg::*;
#(
  parameter int CREDITS = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  addr_t       ptr_base,
  input  logic [31:0] num_vertices,
  output logic        req_valid,
  output addr_t       req_addr,
  input  logic        req_ready,
  input  logic        chunk_consumed,
  output logic        all_requested
);
  logic [31:0] next_chunk, total;
  logic [$clog2(CREDITS+1)-1:0] credits;
  logic active;

  assign total         = (num_vertices + 32'd4) / 32'd5;
  assign req_valid     = active && (next_chunk < total) && (credits != 0);
  assign req_addr      = ptr_base + addr_t'(next_chunk);
  assign all_requested = active && (next_chunk >= total);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      next_chunk <= '0;
      credits    <= ($clog2(CREDITS+1))'(CREDITS);
      active     <= 1'b0;
    end else if (start) begin
      next_chunk <= '0;
      credits    <= ($clog2(CREDITS+1))'(CREDITS);
      active     <= 1'b1;
    end else begin
      if (req_valid && req_ready) next_chunk <= next_chunk + 1;
      credits <= credits - $bits(credits)'(req_valid && req_ready)
                         + $bits(credits)'(chunk_consumed);
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n && !start) assert (!(chunk_consumed && credits == ($clog2(CREDITS+1))'(CREDITS)))
      else $error("pointer_requester: credit returned that was never taken");
  end
endmodule
