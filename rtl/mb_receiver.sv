// mb_receiver: the matching bits receiver. Read data tagged TAG_MB carries a
// chunk of v-matching bits; it is queued whole in the Bit-Queue, from which
// the edge processor takes one chunk for every edge flagged "new chunk".
// Because the matching bits requester never has more than BITQ_DEPTH chunks
// outstanding or queued, the Bit-Queue cannot overflow and read data needs no
// back-pressure. consumed (one pulse per chunk taken) returns a credit.
// The Bit-Queue is shown in the paper's block diagram; its depth is this
// design's choice.
module mb_receiver
  import mwm_pkg::*;
#(
  parameter int BITQ_DEPTH = 8
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   rsp_valid,
  input  chunk_t rsp_data,
  input  tag_t   rsp_tag,
  output logic   bq_valid,
  output chunk_t bq_data,
  input  logic   bq_pop,
  output logic   consumed,
  output logic [31:0] n_received
);
  logic push, bq_empty, bq_full;
  logic [$clog2(BITQ_DEPTH+1)-1:0] cnt;
  assign push = rsp_valid && (rsp_tag == TAG_MB);

  sync_fifo #(.WIDTH(CHUNK_W), .DEPTH(BITQ_DEPTH)) u_bitq (
    .clk, .rst_n, .push(push), .din(rsp_data), .pop(bq_pop),
    .dout(bq_data), .empty(bq_empty), .full(bq_full), .count(cnt));
  assign bq_valid = !bq_empty;
  assign consumed = bq_pop;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) n_received <= '0;
    else if (push) n_received <= n_received + 1;
  end

  always_ff @(posedge clk) begin
    if (rst_n) assert (!(push && bq_full)) else $error("mb_receiver: Bit-Queue overflow");
  end
endmodule
