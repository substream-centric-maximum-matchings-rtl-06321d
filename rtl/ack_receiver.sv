// ack_receiver: counts the write acknowledgements returned by the memory
// framework, separately for the matching-bit writes (TAG_MBWR) and the edge
// writes (TAG_EDWR), and compares them with the numbers of writes issued.
// mb_done: every matching-bit write issued so far is committed (the state
// controller waits for this before the next epoch may read matching bits).
// all_done: the same for both kinds of writes.
module ack_receiver
  import mwm_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ack_valid,
  input  tag_t        ack_tag,
  input  logic [31:0] mb_issued,
  input  logic [31:0] ed_issued,
  output logic        mb_done,
  output logic        all_done,
  output logic [31:0] mb_acked,
  output logic [31:0] ed_acked
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mb_acked <= '0; ed_acked <= '0;
    end else if (ack_valid) begin
      if (ack_tag == TAG_MBWR) mb_acked <= mb_acked + 1;
      if (ack_tag == TAG_EDWR) ed_acked <= ed_acked + 1;
    end
  end
  assign mb_done  = (mb_acked == mb_issued);
  assign all_done = mb_done && (ed_acked == ed_issued);

  always_ff @(posedge clk) begin
    if (rst_n) assert (mb_acked <= mb_issued && ed_acked <= ed_issued)
      else $error("ack_receiver: more acknowledgements than writes");
  end
endmodule
