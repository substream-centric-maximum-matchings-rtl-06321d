// requester: read arbiter in front of the memory framework. Four modules post
// read requests (a 58-bit chunk address) into four queues; each queue gets the
// fixed tag of its module, making a 66-bit entry. Every cycle the non-empty
// queue with the highest priority issues its head (rd_req_valid/ready).
// Port order = priority, highest first: 0 matching bits requester, 1 BRAM
// matching bits requester, 2 edge requester, 3 pointer requester. Read data
// comes back with the tag, and each receiver keeps only its own tag.
// Four queues and fixed priority follow the paper; the order is this design's.
module requester
  import mwm_pkg::*;
#(
  parameter int QDEPTH = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [3:0] in_valid,
  input  addr_t      in_addr [4],
  output logic [3:0] in_ready,
  output logic       rd_req_valid,
  output addr_t      rd_req_addr,
  output tag_t       rd_req_tag,
  input  logic       rd_req_ready
);
  localparam tag_t TAGS [4] = '{TAG_MB, TAG_BRAM, TAG_EDGE, TAG_PTR};
  logic [3:0] emp, full, pop;
  logic [ADDR_W+TAG_W-1:0] head [4];

  for (genvar i = 0; i < 4; i++) begin : g_q
    logic [$clog2(QDEPTH+1)-1:0] c;
    sync_fifo #(.WIDTH(ADDR_W+TAG_W), .DEPTH(QDEPTH)) u_q (
      .clk, .rst_n, .push(in_valid[i] && !full[i]), .din({in_addr[i], TAGS[i]}),
      .pop(pop[i]), .dout(head[i]), .empty(emp[i]), .full(full[i]), .count(c));
  end
  assign in_ready = ~full;

  always_comb begin
    rd_req_valid = 1'b0; rd_req_addr = '0; rd_req_tag = '0; pop = '0;
    for (int i = 3; i >= 0; i--) begin
      if (!emp[i]) begin
        rd_req_valid = 1'b1;
        {rd_req_addr, rd_req_tag} = head[i];
        pop = '0;
        pop[i] = rd_req_ready;
      end
    end
  end
endmodule
