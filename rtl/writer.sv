// writer: write arbiter in front of the memory framework. Two modules post
// 570-bit writes (512 data + 58 address) into two queues; port 0 (matching
// bits writer, tag TAG_MBWR) has priority over port 1 (edge writer, tag
// TAG_EDWR). One write per cycle leaves on wr_req_* with its tag. in_count
// lets the posting modules keep their own admission control.
// Two queues and fixed priority follow the paper; the order is this design's.
module writer
  import mwm_pkg::*;
#(
  parameter int QDEPTH = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [1:0] in_valid,
  input  addr_t      in_addr [2],
  input  chunk_t     in_data [2],
  output logic [$clog2(QDEPTH+1)-1:0] in_count [2],
  output logic       wr_req_valid,
  output addr_t      wr_req_addr,
  output chunk_t     wr_req_data,
  output tag_t       wr_req_tag,
  input  logic       wr_req_ready
);
  localparam tag_t TAGS [2] = '{TAG_MBWR, TAG_EDWR};
  logic [1:0] emp, full, pop;
  logic [CHUNK_W+ADDR_W-1:0] head [2];

  for (genvar i = 0; i < 2; i++) begin : g_q
    sync_fifo #(.WIDTH(CHUNK_W+ADDR_W), .DEPTH(QDEPTH)) u_q (
      .clk, .rst_n, .push(in_valid[i]), .din({in_data[i], in_addr[i]}),
      .pop(pop[i]), .dout(head[i]), .empty(emp[i]), .full(full[i]), .count(in_count[i]));
  end

  always_comb begin
    wr_req_valid = 1'b0; wr_req_addr = '0; wr_req_data = '0; wr_req_tag = '0; pop = '0;
    if (!emp[0]) begin
      wr_req_valid = 1'b1; {wr_req_data, wr_req_addr} = head[0]; wr_req_tag = TAGS[0];
      pop[0] = wr_req_ready;
    end else if (!emp[1]) begin
      wr_req_valid = 1'b1; {wr_req_data, wr_req_addr} = head[1]; wr_req_tag = TAGS[1];
      pop[1] = wr_req_ready;
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n) assert (!(in_valid[0] && full[0]) && !(in_valid[1] && full[1]))
      else $error("writer: queue overflow");
  end
endmodule
