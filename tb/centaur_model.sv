// centaur_model: behavioural model of the host memory framework seen by the
// accelerator, for simulation only. Memory is an associative array of 512-bit
// chunks (unwritten chunks read as zero). Read requests are accepted when
// rd_req_ready is high (randomly withheld), and answered after a random
// latency, in request order, so responses with the same tag never overtake
// each other. Writes update the memory when accepted and are acknowledged, in
// order, after a random latency. The testbench reaches the memory through
// the functions peek/poke.
module centaur_model
  import mwm_pkg::*;
#(
  parameter int MIN_LAT = 4,
  parameter int MAX_LAT = 24
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   rd_req_valid,
  input  addr_t  rd_req_addr,
  input  tag_t   rd_req_tag,
  output logic   rd_req_ready,
  output logic   rd_rsp_valid,
  output chunk_t rd_rsp_data,
  output tag_t   rd_rsp_tag,
  input  logic   wr_req_valid,
  input  addr_t  wr_req_addr,
  input  chunk_t wr_req_data,
  input  tag_t   wr_req_tag,
  output logic   wr_req_ready,
  output logic   wr_ack_valid,
  output tag_t   wr_ack_tag
);
  chunk_t mem [addr_t];
  typedef struct { longint t; addr_t a; tag_t tag; } rd_t;
  typedef struct { longint t; tag_t tag; } ack_t;
  rd_t  rq [$];
  ack_t aq [$];
  longint now, last_rd, last_ack;
  int unsigned n_reads, n_writes;

  function automatic chunk_t peek(addr_t a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction
  function automatic void poke(addr_t a, chunk_t d);
    mem[a] = d;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now <= 0; last_rd <= 0; last_ack <= 0;
      rd_req_ready <= 1'b0; wr_req_ready <= 1'b0;
      rd_rsp_valid <= 1'b0; wr_ack_valid <= 1'b0;
      rd_rsp_data <= '0; rd_rsp_tag <= '0; wr_ack_tag <= '0;
      n_reads <= 0; n_writes <= 0;
    end else begin
      now <= now + 1;
      rd_req_ready <= ($urandom_range(0, 7) != 0);
      wr_req_ready <= ($urandom_range(0, 7) != 0);
      if (rd_req_valid && rd_req_ready) begin
        automatic longint t = now + longint'($urandom_range(MIN_LAT, MAX_LAT));
        if (t <= last_rd) t = last_rd + 1;
        last_rd <= t;
        rq.push_back('{t, rd_req_addr, rd_req_tag});
        n_reads <= n_reads + 1;
      end
      rd_rsp_valid <= 1'b0;
      if (rq.size() > 0 && rq[0].t <= now) begin
        automatic rd_t r = rq.pop_front();
        rd_rsp_valid <= 1'b1;
        rd_rsp_data  <= peek(r.a);
        rd_rsp_tag   <= r.tag;
      end
      if (wr_req_valid && wr_req_ready) begin
        automatic longint t = now + longint'($urandom_range(MIN_LAT, MAX_LAT));
        if (t <= last_ack) t = last_ack + 1;
        last_ack <= t;
        mem[wr_req_addr] = wr_req_data;
        aq.push_back('{t, wr_req_tag});
        n_writes <= n_writes + 1;
      end
      wr_ack_valid <= 1'b0;
      if (aq.size() > 0 && aq[0].t <= now) begin
        automatic ack_t k = aq.pop_front();
        wr_ack_valid <= 1'b1;
        wr_ack_tag   <= k.tag;
      end
    end
  end
endmodule
