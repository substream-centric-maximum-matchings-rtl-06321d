// mb_writer: the matching bits writer. It turns each chunk of matching bits
// coming from the edge processor (a finished v-bit chunk, or one chunk of the
// u-bit buffer written back at epoch end) into a write of 512 bits to
// mb_base + chunk and hands it to the writer's first queue. It counts the
// writes it has issued, so that the acknowledgement receiver can tell when all
// of them are committed. The queue never overflows because the edge processor
// admits edges only while the queue has room for all of them (room output).
module mb_writer
  import mwm_pkg::*;
#(
  parameter int QDEPTH = 16,
  parameter int SLACK  = 12
) (
  input  logic        clk,
  input  logic        rst_n,
  input  addr_t       mb_base,
  input  logic        in_valid,
  input  logic [31:0] in_chunk,
  input  chunk_t      in_data,
  output logic        wq_valid,
  output addr_t       wq_addr,
  output chunk_t      wq_data,
  input  logic [$clog2(QDEPTH+1)-1:0] wq_count,
  output logic        room,
  output logic [31:0] issued
);
  assign wq_valid = in_valid;
  assign wq_addr  = mb_base + addr_t'(in_chunk);
  assign wq_data  = in_data;
  assign room     = (int'(wq_count) + SLACK <= QDEPTH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) issued <= '0;
    else if (in_valid) issued <= issued + 1;
  end

  always_ff @(posedge clk) begin
    if (rst_n) assert (!(in_valid && int'(wq_count) >= QDEPTH)) else $error("mb_writer: queue overflow");
  end
endmodule
