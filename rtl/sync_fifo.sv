// sync_fifo: first-word-fall-through queue used for every "Queue" of the
// accelerator. A register array with read and write pointers; push and pop may
// happen in the same cycle. dout shows the head whenever empty is low. count
// gives the occupancy, which the edge requester reads to steer edge fetches.
// Pushing when full or popping when empty is a caller error and is asserted.
module sync_fifo #(
  parameter int WIDTH = 96,
  parameter int DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             empty,
  output logic             full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;

  assign empty = (count == 0);
  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign dout  = mem[rd_ptr];

  function automatic logic [AW-1:0] incr(logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= incr(wr_ptr);
      if (pop)  rd_ptr <= incr(rd_ptr);
      count <= count + $bits(count)'(push) - $bits(count)'(pop);
    end
  end

  // synthesis-neutral checks of the handshake rules
  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (!(push && full && !pop)) else $error("sync_fifo: push while full");
      assert (!(pop && empty)) else $error("sync_fifo: pop while empty");
    end
  end
endmodule
