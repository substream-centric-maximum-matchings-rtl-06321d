// state_controller: sequences the epochs of one run. An epoch is K adjacent
// rows of the adjacency matrix processed as one merged stream.
//   IDLE    -> on start, prefetch the bits of epoch 0 into the next buffer
//   LOAD0   -> when loaded, swap buffers
//   ENTER   -> one cycle: start the prefetch of epoch e+1, reset the
//              matching bits requester's chunk memory
//   RUN     -> matching bits requester runs; leave when the stream's head is
//              past epoch e, the Pending-Queue is empty and the edge processor
//              is idle
//   FLUSH   -> edge processor writes back its working chunk and epoch e's
//              u-bits
//   ACK     -> wait until every matching-bit write is acknowledged and the
//              prefetch is complete; then swap and go to ENTER for e+1, or,
//              after the last epoch, flush the edge writer
//   EFLUSH  -> edge writer writes its partly filled chunks
//   DRAIN   -> wait for all write acknowledgements, then DONE (done high).
// The paper gives the duties (start the next epoch once all its edges are
// processed, read matching bits only after the previous epoch's writes are
// acknowledged); the state sequence itself is this design's.
module state_controller #(
  parameter int K = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] num_vertices,
  output logic [31:0] epoch,
  output logic [31:0] num_epochs,
  output logic        run,
  output logic        epoch_start,
  output logic        pf_start,
  output logic [31:0] pf_epoch,
  input  logic [$clog2(K+1)-1:0] pf_loaded,
  output logic        swap,
  input  logic        epoch_end,
  input  logic        pend_empty,
  input  logic        ep_idle,
  output logic        ep_flush,
  input  logic        ep_flushed,
  input  logic        mb_done,
  output logic        ew_flush,
  input  logic        ew_flushed,
  input  logic        all_done,
  output logic        done,
  output logic [31:0] n_epochs_done
);
  typedef enum logic [3:0] {IDLE, LOAD0, ENTER, RUN, FLUSH, ACK, EFLUSH, DRAIN, DONE} state_t;
  state_t st;
  logic   loaded;

  assign num_epochs = (num_vertices + 32'(K - 1)) / 32'(K);
  assign loaded     = (pf_epoch >= num_epochs) || (int'(pf_loaded) == K);
  assign run        = (st == RUN);
  assign done       = (st == DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; epoch <= '0; pf_epoch <= '0; n_epochs_done <= '0;
      epoch_start <= 1'b0; pf_start <= 1'b0; swap <= 1'b0; ep_flush <= 1'b0; ew_flush <= 1'b0;
    end else begin
      epoch_start <= 1'b0; pf_start <= 1'b0; swap <= 1'b0; ep_flush <= 1'b0; ew_flush <= 1'b0;
      case (st)
        IDLE: if (start) begin
          epoch <= '0; pf_epoch <= '0; pf_start <= 1'b1; n_epochs_done <= '0; st <= LOAD0;
        end
        LOAD0: if (!pf_start && loaded) begin swap <= 1'b1; st <= ENTER; end
        ENTER: begin
          pf_epoch <= epoch + 1; pf_start <= 1'b1; epoch_start <= 1'b1; st <= RUN;
        end
        RUN: if (epoch_end && pend_empty && ep_idle) begin ep_flush <= 1'b1; st <= FLUSH; end
        FLUSH: if (ep_flushed) st <= ACK;
        ACK: if (!pf_start && mb_done && loaded) begin
          n_epochs_done <= n_epochs_done + 1;
          if (epoch + 1 < num_epochs) begin
            swap <= 1'b1; epoch <= epoch + 1; st <= ENTER;
          end else begin
            ew_flush <= 1'b1; st <= EFLUSH;
          end
        end
        EFLUSH: if (ew_flushed) st <= DRAIN;
        DRAIN:  if (all_done) st <= DONE;
        DONE:   if (start) begin
          epoch <= '0; pf_epoch <= '0; pf_start <= 1'b1; n_epochs_done <= '0; st <= LOAD0;
        end
        default: st <= IDLE;
      endcase
    end
  end
endmodule
