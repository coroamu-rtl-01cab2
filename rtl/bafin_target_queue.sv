// bafin_target_queue: the Bafin Target Queue (BTQ) in the branch prediction
// unit. It carries finished coroutine IDs with their resume-PC offsets from
// the Finished Queue to the Bafin Predict Table, and keeps them consistent
// across frontend and backend redirects.
//
// A ring with three pointers: head (oldest entry still held), pred (next
// entry not yet used by a prediction) and tail (next free slot). A
// prediction (pred_req) takes the entry at pred in the same cycle and gets
// its pointer (pred_ptr) so that it can be rolled back. A pre-decode
// redirect (fe_redirect_valid) moves pred back to fe_redirect_ptr: every
// entry used after the mispredicted instruction becomes unused again, the
// contents stay. A backend redirect (be_flush) empties the queue; the
// Finished Queue then sends the entries again. deq drops the head once the
// matching bafin has written back in the backend.
//
// The two rollback behaviours are the paper's; the depth (8), the pointer
// scheme and the deq rule are this design's.
module bafin_target_queue
  import coroamu_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic enq_valid,
  output logic enq_ready,
  input  fin_t enq_fin,
  input  logic pred_req,
  output logic pred_valid,
  output fin_t pred_fin,
  output logic [$clog2(DEPTH):0] pred_ptr,
  input  logic fe_redirect_valid,
  input  logic [$clog2(DEPTH):0] fe_redirect_ptr,
  input  logic be_flush,
  input  logic deq
);
  localparam int unsigned AW = $clog2(DEPTH);
  typedef logic [AW:0] ptr_t;

  fin_t ent_q [DEPTH];
  ptr_t head, pred, tail;

  assign enq_ready  = (ptr_t'(tail - head) != ptr_t'(DEPTH)) && !be_flush;
  assign pred_valid = (pred != tail) && !fe_redirect_valid && !be_flush;
  assign pred_fin   = ent_q[pred[AW-1:0]];
  assign pred_ptr   = pred;

  ptr_t head_nxt, pred_nxt;
  always_comb begin
    head_nxt = (deq && head != tail) ? head + 1'b1 : head;
    pred_nxt = (pred_req && pred_valid) ? pred + 1'b1 : pred;
    if (fe_redirect_valid) pred_nxt = fe_redirect_ptr;
    // an entry dropped before any prediction used it
    if (ptr_t'(pred_nxt - head_nxt) > ptr_t'(tail - head_nxt)) pred_nxt = head_nxt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head <= '0;
      pred <= '0;
      tail <= '0;
    end else if (be_flush) begin
      head <= '0;
      pred <= '0;
      tail <= '0;
    end else begin
      if (enq_valid && enq_ready) tail <= tail + 1'b1;
      head <= head_nxt;
      pred <= pred_nxt;
    end
  end

  always_ff @(posedge clk) begin
    if (enq_valid && enq_ready) ent_q[tail[AW-1:0]] <= enq_fin;
  end

  a_fe_rb: assert property (@(posedge clk) disable iff (!rst_n)
             fe_redirect_valid |-> (ptr_t'(fe_redirect_ptr - head) <= ptr_t'(pred - head)));
endmodule
