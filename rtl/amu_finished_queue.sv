// amu_finished_queue: the Finished Queue of the AMU execute unit, the
// execution unit of the polling instructions getfin and bafin.
//
// A DEPTH-entry ring of completed {ID, resume-PC offset, SPM address} with
// four pointers (each with a wrap bit):
//   EnqPtr    next free slot; completions from the Finished List enter here
//   BafinPtr  next entry to send to the Bafin Target Queue (BTQ)
//   WbPtr     next entry a getfin/bafin will write back
//   CmtPtr    oldest entry whose getfin/bafin has not committed
// so that CmtPtr <= WbPtr <= BafinPtr <= EnqPtr around the ring. Entries
// between WbPtr and EnqPtr are finished but not yet written back; only those
// are offered to the BTQ. A getfin/bafin (ex_valid) takes the entry at WbPtr
// in the same cycle (ex_has=0 if there is none) and returns the WbPtr it used
// (ex_ptr); if the entry had not been sent yet, BafinPtr moves along with it,
// and if it had, btq_deq tells the BTQ to drop its copy. cmt_valid frees
// the entry at CmtPtr. A backend redirect gives the write-back pointer after
// the last surviving getfin/bafin: WbPtr and BafinPtr return to it, so all
// later entries are sent to the (flushed) BTQ again.
//
// The four pointers and the resend on a backend redirect are the paper's;
// the pointer meanings, the redirect pointer and the single-cycle
// resolution are this design's reading of them.
module amu_finished_queue
  import coroamu_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic clk,
  input  logic rst_n,
  // from the Finished List
  input  logic enq_valid,
  output logic enq_ready,
  input  fin_t enq_fin,
  // to the BTQ
  output logic btq_valid,
  input  logic btq_ready,
  output fin_t btq_fin,
  output logic btq_deq,
  // getfin / bafin execution
  input  logic ex_valid,
  output logic ex_has,
  output fin_t ex_fin,
  output logic [$clog2(DEPTH):0] ex_ptr,
  // commit and redirect
  input  logic cmt_valid,
  input  logic redirect_valid,
  input  logic [$clog2(DEPTH):0] redirect_ptr,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = $clog2(DEPTH);
  typedef logic [AW:0] ptr_t;

  fin_t ent_q [DEPTH];
  ptr_t enq_ptr, bafin_ptr, wb_ptr, cmt_ptr;

  assign count     = enq_ptr - cmt_ptr;
  assign enq_ready = (count != ptr_t'(DEPTH));

  assign btq_valid = (bafin_ptr != enq_ptr) && !redirect_valid;
  assign btq_fin   = ent_q[bafin_ptr[AW-1:0]];

  assign ex_has  = ex_valid && (wb_ptr != enq_ptr);
  assign ex_fin  = ent_q[wb_ptr[AW-1:0]];
  assign ex_ptr  = wb_ptr;
  // the written-back entry had already been sent to the BTQ
  assign btq_deq = ex_has && (wb_ptr != bafin_ptr);

  logic btq_fire;
  assign btq_fire = btq_valid && btq_ready;

  ptr_t wb_nxt, bafin_nxt;
  always_comb begin
    wb_nxt    = ex_has ? wb_ptr + 1'b1 : wb_ptr;
    bafin_nxt = btq_fire ? bafin_ptr + 1'b1 : bafin_ptr;
    // keep WbPtr <= BafinPtr
    if (ex_has && (wb_ptr == bafin_ptr) && !btq_fire) bafin_nxt = wb_nxt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      enq_ptr   <= '0;
      bafin_ptr <= '0;
      wb_ptr    <= '0;
      cmt_ptr   <= '0;
    end else begin
      if (enq_valid && enq_ready) enq_ptr <= enq_ptr + 1'b1;
      if (cmt_valid) cmt_ptr <= cmt_ptr + 1'b1;
      if (redirect_valid) begin
        wb_ptr    <= redirect_ptr;
        bafin_ptr <= redirect_ptr;
      end else begin
        wb_ptr    <= wb_nxt;
        bafin_ptr <= bafin_nxt;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (enq_valid && enq_ready) ent_q[enq_ptr[AW-1:0]] <= enq_fin;
  end

  // only written-back entries may commit, and a redirect may not move
  // the write-back pointer behind the commit pointer
  a_cmt: assert property (@(posedge clk) disable iff (!rst_n) cmt_valid |-> (cmt_ptr != wb_ptr));
  a_rdr: assert property (@(posedge clk) disable iff (!rst_n)
           redirect_valid |-> (ptr_t'(redirect_ptr - cmt_ptr) <= ptr_t'(wb_ptr - cmt_ptr)));
endmodule
