// amu_finished_list: the Finished List kept with the request-table metadata
// in the L2. Each entry is a completed coroutine request group: its ID, the
// resume-PC offset bound to it and the SPM address of its primary request.
// Entries leave in completion order towards the core's Finished Queue.
//
// A DEPTH-entry circular FIFO with valid/ready on both sides and the head
// shown combinationally. DEPTH defaults to one slot per coroutine ID (2^ID_W = 1024):
// an ID has at most one group in flight, so the list can never refuse a
// completion and the Request Table can always free finished entries, even
// while the core is not polling. Without that, a full Finished Queue would
// keep finished entries in the table, block new requests, and deadlock a
// program that issues before it polls. The paper only names this list; its
// depth and FIFO order are this design's choice.
module amu_finished_list
  import coroamu_pkg::*;
#(
  parameter int unsigned DEPTH = 1 << ID_W
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  fin_t in_fin,
  output logic out_valid,
  input  logic out_ready,
  output fin_t out_fin
);
  localparam int unsigned AW = $clog2(DEPTH);

  fin_t        mem_q [DEPTH];
  logic [AW:0] wr_ptr, rd_ptr;
  logic [AW:0] count;

  assign count     = wr_ptr - rd_ptr;
  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_fin   = mem_q[rd_ptr[AW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
    end else begin
      if (in_valid && in_ready)   wr_ptr <= wr_ptr + 1'b1;
      if (out_valid && out_ready) rd_ptr <= rd_ptr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem_q[wr_ptr[AW-1:0]] <= in_fin;
  end
endmodule
