// amu_req_queue: the AMU Request Queue of the execute unit. It holds the
// asynchronous memory instructions (aload, astore, aset, await, asignal) in
// program order between the backend and the request splitter.
//
// A circular buffer of DEPTH entries with read and write pointers that carry
// a wrap bit. Enqueue when in_valid && in_ready, dequeue when
// out_valid && out_ready; both may happen in one cycle. The head entry is
// presented combinationally (no added latency). The depth of 16 is the
// paper's; the valid/ready handshake and entry layout are this design's.
module amu_req_queue
  import coroamu_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  amu_instr_t in_instr,
  output logic       out_valid,
  input  logic       out_ready,
  output amu_instr_t out_instr,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = $clog2(DEPTH);

  amu_instr_t      mem_q [DEPTH];
  logic [AW:0]     wr_ptr, rd_ptr;

  assign count     = wr_ptr - rd_ptr;
  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_instr = mem_q[rd_ptr[AW-1:0]];

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
    if (in_valid && in_ready) mem_q[wr_ptr[AW-1:0]] <= in_instr;
  end

  // handshake rule: the head may not change while it is offered and not taken
  property p_hold;
    @(posedge clk) disable iff (!rst_n) (out_valid && !out_ready) |=> (out_valid && $stable(out_instr));
  endproperty
  a_hold: assert property (p_hold);
endmodule
