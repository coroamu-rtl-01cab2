// far_resp_delayer: programmable latency on the far-memory response path of
// the disaggregated-memory emulation platform.
//
// Each response from the memory is stamped with a free-running cycle
// counter and put in a DEPTH-entry FIFO. The head leaves once `latency`
// cycles (300..3000 in the evaluated platform) have passed since it
// arrived, so every response is delayed by the same programmed amount and
// keeps its order; a response already older than a lowered latency leaves
// at once. in_ready drops only when the FIFO is full. A response is
// presented at the earliest `latency` cycles after it was accepted.
// Configurable delay is the paper's; the FIFO-with-timestamp structure
// and its depth (64, the request-table size) are this design's.
module far_resp_delayer
  import coroamu_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic [11:0] latency,
  input  logic      in_valid,
  output logic      in_ready,
  input  mem_resp_t in_resp,
  output logic      out_valid,
  input  logic      out_ready,
  output mem_resp_t out_resp
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned TSW = 13;

  mem_resp_t      data_q [DEPTH];
  logic [TSW-1:0] ts_q   [DEPTH];
  logic [AW:0]    wr_ptr, rd_ptr;
  logic [TSW-1:0] now_q, age;

  assign in_ready  = (AW+1)'(wr_ptr - rd_ptr) != (AW+1)'(DEPTH);
  assign age       = now_q - ts_q[rd_ptr[AW-1:0]];
  assign out_valid = (wr_ptr != rd_ptr) && (age >= TSW'(latency));
  assign out_resp  = data_q[rd_ptr[AW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      now_q  <= '0;
    end else begin
      now_q <= now_q + 1'b1;
      if (in_valid && in_ready)   wr_ptr <= wr_ptr + 1'b1;
      if (out_valid && out_ready) rd_ptr <= rd_ptr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      data_q[wr_ptr[AW-1:0]] <= in_resp;
      ts_q[wr_ptr[AW-1:0]]   <= now_q;
    end
  end
endmodule
