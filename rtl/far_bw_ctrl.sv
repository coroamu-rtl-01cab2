// far_bw_ctrl: programmable bandwidth regulator on the far-memory request
// path of the disaggregated-memory emulation platform.
//
// A token bucket: every cycle `rate` bytes (1..32 B/cycle) of credit are
// added, up to BURST_BYTES. A request (one 64 B line, read or write) passes
// only while at least LINE_BYTES of credit are available, and spends them.
// The request is forwarded combinationally (valid/ready on both sides);
// the bucket starts full after reset. Regulating the request stream at a
// programmable bandwidth is the paper's; the token-bucket scheme, its cap
// and the per-line cost are this design's.
module far_bw_ctrl
  import coroamu_pkg::*;
#(
  parameter int unsigned BURST_BYTES = 128
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic [5:0] rate,
  input  logic     in_valid,
  output logic     in_ready,
  input  mem_req_t in_req,
  output logic     out_valid,
  input  logic     out_ready,
  output mem_req_t out_req
);
  localparam int unsigned TW = $clog2(BURST_BYTES + 64) + 1;

  logic [TW-1:0] tokens_q, tokens_add;
  logic          enough, fire;

  assign enough    = (tokens_q >= TW'(LINE_BYTES));
  assign out_valid = in_valid && enough;
  assign in_ready  = out_ready && enough;
  assign out_req   = in_req;
  assign fire      = out_valid && out_ready;

  always_comb begin
    tokens_add = tokens_q - (fire ? TW'(LINE_BYTES) : '0) + TW'(rate);
    if (tokens_add > TW'(BURST_BYTES)) tokens_add = TW'(BURST_BYTES);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tokens_q <= TW'(BURST_BYTES);
    else        tokens_q <= tokens_add;
  end
endmodule
