// amu_aconfig: the two coroutine-handler registers set by the aconfig
// instruction, and the handler address computed from them for bafin.
//
// cfg_valid loads the base address of the handler array (cfg_base) and the
// handler size per coroutine in bytes (cfg_size). handler_addr is the
// combinational product base + id * size for the ID presented. Both
// registers reset to zero. The two registers and their meaning are the
// paper's; widths and reset value are this design's.
module amu_aconfig
  import coroamu_pkg::*;
#(
  parameter int unsigned BASE_W = 48,
  parameter int unsigned SIZE_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_valid,
  input  logic [BASE_W-1:0] cfg_base,
  input  logic [SIZE_W-1:0] cfg_size,
  input  logic [ID_W-1:0]   id,
  output logic [BASE_W-1:0] handler_addr,
  output logic [BASE_W-1:0] base_q,
  output logic [SIZE_W-1:0] size_q
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base_q <= '0;
      size_q <= '0;
    end else if (cfg_valid) begin
      base_q <= cfg_base;
      size_q <= cfg_size;
    end
  end

  assign handler_addr = base_q + BASE_W'(id) * BASE_W'(size_q);
endmodule
