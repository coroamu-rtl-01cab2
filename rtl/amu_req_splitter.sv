// amu_req_splitter: request decomposition and aset binding in the AMU
// execute stage.
//
// An aload/astore carries its granularity in the high bits of its address
// operand (operand[47:44] = log2 of the size in bytes, 8 B .. 4 KB) and the
// resume-PC offset in operand[63:48]. The splitter emits one line request
// per 64 B line, one per cycle, with the memory line, the SPM line and an
// 8-bit mask of the 8-byte words touched (a request smaller than a line
// touches part of one line). aset(ID, n) emits nothing: it makes the next n
// aload/astore instructions use ID instead of their own, so that the L2
// counts all their lines as one group. The last line of a group carries
// last=1: the last line of an unbound request, or of the n-th bound one.
// await and asignal pass through as a single request with last=1.
//
// Interface: valid/ready in (from the Request Queue) and out (to the
// request table). The input is popped in the cycle its final line request
// is accepted (aset: in the cycle it is seen). Line decomposition and aset
// follow the paper; the operand bit layout, the 64 B line and the word
// granularity of small requests are this design's choices.
module amu_req_splitter
  import coroamu_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  amu_instr_t in_instr,
  output logic       out_valid,
  input  logic       out_ready,
  output line_req_t  out_req
);
  localparam int unsigned LIDX_W = MAX_SIZE_CODE - 6 + 1;   // up to 64 lines

  logic [LIDX_W-1:0]   line_idx;
  logic [ID_W-1:0]     bind_id;
  logic [ASET_N_W-1:0] bind_left;

  logic [SIZE_CODE_W-1:0] code;
  logic [LIDX_W-1:0]      nlines_m1;
  logic [WORDS_PER_LINE-1:0] small_mask;
  logic                   is_mem, is_aset, last_line, bound;

  always_comb begin
    code = in_instr.opnd[OPND_SIZE_LSB +: SIZE_CODE_W];
    if (code < SIZE_CODE_W'(MIN_SIZE_CODE)) code = SIZE_CODE_W'(MIN_SIZE_CODE);
    if (code > SIZE_CODE_W'(MAX_SIZE_CODE)) code = SIZE_CODE_W'(MAX_SIZE_CODE);
    nlines_m1 = (code >= 4'd6) ? LIDX_W'((1 << (code - 4'd6)) - 1) : '0;
    // words of a sub-line request, aligned at their own size
    small_mask = WORDS_PER_LINE'((1 << (1 << (code - 4'd3))) - 1);
    small_mask = small_mask << in_instr.opnd[5:3];
    is_mem    = (in_instr.op == OP_ALOAD) || (in_instr.op == OP_ASTORE);
    is_aset   = (in_instr.op == OP_ASET);
    last_line = !is_mem || (line_idx == nlines_m1);
    bound     = is_mem && (bind_left != '0);
  end

  always_comb begin
    out_req          = '0;
    out_req.op       = in_instr.op;
    out_req.id       = bound ? bind_id : in_instr.id;
    out_req.pcoff    = in_instr.opnd[OPND_PC_LSB +: PCOFF_W];
    out_req.spm_addr = in_instr.spm_addr;
    if (is_mem) begin
      out_req.line     = in_instr.opnd[MADDR_W-1:6] + (MADDR_W-6)'(line_idx);
      out_req.spm_line = in_instr.spm_addr[SPM_ADDR_W-1:6] + SPM_LINE_W'(line_idx);
      out_req.wmask    = (code >= 4'd6) ? '1 : small_mask;
      out_req.last     = last_line && (!bound || bind_left == ASET_N_W'(1));
    end else begin
      out_req.last     = 1'b1;
    end
    out_valid = in_valid && !is_aset;
    in_ready  = is_aset || (out_ready && last_line);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      line_idx  <= '0;
      bind_id   <= '0;
      bind_left <= '0;
    end else if (in_valid) begin
      if (is_aset) begin
        bind_id   <= in_instr.id;
        bind_left <= in_instr.opnd[ASET_N_W-1:0];
      end else if (out_ready) begin
        if (last_line) begin
          line_idx <= '0;
          if (bound) bind_left <= bind_left - 1'b1;
        end else begin
          line_idx <= line_idx + 1'b1;
        end
      end
    end
  end
endmodule
