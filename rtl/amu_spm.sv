// amu_spm: the AMU scratchpad (SPM), 32 KB taken from one of the eight ways
// of the L2 data bank. Data moved by aload/astore lands here, and the core
// reads and writes it with ordinary loads and stores.
//
// Organised as WORDS_PER_LINE (8) banks of 64-bit words, bank b holding
// word b of every 64 B line, so that the AMU can move a whole line (with a
// word mask) while the core touches a single word. Three ports:
//   lw_*   AMU line write with an 8-bit word mask (aload responses)
//   lr_*   AMU line read, data one cycle after lr_en (astore issue)
//   core_* core 8-byte access with byte strobes, read data one cycle later
// If the AMU line write and a core write hit the same word in one cycle,
// the AMU write wins. The 32 KB size is the paper's; the bank and port
// structure and latencies are this design's. The sharing of the way with
// ordinary L2 data is not modelled.
//
// core_addr is a byte address; its low three bits are not used because
// the core port always addresses a whole 64-bit word (byte lanes are
// selected by core_be).
module amu_spm
  import coroamu_pkg::*;
#(
  parameter int unsigned BYTES = SPM_BYTES
) (
  input  logic                        clk,
  // AMU line write
  input  logic                        lw_en,
  input  logic [$clog2(BYTES/LINE_BYTES)-1:0] lw_line,
  input  logic [WORDS_PER_LINE-1:0]   lw_mask,
  input  logic [LINE_W-1:0]           lw_data,
  // AMU line read
  input  logic                        lr_en,
  input  logic [$clog2(BYTES/LINE_BYTES)-1:0] lr_line,
  output logic [LINE_W-1:0]           lr_data,
  // core word port
  input  logic                        core_en,
  input  logic                        core_we,
  input  logic [$clog2(BYTES)-1:0]    core_addr,
  input  logic [7:0]                  core_be,
  input  logic [63:0]                 core_wdata,
  output logic [63:0]                 core_rdata
);
  localparam int unsigned LINES = BYTES / LINE_BYTES;
  localparam int unsigned LW    = $clog2(LINES);

  logic [LW-1:0] core_row;
  logic [2:0]    core_bank;
  assign core_row  = core_addr[$clog2(BYTES)-1:6];
  assign core_bank = core_addr[5:3];

  for (genvar b = 0; b < WORDS_PER_LINE; b++) begin : g_bank
    logic [63:0] bank_q [LINES];

    always_ff @(posedge clk) begin
      if (core_en && core_we && core_bank == 3'(b)) begin
        for (int k = 0; k < 8; k++)
          if (core_be[k]) bank_q[core_row][8*k +: 8] <= core_wdata[8*k +: 8];
      end
      if (lw_en && lw_mask[b]) bank_q[lw_line] <= lw_data[64*b +: 64];
      if (lr_en) lr_data[64*b +: 64] <= bank_q[lr_line];
    end
  end

  logic [LW-1:0] core_row_q;
  logic [2:0]    core_bank_q;
  logic [63:0]   core_words [WORDS_PER_LINE];
  always_ff @(posedge clk) begin
    if (core_en && !core_we) begin
      core_row_q  <= core_row;
      core_bank_q <= core_bank;
    end
  end
  for (genvar b = 0; b < WORDS_PER_LINE; b++) begin : g_rd
    assign core_words[b] = g_bank[b].bank_q[core_row_q];
  end
  assign core_rdata = core_words[core_bank_q];
endmodule
