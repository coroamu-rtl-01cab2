// bafin_pred_table: the Bafin Predict Table (BPT), a small BTB-like
// predictor that only knows bafin instructions.
//
// ENTRIES (4) fully associative entries hold the PCs of bafin instructions
// seen in the backend (upd_valid/upd_pc, round-robin replacement). For each
// fetch block (f_valid, f_pc, FETCH_BYTES = 32 B) the table looks for a bafin
// inside the block. If one is found and the base predictors do not predict
// an earlier taken branch in the block, the BPT decides: with an unused
// entry in the Bafin Target Queue it takes that entry (btq_req in the same
// cycle) and predicts taken to bafin PC + sign-extended resume-PC offset,
// with the entry's ID; with an empty BTQ it predicts fall-through (PC+4).
// Otherwise the base prediction passes unchanged. The result is registered:
// it appears the cycle after the lookup (single-cycle latency).
//
// Four entries, PC indexing, single-cycle latency and priority over the
// other predictors are the paper's; associativity, replacement, the
// PC-relative target and the fall-through on an empty BTQ are this design's.
//
// Only the ID and resume-PC offset of a BTQ entry are used here; its SPM
// address field is left unread.
module bafin_pred_table
  import coroamu_pkg::*;
#(
  parameter int unsigned ENTRIES = 4,
  parameter int unsigned BTQ_PTR_W = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  // lookup
  input  logic        f_valid,
  input  logic [XLEN-1:0] f_pc,
  input  logic        base_taken,
  input  logic [XLEN-1:0] base_target,
  input  logic [$clog2(FETCH_BYTES)-1:0] base_off,
  // BTQ
  output logic        btq_req,
  input  logic        btq_valid,
  input  fin_t        btq_fin,
  input  logic [BTQ_PTR_W-1:0] btq_ptr,
  // registered prediction
  output logic        p_valid,
  output logic        p_taken,
  output logic [XLEN-1:0] p_target,
  output logic        p_bafin,       // the BPT decided this block
  output logic        p_bafin_taken, // the bafin itself is predicted taken
  output logic [XLEN-1:0] p_bafin_pc,
  output logic [ID_W-1:0] p_id,
  output logic [BTQ_PTR_W-1:0] p_btq_ptr,
  // training
  input  logic        upd_valid,
  input  logic [XLEN-1:0] upd_pc
);
  localparam int unsigned OW = $clog2(FETCH_BYTES);
  localparam int unsigned EW = $clog2(ENTRIES);

  logic [ENTRIES-1:0] v_q;
  logic [XLEN-1:0]    pc_q [ENTRIES];
  logic [EW-1:0]      repl_q;

  // ---------------- lookup ----------------
  logic          hit;
  logic [OW-1:0] hit_off;
  logic [XLEN-1:0] hit_pc;
  always_comb begin
    hit = 1'b0; hit_off = '1; hit_pc = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      logic [XLEN-1:0] d;
      d = pc_q[i] - f_pc;
      if (v_q[i] && d < XLEN'(FETCH_BYTES) && (!hit || OW'(d) < hit_off)) begin
        hit = 1'b1; hit_off = OW'(d); hit_pc = pc_q[i];
      end
    end
  end

  logic decide;
  assign decide  = f_valid && hit && !(base_taken && base_off < hit_off);
  assign btq_req = decide;

  logic [XLEN-1:0] tgt;
  assign tgt = hit_pc + XLEN'($signed(btq_fin.pcoff));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_valid <= 1'b0; p_taken <= 1'b0; p_target <= '0; p_bafin <= 1'b0;
      p_bafin_taken <= 1'b0; p_bafin_pc <= '0; p_id <= '0; p_btq_ptr <= '0;
    end else begin
      p_valid       <= f_valid;
      p_bafin       <= decide;
      p_bafin_pc    <= hit_pc;
      p_bafin_taken <= decide && btq_valid;
      p_id          <= (decide && btq_valid) ? btq_fin.id : '0;
      p_btq_ptr     <= btq_ptr;
      if (decide) begin
        p_taken  <= btq_valid;
        p_target <= btq_valid ? tgt : hit_pc + XLEN'(4);
      end else begin
        p_taken  <= base_taken;
        p_target <= base_target;
      end
    end
  end

  // ---------------- training ----------------
  logic present;
  always_comb begin
    present = 1'b0;
    for (int i = 0; i < ENTRIES; i++)
      if (v_q[i] && pc_q[i] == upd_pc) present = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q    <= '0;
      repl_q <= '0;
    end else if (upd_valid && !present) begin
      v_q[repl_q] <= 1'b1;
      repl_q      <= repl_q + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (upd_valid && !present) pc_q[repl_q] <= upd_pc;
  end
endmodule
