// bafin_exec: backend resolution of the polling instructions getfin and
// bafin, using the entry the Finished Queue returns.
//
// getfin writes back the finished ID (0 when nothing is finished). bafin
// jumps to the resume point of a finished coroutine or falls through when
// there is none: taken = ex_has, target = PC + sign-extended resume-PC
// offset, otherwise PC+4. It writes back task_info =
// {SPM address of the primary request (bits 63:48), handler address
// (bits 47:0)}, with the handler address base + ID * size from the aconfig
// registers; it writes 0 when falling through. A bafin is mispredicted when
// the frontend's taken/not-taken or ID differ from the resolution; then
// redirect_pc gives the correct next PC. Purely combinational.
//
// Jump-or-fall-through and the handler address from aconfig are the
// paper's; the task_info layout and the PC-relative target are this
// design's choices.
module bafin_exec
  import coroamu_pkg::*;
(
  input  logic            ex_valid,
  input  logic            ex_is_bafin,
  input  logic [XLEN-1:0] ex_pc,
  input  logic            ex_pred_taken,
  input  logic [ID_W-1:0] ex_pred_id,
  // Finished Queue result
  input  logic            fq_has,
  input  fin_t            fq_fin,
  // aconfig
  output logic [ID_W-1:0] cfg_id,
  input  logic [47:0]     handler_addr,
  // results
  output logic [XLEN-1:0] wb_data,
  output logic            taken,
  output logic [XLEN-1:0] target,
  output logic            mispredict,
  output logic [XLEN-1:0] redirect_pc
);
  assign cfg_id = fq_fin.id;

  always_comb begin
    wb_data     = '0;
    taken       = 1'b0;
    target      = ex_pc + XLEN'(4);
    mispredict  = 1'b0;
    redirect_pc = ex_pc + XLEN'(4);
    if (ex_valid) begin
      if (!ex_is_bafin) begin
        wb_data = fq_has ? XLEN'(fq_fin.id) : '0;
      end else begin
        taken = fq_has;
        if (fq_has) begin
          target  = ex_pc + XLEN'($signed(fq_fin.pcoff));
          wb_data = {16'(fq_fin.spm_addr), handler_addr};
        end
        mispredict  = (ex_pred_taken != taken) || (taken && ex_pred_id != fq_fin.id);
        redirect_pc = target;
      end
    end
  end
endmodule
