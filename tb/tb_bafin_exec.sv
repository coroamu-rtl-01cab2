// tb_bafin_exec: checks getfin and bafin results: getfin returns the ID or
// 0, bafin jumps to PC + offset with task_info = {SPM addr, handler addr}
// or falls through to PC+4 writing 0, and misprediction is flagged exactly
// when the predicted direction or ID differs.
module tb_bafin_exec;
  import coroamu_pkg::*;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  logic ex_valid, ex_is_bafin, ex_pred_taken, fq_has, taken, mispredict;
  logic [XLEN-1:0] ex_pc, wb_data, target, redirect_pc;
  logic [ID_W-1:0] ex_pred_id, cfg_id;
  fin_t fq_fin;
  logic [47:0] handler_addr;
  bafin_exec dut (.*);
  assign handler_addr = 48'h10_0000 + 48'(cfg_id) * 48'd256;
  initial begin
    #100000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 200; t++) begin
      logic [63:0] pc; logic signed [15:0] off; logic [ID_W-1:0] id; logic [14:0] sa;
      pc = 64'h8000_0000 + 64'($urandom_range(0, 4095) * 4);
      off = 16'($signed($urandom_range(0, 2000)) - 1000) & ~16'h3;
      id = ID_W'($urandom_range(1, 511)); sa = 15'($urandom);
      ex_valid = 1; ex_pc = pc; fq_has = $urandom_range(0, 1);
      fq_fin.id = id; fq_fin.pcoff = off; fq_fin.spm_addr = sa;
      ex_is_bafin = $urandom_range(0, 1);
      ex_pred_taken = $urandom_range(0, 1);
      ex_pred_id = ($urandom_range(0, 3) == 0) ? ID_W'(id + 1) : id;
      #1;
      if (!ex_is_bafin) begin
        check(wb_data == (fq_has ? 64'(id) : 64'd0), "getfin value");
        check(!mispredict && !taken, "getfin no jump");
      end else if (fq_has) begin
        check(taken && target == pc + 64'(off), "bafin target");
        check(wb_data == {16'(sa), 48'h10_0000 + 48'(id) * 48'd256}, "task_info");
        check(mispredict == (!ex_pred_taken || ex_pred_id != id), "bafin mispredict (has)");
        check(redirect_pc == pc + 64'(off), "redirect pc");
      end else begin
        check(!taken && target == pc + 4 && wb_data == 0, "bafin fall through");
        check(mispredict == ex_pred_taken, "bafin mispredict (none)");
      end
    end
    ex_valid = 0; #1; check(!taken && !mispredict && wb_data == 0, "idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
