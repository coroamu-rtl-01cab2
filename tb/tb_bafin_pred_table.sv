// tb_bafin_pred_table: self-checking test of the Bafin Predict Table. An
// untrained bafin is not recognised; after training, a fetch block holding
// it is predicted taken to bafin PC + offset with the BTQ entry's ID, one
// cycle after the lookup (single-cycle latency) and overriding the base
// prediction; with an empty BTQ it falls through; a taken base branch
// earlier in the block wins; a block without the bafin is untouched; and
// the fifth trained PC replaces the oldest of the four entries. Finally,
// random training and lookups (random base predictions and BTQ states)
// are compared with a separate model of a 4-entry round-robin table.
module tb_bafin_pred_table;
  import coroamu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic f_valid, base_taken, btq_req, btq_valid, p_valid, p_taken, p_bafin, p_bafin_taken, upd_valid;
  logic [63:0] f_pc, base_target, p_target, p_bafin_pc, upd_pc;
  logic [4:0] base_off;
  fin_t btq_fin;
  logic [3:0] btq_ptr, p_btq_ptr;
  logic [ID_W-1:0] p_id;
  bafin_pred_table #(.ENTRIES(4), .BTQ_PTR_W(4)) dut (.*);

  int n_req = 0;
  always @(posedge clk) if (btq_req) n_req <= n_req + 1;

  initial begin
    #200000; failures++; $display("FAIL: watchdog");
    // random phase against a reference model
    begin
      logic [63:0] mpc [4]; bit mv [4]; int mrep; bit mism;
      rst_n = 0; @(negedge clk); rst_n = 1; @(negedge clk);
      for (int i = 0; i < 4; i++) mv[i] = 0; mrep = 0;
      for (int it = 0; it < 600; it++) begin
        if ($urandom_range(0, 3) == 0) begin
          logic [63:0] pc; bit pres; pres = 0;
          pc = 64'hA000_0000 + 64'($urandom_range(0, 15)) * 64'h24;
          for (int i = 0; i < 4; i++) if (mv[i] && mpc[i] == pc) pres = 1;
          train(pc);
          if (!pres) begin mpc[mrep] = pc; mv[mrep] = 1; mrep = (mrep + 1) % 4; end
        end else begin
          logic [63:0] fpc, etgt, btgt; bit bt, bv, hit, dec, etk; logic [4:0] boff; int hoff; logic [63:0] hpc;
          fin_t bf; logic [3:0] bp;
          fpc = 64'hA000_0000 + 64'($urandom_range(0, 19)) * 64'h20;
          bt = $urandom_range(0, 1); boff = 5'($urandom_range(0, 7) * 4); btgt = {32'hB000_0000, $urandom};
          bv = $urandom_range(0, 1); bf.id = ID_W'($urandom_range(1, 1000)); bf.pcoff = 16'($urandom);
          bf.spm_addr = '0; bp = 4'($urandom);
          btq_valid = bv; btq_fin = bf; btq_ptr = bp;
          hit = 0; hoff = 99; hpc = 0;
          for (int i = 0; i < 4; i++)
            if (mv[i] && mpc[i] >= fpc && mpc[i] < fpc + 32 && int'(mpc[i] - fpc) < hoff) begin
              hit = 1; hoff = int'(mpc[i] - fpc); hpc = mpc[i];
            end
          dec = hit && !(bt && int'(boff) < hoff);
          if (dec) begin etk = bv; etgt = bv ? hpc + {{48{bf.pcoff[15]}}, bf.pcoff} : hpc + 64'd4; end
          else begin etk = bt; etgt = btgt; end
          f_valid = 1; f_pc = fpc; base_taken = bt; base_target = btgt; base_off = boff;
          #1 mism = (btq_req != dec);
          @(posedge clk); #1 f_valid = 0;
          check(!(mism || !p_valid || p_bafin != dec || p_taken != etk || p_target != etgt ||
                  p_bafin_taken != (dec && bv) || (dec && bv && p_id != bf.id)),
                $sformatf("random lookup of %0h matches the model", fpc));
          @(negedge clk);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic train(logic [63:0] pc);
    upd_valid = 1; upd_pc = pc; @(posedge clk); @(negedge clk); upd_valid = 0;
  endtask
  // drive a lookup for one cycle, check the registered result after the edge
  task automatic lookup(logic [63:0] pc, bit bt, logic [63:0] btgt, logic [4:0] boff);
    f_valid = 1; f_pc = pc; base_taken = bt; base_target = btgt; base_off = boff;
    @(posedge clk); #1 f_valid = 0;
  endtask

  initial begin
    f_valid = 0; base_taken = 0; base_target = 0; base_off = 0; btq_valid = 0; btq_fin = '0; btq_ptr = 0;
    upd_valid = 0; upd_pc = 0; f_pc = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    btq_valid = 1; btq_fin.id = 9'd42; btq_fin.pcoff = 16'hFF00; btq_ptr = 4'd3;  // offset -256
    lookup(64'h8000_1000, 1, 64'h8000_5000, 5'd8);
    check(p_valid && !p_bafin && p_taken && p_target == 64'h8000_5000, "untrained: base passes");
    check(n_req == 0, "untrained: no BTQ use");
    train(64'h8000_1008);
    // lookup: result must not be there in the lookup cycle itself
    f_valid = 1; f_pc = 64'h8000_1000; base_taken = 1; base_target = 64'h8000_7777; base_off = 5'd8;
    #1 check(btq_req, "BTQ taken in lookup cycle");
    @(posedge clk); #1 f_valid = 0;
    check(p_valid && p_bafin && p_taken && p_bafin_taken, "bafin predicted taken after one cycle");
    check(p_target == 64'h8000_1008 - 64'd256, "target = pc + offset");
    check(p_id == 9'd42 && p_btq_ptr == 4'd3 && p_bafin_pc == 64'h8000_1008, "id, ptr, pc");
    // empty BTQ: fall through
    btq_valid = 0;
    lookup(64'h8000_1000, 1, 64'h8000_7777, 5'd8);
    check(p_bafin && !p_taken && p_target == 64'h8000_100C, "empty BTQ: fall through");
    btq_valid = 1;
    // earlier taken base branch wins
    lookup(64'h8000_1000, 1, 64'h8000_2222, 5'd4);
    check(!p_bafin && p_taken && p_target == 64'h8000_2222, "earlier base branch wins");
    // block not containing the bafin
    lookup(64'h8000_1010, 0, 64'h0, 5'd0);
    check(!p_bafin && !p_taken, "other block untouched");
    // block starting before: bafin at offset 0x18 of 0x8000_0FF0 block
    lookup(64'h8000_0FF0, 0, 64'h0, 5'd0);
    check(p_bafin && p_taken, "bafin at block end");
    // replacement: train 4 more PCs, the first must be gone
    train(64'h9000_0000); train(64'h9000_0100); train(64'h9000_0200);
    lookup(64'h8000_1000, 0, 64'h0, 5'd0);
    check(p_bafin, "4 entries kept");
    train(64'h9000_0300);
    lookup(64'h8000_1000, 0, 64'h0, 5'd0);
    check(!p_bafin, "oldest replaced by fifth");
    lookup(64'h9000_0300, 0, 64'h0, 5'd0);
    check(p_bafin && p_taken && p_target == 64'h9000_0300 - 64'd256, "new entry predicts");
    // training an existing PC does not take a new slot
    train(64'h9000_0300);
    lookup(64'h9000_0100, 0, 64'h0, 5'd0);
    check(p_bafin, "re-training keeps others");
    // random phase against a reference model
    begin
      logic [63:0] mpc [4]; bit mv [4]; int mrep; bit mism;
      rst_n = 0; @(negedge clk); rst_n = 1; @(negedge clk);
      for (int i = 0; i < 4; i++) mv[i] = 0; mrep = 0;
      for (int it = 0; it < 600; it++) begin
        if ($urandom_range(0, 3) == 0) begin
          logic [63:0] pc; bit pres; pres = 0;
          pc = 64'hA000_0000 + 64'($urandom_range(0, 15)) * 64'h24;
          for (int i = 0; i < 4; i++) if (mv[i] && mpc[i] == pc) pres = 1;
          train(pc);
          if (!pres) begin mpc[mrep] = pc; mv[mrep] = 1; mrep = (mrep + 1) % 4; end
        end else begin
          logic [63:0] fpc, etgt, btgt; bit bt, bv, hit, dec, etk; logic [4:0] boff; int hoff; logic [63:0] hpc;
          fin_t bf; logic [3:0] bp;
          fpc = 64'hA000_0000 + 64'($urandom_range(0, 19)) * 64'h20;
          bt = $urandom_range(0, 1); boff = 5'($urandom_range(0, 7) * 4); btgt = {32'hB000_0000, $urandom};
          bv = $urandom_range(0, 1); bf.id = ID_W'($urandom_range(1, 1000)); bf.pcoff = 16'($urandom);
          bf.spm_addr = '0; bp = 4'($urandom);
          btq_valid = bv; btq_fin = bf; btq_ptr = bp;
          hit = 0; hoff = 99; hpc = 0;
          for (int i = 0; i < 4; i++)
            if (mv[i] && mpc[i] >= fpc && mpc[i] < fpc + 32 && int'(mpc[i] - fpc) < hoff) begin
              hit = 1; hoff = int'(mpc[i] - fpc); hpc = mpc[i];
            end
          dec = hit && !(bt && int'(boff) < hoff);
          if (dec) begin etk = bv; etgt = bv ? hpc + {{48{bf.pcoff[15]}}, bf.pcoff} : hpc + 64'd4; end
          else begin etk = bt; etgt = btgt; end
          f_valid = 1; f_pc = fpc; base_taken = bt; base_target = btgt; base_off = boff;
          #1 mism = (btq_req != dec);
          @(posedge clk); #1 f_valid = 0;
          check(!(mism || !p_valid || p_bafin != dec || p_taken != etk || p_target != etgt ||
                  p_bafin_taken != (dec && bv) || (dec && bv && p_id != bf.id)),
                $sformatf("random lookup of %0h matches the model", fpc));
          @(negedge clk);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
