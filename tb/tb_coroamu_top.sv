// tb_coroamu_top: end-to-end test of the CoroAMU hardware at its default
// sizes, driven by a model of the coroutine scheduler that uses bafin.
//
// NCORO (96) coroutines with IDs 1..96 each run NSTEP (5) steps. Every step
// suspends the coroutine on one kind of request, chosen by (ID + step) % 5:
//   0  a 64 B aload                      3  await, woken later by an asignal
//   1  a 256 B aload (four lines)        4  an astore of its SPM slot
//   2  aset(ID, 2) and two 64 B aloads
// and binds a resume-PC offset 0x40 * (kind + 1) to it. The scheduler loop
// looks up the fetch block of its bafin in the BPT, executes the bafin with
// that prediction, commits it, and on a misprediction issues the backend
// redirect. Each resumed coroutine is checked: the ID must be one that is
// waiting, the jump target bafin PC + offset, task_info {SPM address,
// handler base + ID * size}, and the SPM (or, for astore, memory) must hold
// the data of its request. Far memory has the 800 ns latency of the paper's
// platform at 3 GHz (2400 cycles) and an 8 B/cycle bandwidth cap.
//
// Every mechanism is counted and must occur at least once: correctly
// predicted bafin, mispredicted bafin with backend redirect and resend,
// fall-through when nothing is finished, pre-decode rollback of the BTQ,
// multi-line requests, aset groups, await/asignal, astore, bandwidth
// throttling, the response delay (first completion no earlier than the
// programmed latency) and more than one request in flight.
module tb_coroamu_top;
  import coroamu_pkg::*;
  localparam int NCORO = 96;
  localparam int NSTEP = 5;
  localparam int LAT   = 2400;
  localparam logic [63:0] BAFIN_PC = 64'h8000_0100;
  localparam logic [47:0] HBASE = 48'h10_0000;
  localparam logic [15:0] HSIZE = 16'd128;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  // ---------------- DUT ----------------
  logic [11:0] cfg_latency; logic [5:0] cfg_rate;
  logic issue_valid, issue_ready; amu_instr_t issue_instr;
  logic acfg_valid; logic [47:0] acfg_base; logic [15:0] acfg_size;
  logic ex_valid, ex_is_bafin, ex_pred_taken, ex_has, ex_taken, ex_mispredict, cmt_valid, be_redirect_valid;
  logic [63:0] ex_pc, ex_wb_data, ex_target, ex_redirect_pc;
  logic [ID_W-1:0] ex_pred_id, ex_id, p_id;
  logic [4:0] ex_fq_ptr, be_redirect_fq_ptr, base_off, fq_count, rq_count;
  logic f_valid, base_taken, p_valid, p_taken, p_bafin, p_bafin_taken, fe_redirect_valid;
  logic [63:0] f_pc, base_target, p_target;
  logic [3:0] p_btq_ptr, fe_redirect_btq_ptr;
  logic core_spm_en, core_spm_we; logic [14:0] core_spm_addr; logic [7:0] core_spm_be;
  logic [63:0] core_spm_wdata, core_spm_rdata;
  logic mem_req_valid, mem_req_ready, mem_resp_valid, mem_resp_ready; mem_req_t mem_req; mem_resp_t mem_resp;
  logic asignal_miss; logic [6:0] rt_inflight;

  coroamu_top dut (.*);

  int n_reads, n_writes;
  hbm_model #(.LAT(2)) hbm (.clk, .rst_n, .hold(1'b0), .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req(mem_req), .resp_valid(mem_resp_valid), .resp_ready(mem_resp_ready), .resp(mem_resp), .n_reads, .n_writes);

  // ---------------- event counters ----------------
  longint cyc = 0;
  longint first_fin = -1;
  always @(posedge clk) if (rst_n && first_fin < 0 && dut.efin_valid) first_fin <= cyc;
  int n_bw_stall = 0, max_inflight = 0, n_group_child = 0;
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (dut.e_mem_valid && !dut.e_mem_ready) n_bw_stall <= n_bw_stall + 1;
    if (int'(rt_inflight) > max_inflight) max_inflight <= int'(rt_inflight);
    if (dut.lr_valid && dut.lr_ready && dut.u_req_table.child) n_group_child <= n_group_child + 1;
  end

  int n_pred_ok = 0, n_mispred = 0, n_fall = 0, n_fe_rb = 0, n_multi = 0, n_aset = 0;
  int n_await = 0, n_astore = 0, n_resumed = 0;

  initial begin
    #20000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- coroutine state ----------------
  typedef enum int {WAITING, SIGNAL_PENDING, DONE} cstate_e;
  cstate_e cst [NCORO+1];
  int      cstep [NCORO+1];
  longint  cline [NCORO+1];
  int      sig_cnt [NCORO+1];
  logic [63:0] store_val [NCORO+1];

  function automatic int kind_of(int id, int s); return (id + s) % 5; endfunction
  function automatic logic [14:0] slot(int id); return 15'(id * 256); endfunction
  function automatic longint line_of(int id, int s); return 'h1000 + id * 64 + s * 8; endfunction
  function automatic logic [15:0] pcoff_of(int k); return 16'(64 * (k + 1)); endfunction
  function automatic logic [63:0] pat(longint l, int w); return {32'(l), 24'h0, 8'(w)}; endfunction
  function automatic logic [63:0] opnd(logic [15:0] pc, int code, longint line);
    return {pc, 4'(code), 4'h0, 40'(line) << 6};
  endfunction

  task automatic issue(amu_op_e op, int id, logic [63:0] o, logic [14:0] sa);
    issue_instr.op = op; issue_instr.id = ID_W'(id); issue_instr.opnd = o; issue_instr.spm_addr = sa;
    issue_valid = 1;
    forever begin #1; if (issue_ready) break; @(negedge clk); end
    @(posedge clk); @(negedge clk); issue_valid = 0;
  endtask

  task automatic core_read(logic [14:0] a, output logic [63:0] d);
    core_spm_en = 1; core_spm_we = 0; core_spm_addr = a; @(negedge clk); core_spm_en = 0; d = core_spm_rdata;
  endtask
  task automatic core_write(logic [14:0] a, logic [63:0] d);
    core_spm_en = 1; core_spm_we = 1; core_spm_addr = a; core_spm_be = 8'hFF; core_spm_wdata = d;
    @(negedge clk); core_spm_en = 0; core_spm_we = 0;
  endtask

  // start step s of coroutine id: issue its request(s)
  task automatic start_step(int id, int s);
    int k; longint l; k = kind_of(id, s); l = line_of(id, s);
    cline[id] = l; cst[id] = WAITING;
    case (k)
      0: issue(OP_ALOAD, id, opnd(pcoff_of(k), 6, l), slot(id));
      1: begin issue(OP_ALOAD, id, opnd(pcoff_of(k), 8, l), slot(id)); n_multi++; end
      2: begin
           issue(OP_ASET, id, 64'd2, '0);
           issue(OP_ALOAD, 0, opnd(pcoff_of(k), 6, l), slot(id));
           issue(OP_ALOAD, 0, opnd(16'h0, 6, l + 'h40000), slot(id) + 15'd64);
           n_aset++;
         end
      3: begin issue(OP_AWAIT, id, {pcoff_of(k), 48'h0}, slot(id)); cst[id] = SIGNAL_PENDING; sig_cnt[id] = 3; n_await++; end
      default: begin
           store_val[id] = {32'hC0DE_0000 | 32'(id), 32'(s)};
           core_write(slot(id), store_val[id]);
           issue(OP_ASTORE, id, opnd(pcoff_of(k), 6, l), slot(id));
           n_astore++;
         end
    endcase
  endtask

  // check the data of the step that has just completed
  task automatic check_step(int id);
    int k; longint l; logic [63:0] d; k = kind_of(id, cstep[id]); l = cline[id];
    case (k)
      0: begin core_read(slot(id) + 15'd8, d); check(d == pat(l, 1), "64B aload data"); end
      1: for (int i = 0; i < 4; i++) begin core_read(slot(id) + 15'(64 * i), d); check(d == pat(l + i, 0), "256B aload data"); end
      2: begin core_read(slot(id), d); check(d == pat(l, 0), "aset member 1");
               core_read(slot(id) + 15'd64 + 15'd56, d); check(d == pat(l + 'h40000, 7), "aset member 2"); end
      3: ;
      default: check(hbm.peek(34'(l))[63:0] == store_val[id], "astore data in memory");
    endcase
  endtask

  int done = 0;
  logic [4:0] rb_ptr;

  initial begin
    cfg_latency = 12'(LAT); cfg_rate = 6'd8;
    issue_valid = 0; issue_instr = '0; acfg_valid = 0; acfg_base = 0; acfg_size = 0;
    ex_valid = 0; ex_is_bafin = 0; ex_pc = 0; ex_pred_taken = 0; ex_pred_id = 0; cmt_valid = 0;
    be_redirect_valid = 0; be_redirect_fq_ptr = 0; f_valid = 0; f_pc = 0; base_taken = 0; base_target = 0;
    base_off = 0; fe_redirect_valid = 0; fe_redirect_btq_ptr = 0;
    core_spm_en = 0; core_spm_we = 0; core_spm_addr = 0; core_spm_be = 0; core_spm_wdata = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    // aconfig
    acfg_valid = 1; acfg_base = HBASE; acfg_size = HSIZE; @(negedge clk); acfg_valid = 0;
    // launch every coroutine
    for (int id = 1; id <= NCORO; id++) begin cstep[id] = 0; start_step(id, 0); end
    // scheduler loop
    while (done < NCORO) begin
      logic pt; logic [ID_W-1:0] pid; logic [3:0] pptr; logic has; int id;
      // pending asignals: another coroutine wakes the awaiting one a few polls later
      for (int i = 1; i <= NCORO; i++)
        if (cst[i] == SIGNAL_PENDING && --sig_cnt[i] == 0) begin cst[i] = WAITING; issue(OP_ASIGNAL, i, 64'h0, '0); end
      // frontend: lookup of the scheduler block
      f_valid = 1; f_pc = BAFIN_PC & ~64'h1F; base_taken = 0;
      @(posedge clk); #1 f_valid = 0;
      pt = p_taken && p_bafin; pid = p_id; pptr = p_btq_ptr;
      // once: the pre-decode stage rejects this prediction, the BTQ rolls back
      if (n_fe_rb == 0 && pt && n_resumed > 10) begin
        @(negedge clk);
        fe_redirect_valid = 1; fe_redirect_btq_ptr = pptr; @(negedge clk); fe_redirect_valid = 0;
        f_valid = 1; @(posedge clk); #1 f_valid = 0;
        check(p_taken && p_id == pid, "same ID predicted again after pre-decode rollback");
        n_fe_rb++;
        pt = p_taken && p_bafin; pid = p_id;
      end
      @(negedge clk);
      // backend: execute bafin
      ex_valid = 1; ex_is_bafin = 1; ex_pc = BAFIN_PC; ex_pred_taken = pt; ex_pred_id = pid; #1;
      has = ex_has; id = int'(ex_id);
      if (ex_mispredict) begin n_mispred++; rb_ptr = has ? ex_fq_ptr + 5'd1 : ex_fq_ptr; end
      else if (has) n_pred_ok++;
      if (has) begin
        check(id >= 1 && id <= NCORO && cst[id] == WAITING, $sformatf("resumed ID %0d was waiting", id));
        check(ex_taken && ex_target == BAFIN_PC + 64'(pcoff_of(kind_of(id, cstep[id]))), "resume target");
        check(ex_wb_data == {16'(slot(id)), HBASE + 48'(id) * 48'(HSIZE)}, "task_info");
      end else begin
        check(!ex_taken && ex_target == BAFIN_PC + 64'd4, "fall through");
        n_fall++;
      end
      begin
        logic mp; mp = ex_mispredict;
        @(negedge clk); ex_valid = 0;
        cmt_valid = has;
        be_redirect_valid = mp; be_redirect_fq_ptr = rb_ptr;
        @(negedge clk); cmt_valid = 0; be_redirect_valid = 0;
      end
      if (has) begin
        n_resumed++;
        check_step(id);
        cstep[id]++;
        if (cstep[id] == NSTEP) begin cst[id] = DONE; done++; end
        else start_step(id, cstep[id]);
      end else begin
        repeat (8) @(negedge clk);
      end
    end
    repeat (20) @(negedge clk);
    // ---------------- summary checks ----------------
    $display("resumed=%0d predicted=%0d mispredicted=%0d fallthrough=%0d fe_rollback=%0d multi=%0d aset=%0d children=%0d await=%0d astore=%0d bw_stall=%0d max_inflight=%0d cycles=%0d",
             n_resumed, n_pred_ok, n_mispred, n_fall, n_fe_rb, n_multi, n_aset, n_group_child, n_await, n_astore, n_bw_stall, max_inflight, cyc);
    check(n_resumed == NCORO * NSTEP, "every step resumed once");
    check(n_pred_ok > 0, "bafin predicted correctly");
    check(n_mispred > 0, "bafin mispredicted (untrained BPT) and redirected");
    check(n_pred_ok > 10 * n_mispred, "predictions mostly exact");
    check(n_fall > 0, "bafin fall-through");
    check(n_fe_rb > 0, "pre-decode rollback");
    check(n_multi > 0 && n_aset > 0 && n_group_child > 0, "coalesced requests");
    check(n_await > 0 && n_astore > 0, "await/asignal and astore");
    check(n_bw_stall > 0, "bandwidth throttling");
    check(max_inflight > 16, "memory-level parallelism");
    check(first_fin >= LAT, $sformatf("response delay respected (first completion at %0d)", first_fin));
    check(fq_count == 0 && rt_inflight == 0 && !asignal_miss, "idle at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
