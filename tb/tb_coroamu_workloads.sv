// tb_coroamu_workloads: the evaluated workload kinds run through the whole
// CoroAMU design at its default sizes, over the platform's latency and
// bandwidth range, with both scheduler styles.
//
// Two kernels stand for the two ends of the benchmark set:
//   GUPS    random read-modify-write of 8-byte words. Every update is an
//           8 B aload of a random word, an XOR done by the core in the SPM,
//           and an 8 B astore back: two suspensions per update. It is
//           latency-bound.
//   STREAM  a sequential scan in 1 KB chunks. Every chunk is one
//           coarse-grained aload (16 lines, one completion), and the core
//           then reads all 128 words. It is bandwidth-bound.
//   NESTED  the nested-coroutine sequence: a parent suspends with
//           await(ID), launches its child ID + 512 with await(child, entry)
//           and asignal(child); the child stores 8 B with astore and, when
//           that completes, wakes its parent with asignal(ID). Checked:
//           each child starts at its entry point, resumes after its store,
//           and its parent resumes at its own suspension point only after
//           the child has finished.
// and two schedulers:
//   getfin  poll with getfin and switch in software (no branch oracle)
//   bafin   poll-and-jump with bafin, predicted through the BPT and BTQ.
//
// Runs (latency in cycles at 3 GHz: 300 = 100 ns, 3000 = 1 us):
//   GUPS   getfin  300 cycles  32 B/cycle  96 coroutines x 4 updates
//   GUPS   bafin  3000 cycles  32 B/cycle  96 coroutines x 4 updates
//   STREAM bafin   600 cycles   8 B/cycle  24 coroutines x 4 chunks
//   STREAM getfin 2400 cycles   1 B/cycle  24 coroutines x 2 chunks
//   NESTED bafin   900 cycles  16 B/cycle  24 parents + 24 children
// (each waiting parent and child holds a request-table entry, so the
// waiters plus the lines in flight must stay within the 64 entries)
// The design is reset between runs. Checked: every word the core reads
// holds the far-memory data of its request, every GUPS word in memory ends
// with the value a sequential reference computes, every resume jumps to the
// right target, getfin never reports a misprediction, and per run:
//   - the latency is hidden: GUPS takes under 1/8 of the serial time
//     (updates x 2 x latency);
//   - the bandwidth cap holds: STREAM takes at least bytes / rate cycles
//     (less the 128 B initial burst);
//   - no completion arrives before the programmed latency.
module tb_coroamu_workloads;
  import coroamu_pkg::*;
  localparam logic [63:0] BAFIN_PC = 64'h8000_0200;
  localparam logic [47:0] HBASE = 48'h20_0000;
  localparam logic [15:0] HSIZE = 16'd256;
  localparam logic [15:0] PCOFF = 16'hFF80;   // resume point before the scheduler: -128

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

  longint cyc = 0, first_fin = -1;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && first_fin < 0 && dut.efin_valid) first_fin <= cyc;
  end

  initial begin
    #40000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [63:0] pat(longint l, int w); return {32'(l), 24'h0, 8'(w)}; endfunction

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
  // operand: resume offset, size code, byte address
  function automatic logic [63:0] opnd(int code, longint byte_addr);
    return {PCOFF, 4'(code), 4'h0, 40'(byte_addr)};
  endfunction

  // ---------------- per-coroutine state ----------------
  int          nstep [128];   // suspensions done
  longint      wline [128];   // GUPS: current line; STREAM: current chunk line
  int          wword [128];   // GUPS: current word
  logic [63:0] key   [128];
  logic [63:0] expv  [longint];  // GUPS reference: word address -> value

  function automatic logic [14:0] gslot(int id); return 15'(id * 64); endfunction
  function automatic logic [14:0] sslot(int id); return 15'(id * 1024); endfunction

  // one run of a kernel; is_gups selects the kernel, use_bafin the scheduler
  task automatic run(bit is_gups, bit use_bafin, int lat, int rate, int ncoro, int nwork, longint base);
    int total_susp, resumed, done, n_pred_ok, n_mispred, n_fall;
    longint t0, t1;
    logic [4:0] rb_ptr;
    total_susp = is_gups ? 2 * nwork : nwork;
    resumed = 0; done = 0; n_pred_ok = 0; n_mispred = 0; n_fall = 0;
    expv.delete();
    rst_n = 0; cfg_latency = 12'(lat); cfg_rate = 6'(rate);
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    acfg_valid = 1; acfg_base = HBASE; acfg_size = HSIZE; @(negedge clk); acfg_valid = 0;
    t0 = cyc;
    // launch
    for (int id = 1; id <= ncoro; id++) begin
      nstep[id] = 0; key[id] = {32'(id) * 32'h9E37_79B9, 32'hA5A5_0000 | 32'(id)};
      if (is_gups) begin
        wline[id] = base + longint'($urandom_range(0, 255)) * 128 + id; wword[id] = $urandom_range(0, 7);
        issue(OP_ALOAD, id, opnd(3, wline[id] * 64 + wword[id] * 8), gslot(id));
      end else begin
        wline[id] = base + (id * nwork) * 16;
        issue(OP_ALOAD, id, opnd(10, wline[id] * 64), sslot(id));
      end
    end
    // scheduler
    while (done < ncoro) begin
      logic pt, has; logic [ID_W-1:0] pid; int id; logic [63:0] d;
      pt = 0; pid = '0;
      if (use_bafin) begin
        f_valid = 1; f_pc = BAFIN_PC & ~64'h1F; base_taken = 0;
        @(posedge clk); #1 f_valid = 0;
        pt = p_taken && p_bafin; pid = p_id;
        @(negedge clk);
      end
      ex_valid = 1; ex_is_bafin = use_bafin; ex_pc = BAFIN_PC; ex_pred_taken = pt; ex_pred_id = pid; #1;
      has = ex_has; id = int'(ex_id);
      if (use_bafin) begin
        if (ex_mispredict) begin n_mispred++; rb_ptr = has ? ex_fq_ptr + 5'd1 : ex_fq_ptr; end
        else if (has) n_pred_ok++;
        if (has) check(ex_taken && ex_target == BAFIN_PC - 64'd128, "bafin resume target");
        else begin check(!ex_taken && ex_target == BAFIN_PC + 64'd4, "bafin fall-through"); n_fall++; end
      end else begin
        check(!ex_mispredict && ex_wb_data == (has ? 64'(id) : 64'd0), "getfin result");
      end
      begin
        logic mp; mp = use_bafin && ex_mispredict;
        @(negedge clk); ex_valid = 0;
        cmt_valid = has; be_redirect_valid = mp; be_redirect_fq_ptr = rb_ptr;
        @(negedge clk); cmt_valid = 0; be_redirect_valid = 0;
      end
      if (!has) begin repeat (4) @(negedge clk); continue; end
      check(id >= 1 && id <= ncoro && nstep[id] < total_susp, "resumed ID is live");
      resumed++;
      if (is_gups) begin
        longint wa; wa = wline[id] * 8 + wword[id];
        if (nstep[id] % 2 == 0) begin
          // loaded: check, update in the SPM, store back
          if (!expv.exists(wa)) expv[wa] = pat(wline[id], wword[id]);
          core_read(gslot(id) + 15'(wword[id] * 8), d);
          check(d == expv[wa], $sformatf("GUPS load of word %0h", wa));
          expv[wa] = d ^ key[id];
          core_write(gslot(id) + 15'(wword[id] * 8), expv[wa]);
          issue(OP_ASTORE, id, opnd(3, wline[id] * 64 + wword[id] * 8), gslot(id));
        end else if (nstep[id] + 1 < total_susp) begin
          wline[id] = base + longint'($urandom_range(0, 255)) * 128 + id; wword[id] = $urandom_range(0, 7);
          issue(OP_ALOAD, id, opnd(3, wline[id] * 64 + wword[id] * 8), gslot(id));
        end
      end else begin
        bit ok; ok = 1;
        for (int i = 0; i < 128; i++) begin
          core_read(sslot(id) + 15'(i * 8), d);
          if (d != pat(wline[id] + i / 8, i % 8)) ok = 0;
        end
        check(ok, $sformatf("STREAM chunk at line %0h", wline[id]));
        if (nstep[id] + 1 < total_susp) begin
          wline[id] += 16;
          issue(OP_ALOAD, id, opnd(10, wline[id] * 64), sslot(id));
        end
      end
      nstep[id]++;
      if (nstep[id] == total_susp) done++;
    end
    t1 = cyc;
    repeat (10) @(negedge clk);
    check(resumed == ncoro * total_susp, "every suspension resumed once");
    check(first_fin - t0 >= lat, "no completion before the programmed latency");
    check(fq_count == 0 && rt_inflight == 0 && !asignal_miss, "idle at end of run");
    if (use_bafin) check(n_pred_ok > 10 * n_mispred && n_pred_ok > 0, "bafin predictions mostly exact");
    if (is_gups) begin
      bit ok; ok = 1;
      foreach (expv[wa]) if (hbm.peek(34'(wa / 8))[64 * (wa % 8) +: 64] != expv[wa]) ok = 0;
      check(ok, "GUPS memory matches the sequential reference");
      check((t1 - t0) * 8 < longint'(ncoro * total_susp) * lat, "latency hidden (under 1/8 of serial time)");
    end else begin
      longint bytes; bytes = longint'(ncoro * nwork) * 1024;
      check((t1 - t0) * rate >= bytes - 128, "bandwidth cap respected");
    end
    $display("%s %s latency=%0d rate=%0d coroutines=%0d suspensions=%0d cycles=%0d predicted=%0d mispredicted=%0d fallthrough=%0d",
             is_gups ? "GUPS  " : "STREAM", use_bafin ? "bafin " : "getfin", lat, rate, ncoro, resumed,
             t1 - t0, n_pred_ok, n_mispred, n_fall);
    first_fin = -1;
  endtask


  // nested coroutines (parents 1..np, children ID + 512), bafin scheduler
  localparam logic [15:0] P_SUSP = 16'h0100, C_ENTRY = 16'h0200, C_STORE = 16'h0300;
  task automatic run_nested(int lat, int rate, int np);
    int cst [1024]; int done, n_pred_ok, n_mispred; longint t0;
    logic [4:0] rb_ptr;
    rst_n = 0; cfg_latency = 12'(lat); cfg_rate = 6'(rate);
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    acfg_valid = 1; acfg_base = HBASE; acfg_size = HSIZE; @(negedge clk); acfg_valid = 0;
    t0 = cyc; done = 0; n_pred_ok = 0; n_mispred = 0;
    for (int id = 1; id <= np; id++) begin
      cst[id] = 0; cst[id + 512] = 0;
      issue(OP_AWAIT, id, {P_SUSP, 48'h0}, gslot(id));
      issue(OP_AWAIT, id + 512, {C_ENTRY, 48'h0}, gslot(id));
      issue(OP_ASIGNAL, id + 512, 64'h0, '0);
    end
    while (done < np) begin
      logic pt, has; logic [ID_W-1:0] pid; int id;
      f_valid = 1; f_pc = BAFIN_PC & ~64'h1F; base_taken = 0;
      @(posedge clk); #1 f_valid = 0;
      pt = p_taken && p_bafin; pid = p_id;
      @(negedge clk);
      ex_valid = 1; ex_is_bafin = 1; ex_pc = BAFIN_PC; ex_pred_taken = pt; ex_pred_id = pid; #1;
      has = ex_has; id = int'(ex_id);
      if (ex_mispredict) begin n_mispred++; rb_ptr = has ? ex_fq_ptr + 5'd1 : ex_fq_ptr; end
      else if (has) n_pred_ok++;
      begin
        logic mp; logic [63:0] tgt; mp = ex_mispredict; tgt = ex_target;
        @(negedge clk); ex_valid = 0;
        cmt_valid = has; be_redirect_valid = mp; be_redirect_fq_ptr = rb_ptr;
        @(negedge clk); cmt_valid = 0; be_redirect_valid = 0;
        if (!has) begin repeat (4) @(negedge clk); continue; end
        if (id > 512 && id <= 512 + np && cst[id] == 0) begin
          // child starts at its entry: store its result, suspend on the store
          check(tgt == BAFIN_PC + 64'(C_ENTRY), "child starts at its entry point");
          core_write(gslot(id - 512), {32'hCAFE_0000, 32'(id)});
          issue(OP_ASTORE, id, {C_STORE, 4'd3, 4'h0, 40'(('h50_0000 + id) * 64)}, gslot(id - 512));
          cst[id] = 1;
        end else if (id > 512 && id <= 512 + np && cst[id] == 1) begin
          check(tgt == BAFIN_PC + 64'(C_STORE), "child resumes after its store");
          check(hbm.peek(34'('h50_0000 + id))[63:0] == {32'hCAFE_0000, 32'(id)}, "child's store in memory");
          issue(OP_ASIGNAL, id - 512, 64'h0, '0);
          cst[id] = 2;
        end else if (id >= 1 && id <= np && cst[id] == 0) begin
          check(tgt == BAFIN_PC + 64'(P_SUSP), "parent resumes at its suspension point");
          check(cst[id + 512] == 2, "parent resumes only after its child finished");
          cst[id] = 1; done++;
        end else check(0, $sformatf("unexpected resume of ID %0d", id));
      end
    end
    repeat (10) @(negedge clk);
    check(fq_count == 0 && rt_inflight == 0 && !asignal_miss, "idle at end of nested run");
    check(n_pred_ok > 10 * n_mispred, "nested: bafin predictions mostly exact");
    $display("NESTED bafin  latency=%0d rate=%0d parents=%0d cycles=%0d predicted=%0d mispredicted=%0d",
             lat, rate, np, cyc - t0, n_pred_ok, n_mispred);
    first_fin = -1;
  endtask

  initial begin
    cfg_latency = 0; cfg_rate = 0;
    issue_valid = 0; issue_instr = '0; acfg_valid = 0; acfg_base = 0; acfg_size = 0;
    ex_valid = 0; ex_is_bafin = 0; ex_pc = 0; ex_pred_taken = 0; ex_pred_id = 0; cmt_valid = 0;
    be_redirect_valid = 0; be_redirect_fq_ptr = 0; f_valid = 0; f_pc = 0; base_taken = 0; base_target = 0;
    base_off = 0; fe_redirect_valid = 0; fe_redirect_btq_ptr = 0;
    core_spm_en = 0; core_spm_we = 0; core_spm_addr = 0; core_spm_be = 0; core_spm_wdata = 0;
    run(1, 0,  300, 32, 96, 4, 64'h10_0000);
    run(1, 1, 3000, 32, 96, 4, 64'h20_0000);
    run(0, 1,  600,  8, 24, 4, 64'h30_0000);
    run(0, 0, 2400,  1, 24, 2, 64'h40_0000);
    run_nested(900, 16, 24);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
